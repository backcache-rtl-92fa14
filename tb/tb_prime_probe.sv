// tb_prime_probe: single-set Prime+Probe attack against the BackCache level.
//
// Reproduces the single-cache-set experiment in simulation. The attacker
// primes one L1D set (4 lines) and, for a backup eviction set of E KB, also
// fills the 63 other sets (252 lines) and then E*16 further lines spread over
// those sets, so that E KB of evicted lines go into the backup cache. BUCLR runs at every switch between attacker and
// victim, as the kernel would. The victim then touches the target set if the
// secret bit is 1 and stays idle if it is 0. The attacker re-accesses the
// whole eviction set and measures the total time in cycles. 100 bits are sent
// (50 zeros, then 50 ones) for E = 0, 4, 8, 12 and 16 KB, and once more with
// the backup cache sized to 0 lines, which behaves like an unprotected cache.
//
// For each run the testbench prints the mean probe time of the 0 and 1 bits
// and the accuracy of the best single-threshold decoder. Checks: with no
// backup cache the decoder recovers every bit; with BackCache and E = 0 every
// probe access hits, so 0 and 1 take the same time and the decoder is no
// better than guessing; for larger eviction sets the random size keeps the
// decoder below 80% (a perfect channel would give 100%).
module tb_prime_probe;
  import bc_pkg::*;
  localparam int TARGET_SET = 17;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 0, req_ready, req_we = 0;
  logic [ADDR_W-1:0] req_addr = '0;
  word_t req_wdata = '0; be_t req_be = '0;
  logic resp_valid, resp_hit; word_t resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  laddr_t mem_req_addr; line_t mem_req_wdata, mem_resp_rdata;
  logic inv_valid = 0, inv_ready; laddr_t inv_addr = '0;
  logic buclr_valid = 0, buclr_priv = 1, buclr_ready, buclr_fault;
  logic csr_we = 0; logic [1:0] csr_addr = '0; logic [8:0] csr_wdata = '0, csr_rdata;
  logic seed_we = 0; logic [31:0] seed = '0;
  logic [8:0] bk_enabled, bk_target;
  bc_events_t events;
  int n_reads, n_writes;

  backcache dut (.*);
  bc_mem_model #(.LATENCY(20)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .resp_valid(mem_resp_valid),
    .resp_rdata(mem_resp_rdata), .n_reads, .n_writes);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one load; returns the cycles from acceptance to response
  task automatic load(input logic [ADDR_W-1:0] a, output int lat);
    @(negedge clk);
    req_valid = 1; req_we = 0; req_addr = a;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; end
    while (!req_ready) @(negedge clk);
  endtask

  task automatic buclr();
    @(negedge clk); buclr_valid = 1; @(negedge clk); buclr_valid = 0;
  endtask

  task automatic write_reg(input int a, input int v);
    @(negedge clk); csr_we = 1; csr_addr = 2'(a); csr_wdata = 9'(v);
    @(negedge clk); csr_we = 0;
  endtask

  // attacker lines: 4 in the target set, then E*16 spread over the other sets
  function automatic logic [ADDR_W-1:0] atk_addr(int i);
    int set, tag;
    if (i < 4) begin set = TARGET_SET; tag = i; end
    else begin
      set = (i - 4) % 63; if (set >= TARGET_SET) set++;
      tag = 16 + (i - 4) / 63;
    end
    return 48'h4000_0000 + ADDR_W'(tag) * 4096 + ADDR_W'(set) * 64;
  endfunction

  // run 100 bits; returns mean probe times and the best threshold accuracy (%)
  task automatic run(input int e_kb, output real m0, output real m1, output int acc);
    int n, lat, t, times[100];
    n = (e_kb == 0) ? 4 : 4 + 252 + e_kb * 16;
    for (int b = 0; b < 100; b++) begin
      bit secret;
      secret = (b >= 50);
      for (int i = 0; i < n; i++) load(atk_addr(i), lat);          // prime
      buclr();                                                     // switch to victim
      if (secret) load(48'h7000_0000 + TARGET_SET * 64, lat);      // victim
      buclr();                                                     // switch to attacker
      t = 0;
      for (int i = 0; i < n; i++) begin load(atk_addr(i), lat); t += lat; end  // probe
      times[b] = t;
    end
    m0 = 0; m1 = 0;
    for (int b = 0; b < 50; b++) begin m0 += times[b]; m1 += times[b+50]; end
    m0 /= 50; m1 /= 50;
    acc = 0;
    // best threshold decoder: bit = (time > th) or bit = (time <= th)
    for (int k = 0; k < 100; k++) begin
      int c_hi, c_lo;
      c_hi = 0; c_lo = 0;
      for (int b = 0; b < 100; b++) begin
        c_hi += ((times[b] > times[k]) == (b >= 50));
        c_lo += ((times[b] <= times[k]) == (b >= 50));
      end
      if (c_hi > acc) acc = c_hi;
      if (c_lo > acc) acc = c_lo;
    end
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real m0, m1; int acc;
    int sizes[5] = '{0, 4, 8, 12, 16};
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (300) @(negedge clk);
    foreach (sizes[s]) begin
      run(sizes[s], m0, m1, acc);
      $display("BackCache 12-16KB, %0d KB eviction: mean probe time 0:%0.1f 1:%0.1f cycles, decoder accuracy %0d%%",
               sizes[s], m0, m1, acc);
      if (sizes[s] == 0) check(m0 == m1 && acc <= 51, "0 KB eviction: no difference between 0 and 1");
      else check(acc < 80, $sformatf("%0d KB eviction: decoder accuracy %0d%% not near guessing", sizes[s], acc));
    end
    // no backup lines: the unprotected behaviour
    write_reg(1, 0); write_reg(2, 0); write_reg(0, 1);
    begin int lat; load(48'h7100_0000, lat); end
    repeat (300) @(negedge clk);
    check(bk_enabled == 0, "backup cache disabled");
    run(0, m0, m1, acc);
    $display("No backup lines, 0 KB eviction: mean probe time 0:%0.1f 1:%0.1f cycles, decoder accuracy %0d%%", m0, m1, acc);
    check(acc == 100 && m1 > m0, "without the backup cache the secret leaks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
