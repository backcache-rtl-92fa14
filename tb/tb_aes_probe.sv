// tb_aes_probe: multi-set Prime+Probe on a T-table access pattern.
//
// Models the table-lookup attack: a 64-line lookup table occupies one line
// in each of the 64 L1D sets. The attacker primes every set with 4 lines
// (the whole 16 KB L1D), the victim performs 80 table lookups covering a
// key-dependent pattern (a fixed random subset of 24 lines), each line at
// least once, and the attacker probes every set, timing its 4 loads. BUCLR runs at every
// switch. 20 samples are taken with each of the three backup size ranges
// 12-16 KB, 8-16 KB and 4-16 KB (minimum register 192, 128, 64 lines; the
// maximum stays 256), and 20 with the backup cache sized to 0 lines
// (unprotected). A range is switched by writing the minimum register and
// forcing a redraw through the access count register.
//
// Per sample and set, a probe slower than 4 hits marks the set as "seen
// accessed". Checks: unprotected, the marked sets are exactly the victim's
// sets in every sample; with BackCache the attacker's marking tells accessed
// and untouched sets apart in under 10% of (sample, set) pairs, i.e. the
// probe times look alike across sets.
module tb_aes_probe;
  import bc_pkg::*;
  localparam int SAMPLES = 20;

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

  bit touched [64];

  // returns the number of (sample, set) pairs where the attacker's marking
  // matches the truth minus those where it does not, and the number of exact
  // samples (marking equal to the victim's sets)
  task automatic run(output int advantage, output int exact);
    int lat, t;
    advantage = 0; exact = 0;
    for (int smp = 0; smp < SAMPLES; smp++) begin
      bit seen [64];
      bit all_ok;
      for (int w = 0; w < 4; w++)
        for (int s = 0; s < 64; s++) load(48'h5000_0000 + ADDR_W'(w) * 4096 + ADDR_W'(s) * 64, lat);
      buclr();
      for (int k = 0; k < 80; k++) begin
        int idx;
        if (k < 64 && touched[k]) idx = k;   // every pattern line at least once
        else do idx = $urandom_range(0, 63); while (!touched[idx]);
        load(48'h6000_0000 + ADDR_W'(idx) * 64, lat);
      end
      buclr();
      all_ok = 1;
      for (int s = 0; s < 64; s++) begin
        t = 0;
        for (int w = 0; w < 4; w++) begin load(48'h5000_0000 + ADDR_W'(w) * 4096 + ADDR_W'(s) * 64, lat); t += lat; end
        seen[s] = (t > 12);
        if (seen[s] != touched[s]) all_ok = 0;
      end
      // advantage: (hit rate of marking on touched sets) - (false marks on untouched)
      begin
        int tp, fp, nt, nu;
        tp = 0; fp = 0; nt = 0; nu = 0;
        for (int s = 0; s < 64; s++) begin
          if (touched[s]) begin nt++; tp += seen[s]; end
          else begin nu++; fp += seen[s]; end
        end
        advantage += (tp * 100) / nt - (fp * 100) / nu;
      end
      exact += all_ok;
    end
    advantage /= SAMPLES;
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int min_kb [3] = '{12, 8, 4};

  initial begin
    int adv, exact, n;
    n = 0;
    for (int s = 0; s < 64; s++) touched[s] = 0;
    while (n < 24) begin int i; i = $urandom_range(0, 63); if (!touched[i]) begin touched[i] = 1; n++; end end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (300) @(negedge clk);
    foreach (min_kb[c]) begin
      if (c > 0) begin
        write_reg(1, min_kb[c] * 16); write_reg(0, 1);
        begin int lat; load(48'h7000_0000 + ADDR_W'(c) * 64, lat); end
        repeat (300) @(negedge clk);
      end
      check(int'(bk_enabled) >= min_kb[c] * 16 && bk_enabled <= 256,
            $sformatf("%0d-16KB: enabled lines %0d in range", min_kb[c], bk_enabled));
      run(adv, exact);
      $display("BackCache %0d-16KB: attacker advantage %0d%%, exact samples %0d of %0d",
               min_kb[c], adv, exact, SAMPLES);
      check(adv < 10 && adv > -10, $sformatf("BackCache %0d-16KB: advantage %0d%%", min_kb[c], adv));
    end
    write_reg(1, 0); write_reg(2, 0); write_reg(0, 1);
    begin int lat; load(48'h7100_0000, lat); end
    repeat (300) @(negedge clk);
    check(bk_enabled == 0, "backup cache disabled");
    run(adv, exact);
    $display("No backup lines: attacker advantage %0d%%, exact samples %0d of %0d", adv, exact, SAMPLES);
    check(exact == SAMPLES && adv == 100, "unprotected: every touched set is seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
