// tb_backcache: end-to-end test of the BackCache level at its default size.
//
// The cache (16 KB 4-way L1D, 256-line backup cache, 12-16 KB dynamic size,
// 3-cycle hits) is connected to a behavioural lower level with a 20-cycle
// latency. Every load is compared with a word-level reference memory kept by
// the testbench; every L1-level hit must answer exactly HIT_LATENCY cycles
// after acceptance and every miss later. The sequence:
//   1. the four lookup cases 00, 10, 01 and 11 on one line, with dirty
//      victims written back;
//   2. a single-set Prime+Probe round: the attacker primes a set with four
//      lines, the victim touches the set, the attacker's probe must see four
//      hits (on a plain cache one probe would miss);
//   3. BUCLR, privileged and unprivileged;
//   4. lower-level invalidation;
//   5. 6,000 random loads and stores over a 48 KB footprint, larger than both
//      caches together, which drives RURP replacement and random resizing;
//   6. a minimum and maximum of 0 lines, so the backup cache is emptied and
//      evicted lines are dropped.
// Each mechanism (the four cases, L1D eviction, write-back, backup fill and
// merge, replacement of a used and an unused line, drop, resize, grow,
// shrink, invalidation, BUCLR and its fault) is counted; one that never
// happened counts as a failure.
module tb_backcache;
  import bc_pkg::*;
  localparam int HIT_LATENCY = 3;
  localparam int MEM_LATENCY = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid = 0, req_ready, req_we = 0;
  logic [ADDR_W-1:0] req_addr = '0;
  word_t req_wdata = '0; be_t req_be = '0;
  logic resp_valid, resp_hit; word_t resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  laddr_t mem_req_addr; line_t mem_req_wdata, mem_resp_rdata;
  logic inv_valid = 0, inv_ready; laddr_t inv_addr = '0;
  logic buclr_valid = 0, buclr_priv = 0, buclr_ready, buclr_fault;
  logic csr_we = 0; logic [1:0] csr_addr = '0; logic [8:0] csr_wdata = '0, csr_rdata;
  logic seed_we = 0; logic [31:0] seed = '0;
  logic [8:0] bk_enabled, bk_target;
  bc_events_t events;
  int n_reads, n_writes;

  backcache dut (.*);

  bc_mem_model #(.LATENCY(MEM_LATENCY)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .resp_valid(mem_resp_valid),
    .resp_rdata(mem_resp_rdata), .n_reads, .n_writes);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int c_case[4], c_evict, c_wb, c_fill, c_merge, c_rep_used, c_rep_unused, c_drop;
  int c_resize, c_grow, c_shrink, c_inv, c_buclr, c_fault;
  always @(posedge clk) if (rst_n) begin
    if (events.lookup) c_case[int'(events.lcase)]++;
    c_evict      += int'(events.l1_evict);
    c_wb         += int'(events.writeback);
    c_fill       += int'(events.bk_fill);
    c_merge      += int'(events.bk_merge);
    c_rep_used   += int'(events.bk_repl_used);
    c_rep_unused += int'(events.bk_repl_unused);
    c_drop       += int'(events.bk_drop);
    c_resize     += int'(events.resize);
    c_grow       += int'(events.grow);
    c_shrink     += int'(events.shrink);
    c_inv        += int'(events.invalidate);
    c_buclr      += int'(events.buclr);
    c_fault      += int'(buclr_fault);
  end

  // reference memory, one 64-bit word per entry
  word_t gold [logic [ADDR_W-4:0]];
  function automatic word_t gold_read(logic [ADDR_W-1:0] a);
    logic [ADDR_W-4:0] k;
    line_t l;
    k = a[ADDR_W-1:3];
    if (gold.exists(k)) return gold[k];
    l = u_mem.init_line(a[ADDR_W-1:OFFSET_W]);
    return l[int'(a[5:3])*64 +: 64];
  endfunction

  // one access; returns hit flag and latency in cycles
  task automatic access(input bit we, input logic [ADDR_W-1:0] a, input word_t d, input be_t be,
                        output bit hit, output int lat);
    word_t exp, merged;
    exp = gold_read(a);
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d; req_be = be;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; if (lat > 1000) break; end
    hit = resp_hit;
    check(resp_rdata == exp, $sformatf("data at %h: got %h exp %h", a, resp_rdata, exp));
    if (hit) check(lat == HIT_LATENCY, $sformatf("hit latency %0d", lat));
    else     check(lat > HIT_LATENCY, $sformatf("miss latency %0d", lat));
    if (we) begin
      merged = exp;
      for (int b = 0; b < 8; b++) if (be[b]) merged[b*8 +: 8] = d[b*8 +: 8];
      gold[a[ADDR_W-1:3]] = merged;
    end
    // let post-response line movements finish
    while (!req_ready) @(negedge clk);
  endtask

  task automatic load(input logic [ADDR_W-1:0] a, output bit hit);
    int lat; access(1'b0, a, '0, '0, hit, lat);
  endtask
  task automatic store(input logic [ADDR_W-1:0] a, input word_t d);
    bit h; int lat; access(1'b1, a, d, 8'hFF, h, lat);
  endtask

  // address of line `tag_n` in L1D set `set` (64 sets, 64-byte lines)
  function automatic logic [ADDR_W-1:0] set_addr(int set, int tag_n, int word);
    return ADDR_W'((64'(tag_n) << 12) | (64'(set) << 6) | (64'(word) << 3)) + 48'h1000_0000;
  endfunction

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit h; int lat, hits;
    int base_case[4];
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (300) @(negedge clk);   // initial random size is enabled line by line
    check(bk_enabled == bk_target && bk_target >= 192 && bk_target <= 256,
          $sformatf("initial size %0d target %0d", bk_enabled, bk_target));

    // 1. the four cases on line X = set 5, tag 0
    load(set_addr(5, 0, 1), h);   check(!h, "first load misses (00)");
    load(set_addr(5, 0, 2), h);   check(h, "second load hits (10)");
    for (int t = 1; t <= 4; t++) store(set_addr(5, t, 0), 64'hA000 + t);
    check(c_wb == 0, "no write-back of clean X");
    load(set_addr(5, 0, 3), h);   check(h, "evicted X hits in the backup cache (01)");
    check(c_case[1] == 1, "case 01 seen");
    load(set_addr(5, 0, 4), h);   check(h, "X in both (11)");
    check(c_case[3] == 1, "case 11 seen");
    store(set_addr(5, 0, 4), 64'h5555_AAAA_5555_AAAA);
    load(set_addr(5, 0, 4), h);   check(h, "store hit in both");
    check(c_wb >= 1, "dirty line written back on eviction");

    // 2. single-set Prime+Probe: attacker primes set 9, victim touches it
    for (int t = 0; t < 4; t++) load(set_addr(9, 100 + t, 0), h);
    for (int t = 0; t < 4; t++) begin load(set_addr(9, 100 + t, 0), h); check(h, "primed"); end
    load(set_addr(9, 200, 0), h);   // victim access, secret = 1
    hits = 0;
    for (int t = 0; t < 4; t++) begin load(set_addr(9, 100 + t, 0), h); hits += h; end
    check(hits == 4, $sformatf("probe sees %0d of 4 hits", hits));

    // 3. BUCLR
    @(negedge clk); buclr_valid = 1; buclr_priv = 0;
    @(negedge clk); buclr_valid = 0;
    check(c_buclr == 0 && c_fault == 1, "unprivileged BUCLR refused");
    @(negedge clk); buclr_valid = 1; buclr_priv = 1;
    @(negedge clk); buclr_valid = 0;
    check(c_buclr == 1, "BUCLR executed");
    check(dut.u_bk.used_o == '0, "all used bits clear");

    // 4. invalidation of a clean line held in the L1D and the backup cache
    load(set_addr(12, 0, 0), h);
    for (int t = 1; t <= 4; t++) load(set_addr(12, t, 0), h);
    load(set_addr(12, 0, 0), h); check(h, "line in backup and L1D");
    @(negedge clk); inv_valid = 1; inv_addr = set_addr(12, 0, 0) >> 6;
    @(negedge clk); inv_valid = 0;
    load(set_addr(12, 0, 0), h); check(!h, "invalidated line misses in both");

    // 5. random traffic over 48 KB
    for (int i = 0; i < 6000; i++) begin
      logic [ADDR_W-1:0] a;
      a = 48'h2000_0000 + ADDR_W'($urandom_range(0, 48*1024/8 - 1)) * 8;
      if ($urandom_range(0, 3) == 0) begin
        bit hh; int ll;
        access(1'b1, a, {$urandom, $urandom}, be_t'($urandom), hh, ll);
      end else load(a, h);
      // re-touch recently used lines now and then so backup lines get used
      if (i % 5 == 0) load(a ^ 48'h40, h);
    end
    // the engine steps one line per idle cycle; no access means no new draw
    repeat (300) @(negedge clk);
    check(bk_enabled == bk_target, "enabled count reaches the target");

    // 6. empty backup cache: evictions are dropped
    @(negedge clk); csr_we = 1; csr_addr = 2'd1; csr_wdata = 9'd0;
    @(negedge clk); csr_addr = 2'd2;
    @(negedge clk); csr_addr = 2'd0; csr_wdata = 9'd1;
    @(negedge clk); csr_we = 0;
    load(set_addr(20, 0, 0), h);
    repeat (300) @(negedge clk);
    check(bk_enabled == 0, "backup cache emptied");
    for (int t = 1; t <= 6; t++) load(set_addr(20, t, 0), h);
    load(set_addr(20, 1, 0), h); check(!h, "no backup cache: evicted line misses");

    $display("cases 00=%0d 01=%0d 10=%0d 11=%0d evict=%0d wb=%0d fill=%0d merge=%0d rep_used=%0d rep_unused=%0d drop=%0d",
             c_case[0], c_case[1], c_case[2], c_case[3], c_evict, c_wb, c_fill, c_merge, c_rep_used, c_rep_unused, c_drop);
    $display("resize=%0d grow=%0d shrink=%0d inv=%0d buclr=%0d fault=%0d mem reads=%0d writes=%0d",
             c_resize, c_grow, c_shrink, c_inv, c_buclr, c_fault, n_reads, n_writes);
    check(c_case[0] > 0, "mechanism: case 00");
    check(c_case[1] > 0, "mechanism: case 01");
    check(c_case[2] > 0, "mechanism: case 10");
    check(c_case[3] > 0, "mechanism: case 11");
    check(c_evict > 0, "mechanism: L1D eviction");
    check(c_wb > 0, "mechanism: write-back");
    check(c_fill > 0, "mechanism: backup fill");
    check(c_merge > 0, "mechanism: backup merge");
    check(c_rep_used > 0, "mechanism: RURP replaces used line");
    check(c_rep_unused > 0, "mechanism: RURP replaces unused line");
    check(c_drop > 0, "mechanism: evicted line dropped");
    check(c_resize > 1, "mechanism: resize");
    check(c_grow > 0, "mechanism: grow");
    check(c_shrink > 0, "mechanism: shrink");
    check(c_inv > 0, "mechanism: invalidation");
    check(c_buclr > 0 && c_fault > 0, "mechanism: BUCLR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
