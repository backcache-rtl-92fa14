// tb_bc_l1d: L1 data cache arrays on a 4-set, 4-way instance.
//
// Fills every way of a set and checks lookups and line data; checks that the
// victim is an invalid way while one exists, then the least recently used
// way under an LRU order that the testbench tracks itself; store hits with
// byte enables mark the line dirty; invalidation frees a way and makes it the
// next victim.
module tb_bc_l1d;
  import bc_pkg::*;
  localparam int SETS = 4, WAYS = 4, SI_W = 2, WY_W = 2, TAG_W = LADDR_W - SI_W;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [SI_W-1:0] lk_index = '0, rd_index = '0, wr_index = '0, touch_index = '0, fill_index = '0, inv_index = '0;
  logic [TAG_W-1:0] lk_tag = '0, fill_tag = '0, inv_tag = '0, rd_tag;
  logic lk_hit; logic [WY_W-1:0] lk_way, vic_way, rd_way = '0, wr_way = '0, touch_way = '0, fill_way = '0;
  coh_t rd_coh; line_t rd_line, fill_line = '0;
  logic wr_valid = 0, touch_valid = 0, fill_valid = 0, fill_dirty = 0, inv_valid = 0;
  logic [WSEL_W-1:0] wr_wsel = '0; word_t wr_data = '0; be_t wr_be = '0;
  int checks = 0, failures = 0;

  bc_l1d #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic line_t pattern(int s, int t);
    line_t l;
    for (int w = 0; w < 16; w++) l[w*32 +: 32] = 32'(s * 1000 + t) * 32'h85EB_CA6B + 32'(w);
    return l;
  endfunction

  // reference LRU order per set: lru[s][0] = most recent
  int lru [SETS][$];
  task automatic ref_touch(int s, int w);
    foreach (lru[s][i]) if (lru[s][i] == w) begin lru[s].delete(i); break; end
    lru[s].push_front(w);
  endtask

  task automatic do_fill(int s, int t, bit dirty, output int way);
    lk_index = SI_W'(s); #1; way = int'(vic_way);
    @(negedge clk); fill_valid = 1; fill_index = SI_W'(s); fill_way = vic_way; fill_tag = TAG_W'(t);
    fill_dirty = dirty; fill_line = pattern(s, t);
    @(negedge clk); fill_valid = 0;
    ref_touch(s, way);
  endtask

  task automatic do_lookup(int s, int t, output bit hit, output int way);
    lk_index = SI_W'(s); lk_tag = TAG_W'(t); #1; hit = lk_hit; way = int'(lk_way);
    rd_index = SI_W'(s); rd_way = lk_way; #1;
  endtask

  task automatic do_touch(int s, int w);
    @(negedge clk); touch_valid = 1; touch_index = SI_W'(s); touch_way = WY_W'(w);
    @(negedge clk); touch_valid = 0;
    ref_touch(s, w);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int way, w2; bit h;
    int used_ways [$];
    for (int s = 0; s < SETS; s++) for (int w = WAYS - 1; w >= 0; w--) lru[s].push_front(w);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill set 1 and set 2 completely: victims are the invalid ways
    for (int s = 1; s <= 2; s++) begin
      used_ways.delete();
      for (int t = 0; t < WAYS; t++) begin
        do_fill(s, 100 + t, 1'b0, way);
        check(!(way inside {used_ways}), "victim is an invalid way");
        used_ways.push_back(way);
      end
    end
    for (int s = 1; s <= 2; s++)
      for (int t = 0; t < WAYS; t++) begin
        do_lookup(s, 100 + t, h, way);
        check(h, "filled tag hits");
        check(rd_line == pattern(s, 100 + t) && rd_coh == COH_CLEAN && rd_tag == TAG_W'(100 + t), "line data, clean state, tag");
      end
    do_lookup(3, 100, h, way); check(!h, "other set misses");
    // random touches and fills on set 1, victim = reference LRU way
    for (int k = 0; k < 200; k++) begin
      if ($urandom_range(0, 2) != 0) begin
        do_touch(1, $urandom_range(0, WAYS - 1));
      end else begin
        lk_index = 2'd1; #1;
        check(int'(vic_way) == lru[1][WAYS-1], $sformatf("LRU victim %0d exp %0d", vic_way, lru[1][WAYS-1]));
        do_fill(1, 200 + k, 1'b0, way);
      end
    end
    // store hit with byte enables
    do_lookup(2, 102, h, way);
    @(negedge clk); wr_valid = 1; wr_index = 2'd2; wr_way = WY_W'(way); wr_wsel = 3'd5;
    wr_data = 64'hFFEE_DDCC_BBAA_9988; wr_be = 8'b1100_0011;
    @(negedge clk); wr_valid = 0;
    do_lookup(2, 102, h, w2);
    check(rd_coh == COH_DIRTY, "store marks dirty");
    check(rd_line[5*64 +: 16] == 16'h9988 && rd_line[5*64+48 +: 16] == 16'hFFEE &&
          rd_line[5*64+16 +: 32] == pattern(2, 102)[5*64+16 +: 32], "byte-enabled store");
    // dirty fill
    do_fill(3, 7, 1'b1, way);
    do_lookup(3, 7, h, w2); check(h && rd_coh == COH_DIRTY, "dirty fill");
    // invalidate one way of set 2: it becomes the victim
    do_lookup(2, 101, h, way);
    @(negedge clk); inv_valid = 1; inv_index = 2'd2; inv_tag = TAG_W'(101);
    @(negedge clk); inv_valid = 0;
    do_lookup(2, 101, h, w2); check(!h, "invalidated line misses");
    lk_index = 2'd2; #1; check(int'(vic_way) == way, "invalid way is the next victim");
    do_lookup(2, 100, h, w2); check(h, "other ways kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
