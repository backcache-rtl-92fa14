// tb_bc_backup_cache: fully associative backup cache on a 16-line instance.
//
// Directed sequence, each step checked against what the policy requires:
// growing to a target size one line per cycle; fills into invalid lines;
// lookups and line reads of every filled tag; RURP replacing an unused line
// when all are unused and a used line once some are used; word stores with
// byte enables; merging a fill whose tag is already held; BUCLR; lower-level
// invalidation; shrinking that disables the invalid line first and then the
// used lines, keeping unused lines; and growing again.
module tb_bc_backup_cache;
  import bc_pkg::*;
  localparam int N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0] rnd;
  laddr_t lk_tag, fill_tag, inv_tag;
  logic lk_hit; logic [3:0] lk_idx, rd_idx, upd_idx;
  line_t rd_line, fill_line;
  logic upd_valid = 0, upd_we = 0, fill_valid = 0, inv_valid = 0, buclr = 0, step_en = 0;
  logic [WSEL_W-1:0] upd_wsel = '0;
  word_t upd_wdata = '0; be_t upd_be = '0;
  logic fill_found, fill_merge, fill_repl_valid, fill_repl_used;
  logic [4:0] target_size = '0, n_enabled;
  logic grow, shrink;
  logic [N-1:0] valid_o, used_o, enabled_o;
  int checks = 0, failures = 0, grows = 0, shrinks = 0;

  bc_backup_cache #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin rnd <= 4'($urandom); if (rst_n && grow) grows++; if (rst_n && shrink) shrinks++; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic line_t pattern(laddr_t t);
    line_t l;
    for (int w = 0; w < 16; w++) l[w*32 +: 32] = 32'(t) * 32'h9E37_79B9 + 32'(w);
    return l;
  endfunction

  function automatic laddr_t tagn(int i); return laddr_t'(64'h0ABC_0000 + i * 977); endfunction

  task automatic fill(input laddr_t t, output bit found, output bit merge, output bit rv, output bit ru);
    @(negedge clk); fill_valid = 1; fill_tag = t; fill_line = pattern(t);
    #1; found = fill_found; merge = fill_merge; rv = fill_repl_valid; ru = fill_repl_used;
    @(negedge clk); fill_valid = 0;
  endtask

  task automatic lookup(input laddr_t t, output bit hit, output int idx);
    lk_tag = t; #1; hit = lk_hit; idx = int'(lk_idx); rd_idx = lk_idx; #1;
  endtask

  task automatic touch(input laddr_t t);
    bit h; int i;
    lookup(t, h, i);
    @(negedge clk); upd_valid = 1; upd_idx = 4'(i); upd_we = 0;
    @(negedge clk); upd_valid = 0;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit f, m, rv, ru, h; int idx, nhit, missing;
    rd_idx = '0; upd_idx = '0; lk_tag = '0; fill_tag = '0; inv_tag = '0; fill_line = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(n_enabled == 0 && enabled_o == '0 && valid_o == '0, "reset: nothing enabled");
    // grow to 10
    target_size = 10; step_en = 1;
    repeat (30) @(negedge clk);
    step_en = 0;
    check(n_enabled == 10 && $countones(enabled_o) == 10 && grows == 10, $sformatf("grow to 10: n=%0d pop=%0d grows=%0d", n_enabled, $countones(enabled_o), grows));
    // ten fills into invalid lines
    for (int i = 0; i < 10; i++) begin
      fill(tagn(i), f, m, rv, ru);
      check(f && !m && !rv, $sformatf("fill %0d into an invalid line", i));
    end
    check($countones(valid_o) == 10 && (valid_o & ~enabled_o) == '0, "ten valid lines, all enabled");
    for (int i = 0; i < 10; i++) begin
      lookup(tagn(i), h, idx);
      check(h && enabled_o[idx], $sformatf("lookup %0d hits", i));
      check(rd_line == pattern(tagn(i)), $sformatf("line %0d data", i));
    end
    lookup(tagn(99), h, idx); check(!h, "absent tag misses");
    // full, all used = 0: an unused line is replaced
    fill(tagn(10), f, m, rv, ru);
    check(f && rv && !ru, "full cache: replaces an unused line");
    nhit = 0;
    for (int i = 0; i <= 10; i++) begin lookup(tagn(i), h, idx); nhit += h; end
    check(nhit == 10, $sformatf("exactly one line replaced (%0d hits)", nhit));
    // touch three present lines: the next fill must replace one of them
    begin
      laddr_t present[$];
      for (int i = 0; i <= 10; i++) begin lookup(tagn(i), h, idx); if (h) present.push_back(tagn(i)); end
      for (int k = 0; k < 3; k++) touch(present[k]);
      check($countones(used_o & valid_o) == 3, "three used bits set");
      fill(tagn(11), f, m, rv, ru);
      check(f && rv && ru, "RURP replaces a used line first");
      missing = 0;
      for (int k = 0; k < 3; k++) begin lookup(present[k], h, idx); missing += !h; end
      check(missing == 1, "the replaced line was one of the used ones");
      for (int k = 3; k < present.size(); k++) begin lookup(present[k], h, idx); check(h, "unused lines kept"); end
      // store one word with byte enables into present[5]
      lookup(present[5], h, idx);
      @(negedge clk); upd_valid = 1; upd_idx = 4'(idx); upd_we = 1; upd_wsel = 3'd2;
      upd_wdata = 64'h1122_3344_5566_7788; upd_be = 8'b0000_1111;
      @(negedge clk); upd_valid = 0; upd_we = 0;
      rd_idx = 4'(idx); #1;
      check(rd_line[2*64 +: 32] == 32'h5566_7788 && rd_line[2*64+32 +: 32] == pattern(present[5])[2*64+32 +: 32], "byte-enabled store");
      check(used_o[idx], "store sets used");
      // merge: fill with a tag already present
      fill(present[6], f, m, rv, ru);
      check(f && m && !rv, "fill of a held tag merges");
      check($countones(valid_o) == 10, "merge adds no line");
      // BUCLR
      @(negedge clk); buclr = 1; @(negedge clk); buclr = 0;
      check(used_o == '0, "BUCLR clears all used bits");
      // invalidation
      @(negedge clk); inv_valid = 1; inv_tag = present[7]; @(negedge clk); inv_valid = 0;
      lookup(present[7], h, idx); check(!h, "invalidated line misses");
      check($countones(valid_o) == 9, "nine valid after invalidation");
      // mark two lines used, shrink by three: invalid line, then the used ones
      touch(present[8]); touch(present[9]);
      shrinks = 0;
      target_size = 7; step_en = 1;
      repeat (10) @(negedge clk);
      step_en = 0;
      check(n_enabled == 7 && $countones(enabled_o) == 7 && shrinks == 3, $sformatf("shrink to 7: n=%0d shrinks=%0d", n_enabled, shrinks));
      lookup(present[8], h, idx); check(!h, "used line disabled first");
      lookup(present[9], h, idx); check(!h, "second used line disabled");
      check($countones(valid_o) == 7, "seven unused lines kept");
      check((valid_o & ~enabled_o) == '0 && (used_o & ~enabled_o) == '0, "disabled lines hold nothing");
    end
    // grow to the full 16
    target_size = 16; step_en = 1;
    repeat (12) @(negedge clk);
    check(n_enabled == 16 && enabled_o == '1, "grow to all lines");
    check($countones(valid_o) == 7, "growing keeps the data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
