// tb_bc_rurp: RURP victim choice against an independent reference.
//
// For 20,000 random (valid, used, enabled, random) vectors on a 16-line
// instance the reference walks the lines circularly from the random start and
// takes the first line of the highest-priority non-empty class: invalid
// enabled, then valid used, then valid unused. Also checks the empty case and
// that every candidate of a class is reachable.
module tb_bc_rurp;
  localparam int N = 16;
  logic [N-1:0] valid, used, enabled;
  logic [3:0]   rnd;
  logic         found, repl_valid, repl_used;
  logic [3:0]   idx;
  int checks = 0, failures = 0;

  bc_rurp #(.N(N)) dut (.valid, .used, .enabled, .rnd, .found, .idx, .repl_valid, .repl_used);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_idx, cls;
    bit exp_found;
    bit [N-1:0] seen;
    for (int t = 0; t < 20000; t++) begin
      valid   = N'($urandom);
      used    = N'($urandom);
      enabled = (t % 4 == 0) ? N'($urandom) & N'($urandom) : N'($urandom) | N'($urandom);
      if (t % 7 == 0) valid = '1;
      if (t % 11 == 0) begin valid = '1; used = '0; end
      rnd = 4'($urandom);
      #1;
      exp_found = 1'b0; exp_idx = 0;
      for (cls = 0; cls < 3 && !exp_found; cls++) begin
        for (int k = 0; k < N && !exp_found; k++) begin
          int i;
          bit c;
          i = (int'(rnd) + k) % N;
          case (cls)
            0: c = enabled[i] && !valid[i];
            1: c = enabled[i] && valid[i] && used[i];
            default: c = enabled[i] && valid[i] && !used[i];
          endcase
          if (c) begin exp_found = 1'b1; exp_idx = i; end
        end
      end
      check(found == exp_found, $sformatf("found %0b exp %0b", found, exp_found));
      if (exp_found) begin
        check(int'(idx) == exp_idx, $sformatf("t=%0d v=%h u=%h e=%h r=%0d idx %0d exp %0d", t, valid, used, enabled, rnd, idx, exp_idx));
        check(repl_valid == valid[exp_idx] && repl_used == (valid[exp_idx] && used[exp_idx]) || !valid[exp_idx], "repl flags");
      end
    end
    // all lines disabled: nothing to pick
    enabled = '0; valid = '1; used = '1; rnd = 3; #1;
    check(!found, "no enabled line");
    // every used=1 line reachable through the random start
    seen = '0;
    valid = '1; enabled = '1; used = 16'b0100_1001_0000_0110;
    for (int r = 0; r < N; r++) begin rnd = 4'(r); #1; seen[idx] = 1'b1; check(used[idx], "picked used line"); end
    check(seen == used, "all used candidates reachable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
