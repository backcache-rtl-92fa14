// tb_bc_lfsr: checks the random source against a bit-serial Fibonacci model.
//
// The reference recomputes the Galois recurrence of x^32+x^22+x^2+x+1 bit by
// bit from the polynomial taps (bits 31, 21, 1 and 0 receive the feedback). It also checks
// reset value, reseeding, that a zero seed is refused, and that no state
// repeats within 100,000 steps.
module tb_bc_lfsr;
  logic clk = 1'b0, rst_n = 1'b0, seed_we = 1'b0;
  logic [31:0] seed = '0, rnd;
  int checks = 0, failures = 0;

  bc_lfsr #(.SEED(32'h1234_5678)) dut (.clk, .rst_n, .seed_we, .seed, .rnd);

  always #5 clk = ~clk;

  function automatic logic [31:0] step(input logic [31:0] s);
    logic [31:0] n;
    logic fb;
    fb = s[0];
    for (int i = 0; i < 31; i++) n[i] = s[i+1];
    n[31] = 1'b0;
    if (fb) begin
      n[31] = ~n[31];
      n[21] = ~n[21];
      n[1]  = ~n[1];
      n[0]  = ~n[0];
    end
    return n;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] model, first;
  initial begin
    repeat (2) @(posedge clk);
    #1 check(rnd == 32'h1234_5678, "reset value");
    rst_n = 1'b1;
    model = rnd;
    first = rnd;
    for (int i = 0; i < 1000; i++) begin
      @(posedge clk); #1;
      model = step(model);
      check(rnd == model, $sformatf("step %0d: got %h exp %h", i, rnd, model));
    end
    for (int i = 0; i < 100000; i++) begin
      @(posedge clk); #1;
      if (rnd == first || rnd == 0) begin
        check(1'b0, "state repeated or reached zero");
        break;
      end
    end
    checks++;
    seed_we = 1'b1; seed = 32'hDEAD_BEEF;
    @(posedge clk); #1 seed_we = 1'b0;
    check(rnd == 32'hDEAD_BEEF, "reseed");
    seed_we = 1'b1; seed = 32'h0;
    @(posedge clk); #1 seed_we = 1'b0;
    check(rnd == 32'h1, "zero seed replaced");
    @(posedge clk); #1;
    check(rnd == step(32'h1), "step after reseed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
