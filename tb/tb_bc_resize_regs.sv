// tb_bc_resize_regs: resizing registers and random size choice.
//
// Drives the random input from the testbench, so the expected size of every
// draw is known: lo + floor(r * (hi - lo + 1) / 2^16). Checks the draw at
// initialisation, that the access count register starts at the drawn size
// and drops by one per access, that the access bringing it to zero draws a
// new size and reloads the count, that `resize` pulses once per draw, the
// register reads and writes, clamping of the limits, and that 2,000 draws
// all fall inside [min, max] and reach both ends of the range.
module tb_bc_resize_regs;
  localparam int N = 256;
  logic clk = 1'b0, rst_n = 1'b0, access = 1'b0, csr_we = 1'b0;
  logic [1:0] csr_addr = '0;
  logic [8:0] csr_wdata = '0, csr_rdata, target_size;
  logic [15:0] rnd = '0;
  logic resize;
  int checks = 0, failures = 0;

  bc_resize_regs #(.N_LINES(N), .MIN_RESET(192), .MAX_RESET(256)) dut (
    .clk, .rst_n, .access, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .rnd, .target_size, .resize);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic int expect_size(int lo, int hi, int r);
    return lo + (r * (hi - lo + 1)) / 65536;
  endfunction

  task automatic read_reg(input int a, output int v);
    csr_addr = 2'(a); #1; v = int'(csr_rdata);
  endtask

  task automatic write_reg(input int a, input int v);
    @(negedge clk); csr_we = 1'b1; csr_addr = 2'(a); csr_wdata = 9'(v);
    @(negedge clk); csr_we = 1'b0;
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int v, exp, size, pulses, mn, mx;
  always @(posedge clk) if (rst_n && resize) pulses++;   // flops are random until reset

  initial begin
    pulses = 0;
    rnd = 16'd40000;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);   // first cycle after reset: initial draw
    exp = expect_size(192, 256, 40000);
    check(int'(target_size) == exp, $sformatf("init size %0d exp %0d", target_size, exp));
    read_reg(0, v); check(v == exp, "count = initial size");
    read_reg(1, v); check(v == 192, "min reset value");
    read_reg(2, v); check(v == 256, "max reset value");
    @(negedge clk);
    check(pulses == 1, "one resize pulse at init");
    size = exp;
    // size - 1 accesses only decrement
    for (int i = 0; i < size - 1; i++) begin
      access = 1'b1; rnd = 16'($urandom); @(negedge clk);
    end
    access = 1'b0;
    read_reg(0, v); check(v == 1, $sformatf("count after size-1 accesses = %0d", v));
    check(int'(target_size) == size, "size unchanged before expiry");
    check(pulses == 1, "no early resize");
    // the access that reaches zero redraws
    access = 1'b1; rnd = 16'd65535; @(negedge clk); access = 1'b0;
    @(negedge clk);
    exp = expect_size(192, 256, 65535);
    check(int'(target_size) == exp && exp == 256, $sformatf("redraw %0d exp %0d", target_size, exp));
    read_reg(0, v); check(v == exp, "count reloaded with new size");
    check(pulses == 2, "resize pulse at expiry");
    // new limits 8..12
    write_reg(1, 8); write_reg(2, 12);
    read_reg(1, v); check(v == 8, "min write");
    read_reg(2, v); check(v == 12, "max write");
    write_reg(0, 1);
    mn = 999; mx = 0;
    for (int i = 0; i < 2000; i++) begin
      rnd = 16'($urandom);
      exp = expect_size(8, 12, int'(rnd));
      @(negedge clk); access = 1'b1; read_reg(0, v);
      // count register is 1 or the next access is the last one: force expiry
      if (v != 1) begin csr_we = 1'b1; csr_addr = 2'd0; csr_wdata = 9'd1; end
      @(negedge clk); access = 1'b0; csr_we = 1'b0;
      if (v == 1) begin
        check(int'(target_size) == exp, $sformatf("draw %0d exp %0d", target_size, exp));
        check(target_size >= 8 && target_size <= 12, "draw inside limits");
        if (int'(target_size) < mn) mn = int'(target_size);
        if (int'(target_size) > mx) mx = int'(target_size);
      end
    end
    check(mn == 8 && mx == 12, $sformatf("range covered %0d..%0d", mn, mx));
    // maximum above the line count is clamped, minimum above maximum follows it
    write_reg(1, 300); write_reg(2, 400); write_reg(0, 1);
    @(negedge clk); access = 1'b1; rnd = 16'd0; @(negedge clk); access = 1'b0; @(negedge clk);
    check(int'(target_size) == 256, $sformatf("clamped size %0d", target_size));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
