// bc_resize_regs: the three resizing registers and the random size choice.
//
// Holds the memory access count register and the minimum and maximum backup
// cache size registers, and decides when the backup cache is resized and to
// what size. Sizes are counted in backup lines (64 bytes each), so the
// evaluated 12-16 KB configuration is MIN = 192, MAX = 256.
//
// Operation, as the resizing flow describes it:
//   * In the first cycle after reset (cache initialisation) a size is drawn
//     at random between the minimum and maximum registers, `target_size`
//     takes it and the access count register is loaded with the same value.
//   * Every memory access (`access` pulse, hit or miss) decrements the count.
//     An access that brings it to zero draws a new random size, moves
//     `target_size` to it and reloads the count with it.
//   `resize` pulses for one cycle whenever a size is drawn. The backup cache
// then enables or disables lines until its enabled count equals
// `target_size`.
//
// Random size: size = lo + ((r * (hi - lo + 1)) >> 16) with r a 16-bit
// random number, one multiply instead of a divider (this design's choice; the
// bias is below 2^-7 for these ranges). `hi` is the maximum register clamped
// to the number of physical lines and `lo` the minimum clamped to `hi`.
//
// Software interface (the privileged code that configures the limits):
// `csr_addr` 0 = access count, 1 = minimum, 2 = maximum; writes take effect
// on the clock edge and a count write overrides a decrement in the same
// cycle. Reads are combinational. Reset values of the limits are parameters.
module bc_resize_regs #(
  parameter int unsigned N_LINES   = 256,
  parameter int unsigned MIN_RESET = 192,
  parameter int unsigned MAX_RESET = 256,
  localparam int unsigned SZ_W = $clog2(N_LINES + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            access,
  input  logic            csr_we,
  input  logic [1:0]      csr_addr,
  input  logic [SZ_W-1:0] csr_wdata,
  output logic [SZ_W-1:0] csr_rdata,
  input  logic [15:0]     rnd,
  output logic [SZ_W-1:0] target_size,
  output logic            resize
);
  logic [SZ_W-1:0] count_q, min_q, max_q, target_q;
  logic            init_q;

  logic [SZ_W-1:0] hi, lo, new_size;
  logic [SZ_W:0]   range_w;
  logic [SZ_W+16:0] prod;
  logic            expire;

  always_comb begin
    hi      = (32'(max_q) > N_LINES) ? SZ_W'(N_LINES) : max_q;
    lo      = (min_q > hi) ? hi : min_q;
    range_w = (SZ_W+1)'(hi) - (SZ_W+1)'(lo) + 1'b1;
    prod    = (SZ_W+17)'(rnd) * (SZ_W+17)'(range_w);
    new_size = lo + SZ_W'(prod >> 16);
    expire  = access && (count_q <= 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q   <= 1'b1;
      count_q  <= '0;
      min_q    <= SZ_W'(MIN_RESET);
      max_q    <= SZ_W'(MAX_RESET);
      target_q <= '0;
      resize   <= 1'b0;
    end else begin
      resize <= 1'b0;
      if (init_q || expire) begin
        init_q   <= 1'b0;
        target_q <= new_size;
        count_q  <= new_size;
        resize   <= 1'b1;
      end else if (access) begin
        count_q <= count_q - 1'b1;
      end
      if (csr_we) begin
        unique case (csr_addr)
          2'd0:    count_q <= csr_wdata;
          2'd1:    min_q   <= csr_wdata;
          2'd2:    max_q   <= csr_wdata;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (csr_addr)
      2'd0:    csr_rdata = count_q;
      2'd1:    csr_rdata = min_q;
      2'd2:    csr_rdata = max_q;
      default: csr_rdata = '0;
    endcase
  end

  assign target_size = target_q;

endmodule
