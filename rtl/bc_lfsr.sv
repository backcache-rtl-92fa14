// bc_lfsr: random number source for the backup cache.
//
// The backup cache draws random numbers in two places: to pick a victim among
// the RURP candidates, and to pick a new backup cache size between the
// minimum and maximum size registers. The security argument assumes this
// source is secure and unpredictable; how it is built is not specified. This
// block is the simplest stand-in: a 32-bit maximal-length Galois LFSR
// (taps 32,22,2,1, polynomial 0x80200003) that advances every cycle and
// can be reseeded. A product would replace it with a true or cryptographic
// random generator behind the same port.
//
// Interface: `rnd` is the current state, new every clock. `seed_we` loads
// `seed` (a zero seed is replaced by 1, the all-zero state being a lock-up
// state). Reset loads SEED.
module bc_lfsr #(
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_we,
  input  logic [31:0] seed,
  output logic [31:0] rnd
);
  localparam logic [31:0] POLY = 32'h8020_0003;

  logic [31:0] state_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= (SEED == '0) ? 32'd1 : SEED;
    end else if (seed_we) begin
      state_q <= (seed == '0) ? 32'd1 : seed;
    end else begin
      state_q <= state_q[0] ? ((state_q >> 1) ^ POLY) : (state_q >> 1);
    end
  end

  assign rnd = state_q;

endmodule
