// bc_rand_pick: choose one set bit of a mask, starting from a random point.
//
// Used by the RURP victim choice and by the resizing engine to "randomly
// select a line from the candidates". The mask is rotated right by the random
// start `start` (taken modulo N), a priority encoder finds the first set bit,
// and the rotation is undone. Every candidate can be chosen; the choice is
// uniform only when candidates are spread evenly (a candidate that follows a
// long run of non-candidates is picked more often). That bias is this
// design's simplification of "select randomly".
//
// Purely combinational. `found` is low when the mask is empty; `idx` is then 0.
module bc_rand_pick #(
  parameter int unsigned N = 256,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]  mask,
  input  logic [IW-1:0] start,
  output logic          found,
  output logic [IW-1:0] idx
);
  logic [N-1:0]   rot;
  logic [IW-1:0]  s;
  logic [IW:0]    sum;

  always_comb begin
    s   = (int'(start) >= N) ? IW'(int'(start) - N) : start;
    rot = (mask >> s) | (mask << (N - int'(s)));
    found = |mask;
    idx   = '0;
    sum   = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (rot[i]) begin
        sum = (IW+1)'(i) + (IW+1)'(s);
        idx = (int'(sum) >= N) ? IW'(int'(sum) - N) : IW'(sum);
      end
    end
    if (!found) idx = '0;
  end

endmodule
