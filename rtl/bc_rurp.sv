// bc_rurp: random used replacement policy (RURP) victim selection.
//
// Picks the backup cache line that an incoming line (evicted from the L1 data
// cache) replaces, or that the resizing engine disables when the backup cache
// shrinks. The order is the one the policy prescribes:
//   1. only lines with enabled = 1 are considered;
//   2. an invalid (valid = 0) enabled line is taken if one exists;
//   3. otherwise the candidates are the valid lines with used = 1;
//   4. if there are none, the candidates are the valid lines with used = 0;
//   5. one candidate is chosen at random.
// Lines that have been touched again since they entered the backup cache are
// therefore evicted first, which keeps the lines an attacker has not yet
// re-probed in place. Step 2 uses the same random start as step 5; the
// description only asks for "an invalid line", so any choice is correct.
//
// Purely combinational. Outputs: `found` (some enabled line exists), `idx`,
// `repl_valid` (the chosen line holds data), `repl_used` (its used bit).
module bc_rurp #(
  parameter int unsigned N = 256,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]  valid,
  input  logic [N-1:0]  used,
  input  logic [N-1:0]  enabled,
  input  logic [IW-1:0] rnd,
  output logic          found,
  output logic [IW-1:0] idx,
  output logic          repl_valid,
  output logic          repl_used
);
  logic [N-1:0] cand_inv, cand_used, cand_unused, cand;

  always_comb begin
    cand_inv    = enabled & ~valid;
    cand_used   = enabled &  valid &  used;
    cand_unused = enabled &  valid & ~used;
    if (|cand_inv)       cand = cand_inv;
    else if (|cand_used) cand = cand_used;
    else                 cand = cand_unused;
  end

  bc_rand_pick #(.N(N)) u_pick (
    .mask (cand),
    .start(rnd),
    .found(found),
    .idx  (idx)
  );

  assign repl_valid = found && valid[idx];
  assign repl_used  = found && used[idx];

endmodule
