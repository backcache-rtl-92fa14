// bc_backup_cache: fully associative backup cache beside the L1 data cache.
//
// Lines evicted from the L1 data cache are placed here, so that an attacker
// who re-probes an eviction set still sees L1-level hits. Each of the N lines
// has a tag entry {tag 42, coherence 2, used 1, enabled 1} and a 64-byte data
// line. The block offers, all in one cycle:
//
//   lookup   `lk_tag` is compared with every valid, enabled entry at once
//            (the single set of a fully associative cache); `lk_hit`,
//            `lk_idx`. Combinational.
//   read     `rd_line` is the data of line `rd_idx`. Combinational.
//   update   on a hit by the core (`upd_valid`): the used bit of `upd_idx` is
//            set to 1 and, for a store (`upd_we`), word `upd_wsel` is written
//            under byte enables `upd_be`.
//   fill     `fill_valid` places an L1D victim `fill_tag`/`fill_line`. If the
//            tag is already held (a line brought back into the L1D stays
//            here too) the data is overwritten in place (`fill_merge`).
//            Otherwise RURP (bc_rurp) picks the line among enabled lines and
//            the new entry starts clean with used = 0. `fill_found` is low
//            when no line is enabled; the evicted line is then not kept.
//            `fill_repl_valid`/`fill_repl_used` describe the replaced line.
//   invalidate `inv_valid` clears the entry matching `inv_tag`.
//   BUCLR    `buclr` clears every used bit in parallel (one cycle).
//   resize   while `step_en` is high and the number of enabled lines
//            (`n_enabled`) differs from `target_size`, one line per cycle
//            is enabled (chosen at random among disabled lines) or disabled
//            (chosen by RURP among enabled lines; its data is dropped, so
//            "no data can be stored to or loaded from" a disabled line).
//            `grow`/`shrink` pulse in the cycle a line changes.
//
// A replaced or disabled line is never written back: every line enters the
// backup cache from the L1D, which writes dirty data back at that moment, and
// every store that hits here also updates the L1D copy. The coherence field is
// therefore set to clean on entry and left unchanged by stores.
//
// The caller must not present update, fill and a resize step in the same
// cycle (the top runs resize steps only while idle). After reset every line
// is invalid and disabled; the resizing engine enables the first size.
module bc_backup_cache
  import bc_pkg::*;
#(
  parameter int unsigned N = 256,
  localparam int unsigned IW   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SZ_W = $clog2(N + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [IW-1:0]   rnd,
  // lookup
  input  laddr_t          lk_tag,
  output logic            lk_hit,
  output logic [IW-1:0]   lk_idx,
  // read
  input  logic [IW-1:0]   rd_idx,
  output line_t           rd_line,
  // update on a hit
  input  logic            upd_valid,
  input  logic [IW-1:0]   upd_idx,
  input  logic            upd_we,
  input  logic [WSEL_W-1:0] upd_wsel,
  input  word_t           upd_wdata,
  input  be_t             upd_be,
  // fill with an L1D victim
  input  logic            fill_valid,
  input  laddr_t          fill_tag,
  input  line_t           fill_line,
  output logic            fill_found,
  output logic            fill_merge,
  output logic            fill_repl_valid,
  output logic            fill_repl_used,
  // invalidation from the lower level
  input  logic            inv_valid,
  input  laddr_t          inv_tag,
  // BUCLR
  input  logic            buclr,
  // resizing
  input  logic [SZ_W-1:0] target_size,
  input  logic            step_en,
  output logic [SZ_W-1:0] n_enabled,
  output logic            grow,
  output logic            shrink,
  // state, for status and tests
  output logic [N-1:0]    valid_o,
  output logic [N-1:0]    used_o,
  output logic [N-1:0]    enabled_o
);
  bk_entry_t entry_q [N];
  line_t     data_q  [N];
  logic [SZ_W-1:0] n_en_q;

  logic [N-1:0] valid_v, used_v, en_v, lk_match, fill_match, inv_match;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      valid_v[i]    = (entry_q[i].coh != COH_INVALID) && entry_q[i].enabled;
      used_v[i]     = entry_q[i].used;
      en_v[i]       = entry_q[i].enabled;
      lk_match[i]   = valid_v[i] && (entry_q[i].tag == lk_tag);
      fill_match[i] = valid_v[i] && (entry_q[i].tag == fill_tag);
      inv_match[i]  = valid_v[i] && (entry_q[i].tag == inv_tag);
    end
  end

  // Lookup: at most one entry matches a tag (fills merge duplicates).
  always_comb begin
    lk_hit = |lk_match;
    lk_idx = '0;
    for (int i = N - 1; i >= 0; i--) if (lk_match[i]) lk_idx = IW'(i);
  end

  assign rd_line = data_q[rd_idx];

  // Fill: merge into an existing copy, else RURP victim.
  logic          merge_hit;
  logic [IW-1:0] merge_idx;
  always_comb begin
    merge_hit = |fill_match;
    merge_idx = '0;
    for (int i = N - 1; i >= 0; i--) if (fill_match[i]) merge_idx = IW'(i);
  end

  logic          rurp_found, rurp_rv, rurp_ru;
  logic [IW-1:0] rurp_idx;
  bc_rurp #(.N(N)) u_rurp (
    .valid(valid_v), .used(used_v), .enabled(en_v), .rnd(rnd),
    .found(rurp_found), .idx(rurp_idx), .repl_valid(rurp_rv), .repl_used(rurp_ru)
  );

  assign fill_merge      = merge_hit;
  assign fill_found      = merge_hit || rurp_found;
  assign fill_repl_valid = !merge_hit && rurp_rv;
  assign fill_repl_used  = !merge_hit && rurp_rv && rurp_ru;

  // Resizing: grow picks a disabled line at random; shrink uses RURP (the
  // same victim order as a fill).
  logic          grow_found;
  logic [IW-1:0] grow_idx;
  bc_rand_pick #(.N(N)) u_grow_pick (
    .mask(~en_v), .start(rnd), .found(grow_found), .idx(grow_idx)
  );

  assign grow   = step_en && (n_en_q < target_size) && grow_found;
  assign shrink = step_en && (n_en_q > target_size) && rurp_found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) entry_q[i] <= '{tag: '0, coh: COH_INVALID, used: 1'b0, enabled: 1'b0};
      n_en_q <= '0;
    end else begin
      if (buclr) begin
        for (int i = 0; i < N; i++) entry_q[i].used <= 1'b0;
      end
      if (upd_valid) begin
        entry_q[upd_idx].used <= 1'b1;
      end
      if (fill_valid) begin
        if (!merge_hit && rurp_found) begin
          entry_q[rurp_idx].tag  <= fill_tag;
          entry_q[rurp_idx].coh  <= COH_CLEAN;
          entry_q[rurp_idx].used <= 1'b0;
        end
      end
      if (inv_valid) begin
        for (int i = 0; i < N; i++) if (inv_match[i]) entry_q[i].coh <= COH_INVALID;
      end
      if (grow) begin
        entry_q[grow_idx].enabled <= 1'b1;
        entry_q[grow_idx].coh     <= COH_INVALID;
        entry_q[grow_idx].used    <= 1'b0;
        n_en_q <= n_en_q + 1'b1;
      end else if (shrink) begin
        entry_q[rurp_idx].enabled <= 1'b0;
        entry_q[rurp_idx].coh     <= COH_INVALID;
        entry_q[rurp_idx].used    <= 1'b0;
        n_en_q <= n_en_q - 1'b1;
      end
    end
  end

  // Data array: written by store hits and fills; no reset needed (valid bits
  // guard every read).
  always_ff @(posedge clk) begin
    if (upd_valid && upd_we) begin
      for (int b = 0; b < int'(WORD_BYTES); b++)
        if (upd_be[b]) data_q[upd_idx][int'(upd_wsel)*WORD_W + b*8 +: 8] <= upd_wdata[b*8 +: 8];
    end
    if (fill_valid && fill_found) begin
      data_q[merge_hit ? merge_idx : rurp_idx] <= fill_line;
    end
  end

  assign n_enabled = n_en_q;
  assign valid_o   = valid_v;
  assign used_o    = used_v;
  assign enabled_o = en_v;

endmodule
