// bc_l1d: tag, data and LRU arrays of the set-associative L1 data cache.
//
// The L1 data cache itself is conventional: 16 KB, 4 ways, 64 sets of 64-byte
// lines, LRU replacement, write-back and write-allocate. Only its neighbour,
// the backup cache, is new. This block holds the arrays and offers the
// operations the BackCache controller (backcache) needs, each in one cycle:
//
//   lookup   set `lk_index` is read and its 4 tags compared with `lk_tag`:
//            `lk_hit`, `lk_way`. Combinational.
//   read     tag, coherence and data of (`rd_index`, `rd_way`). Combinational.
//   victim   `vic_way` for set `lk_index`: the first invalid way, otherwise
//            the least recently used way. Combinational.
//   write    a store hit writes word `wr_wsel` of (`wr_index`, `wr_way`)
//            under byte enables and marks the line dirty.
//   touch    `touch_valid` makes (`touch_index`, `touch_way`) most recently
//            used.
//   fill     writes a whole line with its tag and clean/dirty state, and makes
//            it most recently used.
//   invalidate clears the way of set `inv_index` whose tag is `inv_tag`.
//
// LRU is kept as a 2-bit age per way (0 = most recent, WAYS-1 = least);
// touching a way ages every younger way by one. Reset clears every valid
// state and sets way w to age w. The caller does not present fill and write
// in the same cycle.
module bc_l1d
  import bc_pkg::*;
#(
  parameter int unsigned SETS = 64,
  parameter int unsigned WAYS = 4,
  localparam int unsigned SI_W  = $clog2(SETS),
  localparam int unsigned WY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TAG_W = LADDR_W - SI_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // lookup and victim
  input  logic [SI_W-1:0]   lk_index,
  input  logic [TAG_W-1:0]  lk_tag,
  output logic              lk_hit,
  output logic [WY_W-1:0]   lk_way,
  output logic [WY_W-1:0]   vic_way,
  // read
  input  logic [SI_W-1:0]   rd_index,
  input  logic [WY_W-1:0]   rd_way,
  output logic [TAG_W-1:0]  rd_tag,
  output coh_t              rd_coh,
  output line_t             rd_line,
  // store hit
  input  logic              wr_valid,
  input  logic [SI_W-1:0]   wr_index,
  input  logic [WY_W-1:0]   wr_way,
  input  logic [WSEL_W-1:0] wr_wsel,
  input  word_t             wr_data,
  input  be_t               wr_be,
  // LRU touch on a hit
  input  logic              touch_valid,
  input  logic [SI_W-1:0]   touch_index,
  input  logic [WY_W-1:0]   touch_way,
  // line fill
  input  logic              fill_valid,
  input  logic [SI_W-1:0]   fill_index,
  input  logic [WY_W-1:0]   fill_way,
  input  logic [TAG_W-1:0]  fill_tag,
  input  logic              fill_dirty,
  input  line_t             fill_line,
  // invalidation
  input  logic              inv_valid,
  input  logic [SI_W-1:0]   inv_index,
  input  logic [TAG_W-1:0]  inv_tag
);
  logic [TAG_W-1:0] tag_q [SETS][WAYS];
  coh_t             coh_q [SETS][WAYS];
  logic [WY_W-1:0]  age_q [SETS][WAYS];
  line_t            data_q[SETS][WAYS];

  // lookup and victim choice
  always_comb begin
    lk_hit = 1'b0;
    lk_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (coh_q[lk_index][w] != COH_INVALID && tag_q[lk_index][w] == lk_tag) begin
        lk_hit = 1'b1;
        lk_way = WY_W'(w);
      end
    end
  end

  always_comb begin
    vic_way   = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (age_q[lk_index][w] == WY_W'(WAYS - 1)) vic_way = WY_W'(w);
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (coh_q[lk_index][w] == COH_INVALID) begin
        vic_way   = WY_W'(w);
      end
    end
  end

  assign rd_tag  = tag_q[rd_index][rd_way];
  assign rd_coh  = coh_q[rd_index][rd_way];
  assign rd_line = data_q[rd_index][rd_way];

  // one LRU update per cycle: a fill or a touch
  logic            lru_upd;
  logic [SI_W-1:0] lru_set;
  logic [WY_W-1:0] lru_way;
  always_comb begin
    lru_upd = fill_valid || touch_valid;
    lru_set = fill_valid ? fill_index : touch_index;
    lru_way = fill_valid ? fill_way   : touch_way;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          tag_q[s][w] <= '0;
          coh_q[s][w] <= COH_INVALID;
          age_q[s][w] <= WY_W'(w);
        end
    end else begin
      if (wr_valid) coh_q[wr_index][wr_way] <= COH_DIRTY;
      if (fill_valid) begin
        tag_q[fill_index][fill_way] <= fill_tag;
        coh_q[fill_index][fill_way] <= fill_dirty ? COH_DIRTY : COH_CLEAN;
      end
      if (inv_valid) begin
        for (int w = 0; w < WAYS; w++)
          if (coh_q[inv_index][w] != COH_INVALID && tag_q[inv_index][w] == inv_tag)
            coh_q[inv_index][w] <= COH_INVALID;
      end
      if (lru_upd) begin
        for (int w = 0; w < WAYS; w++) begin
          if (WY_W'(w) == lru_way)                          age_q[lru_set][w] <= '0;
          else if (age_q[lru_set][w] < age_q[lru_set][lru_way]) age_q[lru_set][w] <= age_q[lru_set][w] + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      for (int b = 0; b < int'(WORD_BYTES); b++)
        if (wr_be[b]) data_q[wr_index][wr_way][int'(wr_wsel)*WORD_W + b*8 +: 8] <= wr_data[b*8 +: 8];
    end
    if (fill_valid) data_q[fill_index][fill_way] <= fill_line;
  end

endmodule
