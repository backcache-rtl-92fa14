// backcache: L1 data-cache level with a fully associative backup cache.
//
// Contention attacks (Prime+Probe and similar) learn a victim's secret by
// seeing which of their own lines the victim evicted from a cache set. This
// level hides those evictions: a line evicted from the set-associative L1
// data cache (bc_l1d) is kept in a fully associative backup cache
// (bc_backup_cache), and every request looks up both structures in parallel.
// A hit in either is an L1-level hit with the same latency, so an attacker
// who re-probes an eviction set sees hits unless the victim overflowed the
// whole backup cache. Two further mechanisms make the backup cache hard to
// measure: the RURP replacement policy (bc_rurp) evicts first the backup
// lines that were touched again, and the number of enabled backup lines is
// redrawn at random, between a minimum and a maximum register, each time a
// memory access count register runs down (bc_resize_regs). BUCLR, issued by
// the kernel at each context switch, clears every used bit.
//
// Request flow (one request at a time):
//   IDLE    accepts a request (`req_valid && req_ready`); counts one access.
//   LOOKUP  both tag arrays are compared. The {L1D hit, backup hit} pair
//           selects one of four cases:
//             11  both hit: data from the L1D; a store updates both copies;
//                 the backup used bit is set.
//             10  L1D hit only: ordinary L1D hit.
//             01  backup hit only: data from the backup cache, its used bit
//                 set (and the word written, for a store); the line is then
//                 copied into the L1D (it also stays in the backup cache).
//             00  miss: the line is read from the lower level and put in the
//                 L1D only.
//   The hit response (`resp_valid`) appears exactly HIT_LATENCY cycles after
//   the request was accepted, whichever structure hit. Line movements happen
//   after the response, as the design requires, so that none of the four
//   cases answers at a different time:
//   L1FILL  the line enters the L1D in the LRU (or an invalid) way; a valid
//           victim is read out.
//   WB      a dirty victim is written to the lower level, whether or not the
//           backup cache then keeps it.
//   BKFILL  the victim goes into the backup cache (RURP chooses the line).
//
// Invalidations from the lower level (`inv_valid`, a line address) remove
// the line from both structures; BUCLR (`buclr_valid`) clears all used bits
// in one cycle and is refused, with `buclr_fault`, unless `buclr_priv` says
// the core is in privileged mode. Both are taken only while idle, ahead of
// core requests. The resizing engine enables or disables one backup line per
// idle cycle until the enabled count reaches the drawn size.
//
// Lower-level port: one request at a time; a read (`mem_req_we` = 0) is
// answered by one `mem_resp_valid` beat carrying the whole line, a write is
// complete when accepted. Accesses are 64-bit words with byte enables; the
// word is chosen by address bits [5:3] (the figure's aligner) and byte
// extraction is left to the core. A store is acknowledged with the same
// timing as a load; its `resp_rdata` is the word before the store.
//
// The one-request-at-a-time controller, the port handshakes, the store
// acknowledgement and the register encodings are this design's choices; the
// lookup, the four cases, RURP, resizing and BUCLR follow the description of
// BackCache.
module backcache
  import bc_pkg::*;
#(
  parameter int unsigned L1_SETS     = 64,   // 16 KB, 4-way, 64 B lines
  parameter int unsigned L1_WAYS     = 4,
  parameter int unsigned BK_LINES    = 256,  // 16 KB backup cache
  parameter int unsigned BK_MIN      = 192,  // 12 KB: reset value of the minimum register
  parameter int unsigned BK_MAX      = 256,  // 16 KB: reset value of the maximum register
  parameter int unsigned HIT_LATENCY = 3,    // cycles, L1D and backup hits alike
  parameter logic [31:0] RNG_SEED    = 32'hACE1_2468,
  localparam int unsigned BK_IW = $clog2(BK_LINES),
  localparam int unsigned SZ_W  = $clog2(BK_LINES + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // core request / response
  input  logic            req_valid,
  output logic            req_ready,
  input  logic            req_we,
  input  logic [ADDR_W-1:0] req_addr,
  input  word_t           req_wdata,
  input  be_t             req_be,
  output logic            resp_valid,
  output word_t           resp_rdata,
  output logic            resp_hit,
  // lower level (L2)
  output logic            mem_req_valid,
  input  logic            mem_req_ready,
  output logic            mem_req_we,
  output laddr_t          mem_req_addr,
  output line_t           mem_req_wdata,
  input  logic            mem_resp_valid,
  input  line_t           mem_resp_rdata,
  // invalidation from the lower level
  input  logic            inv_valid,
  output logic            inv_ready,
  input  laddr_t          inv_addr,
  // BUCLR instruction
  input  logic            buclr_valid,
  input  logic            buclr_priv,
  output logic            buclr_ready,
  output logic            buclr_fault,
  // resizing registers
  input  logic            csr_we,
  input  logic [1:0]      csr_addr,
  input  logic [SZ_W-1:0] csr_wdata,
  output logic [SZ_W-1:0] csr_rdata,
  // random generator reseed
  input  logic            seed_we,
  input  logic [31:0]     seed,
  // status
  output logic [SZ_W-1:0] bk_enabled,
  output logic [SZ_W-1:0] bk_target,
  output bc_events_t      events
);
  localparam int unsigned SI_W  = $clog2(L1_SETS);
  localparam int unsigned WY_W  = (L1_WAYS > 1) ? $clog2(L1_WAYS) : 1;
  localparam int unsigned TAG_W = LADDR_W - SI_W;

  if (HIT_LATENCY < 2) begin : g_bad_latency
    $error("HIT_LATENCY must be at least 2 (accept, lookup, respond)");
  end

  typedef enum logic [2:0] {
    S_IDLE, S_LOOKUP, S_HWAIT, S_MREQ, S_MWAIT, S_L1FILL, S_WB, S_BKFILL
  } state_t;

  state_t state_q, state_d;

  // latched request
  logic         r_we;
  laddr_t       r_laddr;
  logic [WSEL_W-1:0] r_wsel;
  word_t        r_wdata;
  be_t          r_be;
  lookup_case_t r_case;
  logic [BK_IW-1:0] r_bk_idx;
  logic [7:0]   cyc_q;
  line_t        fill_line_q;
  laddr_t       vic_laddr_q;
  line_t        vic_line_q;
  logic         resp_valid_q, resp_hit_q;
  word_t        resp_rdata_q;

  logic [SI_W-1:0]  r_index;
  logic [TAG_W-1:0] r_tag;
  assign r_index = r_laddr[SI_W-1:0];
  assign r_tag   = r_laddr[LADDR_W-1:SI_W];

  // ------------------------------------------------------------------
  // random source, resizing registers
  logic [31:0] rnd;
  bc_lfsr #(.SEED(RNG_SEED)) u_rng (
    .clk, .rst_n, .seed_we, .seed, .rnd
  );

  logic            access;
  logic            resize_pulse;
  logic [SZ_W-1:0] target_size;
  bc_resize_regs #(.N_LINES(BK_LINES), .MIN_RESET(BK_MIN), .MAX_RESET(BK_MAX)) u_regs (
    .clk, .rst_n, .access,
    .csr_we, .csr_addr, .csr_wdata, .csr_rdata,
    .rnd(rnd[31:16]), .target_size, .resize(resize_pulse)
  );

  // ------------------------------------------------------------------
  // L1 data cache arrays
  logic             l1_hit;
  logic [WY_W-1:0]  l1_way, l1_vic_way, l1_rd_way;
  logic [TAG_W-1:0] l1_rd_tag;
  coh_t             l1_rd_coh;
  line_t            l1_rd_line;
  logic             l1_wr, l1_touch, l1_fill, l1_fill_dirty;
  line_t            l1_fill_line;

  bc_l1d #(.SETS(L1_SETS), .WAYS(L1_WAYS)) u_l1d (
    .clk, .rst_n,
    .lk_index(r_index), .lk_tag(r_tag), .lk_hit(l1_hit), .lk_way(l1_way), .vic_way(l1_vic_way),
    .rd_index(r_index), .rd_way(l1_rd_way), .rd_tag(l1_rd_tag), .rd_coh(l1_rd_coh), .rd_line(l1_rd_line),
    .wr_valid(l1_wr), .wr_index(r_index), .wr_way(l1_way), .wr_wsel(r_wsel), .wr_data(r_wdata), .wr_be(r_be),
    .touch_valid(l1_touch), .touch_index(r_index), .touch_way(l1_way),
    .fill_valid(l1_fill), .fill_index(r_index), .fill_way(l1_vic_way), .fill_tag(r_tag),
    .fill_dirty(l1_fill_dirty), .fill_line(l1_fill_line),
    .inv_valid(inv_valid && inv_ready), .inv_index(inv_addr[SI_W-1:0]), .inv_tag(inv_addr[LADDR_W-1:SI_W])
  );

  // ------------------------------------------------------------------
  // backup cache
  logic             bk_hit;
  logic [BK_IW-1:0] bk_idx, bk_rd_idx;
  line_t            bk_rd_line;
  logic             bk_upd, bk_fill, bk_found, bk_merge, bk_repl_valid, bk_repl_used;
  logic             bk_step, bk_grow, bk_shrink, bk_buclr;

  bc_backup_cache #(.N(BK_LINES)) u_bk (
    .clk, .rst_n, .rnd(rnd[BK_IW-1:0]),
    .lk_tag(r_laddr), .lk_hit(bk_hit), .lk_idx(bk_idx),
    .rd_idx(bk_rd_idx), .rd_line(bk_rd_line),
    .upd_valid(bk_upd), .upd_idx(bk_idx), .upd_we(r_we), .upd_wsel(r_wsel), .upd_wdata(r_wdata), .upd_be(r_be),
    .fill_valid(bk_fill), .fill_tag(vic_laddr_q), .fill_line(vic_line_q),
    .fill_found(bk_found), .fill_merge(bk_merge), .fill_repl_valid(bk_repl_valid), .fill_repl_used(bk_repl_used),
    .inv_valid(inv_valid && inv_ready), .inv_tag(inv_addr),
    .buclr(bk_buclr),
    .target_size, .step_en(bk_step), .n_enabled(bk_enabled), .grow(bk_grow), .shrink(bk_shrink),
    .valid_o(), .used_o(), .enabled_o()
  );

  // ------------------------------------------------------------------
  // control
  logic  idle, accept, lk_any_hit, hit_due;
  word_t hit_word;
  line_t mem_merged;

  always_comb begin
    idle        = (state_q == S_IDLE);
    inv_ready   = idle;
    buclr_ready = idle;
    req_ready   = idle && !inv_valid && !buclr_valid;
    accept      = req_valid && req_ready;
    access      = accept;
    bk_buclr    = buclr_valid && buclr_ready && buclr_priv;
    buclr_fault = buclr_valid && buclr_ready && !buclr_priv;
    bk_step     = idle;

    lk_any_hit  = l1_hit || bk_hit;
    hit_due     = (32'(cyc_q) >= HIT_LATENCY - 1);

    // data mux: the L1D copy wins when both hit (they are equal)
    l1_rd_way  = (state_q == S_L1FILL) ? l1_vic_way : l1_way;
    bk_rd_idx  = (state_q == S_LOOKUP) ? bk_idx : r_bk_idx;
    hit_word   = l1_hit ? l1_rd_line[int'(r_wsel)*WORD_W +: WORD_W]
                        : bk_rd_line[int'(r_wsel)*WORD_W +: WORD_W];

    // store merged into the line returned by the lower level
    mem_merged = mem_resp_rdata;
    for (int b = 0; b < int'(WORD_BYTES); b++)
      if (r_we && r_be[b]) mem_merged[int'(r_wsel)*WORD_W + b*8 +: 8] = r_wdata[b*8 +: 8];

    l1_wr    = (state_q == S_LOOKUP) && l1_hit && r_we;
    l1_touch = (state_q == S_LOOKUP) && l1_hit;
    bk_upd   = (state_q == S_LOOKUP) && bk_hit;
    l1_fill  = (state_q == S_L1FILL);
    l1_fill_dirty = r_we;
    l1_fill_line  = (r_case == CASE_01) ? bk_rd_line : fill_line_q;
    bk_fill  = (state_q == S_BKFILL);

    mem_req_valid = (state_q == S_MREQ) || (state_q == S_WB);
    mem_req_we    = (state_q == S_WB);
    mem_req_addr  = (state_q == S_WB) ? vic_laddr_q : r_laddr;
    mem_req_wdata = vic_line_q;
  end

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_IDLE:   if (accept) state_d = S_LOOKUP;
      S_LOOKUP: if (!lk_any_hit)     state_d = S_MREQ;
                else if (!hit_due)   state_d = S_HWAIT;
                else                 state_d = l1_hit ? S_IDLE : S_L1FILL;
      S_HWAIT:  if (hit_due)         state_d = (r_case == CASE_01) ? S_L1FILL : S_IDLE;
      S_MREQ:   if (mem_req_ready)   state_d = S_MWAIT;
      S_MWAIT:  if (mem_resp_valid)  state_d = S_L1FILL;
      S_L1FILL: if (l1_rd_coh == COH_INVALID) state_d = S_IDLE;
                else if (l1_rd_coh == COH_DIRTY) state_d = S_WB;
                else                 state_d = S_BKFILL;
      S_WB:     if (mem_req_ready)   state_d = S_BKFILL;
      S_BKFILL:                      state_d = S_IDLE;
      default:                       state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      r_we         <= 1'b0;
      r_laddr      <= '0;
      r_wsel       <= '0;
      r_wdata      <= '0;
      r_be         <= '0;
      r_case       <= CASE_00;
      r_bk_idx     <= '0;
      cyc_q        <= '0;
      fill_line_q  <= '0;
      vic_laddr_q  <= '0;
      vic_line_q   <= '0;
      resp_valid_q <= 1'b0;
      resp_hit_q   <= 1'b0;
      resp_rdata_q <= '0;
    end else begin
      state_q      <= state_d;
      resp_valid_q <= 1'b0;
      if (cyc_q != 8'hFF) cyc_q <= cyc_q + 1'b1;
      unique case (state_q)
        S_IDLE: if (accept) begin
          r_we    <= req_we;
          r_laddr <= req_addr[ADDR_W-1:OFFSET_W];
          r_wsel  <= req_addr[OFFSET_W-1:OFFSET_W-WSEL_W];
          r_wdata <= req_wdata;
          r_be    <= req_be;
          cyc_q   <= 8'd1;
        end
        S_LOOKUP: begin
          r_case       <= lookup_case_t'({l1_hit, bk_hit});
          r_bk_idx     <= bk_idx;
          resp_rdata_q <= hit_word;
          resp_hit_q   <= lk_any_hit;
          if (lk_any_hit && hit_due) resp_valid_q <= 1'b1;
        end
        S_HWAIT: if (hit_due) resp_valid_q <= 1'b1;
        S_MWAIT: if (mem_resp_valid) begin
          fill_line_q  <= mem_merged;
          resp_rdata_q <= mem_resp_rdata[int'(r_wsel)*WORD_W +: WORD_W];
          resp_hit_q   <= 1'b0;
          resp_valid_q <= 1'b1;
        end
        S_L1FILL: begin
          vic_laddr_q <= {l1_rd_tag, r_index};
          vic_line_q  <= l1_rd_line;
        end
        default: ;
      endcase
    end
  end

  assign resp_valid = resp_valid_q;
  assign resp_rdata = resp_rdata_q;
  assign resp_hit   = resp_hit_q;

  // events
  always_comb begin
    events = '0;
    events.lookup         = (state_q == S_LOOKUP);
    events.lcase          = lookup_case_t'({l1_hit, bk_hit});
    events.l1_evict       = (state_q == S_L1FILL) && (l1_rd_coh != COH_INVALID);
    events.writeback      = (state_q == S_WB) && mem_req_ready;
    events.bk_fill        = bk_fill && bk_found;
    events.bk_merge       = bk_fill && bk_merge;
    events.bk_repl_used   = bk_fill && bk_repl_valid && bk_repl_used;
    events.bk_repl_unused = bk_fill && bk_repl_valid && !bk_repl_used;
    events.bk_drop        = bk_fill && !bk_found;
    events.resize         = resize_pulse;
    events.grow           = bk_grow;
    events.shrink         = bk_shrink;
    events.invalidate     = inv_valid && inv_ready;
    events.buclr          = bk_buclr;
  end

  assign bk_target = target_size;

  // handshake rules
  a_resp_one_outstanding: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid |-> !idle || !$past(idle));
  a_mem_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_we));

endmodule
