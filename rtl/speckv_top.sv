// speckv_top: the FPGA side of the disaggregated speculative KV-cache.
//
// Contents: N_ENG cache engines (translation, compression, decompression,
// page DMA), a memory controller shared by the engines in front of the 16
// HBM channels, the speculative prefetch controller, the L2 prefetch
// directory, the CXL home-agent coherence directory, the hot/cold page
// tracker and the policy engine.
//
// GPU / host side (CXL link):
//   hint_*     token hints: (request, layer, position, token, history)
//   gr_*       GPU reads that missed L1; answer gr_rsp_* (L2 / MEM / OWNED
//              / ERR and the L2 slot holding the page)
//   gw_*       GPU writes of entries (invalidations)
//   wb_req_*   writeback requests to the GPU
//   wr_desc_*, hw_*   page writes (writebacks and new pages): descriptor
//              then 64 beats of FP16 data; with mode_auto the policy
//              engine picks the compression mode by layer
//   out_*      page data going to the GPU's L2 buffer, per engine
//   notify_*   prefetch completion notices
//   ev_*       promote / demote advice from the page tracker
//   inv_*      translation invalidation; cfg_* policy registers
// Predictor side: pred_req_* / pred_rsp_* to the token predictor, which is
// not part of this design.
// Memory side: 16 HBM channel ports (ch_*).
//
// Entries are split across engines by request id (disjoint address
// partitions); each engine's TLB caches the translations of its partition,
// the page table itself is shared in memory. The directory port is shared
// by the prefetch controller and the coherence directory (coherence first).
// Page-write completions become writeback completions for the coherence
// directory. Link-busy (beats crossing the link) feeds the throttle;
// link-idle (no DMA reads in flight, no hint waiting) lets writebacks go.
// Every token hint is a token tick for the page tracker; GPU reads are its
// accesses; miss_high is set when more than a quarter of the last 256 GPU
// reads went to CXL memory. Prediction outcomes are the bandit's rewards.
//
// stat[]: 0 hints, 1 predictions right, 2 predictions wrong, 3 prefetch
// pages issued, 4 skipped (already in L2), 5 skipped (unmapped), 6 demand
// fetches, 7 k raised, 8 k lowered, 9/10 directory demand hits/misses,
// 11 fills, 12 entries dropped unused, 13 GPU reads served from L2, 14 from
// CXL memory, 15 owned by the GPU, 16 invalidations, 17 writebacks
// requested, 18 promotions, 19 demotions, 20 throttle steps, 21 bandit
// switches, 22 {util, th_hot, th_cold, owned entries}, 23 {weight of
// engine 0, last k}.
//
// Follows the paper's architecture (engines, controller, prefetcher, L2,
// home agent, policies, 16-channel HBM). Own choices: how the engines are
// selected, the shared directory port, the sources of the policy inputs.
module speckv_top
  import speckv_pkg::*;
#(
  parameter int unsigned N_ENG       = 1,
  parameter int unsigned TLB_ENTRIES = 64,
  parameter int unsigned DIR_SET_W   = L2_SET_W,
  parameter int unsigned TOK_W       = 18,
  parameter int unsigned HIST        = 16,
  parameter int unsigned BEAM        = 4,
  parameter int unsigned N_LAYERS    = 80,
  parameter logic [ADDR_W-1:0] PT_BASE = ADDR_W'(30'h3000_0000),
  parameter int unsigned N_STAT      = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  // token hints
  input  logic              hint_valid,
  output logic              hint_ready,
  input  vaddr_t            hint_va,
  input  logic [TOK_W-1:0]  hint_tok,
  input  logic [TOK_W-1:0]  hint_hist [HIST],
  // predictor
  output logic              pred_req_valid,
  input  logic              pred_req_ready,
  output logic [TOK_W-1:0]  pred_req_hist [HIST],
  input  logic              pred_rsp_valid,
  input  logic [TOK_W-1:0]  pred_rsp_tok [BEAM],
  output logic              notify_valid,
  output vaddr_t            notify_va,
  output logic [7:0]        notify_pages,
  // GPU reads and writes
  input  logic              gr_valid,
  output logic              gr_ready,
  input  vaddr_t            gr_va,
  output logic              gr_rsp_valid,
  output logic [1:0]        gr_rsp_src,
  output logic [SLOT_W-1:0] gr_rsp_slot,
  input  logic              gw_valid,
  output logic              gw_ready,
  input  vaddr_t            gw_va,
  output logic              wb_req_valid,
  input  logic              wb_req_ready,
  output vaddr_t            wb_req_va,
  // page writes
  input  logic              mode_auto,
  input  logic              wr_desc_valid,
  output logic              wr_desc_ready,
  input  wr_desc_t          wr_desc,
  input  logic              hw_valid,
  output logic              hw_ready,
  input  logic [W_DATA-1:0] hw_data,
  input  logic              hw_last,
  output logic              wr_done_valid,
  output vaddr_t            wr_done_va,
  output pte_t              wr_done_pte,
  // page data to the GPU L2 buffer
  output logic              out_valid  [N_ENG],
  input  logic              out_ready  [N_ENG],
  output logic [W_DATA-1:0] out_data   [N_ENG],
  output logic              out_last   [N_ENG],
  output logic [SLOT_W-1:0] out_slot   [N_ENG],
  output logic              out_bypass [N_ENG],
  // page tracker advice
  input  logic              mem_pressure,
  output logic              ev_valid,
  output logic              ev_promote,
  output vaddr_t            ev_va,
  // management
  input  logic              inv_valid,
  input  vaddr_t            inv_va,
  input  logic              cfg_valid,
  input  logic [5:0]        cfg_addr,
  input  logic [15:0]       cfg_data,
  // HBM channels
  output logic              ch_req_valid [N_CH],
  input  logic              ch_req_ready [N_CH],
  output ch_req_t           ch_req       [N_CH],
  input  logic              ch_rsp_valid [N_CH],
  output logic              ch_rsp_ready [N_CH],
  input  ch_rsp_t           ch_rsp       [N_CH],
  // status
  output logic [8:0]        beta,
  output logic [4:0]        k_sel,
  output logic [31:0]       tlb_hits,
  output logic [31:0]       tlb_misses,
  output logic [31:0]       stat [N_STAT]
);

  localparam int unsigned EW = (N_ENG > 1) ? $clog2(N_ENG) : 1;

  function automatic logic [EW-1:0] eng_of(input vaddr_t va);
    return EW'(32'(va.req) % N_ENG);
  endfunction

  // ---------------- engines ----------------
  logic      e_tr_req_valid [N_ENG], e_tr_req_ready [N_ENG];
  logic      e_tr_rsp_valid [N_ENG], e_tr_rsp_hit [N_ENG];
  pte_t      e_tr_rsp_pte   [N_ENG];
  logic      e_rd_valid [N_ENG], e_rd_ready [N_ENG];
  logic [N_ENG-1:0] e_rd_done;
  logic [SLOT_W-1:0] e_rd_done_slot [N_ENG];
  logic      e_wd_valid [N_ENG], e_wd_ready [N_ENG];
  logic      e_hw_valid [N_ENG], e_hw_ready [N_ENG];
  logic      e_wr_done [N_ENG];
  vaddr_t    e_wr_done_va [N_ENG];
  pte_t      e_wr_done_pte [N_ENG];
  logic      e_mreq_valid [N_ENG], e_mreq_ready [N_ENG], e_mrsp_valid [N_ENG];
  mem_req_t  e_mreq [N_ENG];
  mem_rsp_t  e_mrsp [N_ENG];
  logic [31:0] e_hits [N_ENG], e_misses [N_ENG];
  logic [4:0]  e_outst [N_ENG];
  logic [7:0]  e_weight [N_ENG];
  logic      e_inv [N_ENG];

  // prefetch controller <-> engines
  logic     pc_tr_valid, pc_tr_ready, pc_tr_rsp_valid;
  vaddr_t   pc_tr_va;
  pte_t     pc_tr_rsp_pte;
  logic     pc_rd_valid, pc_rd_ready;
  rd_desc_t pc_rd_desc;
  vaddr_t   pc_rd_va;

  // page-write descriptor with the chosen mode
  typedef enum logic [1:0] {WS_IDLE, WS_SEL, WS_SEND, WS_DATA} wstate_e;
  wstate_e  ws;
  wr_desc_t wd_q;
  logic [EW-1:0] wd_eng;
  logic     sel_valid, sel_rsp_valid;
  cmode_e   sel_mode;

  for (genvar e = 0; e < N_ENG; e++) begin : g_eng
    assign e_tr_req_valid[e] = pc_tr_valid && eng_of(pc_tr_va) == EW'(e);
    assign e_rd_valid[e]     = pc_rd_valid && eng_of(pc_rd_va) == EW'(e);
    assign e_wd_valid[e]     = (ws == WS_SEND) && wd_eng == EW'(e);
    assign e_hw_valid[e]     = (ws == WS_DATA) && hw_valid && wd_eng == EW'(e);
    assign e_inv[e]          = inv_valid && eng_of(inv_va) == EW'(e);

    cache_engine #(.TLB_ENTRIES(TLB_ENTRIES), .PT_BASE(PT_BASE)) u_eng (
      .clk, .rst_n,
      .tr_req_valid(e_tr_req_valid[e]), .tr_req_ready(e_tr_req_ready[e]), .tr_req_va(pc_tr_va),
      .tr_rsp_valid(e_tr_rsp_valid[e]), .tr_rsp_pte(e_tr_rsp_pte[e]), .tr_rsp_hit(e_tr_rsp_hit[e]),
      .inv_valid(e_inv[e]), .inv_va,
      .rd_desc_valid(e_rd_valid[e]), .rd_desc_ready(e_rd_ready[e]), .rd_desc(pc_rd_desc),
      .out_valid(out_valid[e]), .out_ready(out_ready[e]), .out_data(out_data[e]),
      .out_last(out_last[e]), .out_slot(out_slot[e]), .out_bypass(out_bypass[e]),
      .rd_done(e_rd_done[e]), .rd_done_slot(e_rd_done_slot[e]),
      .wr_desc_valid(e_wd_valid[e]), .wr_desc_ready(e_wd_ready[e]), .wr_desc(wd_q),
      .hw_valid(e_hw_valid[e]), .hw_ready(e_hw_ready[e]), .hw_data, .hw_last,
      .wr_done(e_wr_done[e]), .wr_done_va(e_wr_done_va[e]), .wr_done_pte(e_wr_done_pte[e]),
      .mem_req_valid(e_mreq_valid[e]), .mem_req_ready(e_mreq_ready[e]), .mem_req(e_mreq[e]),
      .mem_rsp_valid(e_mrsp_valid[e]), .mem_rsp(e_mrsp[e]),
      .tlb_hits(e_hits[e]), .tlb_misses(e_misses[e]), .dma_outstanding(e_outst[e])
    );
  end

  always_comb begin
    pc_tr_ready = 1'b0; pc_rd_ready = 1'b0; pc_tr_rsp_valid = 1'b0; pc_tr_rsp_pte = '0;
    tlb_hits = '0; tlb_misses = '0;
    for (int e = 0; e < N_ENG; e++) begin
      if (eng_of(pc_tr_va) == EW'(e)) pc_tr_ready = e_tr_req_ready[e];
      if (eng_of(pc_rd_va) == EW'(e)) pc_rd_ready = e_rd_ready[e];
      if (e_tr_rsp_valid[e]) begin pc_tr_rsp_valid = 1'b1; pc_tr_rsp_pte = e_tr_rsp_pte[e]; end
      tlb_hits   += e_hits[e];
      tlb_misses += e_misses[e];
    end
  end

  // ---------------- shared memory controller ----------------
  mem_ctrl #(.N_CLI(N_ENG)) u_mc (
    .clk, .rst_n,
    .c_req_valid(e_mreq_valid), .c_req_ready(e_mreq_ready), .c_req(e_mreq),
    .c_rsp_valid(e_mrsp_valid), .c_rsp(e_mrsp),
    .ch_req_valid, .ch_req_ready, .ch_req, .ch_rsp_valid, .ch_rsp_ready, .ch_rsp,
    .weight(e_weight)
  );

  // ---------------- page writes ----------------
  assign wr_desc_ready = (ws == WS_IDLE);
  assign sel_valid     = (ws == WS_IDLE) && wr_desc_valid && mode_auto;
  always_comb begin
    hw_ready = 1'b0;
    for (int e = 0; e < N_ENG; e++) if (wd_eng == EW'(e)) hw_ready = (ws == WS_DATA) && e_hw_ready[e];
  end
  logic wd_ready_sel;
  always_comb begin
    wd_ready_sel = 1'b0;
    for (int e = 0; e < N_ENG; e++) if (wd_eng == EW'(e)) wd_ready_sel = e_wd_ready[e];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= WS_IDLE; wd_q <= '0; wd_eng <= '0;
    end else begin
      case (ws)
        WS_IDLE: if (wr_desc_valid) begin
          wd_q <= wr_desc; wd_eng <= eng_of(wr_desc.va);
          ws <= mode_auto ? WS_SEL : WS_SEND;
        end
        WS_SEL: if (sel_rsp_valid) begin wd_q.mode <= sel_mode; ws <= WS_SEND; end
        WS_SEND: if (wd_ready_sel) ws <= WS_DATA;
        default: if (hw_valid && hw_ready && hw_last) ws <= WS_IDLE;
      endcase
    end
  end

  // page-write completions: one held per engine, reported one per cycle
  logic [N_ENG-1:0] wp_pend;
  vaddr_t wp_va  [N_ENG];
  pte_t   wp_pte [N_ENG];
  logic   wp_any;
  logic [EW-1:0] wp_sel;
  always_comb begin
    wp_any = 1'b0; wp_sel = '0;
    for (int e = N_ENG - 1; e >= 0; e--) if (wp_pend[e]) begin wp_any = 1'b1; wp_sel = EW'(e); end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_pend <= '0; wr_done_valid <= 1'b0; wr_done_va <= '0; wr_done_pte <= '0;
      for (int e = 0; e < N_ENG; e++) begin wp_va[e] <= '0; wp_pte[e] <= '0; end
    end else begin
      wr_done_valid <= wp_any;
      if (wp_any) begin
        wr_done_va <= wp_va[wp_sel]; wr_done_pte <= wp_pte[wp_sel];
        wp_pend[wp_sel] <= 1'b0;
      end
      for (int e = 0; e < N_ENG; e++)
        if (e_wr_done[e]) begin wp_pend[e] <= 1'b1; wp_va[e] <= e_wr_done_va[e]; wp_pte[e] <= e_wr_done_pte[e]; end
    end
  end

  // ---------------- prefetch, directories ----------------
  logic     pc_dm_valid, pc_dm_ready, pc_dm_rsp_valid, pc_dm_rsp_ok;
  vaddr_t   pc_dm_va;
  logic [SLOT_W-1:0] pc_dm_rsp_slot;
  logic     pc_dir_valid, pc_dir_ready, cd_dir_valid, cd_dir_ready;
  dir_op_e  pc_dir_op, cd_dir_op;
  vaddr_t   pc_dir_va, cd_dir_va;
  logic [SLOT_W-1:0] pc_dir_slot;
  logic     d_op_valid, d_op_ready, d_rsp_valid, d_rsp_hit;
  dir_op_e  d_op;
  vaddr_t   d_op_va;
  logic [SLOT_W-1:0] d_op_slot, d_rsp_slot;
  logic     d_owner_cd;                  // answer in flight belongs to coherence
  logic [31:0] pc_n_pred_hit, pc_n_pred_miss;
  logic [31:0] pc_stat [7];
  logic [4:0]  pc_k_last;
  logic [31:0] d_use_hit, d_use_miss, d_fill, d_unused;
  logic [31:0] cd_stat [5];
  logic [$clog2(33)-1:0] cd_owned;
  logic     link_busy, link_idle, miss_high;
  logic     pt_ready, cd_rd_ready;
  logic [8:0] util;
  logic [31:0] n_throttle, n_k_switch;
  logic [31:0] n_promote, n_demote;
  logic [7:0]  th_hot, th_cold;

  prefetch_ctrl #(.N_ENG(N_ENG), .TOK_W(TOK_W), .HIST(HIST), .BEAM(BEAM), .N_LAYERS(N_LAYERS)) u_pf (
    .clk, .rst_n,
    .hint_valid, .hint_ready, .hint_va, .hint_tok, .hint_hist,
    .pred_req_valid, .pred_req_ready, .pred_req_hist, .pred_rsp_valid, .pred_rsp_tok,
    .beta, .k_cap(k_sel),
    .dm_valid(pc_dm_valid), .dm_ready(pc_dm_ready), .dm_va(pc_dm_va),
    .dm_rsp_valid(pc_dm_rsp_valid), .dm_rsp_ok(pc_dm_rsp_ok), .dm_rsp_slot(pc_dm_rsp_slot),
    .notify_valid, .notify_va, .notify_pages,
    .tr_req_valid(pc_tr_valid), .tr_req_ready(pc_tr_ready), .tr_req_va(pc_tr_va),
    .tr_rsp_valid(pc_tr_rsp_valid), .tr_rsp_pte(pc_tr_rsp_pte),
    .dir_op_valid(pc_dir_valid), .dir_op_ready(pc_dir_ready), .dir_op(pc_dir_op),
    .dir_op_va(pc_dir_va), .dir_op_slot(pc_dir_slot),
    .dir_rsp_valid(d_rsp_valid && !d_owner_cd), .dir_rsp_hit(d_rsp_hit), .dir_rsp_slot(d_rsp_slot),
    .rd_valid(pc_rd_valid), .rd_ready(pc_rd_ready), .rd_desc(pc_rd_desc), .rd_va(pc_rd_va),
    .rd_done(e_rd_done), .rd_done_slot(e_rd_done_slot),
    .n_hints(pc_stat[0]), .n_pred_hit(pc_n_pred_hit), .n_pred_miss(pc_n_pred_miss),
    .n_issued(pc_stat[1]), .n_skip_present(pc_stat[2]), .n_skip_unmapped(pc_stat[3]),
    .n_demand(pc_stat[4]), .n_k_up(pc_stat[5]), .n_k_down(pc_stat[6]), .k_last(pc_k_last)
  );

  // directory port: coherence first; the owner of an op gets its answer
  assign d_op_valid   = cd_dir_valid || pc_dir_valid;
  assign d_op         = cd_dir_valid ? cd_dir_op : pc_dir_op;
  assign d_op_va      = cd_dir_valid ? cd_dir_va : pc_dir_va;
  assign d_op_slot    = pc_dir_slot;
  assign cd_dir_ready = d_op_ready;
  assign pc_dir_ready = d_op_ready && !cd_dir_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) d_owner_cd <= 1'b0;
    else if (d_op_valid && d_op_ready) d_owner_cd <= cd_dir_valid;
  end

  prefetch_dir #(.SET_W(DIR_SET_W)) u_dir (
    .clk, .rst_n,
    .op_valid(d_op_valid), .op_ready(d_op_ready), .op(d_op), .op_va(d_op_va),
    .op_slot(d_op_slot[DIR_SET_W+1:0]),
    .rsp_valid(d_rsp_valid), .rsp_hit(d_rsp_hit), .rsp_slot(d_rsp_slot[DIR_SET_W+1:0]),
    .n_use_hit(d_use_hit), .n_use_miss(d_use_miss), .n_fill(d_fill), .n_unused_evict(d_unused)
  );
  if (DIR_SET_W + 2 < SLOT_W) begin : g_slot_pad
    assign d_rsp_slot[SLOT_W-1:DIR_SET_W+2] = '0;
  end

  coherence_dir u_coh (
    .clk, .rst_n,
    .rd_valid(gr_valid && pt_ready), .rd_ready(cd_rd_ready), .rd_va(gr_va),
    .rd_rsp_valid(gr_rsp_valid), .rd_rsp_src(gr_rsp_src), .rd_rsp_slot(gr_rsp_slot),
    .wr_valid(gw_valid), .wr_ready(gw_ready), .wr_va(gw_va),
    .link_idle, .wb_req_valid, .wb_req_ready, .wb_req_va,
    .wb_done_valid(wr_done_valid), .wb_done_va(wr_done_va),
    .dir_op_valid(cd_dir_valid), .dir_op_ready(cd_dir_ready), .dir_op(cd_dir_op), .dir_op_va(cd_dir_va),
    .dir_rsp_valid(d_rsp_valid && d_owner_cd), .dir_rsp_hit(d_rsp_hit), .dir_rsp_slot(d_rsp_slot),
    .dm_valid(pc_dm_valid), .dm_ready(pc_dm_ready), .dm_va(pc_dm_va),
    .dm_rsp_valid(pc_dm_rsp_valid), .dm_rsp_ok(pc_dm_rsp_ok), .dm_rsp_slot(pc_dm_rsp_slot),
    .n_l2_hit(cd_stat[0]), .n_mem_fetch(cd_stat[1]), .n_owned(cd_stat[2]),
    .n_inval(cd_stat[3]), .n_wb(cd_stat[4]), .owned_cnt(cd_owned)
  );

  // ---------------- page tracker ----------------
  logic [7:0] rd_win, miss_win;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_win <= '0; miss_win <= '0; miss_high <= 1'b0;
    end else if (gr_rsp_valid) begin
      rd_win   <= rd_win + 8'd1;
      miss_win <= (rd_win == 8'hff) ? 8'(gr_rsp_src == 2'd1) : miss_win + 8'(gr_rsp_src == 2'd1);
      if (rd_win == 8'hff) miss_high <= (miss_win > 8'd64);
    end
  end

  assign gr_ready = cd_rd_ready && pt_ready;
  page_tracker u_pt (
    .clk, .rst_n,
    .acc_valid(gr_valid && gr_ready), .acc_ready(pt_ready), .acc_va(gr_va),
    .token_tick(hint_valid && hint_ready), .mem_pressure, .miss_high,
    .ev_valid, .ev_promote, .ev_va, .th_hot, .th_cold, .n_promote, .n_demote
  );

  // ---------------- policy engine ----------------
  always_comb begin
    link_busy = hw_valid && hw_ready;
    link_idle = !hint_valid;
    for (int e = 0; e < N_ENG; e++) begin
      link_busy = link_busy || (out_valid[e] && out_ready[e]);
      link_idle = link_idle && (e_outst[e] == '0);
    end
  end

  logic [31:0] ph_q, pm_q;
  logic        rew_valid;
  logic [8:0]  rew_val;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q <= '0; pm_q <= '0; rew_valid <= 1'b0; rew_val <= '0;
    end else begin
      ph_q <= pc_n_pred_hit; pm_q <= pc_n_pred_miss;
      rew_valid <= (pc_n_pred_hit != ph_q) || (pc_n_pred_miss != pm_q);
      rew_val   <= (pc_n_pred_hit != ph_q) ? 9'd256 : 9'd0;
    end
  end

  policy_engine #(.N_LAYERS(N_LAYERS)) u_pol (
    .clk, .rst_n, .cfg_valid, .cfg_addr, .cfg_data,
    .link_busy, .beta, .util, .n_throttle,
    .sel_valid, .sel_layer(wr_desc.va.layer), .sel_rsp_valid, .sel_mode,
    .rew_valid, .rew_val, .k_sel, .n_k_switch
  );

  // ---------------- statistics ----------------
  always_comb begin
    for (int j = 0; j < N_STAT; j++) stat[j] = '0;
    stat[0] = pc_stat[0];  stat[1] = pc_n_pred_hit; stat[2] = pc_n_pred_miss;
    stat[3] = pc_stat[1];  stat[4] = pc_stat[2];    stat[5] = pc_stat[3];
    stat[6] = pc_stat[4];  stat[7] = pc_stat[5];    stat[8] = pc_stat[6];
    stat[9] = d_use_hit;   stat[10] = d_use_miss;   stat[11] = d_fill;  stat[12] = d_unused;
    stat[13] = cd_stat[0]; stat[14] = cd_stat[1];   stat[15] = cd_stat[2];
    stat[16] = cd_stat[3]; stat[17] = cd_stat[4];
    stat[18] = n_promote;  stat[19] = n_demote;     stat[20] = n_throttle; stat[21] = n_k_switch;
    stat[22] = {util, th_hot, th_cold, 7'(cd_owned)};
    stat[23] = {19'd0, e_weight[0], pc_k_last};
  end

endmodule
