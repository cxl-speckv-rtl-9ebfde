// prefetch_ctrl: the speculative prefetch controller (Algorithm 1) and the
// synchronous fetch path used when a speculation missed.
//
// Hint flow. When the GPU generates token t of request r at layer l and
// position p it sends a hint (r, l, p, token, history of the last HIST
// tokens). The controller
//   1. scores the previous prediction for r: a hit if the new token is one of
//      the BEAM tokens predicted last time; hits raise and misses lower the
//      request's depth k (adaptive depth, powers of two K_MIN..K_MAX,
//      starting at K_DEF; k doubles after STREAK_UP hits in a row and
//      halves on a miss);
//   2. sends the history to the external predictor and stores its BEAM
//      answers for the next scoring;
//   3. scales k by the throttle beta (Q8, from the policy engine), bounds it
//      by k_cap (the policy engine's bandit choice), and for
//      layers l .. l+DEPTH-1 and positions p+1 .. p+k: translates the entry
//      (skipped if unmapped), asks the L2 directory to allocate it (skipped
//      if already present) and issues a DMA read descriptor into the
//      allocated L2 slot, without waiting for the data;
//   4. waits until every issued page has completed and notifies the GPU
//      (notify_* with the number of pages fetched).
// Demand flow. A demand fetch (an L2 miss the GPU must wait for) is
// translated, allocated and read the same way and answered on dm_rsp_* once
// its page has arrived. Demand fetches are taken before new hints.
// Completions. Every rd_done of an engine is turned into a DIR_FILL of its
// slot; one pending completion is held per engine.
//
// Interfaces: valid/ready handshakes; translation, directory and predictor
// answer with a *_rsp_valid pulse, one request in flight each. Engine
// selection for tr/rd is done outside, by the entry address.
// Timing: a hint costs ~4 cycles + predictor latency + ~12 cycles per entry
// to issue, then the DMA time of the pages.
//
// Follows the paper: Algorithm 1 (history, predictor, k entries over the
// next layers, skip present entries, non-blocking issue, notify), adaptive
// k from prediction accuracy, throttle beta scaling the prefetch amount,
// fallback synchronous fetch on a miss, multi-layer lookahead of 2 layers.
// Own choices: the k adaptation rule, one hint in progress at a time, the
// predictor sitting outside the chip behind a port.
module prefetch_ctrl
  import speckv_pkg::*;
#(
  parameter int unsigned N_ENG     = 1,
  parameter int unsigned TOK_W     = 18,   // vocabularies up to 256K tokens
  parameter int unsigned HIST      = 16,   // history length (paper)
  parameter int unsigned BEAM      = 4,    // top-4 accuracy (paper)
  parameter int unsigned DEPTH     = 3,    // layers l, l+1, l+2 (paper)
  parameter int unsigned N_LAYERS  = 80,   // LLaMA-2 70B
  parameter int unsigned K_DEF     = 4,    // default k (paper)
  parameter int unsigned K_MIN     = 1,
  parameter int unsigned K_MAX     = 16,
  parameter int unsigned STREAK_UP = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // hints from the GPU
  input  logic              hint_valid,
  output logic              hint_ready,
  input  vaddr_t            hint_va,
  input  logic [TOK_W-1:0]  hint_tok,
  input  logic [TOK_W-1:0]  hint_hist [HIST],
  // external predictor
  output logic              pred_req_valid,
  input  logic              pred_req_ready,
  output logic [TOK_W-1:0]  pred_req_hist [HIST],
  input  logic              pred_rsp_valid,
  input  logic [TOK_W-1:0]  pred_rsp_tok [BEAM],
  // throttle, Q8 (256 = 1.0)
  input  logic [8:0]        beta,
  // upper bound on k from the depth bandit
  input  logic [4:0]        k_cap,
  // demand fetches
  input  logic              dm_valid,
  output logic              dm_ready,
  input  vaddr_t            dm_va,
  output logic              dm_rsp_valid,
  output logic              dm_rsp_ok,
  output logic [SLOT_W-1:0] dm_rsp_slot,
  // GPU notification
  output logic              notify_valid,
  output vaddr_t            notify_va,
  output logic [7:0]        notify_pages,
  // translation (engine chosen outside by tr_req_va)
  output logic              tr_req_valid,
  input  logic              tr_req_ready,
  output vaddr_t            tr_req_va,
  input  logic              tr_rsp_valid,
  input  pte_t              tr_rsp_pte,
  // L2 directory
  output logic              dir_op_valid,
  input  logic              dir_op_ready,
  output dir_op_e           dir_op,
  output vaddr_t            dir_op_va,
  output logic [SLOT_W-1:0] dir_op_slot,
  input  logic              dir_rsp_valid,
  input  logic              dir_rsp_hit,
  input  logic [SLOT_W-1:0] dir_rsp_slot,
  // page reads (engine chosen outside by rd_va)
  output logic              rd_valid,
  input  logic              rd_ready,
  output rd_desc_t          rd_desc,
  output vaddr_t            rd_va,
  input  logic [N_ENG-1:0]  rd_done,
  input  logic [SLOT_W-1:0] rd_done_slot [N_ENG],
  // statistics
  output logic [31:0]       n_hints,
  output logic [31:0]       n_pred_hit,
  output logic [31:0]       n_pred_miss,
  output logic [31:0]       n_issued,
  output logic [31:0]       n_skip_present,
  output logic [31:0]       n_skip_unmapped,
  output logic [31:0]       n_demand,
  output logic [31:0]       n_k_up,
  output logic [31:0]       n_k_down,
  output logic [4:0]        k_last
);

  localparam int unsigned NREQ = 1 << REQ_W;
  localparam int unsigned KE_W = 3;
  localparam logic [KE_W-1:0] KE_DEF = KE_W'($clog2(K_DEF));
  localparam logic [KE_W-1:0] KE_MIN = KE_W'($clog2(K_MIN));
  localparam logic [KE_W-1:0] KE_MAX = KE_W'($clog2(K_MAX));

  // ---------------- per-request prediction state ----------------
  logic [NREQ-1:0]   rq_valid;          // request has a stored prediction
  logic [TOK_W-1:0]  rq_pred [NREQ][BEAM];
  logic [KE_W-1:0]   rq_kexp [NREQ];
  logic [3:0]        rq_streak [NREQ];

  // ---------------- main FSM ----------------
  typedef enum logic [3:0] {
    S_IDLE, S_PRED_REQ, S_PRED_WAIT, S_NEXT, S_TR, S_TR_WAIT,
    S_DIR, S_DIR_WAIT, S_RD, S_WAIT, S_NOTIFY, S_DM_WAIT
  } state_e;
  state_e st;

  logic              demand;          // current flow is a demand fetch
  vaddr_t            hv;              // hint / demand address
  logic [TOK_W-1:0]  hist [HIST];
  logic [4:0]        k;               // effective depth of this hint
  logic [1:0]        lo;              // layer offset
  logic [4:0]        i;               // position offset 1..k
  vaddr_t            cur;             // entry being processed
  pte_t              cpte;
  logic [SLOT_W-1:0] cslot;
  logic [7:0]        issued, done;
  logic              main_dir;        // directory answer belongs to main FSM

  // completions
  logic [N_ENG-1:0]  fpend;
  logic [SLOT_W-1:0] fslot [N_ENG];
  logic              fill_busy;       // a DIR_FILL is in the directory
  logic [$clog2(N_ENG+1)-1:0] fsel;
  logic              fany;
  logic [7:0]        ndone;

  always_comb begin
    fany = 1'b0; fsel = '0;
    for (int e = N_ENG - 1; e >= 0; e--)
      if (fpend[e]) begin fany = 1'b1; fsel = ($clog2(N_ENG+1))'(e); end
    ndone = '0;
    for (int e = 0; e < N_ENG; e++) ndone += 8'(rd_done[e]);
  end

  // next (lo, i) and whether it exists
  function automatic logic entry_ok(input vaddr_t base, input logic [1:0] l_off,
                                    input logic [4:0] p_off);
    return (32'(base.layer) + 32'(l_off) < N_LAYERS) &&
           (32'(base.pos) + 32'(p_off) < (1 << POS_W));
  endfunction

  assign hint_ready = (st == S_IDLE) && !dm_valid;
  assign dm_ready   = (st == S_IDLE);

  assign pred_req_valid = (st == S_PRED_REQ);
  always_comb for (int h = 0; h < HIST; h++) pred_req_hist[h] = hist[h];

  assign tr_req_valid = (st == S_TR);
  assign tr_req_va    = cur;

  // directory port: main FSM in S_DIR, else completion fills
  logic main_wants_dir;
  assign main_wants_dir = (st == S_DIR);
  assign dir_op_valid = main_wants_dir || (fany && !fill_busy && st != S_DIR_WAIT);
  assign dir_op       = main_wants_dir ? DIR_ALLOC : DIR_FILL;
  assign dir_op_va    = cur;
  assign dir_op_slot  = fslot[fsel];

  assign rd_valid = (st == S_RD);
  assign rd_desc  = '{pte: cpte, slot: cslot};
  assign rd_va    = cur;

  logic pred_hit;
  always_comb begin
    pred_hit = 1'b0;
    for (int b = 0; b < BEAM; b++) if (rq_pred[hint_va.req][b] == hint_tok) pred_hit = 1'b1;
  end

  logic [KE_W-1:0] kexp_now;
  assign kexp_now = rq_kexp[hv.req];
  logic [13:0] kscaled;
  assign kscaled = (14'(1) << kexp_now) * 14'(beta);

  logic dir_fire;
  assign dir_fire = dir_op_valid && dir_op_ready;

  always_ff @(posedge clk) begin
    if (st == S_IDLE && hint_valid && hint_ready) begin
      for (int h = 0; h < HIST - 1; h++) hist[h] <= hint_hist[h + 1];
      hist[HIST-1] <= hint_tok;
      if (rq_valid[hint_va.req]) begin
        rq_streak[hint_va.req] <= pred_hit ? rq_streak[hint_va.req] + 4'd1 : 4'd0;
        if (pred_hit && rq_streak[hint_va.req] == 4'(STREAK_UP - 1)) begin
          rq_streak[hint_va.req] <= 4'd0;
          if (rq_kexp[hint_va.req] < KE_MAX) rq_kexp[hint_va.req] <= rq_kexp[hint_va.req] + 1'b1;
        end
        if (!pred_hit && rq_kexp[hint_va.req] > KE_MIN) rq_kexp[hint_va.req] <= rq_kexp[hint_va.req] - 1'b1;
      end else begin
        rq_kexp[hint_va.req]   <= KE_DEF;
        rq_streak[hint_va.req] <= 4'd0;
      end
    end
    if (st == S_PRED_WAIT && pred_rsp_valid)
      for (int b = 0; b < BEAM; b++) rq_pred[hv.req][b] <= pred_rsp_tok[b];
    for (int e = 0; e < N_ENG; e++)
      if (rd_done[e]) fslot[e] <= rd_done_slot[e];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; demand <= 1'b0; hv <= '0; k <= '0; lo <= '0; i <= '0; cur <= '0;
      cpte <= '0; cslot <= '0; issued <= '0; done <= '0; main_dir <= 1'b0;
      rq_valid <= '0; fpend <= '0; fill_busy <= 1'b0;
      dm_rsp_valid <= 1'b0; dm_rsp_ok <= 1'b0; dm_rsp_slot <= '0;
      notify_valid <= 1'b0; notify_va <= '0; notify_pages <= '0;
      n_hints <= '0; n_pred_hit <= '0; n_pred_miss <= '0; n_issued <= '0;
      n_skip_present <= '0; n_skip_unmapped <= '0; n_demand <= '0;
      n_k_up <= '0; n_k_down <= '0; k_last <= '0;
    end else begin
      dm_rsp_valid <= 1'b0;
      notify_valid <= 1'b0;
      done <= done + ndone;
      // completions -> directory fills
      for (int e = 0; e < N_ENG; e++) if (rd_done[e]) fpend[e] <= 1'b1;
      if (dir_fire && !main_wants_dir) begin
        fill_busy <= 1'b1;
        fpend[fsel] <= rd_done[fsel];
      end
      if (dir_rsp_valid && !main_dir) fill_busy <= 1'b0;
      if (dir_rsp_valid && main_dir) main_dir <= 1'b0;

      case (st)
        S_IDLE: begin
          issued <= '0;
          done   <= ndone;
          if (dm_valid) begin
            demand <= 1'b1; hv <= dm_va; cur <= dm_va;
            n_demand <= n_demand + 1;
            st <= S_TR;
          end else if (hint_valid) begin
            demand <= 1'b0; hv <= hint_va;
            n_hints <= n_hints + 1;
            rq_valid[hint_va.req] <= 1'b1;
            if (rq_valid[hint_va.req]) begin
              if (pred_hit) n_pred_hit <= n_pred_hit + 1;
              else n_pred_miss <= n_pred_miss + 1;
              if (pred_hit && rq_streak[hint_va.req] == 4'(STREAK_UP - 1) && rq_kexp[hint_va.req] < KE_MAX)
                n_k_up <= n_k_up + 1;
              if (!pred_hit && rq_kexp[hint_va.req] > KE_MIN) n_k_down <= n_k_down + 1;
            end
            st <= S_PRED_REQ;
          end
        end
        S_PRED_REQ: if (pred_req_ready) st <= S_PRED_WAIT;
        S_PRED_WAIT: if (pred_rsp_valid) begin
          // depth for this hint: k * beta, at least 1
          k  <= (kscaled[13:8] == '0) ? 5'd1 :
                (kscaled[13:8] > 6'(k_cap)) ? ((k_cap == '0) ? 5'd1 : k_cap) : kscaled[12:8];
          lo <= 2'd0;
          i  <= 5'd1;
          st <= S_NEXT;
        end
        S_NEXT: begin
          k_last <= k;
          if (32'(lo) >= DEPTH) st <= S_WAIT;
          else if (i > k || !entry_ok(hv, lo, i)) begin
            lo <= lo + 2'd1; i <= 5'd1;
          end else begin
            cur <= '{req: hv.req, layer: hv.layer + LAYER_W'(lo), pos: hv.pos + POS_W'(i)};
            i <= i + 5'd1;
            st <= S_TR;
          end
        end
        S_TR: if (tr_req_ready) st <= S_TR_WAIT;
        S_TR_WAIT: if (tr_rsp_valid) begin
          cpte <= tr_rsp_pte;
          if (!tr_rsp_pte.valid) begin
            if (demand) begin
              dm_rsp_valid <= 1'b1; dm_rsp_ok <= 1'b0; st <= S_IDLE;
            end else begin
              n_skip_unmapped <= n_skip_unmapped + 1;
              st <= S_NEXT;
            end
          end else st <= S_DIR;
        end
        S_DIR: if (dir_op_ready) begin main_dir <= 1'b1; st <= S_DIR_WAIT; end
        S_DIR_WAIT: if (dir_rsp_valid) begin
          cslot <= dir_rsp_slot;
          if (dir_rsp_hit && !demand) begin
            n_skip_present <= n_skip_present + 1;
            st <= S_NEXT;
          end else st <= S_RD;
        end
        S_RD: if (rd_ready) begin
          if (demand) begin
            done <= ndone;
            st <= S_DM_WAIT;
          end else begin
            issued <= issued + 8'd1;
            n_issued <= n_issued + 1;
            st <= S_NEXT;
          end
        end
        S_WAIT: if (done >= issued && !fany && !fill_busy) st <= S_NOTIFY;
        S_NOTIFY: begin
          notify_valid <= 1'b1; notify_va <= hv; notify_pages <= issued;
          st <= S_IDLE;
        end
        default: if (done != '0 && !fany && !fill_busy) begin     // S_DM_WAIT
          dm_rsp_valid <= 1'b1; dm_rsp_ok <= 1'b1; dm_rsp_slot <= cslot;
          st <= S_IDLE;
        end
      endcase
    end
  end

  // one completion held per engine: a second one before its fill is an error
  a_fill: assert property (@(posedge clk) disable iff (!rst_n)
    !(|(rd_done & fpend & ~((dir_fire && !main_wants_dir) ? (N_ENG'(1) << fsel) : '0))));

endmodule
