// atu: address translation unit of the cache engine.
//
// Translates a virtual KV entry address (request id, layer, position), which
// is a virtual page number, into the page-table entry of its physical 4 KB
// page: physical page number plus how the page is stored (compression mode and
// stored length in words). A fully associative TLB of TLB_ENTRIES entries
// answers hits after L_HIT cycles. On a miss the page walker reads the entry
// from the page table in device memory (one entry per 512-bit word at
// PT_BASE + vpn) and refills the TLB, replacing entries round-robin; a walk
// takes L_WALK cycles when memory answers in time, longer otherwise.
//
// The update port is used after a page has been (re)written: it rewrites the
// entry in the TLB if present and writes it through to the page table. The
// invalidate port drops a TLB entry (page freed by software).
//
// Interface: one translation at a time, valid/ready request, a one-cycle
// rsp_valid pulse with the entry and whether it hit. mem_* is a simple
// request/response port (read data returns on mem_rsp_valid, writes get no
// response). Timing: request accepted in cycle n -> rsp_valid in cycle n+L_HIT
// on a hit, n+L_HIT+L_WALK on a miss with memory answering within L_WALK-1.
//
// Follows the paper: TLB plus page walk, L_walk = 15 cycles, the 4-cycle ATU
// term of the prefetch latency budget (taken as the TLB hit latency). Own
// choices: TLB size and replacement, page-table location and entry format,
// the blocking one-at-a-time organisation.
module atu
  import speckv_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 64,
  parameter int unsigned L_HIT       = 4,
  parameter int unsigned L_WALK      = 15,
  parameter logic [ADDR_W-1:0] PT_BASE = ADDR_W'(30'h3000_0000)
) (
  input  logic              clk,
  input  logic              rst_n,
  // translation
  input  logic              req_valid,
  output logic              req_ready,
  input  vaddr_t            req_va,
  output logic              rsp_valid,
  output pte_t              rsp_pte,
  output logic              rsp_hit,
  // entry update (write-through) and invalidation
  input  logic              upd_valid,
  output logic              upd_ready,
  input  vaddr_t            upd_va,
  input  pte_t              upd_pte,
  input  logic              inv_valid,
  input  vaddr_t            inv_va,
  // page-table memory port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [ADDR_W-1:0] mem_req_addr,
  output logic [W_DATA-1:0] mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  logic [W_DATA-1:0] mem_rsp_data,
  // statistics
  output logic [31:0]       n_hits,
  output logic [31:0]       n_misses
);

  localparam int IW = (TLB_ENTRIES > 1) ? $clog2(TLB_ENTRIES) : 1;

  logic [TLB_ENTRIES-1:0] tv;
  vaddr_t                 ttag [TLB_ENTRIES];
  pte_t                   tpte [TLB_ENTRIES];
  logic [IW-1:0]          rr;

  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_WALK_REQ, S_WALK_WAIT, S_UPD_WR} state_e;
  state_e      st;
  vaddr_t      va;
  pte_t        upte;
  logic [5:0]  timer;
  logic        got;
  pte_t        walked;

  // associative match on the registered address
  logic          hit;
  logic [IW-1:0] hit_idx;
  always_comb begin
    hit = 1'b0; hit_idx = '0;
    for (int i = 0; i < TLB_ENTRIES; i++)
      if (tv[i] && ttag[i] == va) begin hit = 1'b1; hit_idx = IW'(i); end
  end

  assign req_ready = (st == S_IDLE) && !upd_valid;
  assign upd_ready = (st == S_IDLE);

  assign mem_req_valid = (st == S_WALK_REQ) || (st == S_UPD_WR);
  assign mem_req_we    = (st == S_UPD_WR);
  assign mem_req_addr  = PT_BASE + ADDR_W'(va);
  assign mem_req_wdata = W_DATA'(upte);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; tv <= '0; rr <= '0; timer <= '0; got <= 1'b0;
      rsp_valid <= 1'b0; rsp_hit <= 1'b0; rsp_pte <= '0;
      n_hits <= '0; n_misses <= '0; va <= '0; upte <= '0; walked <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (inv_valid)
        for (int i = 0; i < TLB_ENTRIES; i++) if (ttag[i] == inv_va) tv[i] <= 1'b0;
      case (st)
        S_IDLE: begin
          if (upd_valid) begin
            va <= upd_va; upte <= upd_pte; st <= S_UPD_WR;
          end else if (req_valid) begin
            va <= req_va; timer <= 6'd2; st <= S_LOOK;
          end
        end
        S_LOOK: begin
          // the tag compare is spread over the L_HIT cycles
          if (timer >= 6'(L_HIT)) begin
            if (hit) begin
              rsp_valid <= 1'b1; rsp_hit <= 1'b1; rsp_pte <= tpte[hit_idx];
              n_hits <= n_hits + 1; st <= S_IDLE;
            end else begin
              n_misses <= n_misses + 1; timer <= 6'd1; got <= 1'b0; st <= S_WALK_REQ;
            end
          end else timer <= timer + 6'd1;
        end
        S_WALK_REQ: begin
          timer <= timer + 6'd1;
          if (mem_req_ready) st <= S_WALK_WAIT;
        end
        S_WALK_WAIT: begin
          if (mem_rsp_valid) begin got <= 1'b1; walked <= pte_t'(mem_rsp_data[$bits(pte_t)-1:0]); end
          if ((got || mem_rsp_valid) && timer >= 6'(L_WALK)) begin
            pte_t p;
            p = got ? walked : pte_t'(mem_rsp_data[$bits(pte_t)-1:0]);
            rsp_valid <= 1'b1; rsp_hit <= 1'b0; rsp_pte <= p;
            if (p.valid) begin
              tv[rr] <= 1'b1; ttag[rr] <= va; tpte[rr] <= p;
              rr <= (rr == IW'(TLB_ENTRIES - 1)) ? '0 : rr + 1'b1;
            end
            st <= S_IDLE;
          end else timer <= timer + 6'd1;
        end
        S_UPD_WR: begin
          if (mem_req_ready) begin
            for (int i = 0; i < TLB_ENTRIES; i++)
              if (tv[i] && ttag[i] == va) tpte[i] <= upte;
            st <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
