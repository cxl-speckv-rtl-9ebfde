// cache_engine: one FPGA KV-cache engine.
//
// Wires together the four per-engine modules: the address translation unit,
// the compression pipeline, the decompression pipeline and the page DMA
// engine, and merges their memory traffic into one memory-controller client.
//
//  host page write:  wr_desc (va, ppn, mode) + 64 beats -> DMA -> compressor
//                    -> DMA writes packed words -> new page-table entry is
//                    written through the ATU (TLB and page table in memory)
//  page read:        rd_desc (entry, slot) -> DMA reads words (<= 16 in
//                    flight) -> decompressor -> out_* beats tagged with slot
//  translation:      tr_* requests are answered by the ATU
//
// The ATU's page-table reads carry tag bit 4 and have priority on the memory
// port; responses are steered back by that bit. wr_done is also reported to
// the outside (it tells software the page's stored size).
// Follows the paper's module list for one engine; the memory controller and
// the prefetch logic are shared and live above it. Own choices: the port
// merge and the one-entry buffer for page-table updates.
module cache_engine
  import speckv_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 64,
  parameter logic [ADDR_W-1:0] PT_BASE = ADDR_W'(30'h3000_0000)
) (
  input  logic              clk,
  input  logic              rst_n,
  // translation
  input  logic              tr_req_valid,
  output logic              tr_req_ready,
  input  vaddr_t            tr_req_va,
  output logic              tr_rsp_valid,
  output pte_t              tr_rsp_pte,
  output logic              tr_rsp_hit,
  input  logic              inv_valid,
  input  vaddr_t            inv_va,
  // page reads
  input  logic              rd_desc_valid,
  output logic              rd_desc_ready,
  input  rd_desc_t          rd_desc,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [W_DATA-1:0] out_data,
  output logic              out_last,
  output logic [SLOT_W-1:0] out_slot,
  output logic              out_bypass,
  output logic              rd_done,
  output logic [SLOT_W-1:0] rd_done_slot,
  // page writes
  input  logic              wr_desc_valid,
  output logic              wr_desc_ready,
  input  wr_desc_t          wr_desc,
  input  logic              hw_valid,
  output logic              hw_ready,
  input  logic [W_DATA-1:0] hw_data,
  input  logic              hw_last,
  output logic              wr_done,
  output vaddr_t            wr_done_va,
  output pte_t              wr_done_pte,
  // memory-controller client port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_rsp_valid,
  input  mem_rsp_t          mem_rsp,
  // status
  output logic [31:0]       tlb_hits,
  output logic [31:0]       tlb_misses,
  output logic [4:0]        dma_outstanding
);

  // ---------------------------------------------------------------- ATU
  logic              a_mv, a_mr, a_we;
  logic [ADDR_W-1:0] a_addr;
  logic [W_DATA-1:0] a_wdata;
  logic              upd_v, upd_r;
  vaddr_t            upd_va;
  pte_t              upd_pte;

  atu #(.TLB_ENTRIES(TLB_ENTRIES), .PT_BASE(PT_BASE)) u_atu (
    .clk, .rst_n,
    .req_valid(tr_req_valid), .req_ready(tr_req_ready), .req_va(tr_req_va),
    .rsp_valid(tr_rsp_valid), .rsp_pte(tr_rsp_pte), .rsp_hit(tr_rsp_hit),
    .upd_valid(upd_v), .upd_ready(upd_r), .upd_va(upd_va), .upd_pte(upd_pte),
    .inv_valid, .inv_va,
    .mem_req_valid(a_mv), .mem_req_ready(a_mr), .mem_req_we(a_we),
    .mem_req_addr(a_addr), .mem_req_wdata(a_wdata),
    .mem_rsp_valid(mem_rsp_valid && mem_rsp.tag[4]), .mem_rsp_data(mem_rsp.rdata),
    .n_hits(tlb_hits), .n_misses(tlb_misses));

  // one pending page-table update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd_v <= 1'b0; upd_va <= '0; upd_pte <= '0;
    end else begin
      if (upd_v && upd_r) upd_v <= 1'b0;
      if (wr_done) begin upd_v <= 1'b1; upd_va <= wr_done_va; upd_pte <= wr_done_pte; end
    end
  end
  a_upd: assert property (@(posedge clk) disable iff (!rst_n) wr_done |-> !upd_v || upd_r);

  // ----------------------------------------------------- compressor path
  logic              ci_v, ci_r, ci_l, co_v, co_r, co_l;
  logic [W_DATA-1:0] ci_d, co_d;
  cmode_e            ci_m;

  compress_engine u_comp (
    .clk, .rst_n,
    .s_valid(ci_v), .s_ready(ci_r), .s_data(ci_d), .s_last(ci_l), .s_mode(ci_m),
    .m_valid(co_v), .m_ready(co_r), .m_data(co_d), .m_last(co_l));

  // --------------------------------------------------- decompressor path
  logic              di_v, di_r, di_l;
  logic [W_DATA-1:0] di_d;
  cmode_e            di_m;

  decompress_engine u_decomp (
    .clk, .rst_n,
    .s_valid(di_v), .s_ready(di_r), .s_data(di_d), .s_last(di_l), .s_mode(di_m),
    .m_valid(out_valid), .m_ready(out_ready), .m_data(out_data), .m_last(out_last),
    .m_bypass(out_bypass));

  // ---------------------------------------------------------------- DMA
  logic     d_mv, d_mr;
  mem_req_t d_req;

  dma_engine u_dma (
    .clk, .rst_n,
    .rd_desc_valid, .rd_desc_ready, .rd_desc,
    .wr_desc_valid, .wr_desc_ready, .wr_desc,
    .hw_valid, .hw_ready, .hw_data, .hw_last,
    .ci_valid(ci_v), .ci_ready(ci_r), .ci_data(ci_d), .ci_last(ci_l), .ci_mode(ci_m),
    .co_valid(co_v), .co_ready(co_r), .co_data(co_d), .co_last(co_l),
    .di_valid(di_v), .di_ready(di_r), .di_data(di_d), .di_last(di_l), .di_mode(di_m),
    .do_fire(out_valid && out_ready), .do_last(out_last), .out_slot,
    .rd_done, .rd_done_slot, .wr_done, .wr_done_va, .wr_done_pte,
    .mem_req_valid(d_mv), .mem_req_ready(d_mr), .mem_req(d_req),
    .mem_rsp_valid(mem_rsp_valid && !mem_rsp.tag[4]), .mem_rsp,
    .outstanding(dma_outstanding));

  // ------------------------------------------------------- memory merge
  always_comb begin
    mem_req_valid = a_mv || d_mv;
    if (a_mv) begin
      mem_req.we    = a_we;
      mem_req.addr  = a_addr;
      mem_req.wdata = a_wdata;
      mem_req.tag   = 5'b10000;
    end else mem_req = d_req;
  end
  assign a_mr = mem_req_ready;
  assign d_mr = mem_req_ready && !a_mv;

endmodule
