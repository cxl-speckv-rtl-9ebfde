// dma_engine: page DMA of one cache engine, with a 16-deep outstanding-read
// window and an in-order completion queue.
//
// Reads: each read descriptor names a stored page (its page-table entry: base
// page, storage mode, stored length in words) and the L2 prefetch-buffer
// slot it is for. Descriptors are queued (scatter-gather list of RDQ pages)
// and their words are requested back to back, across descriptor boundaries,
// as long as fewer than OMEGA reads are outstanding. Each read gets the tag of
// a reorder-buffer entry; returning words are parked there and released in
// request order to the decompressor, with the page's mode and a last flag.
// When the decompressor hands over the final beat of a page, rd_done reports
// the slot; out_slot names the slot the current output beat belongs to.
//
// Writes: a write descriptor (virtual page, physical page, mode) is queued,
// then the page's 64 beats arrive on hw_*; they are forwarded to the
// compressor with the descriptor's mode. Packed words coming back from the
// compressor are written to consecutive words of the physical page; after
// the last one, wr_done reports the new page-table entry (stored length).
// Memory writes take priority over reads on the single memory port.
//
// Addresses: word address = {ppn, word index (6 bits)}.
// Follows the paper: scatter-gather DMA, Omega_max = 16 outstanding requests,
// non-blocking issue, completion notification. Own choices: queue depths,
// the reorder buffer, write priority.
module dma_engine
  import speckv_pkg::*;
#(
  parameter int unsigned OMEGA = OMEGA_MAX,
  parameter int unsigned RDQ   = 8,
  parameter int unsigned WDQ   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // descriptors
  input  logic              rd_desc_valid,
  output logic              rd_desc_ready,
  input  rd_desc_t          rd_desc,
  input  logic              wr_desc_valid,
  output logic              wr_desc_ready,
  input  wr_desc_t          wr_desc,
  // host write beats
  input  logic              hw_valid,
  output logic              hw_ready,
  input  logic [W_DATA-1:0] hw_data,
  input  logic              hw_last,
  // to / from compressor
  output logic              ci_valid,
  input  logic              ci_ready,
  output logic [W_DATA-1:0] ci_data,
  output logic              ci_last,
  output cmode_e            ci_mode,
  input  logic              co_valid,
  output logic              co_ready,
  input  logic [W_DATA-1:0] co_data,
  input  logic              co_last,
  // to / from decompressor
  output logic              di_valid,
  input  logic              di_ready,
  output logic [W_DATA-1:0] di_data,
  output logic              di_last,
  output cmode_e            di_mode,
  input  logic              do_fire,     // decompressor output beat taken
  input  logic              do_last,
  output logic [SLOT_W-1:0] out_slot,
  // completions
  output logic              rd_done,
  output logic [SLOT_W-1:0] rd_done_slot,
  output logic              wr_done,
  output vaddr_t            wr_done_va,
  output pte_t              wr_done_pte,
  // memory port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_rsp_valid,
  input  mem_rsp_t          mem_rsp,
  // status
  output logic [4:0]        outstanding
);

  localparam int RQW = $clog2(RDQ);
  localparam int WQW = $clog2(WDQ);

  // ------------------------------------------------------- write queue
  wr_desc_t        wq [WDQ];
  logic [WQW:0]    w_tail, w_in, w_out;   // push, compressor input, memory write
  logic [5:0]      wcnt;

  assign wr_desc_ready = (w_tail - w_out) != (WQW+1)'(WDQ);
  assign ci_valid = hw_valid && (w_in != w_tail);
  assign hw_ready = ci_ready && (w_in != w_tail);
  assign ci_data  = hw_data;
  assign ci_last  = hw_last;
  assign ci_mode  = wq[w_in[WQW-1:0]].mode;

  // ------------------------------------------------------- read queue
  rd_desc_t        rq [RDQ];
  logic [RQW:0]    r_head, r_tail;
  logic [5:0]      iw;                    // word being requested
  logic [SLOT_W-1:0] sq [16];             // slots of pages in flight
  logic [4:0]      s_head, s_tail;
  assign rd_desc_ready = (r_tail - r_head) != (RQW+1)'(RDQ);

  // ------------------------------------------------------- reorder buffer
  logic [W_DATA-1:0] rob_d [16];
  logic [15:0]       rob_v, rob_l;
  cmode_e            rob_m [16];
  logic [4:0]        iss, ret;            // free-running pointers
  assign outstanding = iss - ret;

  logic rd_can, wr_sel, rd_fire, wr_fire;
  rd_desc_t cur;
  assign cur    = rq[r_head[RQW-1:0]];
  assign rd_can = (r_head != r_tail) && (outstanding < 5'(OMEGA)) && (s_tail - s_head != 5'd16);
  assign wr_sel = co_valid;
  assign mem_req_valid = wr_sel || rd_can;
  always_comb begin
    mem_req = '0;
    if (wr_sel) begin
      mem_req.we    = 1'b1;
      mem_req.addr  = {wq[w_out[WQW-1:0]].ppn, wcnt};
      mem_req.wdata = co_data;
    end else begin
      mem_req.we    = 1'b0;
      mem_req.addr  = {cur.pte.ppn, iw};
      mem_req.tag   = {1'b0, iss[3:0]};
    end
  end
  assign wr_fire  = wr_sel && mem_req_ready;
  assign rd_fire  = !wr_sel && rd_can && mem_req_ready;
  assign co_ready = mem_req_ready;

  assign di_valid = rob_v[ret[3:0]];
  assign di_data  = rob_d[ret[3:0]];
  assign di_last  = rob_l[ret[3:0]];
  assign di_mode  = rob_m[ret[3:0]];
  assign out_slot = sq[s_head[3:0]];

  always_ff @(posedge clk) begin
    if (wr_desc_valid && wr_desc_ready) wq[w_tail[WQW-1:0]] <= wr_desc;
    if (rd_desc_valid && rd_desc_ready) rq[r_tail[RQW-1:0]] <= rd_desc;
    if (mem_rsp_valid && !mem_rsp.tag[4]) rob_d[mem_rsp.tag[3:0]] <= mem_rsp.rdata;
    if (rd_fire) begin
      rob_l[iss[3:0]] <= (7'(iw) + 7'd1 == cur.pte.nwords);
      rob_m[iss[3:0]] <= cur.pte.mode;
      if (iw == '0) sq[s_tail[3:0]] <= cur.slot;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_tail <= '0; w_in <= '0; w_out <= '0; wcnt <= '0;
      r_head <= '0; r_tail <= '0; iw <= '0; s_head <= '0; s_tail <= '0;
      rob_v <= '0; iss <= '0; ret <= '0;
      rd_done <= 1'b0; rd_done_slot <= '0; wr_done <= 1'b0; wr_done_va <= '0; wr_done_pte <= '0;
    end else begin
      rd_done <= 1'b0;
      wr_done <= 1'b0;
      if (wr_desc_valid && wr_desc_ready) w_tail <= w_tail + 1'b1;
      if (ci_valid && ci_ready && ci_last) w_in <= w_in + 1'b1;
      if (wr_fire) begin
        if (co_last) begin
          wr_done     <= 1'b1;
          wr_done_va  <= wq[w_out[WQW-1:0]].va;
          wr_done_pte <= '{valid: 1'b1, mode: wq[w_out[WQW-1:0]].mode,
                           nwords: 7'(wcnt) + 7'd1, ppn: wq[w_out[WQW-1:0]].ppn};
          w_out <= w_out + 1'b1;
          wcnt  <= '0;
        end else wcnt <= wcnt + 6'd1;
      end
      if (rd_desc_valid && rd_desc_ready) r_tail <= r_tail + 1'b1;
      if (rd_fire) begin
        iss <= iss + 5'd1;
        if (iw == '0) s_tail <= s_tail + 5'd1;
        if (7'(iw) + 7'd1 == cur.pte.nwords) begin
          iw <= '0; r_head <= r_head + 1'b1;
        end else iw <= iw + 6'd1;
      end
      begin
        logic [15:0] v;
        v = rob_v;
        if (mem_rsp_valid && !mem_rsp.tag[4]) v[mem_rsp.tag[3:0]] = 1'b1;
        if (di_valid && di_ready) v[ret[3:0]] = 1'b0;
        rob_v <= v;
      end
      if (di_valid && di_ready) ret <= ret + 5'd1;
      if (do_fire && do_last) begin
        rd_done <= 1'b1; rd_done_slot <= sq[s_head[3:0]];
        s_head <= s_head + 5'd1;
      end
    end
  end

  a_window: assert property (@(posedge clk) disable iff (!rst_n) outstanding <= 5'(OMEGA));

endmodule
