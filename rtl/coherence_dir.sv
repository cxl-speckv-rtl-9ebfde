// coherence_dir: the CXL home-agent directory on the FPGA.
//
// Read path. A GPU L1 miss arrives on rd_*. If the GPU itself holds a newer
// copy of the entry (it wrote it and the writeback has not finished), the
// answer is OWNED and the writeback of that entry is made urgent. Otherwise
// the L2 directory is asked (DIR_USE): a hit is answered L2 with the slot;
// a miss becomes a synchronous demand fetch from CXL memory (dm_*), answered
// MEM with the slot once the page has arrived (or ERR if unmapped).
// Write path. A new or changed entry written by the GPU arrives as an
// invalidation on wr_*: the L2 directory drops any prefetched copy
// (DIR_INVAL) and the entry is recorded as GPU-owned (Modified) in a table
// of N_OWN entries. Writebacks of owned entries are requested from the GPU
// (wb_req_*) only in idle cycles (link_idle), or at once when urgent; the
// entry leaves the table when the engine reports the page written
// (wb_done_*). A write to a full table waits.
// One read or write is handled at a time; answers are single-cycle pulses.
//
// Follows the paper's read and write paths (directory check, serve from
// CXL memory or start coherence actions, invalidation messages, writeback
// in idle cycles). Own choices: the owned-entry table size, the urgency
// rule for reads of owned entries, the three-way answer code.
module coherence_dir
  import speckv_pkg::*;
#(
  parameter int unsigned N_OWN = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // GPU reads (L1 misses)
  input  logic              rd_valid,
  output logic              rd_ready,
  input  vaddr_t            rd_va,
  output logic              rd_rsp_valid,
  output logic [1:0]        rd_rsp_src,     // 0 L2, 1 MEM, 2 OWNED, 3 ERR
  output logic [SLOT_W-1:0] rd_rsp_slot,
  // GPU writes (invalidations)
  input  logic              wr_valid,
  output logic              wr_ready,
  input  vaddr_t            wr_va,
  // writeback requests to the GPU and completions from the engines
  input  logic              link_idle,
  output logic              wb_req_valid,
  input  logic              wb_req_ready,
  output vaddr_t            wb_req_va,
  input  logic              wb_done_valid,
  input  vaddr_t            wb_done_va,
  // L2 directory
  output logic              dir_op_valid,
  input  logic              dir_op_ready,
  output dir_op_e           dir_op,
  output vaddr_t            dir_op_va,
  input  logic              dir_rsp_valid,
  input  logic              dir_rsp_hit,
  input  logic [SLOT_W-1:0] dir_rsp_slot,
  // demand fetch
  output logic              dm_valid,
  input  logic              dm_ready,
  output vaddr_t            dm_va,
  input  logic              dm_rsp_valid,
  input  logic              dm_rsp_ok,
  input  logic [SLOT_W-1:0] dm_rsp_slot,
  // statistics
  output logic [31:0]       n_l2_hit,
  output logic [31:0]       n_mem_fetch,
  output logic [31:0]       n_owned,
  output logic [31:0]       n_inval,
  output logic [31:0]       n_wb,
  output logic [$clog2(N_OWN+1)-1:0] owned_cnt
);

  localparam int unsigned IW = $clog2(N_OWN);

  logic [N_OWN-1:0] o_valid, o_urgent, o_wb;
  vaddr_t           o_va [N_OWN];

  typedef enum logic [2:0] {S_IDLE, S_DIR, S_DIR_WAIT, S_DM, S_DM_WAIT} state_e;
  state_e st;
  logic   is_wr;
  vaddr_t cva;

  // lookups
  logic          rd_own, wr_own, has_free;
  logic [IW-1:0] rd_idx, wr_idx, free_idx, done_idx;
  logic          done_hit;
  always_comb begin
    rd_own = 1'b0; wr_own = 1'b0; has_free = 1'b0; done_hit = 1'b0;
    rd_idx = '0; wr_idx = '0; free_idx = '0; done_idx = '0;
    for (int e = N_OWN - 1; e >= 0; e--) begin
      if (o_valid[e] && o_va[e] == rd_va) begin rd_own = 1'b1; rd_idx = IW'(e); end
      if (o_valid[e] && o_va[e] == wr_va) begin wr_own = 1'b1; wr_idx = IW'(e); end
      if (!o_valid[e]) begin has_free = 1'b1; free_idx = IW'(e); end
      if (o_valid[e] && o_wb[e] && o_va[e] == wb_done_va) begin done_hit = 1'b1; done_idx = IW'(e); end
    end
  end

  // writeback candidate: urgent first, else any owned entry when idle
  logic          wb_any;
  logic [IW-1:0] wb_idx;
  always_comb begin
    wb_any = 1'b0; wb_idx = '0;
    for (int e = N_OWN - 1; e >= 0; e--)
      if (o_valid[e] && !o_wb[e] && link_idle) begin wb_any = 1'b1; wb_idx = IW'(e); end
    for (int e = N_OWN - 1; e >= 0; e--)
      if (o_valid[e] && !o_wb[e] && o_urgent[e]) begin wb_any = 1'b1; wb_idx = IW'(e); end
  end
  assign wb_req_valid = wb_any;
  assign wb_req_va    = o_va[wb_idx];

  assign wr_ready = (st == S_IDLE) && (wr_own || has_free);
  assign rd_ready = (st == S_IDLE) && !wr_valid;

  assign dir_op_valid = (st == S_DIR);
  assign dir_op       = is_wr ? DIR_INVAL : DIR_USE;
  assign dir_op_va    = cva;
  assign dm_valid     = (st == S_DM);
  assign dm_va        = cva;

  always_comb begin
    owned_cnt = '0;
    for (int e = 0; e < N_OWN; e++) owned_cnt += ($clog2(N_OWN+1))'(o_valid[e]);
  end

  always_ff @(posedge clk) begin
    if (st == S_IDLE && wr_valid && wr_ready && !wr_own) o_va[free_idx] <= wr_va;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= '0; o_urgent <= '0; o_wb <= '0;
      st <= S_IDLE; is_wr <= 1'b0; cva <= '0;
      rd_rsp_valid <= 1'b0; rd_rsp_src <= '0; rd_rsp_slot <= '0;
      n_l2_hit <= '0; n_mem_fetch <= '0; n_owned <= '0; n_inval <= '0; n_wb <= '0;
    end else begin
      rd_rsp_valid <= 1'b0;
      if (wb_req_valid && wb_req_ready) begin
        o_wb[wb_idx] <= 1'b1;
        n_wb <= n_wb + 1;
      end
      if (wb_done_valid && done_hit) begin
        o_valid[done_idx] <= 1'b0; o_wb[done_idx] <= 1'b0; o_urgent[done_idx] <= 1'b0;
      end
      case (st)
        S_IDLE: begin
          if (wr_valid && wr_ready) begin
            is_wr <= 1'b1; cva <= wr_va; st <= S_DIR;
            n_inval <= n_inval + 1;
            if (wr_own) begin
              // written again: a writeback in flight is stale, redo it
              o_wb[wr_idx] <= 1'b0;
            end else begin
              o_valid[free_idx] <= 1'b1; o_wb[free_idx] <= 1'b0; o_urgent[free_idx] <= 1'b0;
            end
          end else if (rd_valid) begin
            is_wr <= 1'b0; cva <= rd_va;
            if (rd_own) begin
              rd_rsp_valid <= 1'b1; rd_rsp_src <= 2'd2; rd_rsp_slot <= '0;
              o_urgent[rd_idx] <= 1'b1;
              n_owned <= n_owned + 1;
            end else st <= S_DIR;
          end
        end
        S_DIR: if (dir_op_ready) st <= S_DIR_WAIT;
        S_DIR_WAIT: if (dir_rsp_valid) begin
          if (is_wr) st <= S_IDLE;
          else if (dir_rsp_hit) begin
            rd_rsp_valid <= 1'b1; rd_rsp_src <= 2'd0; rd_rsp_slot <= dir_rsp_slot;
            n_l2_hit <= n_l2_hit + 1;
            st <= S_IDLE;
          end else st <= S_DM;
        end
        S_DM: if (dm_ready) st <= S_DM_WAIT;
        default: if (dm_rsp_valid) begin
          rd_rsp_valid <= 1'b1;
          rd_rsp_src   <= dm_rsp_ok ? 2'd1 : 2'd3;
          rd_rsp_slot  <= dm_rsp_slot;
          if (dm_rsp_ok) n_mem_fetch <= n_mem_fetch + 1;
          st <= S_IDLE;
        end
      endcase
    end
  end

endmodule
