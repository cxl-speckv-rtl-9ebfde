// page_tracker: hot/cold classification of KV-cache pages.
//
// Counts accesses per page in a fully associative table of N_TRK entries
// (page address, 8-bit count, hot flag). A page not in the table replaces
// the entry with the lowest count. When a count reaches th_hot the page is
// promoted: an event (ev_promote = 1) asks for it to be kept in L1/L2.
// Counts age: after every EPOCH tokens (token_tick pulses) a sweep, one
// entry per cycle, halves every count and demotes hot pages whose count fell
// below th_cold (ev_promote = 0: move to L3). A hot page pushed out of the
// table is demoted too. At each epoch the thresholds are adjusted:
// memory pressure raises both (fewer pages kept near the GPU), a high miss
// rate lowers th_hot (more pages kept), never below th_cold + 1.
// Accesses are not taken during a sweep. Events are one-cycle pulses.
//
// Follows the paper: hot = accessed in the last N tokens, promotion above
// T_h and demotion below T_c, thresholds adjusted by memory pressure and
// miss rates. Own choices: table size, halving as the "last N tokens"
// window, step sizes and initial thresholds.
module page_tracker
  import speckv_pkg::*;
#(
  parameter int unsigned N_TRK   = 64,
  parameter int unsigned EPOCH   = 128,   // tokens per aging step
  parameter logic [7:0]  TH_HOT0 = 8'd8,
  parameter logic [7:0]  TH_COLD0 = 8'd2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       acc_valid,
  output logic       acc_ready,
  input  vaddr_t     acc_va,
  input  logic       token_tick,
  input  logic       mem_pressure,
  input  logic       miss_high,
  output logic       ev_valid,
  output logic       ev_promote,
  output vaddr_t     ev_va,
  output logic [7:0] th_hot,
  output logic [7:0] th_cold,
  output logic [31:0] n_promote,
  output logic [31:0] n_demote
);

  localparam int unsigned IW = $clog2(N_TRK);

  logic [N_TRK-1:0] t_valid, t_hot;
  vaddr_t           t_va  [N_TRK];
  logic [7:0]       t_cnt [N_TRK];

  logic [$clog2(EPOCH+1)-1:0] tok;
  logic          sweep;
  logic [IW-1:0] sidx;

  assign acc_ready = !sweep;

  logic          hit;
  logic [IW-1:0] hidx, vidx;
  logic [8:0]    vmin;
  always_comb begin
    hit = 1'b0; hidx = '0; vidx = '0; vmin = 9'h1ff;
    for (int e = N_TRK - 1; e >= 0; e--)
      if (t_valid[e] && t_va[e] == acc_va) begin hit = 1'b1; hidx = IW'(e); end
    for (int e = 0; e < N_TRK; e++) begin
      if (!t_valid[e] && vmin != 9'h0) begin vmin = 9'h0; vidx = IW'(e); end
      else if (t_valid[e] && {1'b0, t_cnt[e]} < vmin) begin vmin = {1'b0, t_cnt[e]}; vidx = IW'(e); end
    end
  end

  always_ff @(posedge clk) begin
    if (acc_valid && acc_ready && !hit) t_va[vidx] <= acc_va;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_valid <= '0; t_hot <= '0;
      for (int e = 0; e < N_TRK; e++) t_cnt[e] <= '0;
      tok <= '0; sweep <= 1'b0; sidx <= '0;
      th_hot <= TH_HOT0; th_cold <= TH_COLD0;
      ev_valid <= 1'b0; ev_promote <= 1'b0; ev_va <= '0;
      n_promote <= '0; n_demote <= '0;
    end else begin
      ev_valid <= 1'b0;
      if (token_tick) begin
        if (32'(tok) == EPOCH - 1) begin
          tok <= '0;
          sweep <= 1'b1; sidx <= '0;
          if (mem_pressure) begin
            if (th_hot < 8'hff) th_hot <= th_hot + 8'd1;
            if (th_cold < th_hot - 8'd1) th_cold <= th_cold + 8'd1;
          end else if (miss_high && th_hot > th_cold + 8'd1) th_hot <= th_hot - 8'd1;
        end else tok <= tok + 1'b1;
      end
      if (sweep) begin
        t_cnt[sidx] <= t_cnt[sidx] >> 1;
        if (t_valid[sidx] && t_hot[sidx] && (t_cnt[sidx] >> 1) < th_cold) begin
          t_hot[sidx] <= 1'b0;
          ev_valid <= 1'b1; ev_promote <= 1'b0; ev_va <= t_va[sidx];
          n_demote <= n_demote + 1;
        end
        sidx <= sidx + 1'b1;
        if (32'(sidx) == N_TRK - 1) sweep <= 1'b0;
      end else if (acc_valid) begin
        if (hit) begin
          if (t_cnt[hidx] != 8'hff) t_cnt[hidx] <= t_cnt[hidx] + 8'd1;
          if (!t_hot[hidx] && t_cnt[hidx] + 8'd1 >= th_hot) begin
            t_hot[hidx] <= 1'b1;
            ev_valid <= 1'b1; ev_promote <= 1'b1; ev_va <= acc_va;
            n_promote <= n_promote + 1;
          end
        end else begin
          if (t_valid[vidx] && t_hot[vidx]) begin
            ev_valid <= 1'b1; ev_promote <= 1'b0; ev_va <= t_va[vidx];
            n_demote <= n_demote + 1;
          end
          t_valid[vidx] <= 1'b1; t_hot[vidx] <= 1'b0; t_cnt[vidx] <= 8'd1;
        end
      end
    end
  end

endmodule
