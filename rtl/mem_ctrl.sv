// mem_ctrl: shared memory controller between the cache engines and the HBM
// channels of the FPGA.
//
// Each client (one per cache engine) presents one request at a time. A
// request goes to channel addr[3:0], so consecutive 512-bit words of a page
// fall on consecutive channels, and carries addr >> 4 as its in-channel
// address. Every channel has its own arbiter: weighted round-robin among the
// clients that want it. A client's weight is recomputed every cycle from its
// queue depth Q (reads in flight plus the waiting request) and its average
// read service latency L (exponential average, 1/8 per sample):
//     w = max(1, (ALPHA*Q + (256-ALPHA) * L_SCALE / L) / 256)
// The weight is the number of grants a client may take in one round; a new
// round (all credits reloaded) starts when no requesting client has credit
// left. A client blocked at its channel blocks its following requests
// (head-of-line blocking). Read responses return to their client by client
// id; when several channels answer the same client in one cycle, a
// round-robin pointer per client picks one and the others wait.
//
// Interface: valid/ready on client requests and on channel requests and
// responses; client responses are valid-only (clients always accept).
// Timing: a request is forwarded in the cycle it is granted (no register).
//
// Follows the paper: 16 channels, weighted round-robin with the dynamic
// weight alpha*Q + (1-alpha)/L. Own choices: the interleaving on the low word
// address bits, the fixed-point scaling (ALPHA, L_SCALE), credit-based WRR.
module mem_ctrl
  import speckv_pkg::*;
#(
  parameter int unsigned N_CLI   = 1,
  parameter int unsigned ALPHA   = 128,   // alpha in 1/256 units (0.5)
  parameter int unsigned L_SCALE = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      c_req_valid [N_CLI],
  output logic      c_req_ready [N_CLI],
  input  mem_req_t  c_req       [N_CLI],
  output logic      c_rsp_valid [N_CLI],
  output mem_rsp_t  c_rsp       [N_CLI],
  output logic      ch_req_valid [N_CH],
  input  logic      ch_req_ready [N_CH],
  output ch_req_t   ch_req       [N_CH],
  input  logic      ch_rsp_valid [N_CH],
  output logic      ch_rsp_ready [N_CH],
  input  ch_rsp_t   ch_rsp       [N_CH],
  output logic [7:0] weight     [N_CLI]
);

  localparam int CW = (N_CLI > 1) ? $clog2(N_CLI) : 1;

  // ------------------------------------------------ weights from Q and L
  logic [5:0]  q_out  [N_CLI];            // reads in flight
  logic [15:0] lbar   [N_CLI];            // average latency, 4 fraction bits
  logic [15:0] now;
  logic [15:0] t_iss  [N_CLI][32];        // issue time per tag

  always_comb begin
    for (int c = 0; c < N_CLI; c++) begin
      logic [31:0] inv, w;
      inv = (lbar[c] == 0) ? 32'(L_SCALE) : (32'(L_SCALE) << 4) / 32'(lbar[c]);
      w   = (32'(ALPHA) * 32'(32'(q_out[c]) + 32'(c_req_valid[c])) + 32'(256 - ALPHA) * inv) >> 8;
      weight[c] = (w == 0) ? 8'd1 : (w > 32'd255) ? 8'd255 : 8'(w);
    end
  end

  // ------------------------------------------------------ request arbiters
  logic [CH_W-1:0] tgt [N_CLI];
  logic [7:0]      credit [N_CH][N_CLI];
  logic [CW-1:0]   rr     [N_CH];
  logic            gnt_v  [N_CH];
  logic [CW-1:0]   gnt    [N_CH];
  logic            reload [N_CH];

  always_comb begin
    for (int c = 0; c < N_CLI; c++) tgt[c] = c_req[c].addr[CH_W-1:0];
    for (int h = 0; h < N_CH; h++) begin
      logic any_cred;
      gnt_v[h] = 1'b0; gnt[h] = '0; any_cred = 1'b0;
      for (int c = 0; c < N_CLI; c++)
        if (c_req_valid[c] && tgt[c] == CH_W'(h) && credit[h][c] != 0) any_cred = 1'b1;
      reload[h] = !any_cred;
      // first eligible client at or after the round-robin pointer
      for (int k = 2*N_CLI - 1; k >= 0; k--) begin
        logic [CW-1:0] c;
        c = CW'(k % N_CLI);
        if (k >= int'(rr[h]) && c_req_valid[c] && tgt[c] == CH_W'(h) &&
            (reload[h] || credit[h][c] != 0)) begin
          gnt_v[h] = 1'b1; gnt[h] = c;
        end
      end
      ch_req_valid[h] = gnt_v[h];
      ch_req[h].we    = c_req[gnt[h]].we;
      ch_req[h].addr  = c_req[gnt[h]].addr[ADDR_W-1:CH_W];
      ch_req[h].wdata = c_req[gnt[h]].wdata;
      ch_req[h].cid   = CID_W'(gnt[h]);
      ch_req[h].tag   = c_req[gnt[h]].tag;
    end
    for (int c = 0; c < N_CLI; c++)
      c_req_ready[c] = gnt_v[tgt[c]] && gnt[tgt[c]] == CW'(c) && ch_req_ready[tgt[c]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < N_CH; h++) begin
        rr[h] <= '0;
        for (int c = 0; c < N_CLI; c++) credit[h][c] <= '0;
      end
    end else begin
      for (int h = 0; h < N_CH; h++)
        if (gnt_v[h] && ch_req_ready[h]) begin
          if (reload[h])
            for (int c = 0; c < N_CLI; c++)
              credit[h][c] <= (CW'(c) == gnt[h]) ? weight[c] - 8'd1 : weight[c];
          else
            credit[h][gnt[h]] <= credit[h][gnt[h]] - 8'd1;
          // the pointer moves on once the granted client has used its credit
          if ((reload[h] ? weight[gnt[h]] : credit[h][gnt[h]]) == 8'd1)
            rr[h] <= (gnt[h] == CW'(N_CLI - 1)) ? '0 : gnt[h] + 1'b1;
          else
            rr[h] <= gnt[h];
        end
    end
  end

  // ------------------------------------------------------- response return
  logic [CH_W-1:0] rrr  [N_CLI];
  logic            rsel_v [N_CLI];
  logic [CH_W-1:0] rsel [N_CLI];

  always_comb begin
    for (int h = 0; h < N_CH; h++) ch_rsp_ready[h] = 1'b0;
    for (int c = 0; c < N_CLI; c++) begin
      rsel_v[c] = 1'b0; rsel[c] = '0;
      for (int k = 2*N_CH - 1; k >= 0; k--) begin
        logic [CH_W-1:0] h;
        h = CH_W'(k % N_CH);
        if (k >= int'(rrr[c]) && ch_rsp_valid[h] && ch_rsp[h].cid == CID_W'(c)) begin
          rsel_v[c] = 1'b1; rsel[c] = h;
        end
      end
      if (rsel_v[c]) ch_rsp_ready[rsel[c]] = 1'b1;
      c_rsp_valid[c] = rsel_v[c];
      c_rsp[c].rdata = ch_rsp[rsel[c]].rdata;
      c_rsp[c].tag   = ch_rsp[rsel[c]].tag;
    end
  end

  // ------------------------------------------- queue depth and latency
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '0;
      for (int c = 0; c < N_CLI; c++) begin
        q_out[c] <= '0; lbar[c] <= '0; rrr[c] <= '0;
        for (int t = 0; t < 32; t++) t_iss[c][t] <= '0;
      end
    end else begin
      now <= now + 16'd1;
      for (int c = 0; c < N_CLI; c++) begin
        logic iss, ret;
        iss = c_req_valid[c] && c_req_ready[c] && !c_req[c].we;
        ret = rsel_v[c];
        q_out[c] <= q_out[c] + 6'(iss) - 6'(ret);
        if (iss) t_iss[c][c_req[c].tag] <= now;
        if (ret) begin
          logic [15:0] lat;
          lat = now - t_iss[c][c_rsp[c].tag];
          if (lat > 16'd4095) lat = 16'd4095;
          lbar[c] <= lbar[c] - (lbar[c] >> 3) + ((lat << 4) >> 3);
          rrr[c] <= (rsel[c] == CH_W'(N_CH - 1)) ? '0 : rsel[c] + 1'b1;
        end
      end
    end
  end

endmodule
