// policy_engine: on-chip tuning of prefetch throttle, compression scheme and
// prefetch depth.
//
// Bandwidth throttle. Link-busy cycles are counted over windows of 2^WIN_W
// cycles; U = busy fraction (Q8). At each window end
//     beta <- beta * (1 - kappa * ReLU(U - theta))        (all Q8)
// beta scales how many entries the prefetcher issues. beta, kappa and theta
// are registers that software may rewrite (that is how learned values and a
// reset of beta after congestion reach the chip).
// Compression selection. For a layer (class early / middle / late, split at
// N_LAYERS/3 and 2*N_LAYERS/3) the engine answers the mode maximising
//     J = w_r * R(C, class) + w_q * Q(C, class) - w_c * L(C)
// among modes with Q(C, class) >= q_min (RAW is always allowed). R is the
// compression ratio (Q4.4), Q a quality score (255 = lossless), L the
// decompression latency in cycles. Answer one cycle after sel_valid.
// Prefetch depth. A UCB bandit over k in {1,2,4,8,16}: after each reward
// (Q8, e.g. 256 for a correct speculation) for the arm in use, a sweep of
// one arm per cycle computes mu_k + c * sqrt(2 ln T / N_k) (untried arms
// first) and k_sel becomes the best arm.
// Configuration: cfg_valid writes cfg_data to register cfg_addr:
//   0 beta, 1 kappa, 2 theta, 3 w_r, 4 w_q, 5 w_c, 6 q_min, 7 c,
//   8..19 R[class*4+mode], 20..31 Q[class*4+mode], 32..35 L[mode].
//
// Follows the paper's three formulas (throttle feedback, constrained argmax
// per layer, UCB). Own choices: fixed-point formats, window length, layer
// classes instead of per-layer tables, default table values taken from the
// paper's ablation (ratios 1.0 / 2.0 / 2.73 / 3.21, early layers up to 4x,
// late layers down to 2.5x), and gradient updates of kappa, theta and w
// left to software.
module policy_engine
  import speckv_pkg::*;
#(
  parameter int unsigned WIN_W    = 10,
  parameter int unsigned N_LAYERS = 80,
  parameter logic [8:0]  THETA0   = 9'd205,   // 0.8
  parameter logic [8:0]  KAPPA0   = 9'd256    // 1.0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_valid,
  input  logic [5:0]    cfg_addr,
  input  logic [15:0]   cfg_data,
  // throttle
  input  logic          link_busy,
  output logic [8:0]    beta,
  output logic [8:0]    util,
  output logic [31:0]   n_throttle,
  // compression choice
  input  logic          sel_valid,
  input  logic [LAYER_W-1:0] sel_layer,
  output logic          sel_rsp_valid,
  output cmode_e        sel_mode,
  // prefetch depth
  input  logic          rew_valid,
  input  logic [8:0]    rew_val,
  output logic [4:0]    k_sel,
  output logic [31:0]   n_k_switch
);

  localparam int unsigned NA = 5;

  // ---------------- registers ----------------
  logic [8:0]  kappa, theta;
  logic [7:0]  w_r, w_q, w_c, q_min, ucb_c;
  logic [7:0]  rc [12];
  logic [7:0]  qs [12];
  logic [7:0]  lat [4];

  // ---------------- throttle ----------------
  logic [WIN_W-1:0] wcnt;
  logic [WIN_W:0]   busy;
  logic [8:0]       u_now;
  logic [8:0]       excess;
  logic [35:0]      dec;
  assign u_now  = 9'((32'(busy) * 256) >> WIN_W);
  assign excess = (u_now > theta) ? u_now - theta : 9'd0;
  assign dec    = (36'(beta) * 36'(kappa) * 36'(excess)) >> 16;

  // ---------------- compression choice ----------------
  logic [1:0] cls;
  assign cls = (32'(sel_layer) * 3 < N_LAYERS) ? 2'd0 :
               (32'(sel_layer) * 3 < 2 * N_LAYERS) ? 2'd1 : 2'd2;
  cmode_e best;
  always_comb begin
    logic signed [19:0] j, jb;
    best = MODE_RAW; jb = -20'sd524288;
    for (int m = 0; m < 4; m++) begin
      j = 20'sd0 + 20'(w_r * rc[cls*4+m]) + 20'(w_q * qs[cls*4+m]) - 20'(w_c * lat[m]);
      if ((m == 0 || qs[cls*4+m] >= q_min) && j > jb) begin jb = j; best = cmode_e'(m); end
    end
  end

  // ---------------- UCB ----------------
  logic [15:0] n_k [NA];
  logic [23:0] s_k [NA];
  logic [31:0] t_all;
  logic [2:0]  arm, sw_a, best_a;
  logic        sweep;
  logic [23:0] best_sc;

  function automatic logic [15:0] log2_q8(input logic [31:0] x);
    int p;
    logic [31:0] y;
    p = 0;
    for (int b = 0; b < 32; b++) if (x[b]) p = b;
    y = x << (31 - p);
    return {8'(p), y[30:23]};
  endfunction

  function automatic logic [15:0] isqrt(input logic [31:0] x);
    logic [15:0] r;
    r = '0;
    for (int b = 15; b >= 0; b--)
      if ((32'(r) | (32'd1 << b)) * (32'(r) | (32'd1 << b)) <= x) r = r | 16'(32'd1 << b);
    return r;
  endfunction

  logic [15:0] lnt;        // ln T, Q8
  logic [31:0] mu, bonus_arg;
  logic [23:0] score;
  assign lnt       = 16'((32'(log2_q8(t_all)) * 177) >> 8);
  assign mu        = (n_k[sw_a] == '0) ? '0 : 32'(s_k[sw_a]) / 32'(n_k[sw_a]);
  assign bonus_arg = (n_k[sw_a] == '0) ? '0 : (32'(lnt) << 9) / 32'(n_k[sw_a]);   // 2 ln T / N, Q16
  assign score     = (n_k[sw_a] == '0) ? 24'hffffff
                   : 24'(mu) + 24'((32'(ucb_c) * 32'(isqrt(bonus_arg))) >> 8);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beta <= 9'd256; kappa <= KAPPA0; theta <= THETA0;
      w_r <= 8'd16; w_q <= 8'd1; w_c <= 8'd1; q_min <= 8'd250; ucb_c <= 8'd64;
      // ratios Q4.4: RAW 1.0, INT8 2.0, +delta 2.73, +RLE 3.21 (early 3.75, late 2.75)
      rc[0] <= 8'd16; rc[1] <= 8'd32; rc[2]  <= 8'd48; rc[3]  <= 8'd60;
      rc[4] <= 8'd16; rc[5] <= 8'd32; rc[6]  <= 8'd44; rc[7]  <= 8'd51;
      rc[8] <= 8'd16; rc[9] <= 8'd30; rc[10] <= 8'd38; rc[11] <= 8'd44;
      // quality: 255 lossless, one step per 0.01 perplexity
      for (int c = 0; c < 3; c++) begin
        qs[c*4+0] <= 8'd255; qs[c*4+1] <= 8'd253; qs[c*4+2] <= 8'd252; qs[c*4+3] <= 8'd251;
      end
      lat[0] <= 8'd5; lat[1] <= 8'd25; lat[2] <= 8'd25; lat[3] <= 8'd25;
      wcnt <= '0; busy <= '0; util <= '0; n_throttle <= '0;
      sel_rsp_valid <= 1'b0; sel_mode <= MODE_RAW;
      for (int a = 0; a < NA; a++) begin n_k[a] <= '0; s_k[a] <= '0; end
      t_all <= '0; arm <= 3'd2; sw_a <= '0; best_a <= '0; sweep <= 1'b0; best_sc <= '0;
      k_sel <= 5'd4; n_k_switch <= '0;
    end else begin
      // throttle window
      wcnt <= wcnt + 1'b1;
      busy <= busy + (WIN_W+1)'(link_busy);
      if (wcnt == '1) begin
        busy <= (WIN_W+1)'(link_busy);
        util <= u_now;
        if (excess != '0) begin
          beta <= beta - ((dec > 36'(beta)) ? beta : 9'(dec));
          n_throttle <= n_throttle + 1;
        end
      end
      // compression choice
      sel_rsp_valid <= sel_valid;
      if (sel_valid) sel_mode <= best;
      // bandit
      if (rew_valid && !sweep) begin
        n_k[arm] <= n_k[arm] + 16'd1;
        s_k[arm] <= s_k[arm] + 24'(rew_val);
        t_all    <= t_all + 1;
        sweep <= 1'b1; sw_a <= '0; best_sc <= '0; best_a <= '0;
      end else if (sweep) begin
        if (sw_a == '0 || score > best_sc) begin best_sc <= score; best_a <= sw_a; end
        if (sw_a == 3'(NA - 1)) begin
          sweep <= 1'b0;
          if (sw_a == '0 || score > best_sc) begin
            arm <= sw_a; k_sel <= 5'd1 << sw_a;
            if (sw_a != arm) n_k_switch <= n_k_switch + 1;
          end else begin
            arm <= best_a; k_sel <= 5'd1 << best_a;
            if (best_a != arm) n_k_switch <= n_k_switch + 1;
          end
        end else sw_a <= sw_a + 3'd1;
      end
      // configuration (last, so software wins)
      if (cfg_valid) begin
        case (cfg_addr)
          6'd0: beta  <= cfg_data[8:0];
          6'd1: kappa <= cfg_data[8:0];
          6'd2: theta <= cfg_data[8:0];
          6'd3: w_r   <= cfg_data[7:0];
          6'd4: w_q   <= cfg_data[7:0];
          6'd5: w_c   <= cfg_data[7:0];
          6'd6: q_min <= cfg_data[7:0];
          6'd7: ucb_c <= cfg_data[7:0];
          default: begin
            if (cfg_addr >= 6'd8 && cfg_addr < 6'd20) rc[4'(cfg_addr - 6'd8)] <= cfg_data[7:0];
            else if (cfg_addr >= 6'd20 && cfg_addr < 6'd32) qs[4'(cfg_addr - 6'd20)] <= cfg_data[7:0];
            else if (cfg_addr >= 6'd32 && cfg_addr < 6'd36) lat[cfg_addr[1:0]] <= cfg_data[7:0];
          end
        endcase
      end
    end
  end

endmodule
