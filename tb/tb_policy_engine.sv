// tb_policy_engine: self-checking test of the policy engine.
//
// With 16-cycle windows: busy link patterns are driven and beta is checked
// against the feedback formula after every window; random configuration
// writes and layer queries check the compression choice against a model of
// the constrained argmax; random rewards check the bandit's choice against
// a model of the UCB rule with the same fixed-point arithmetic.
module tb_policy_engine;
  import speckv_pkg::*;

  localparam int unsigned WIN_W = 4, NL = 80;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_valid = 0;
  logic [5:0] cfg_addr = '0;
  logic [15:0] cfg_data = '0;
  logic link_busy = 0;
  logic [8:0] beta, util;
  logic [31:0] n_throttle, n_k_switch;
  logic sel_valid = 0, sel_rsp_valid;
  logic [LAYER_W-1:0] sel_layer = '0;
  cmode_e sel_mode;
  logic rew_valid = 0;
  logic [8:0] rew_val = '0;
  logic [4:0] k_sel;

  policy_engine #(.WIN_W(WIN_W), .N_LAYERS(NL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    #5ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ---------------- throttle model ----------------
  int mbeta = 256, kappa = 256, theta = 205, busy = 0, n_thr = 0;
  always @(posedge clk) if (rst_n) begin
    // window end as seen from the design's window counter; busy counted here
    if (dut.wcnt == '1) begin
      int u, ex, dec;
      u = (busy * 256) >> WIN_W;
      ex = (u > theta) ? u - theta : 0;
      dec = int'((longint'(mbeta) * kappa * ex) >>> 16);
      if (ex != 0) begin mbeta = mbeta - ((dec > mbeta) ? mbeta : dec); n_thr++; end
      busy = link_busy ? 1 : 0;
    end else busy = busy + (link_busy ? 1 : 0);
    if (cfg_valid && cfg_addr == 0) mbeta = int'(cfg_data[8:0]);
    if (cfg_valid && cfg_addr == 1) kappa = int'(cfg_data[8:0]);
    if (cfg_valid && cfg_addr == 2) theta = int'(cfg_data[8:0]);
  end

  // ---------------- compression model ----------------
  int w_r = 16, w_q = 1, w_c = 1, q_min = 250;
  int rc [12] = '{16, 32, 48, 60, 16, 32, 44, 51, 16, 30, 38, 44};
  int qs [12] = '{255, 253, 252, 251, 255, 253, 252, 251, 255, 253, 252, 251};
  int lat [4] = '{5, 25, 25, 25};

  function automatic int best_mode(input int layer);
    int c, jb, b, j;
    c = (layer * 3 < NL) ? 0 : (layer * 3 < 2 * NL) ? 1 : 2;
    jb = -524288; b = 0;
    for (int m = 0; m < 4; m++) begin
      j = w_r * rc[c*4+m] + w_q * qs[c*4+m] - w_c * lat[m];
      j = (j << 12) >>> 12;         // 20-bit signed arithmetic of the design
      if ((m == 0 || qs[c*4+m] >= q_min) && j > jb) begin jb = j; b = m; end
    end
    return b;
  endfunction

  task automatic cfg(input int a, input int d);
    cfg_valid <= 1'b1; cfg_addr <= 6'(a); cfg_data <= 16'(d);
    @(posedge clk);
    cfg_valid <= 1'b0;
    case (a)
      3: w_r = d; 4: w_q = d; 5: w_c = d; 6: q_min = d;
      default: begin
        if (a >= 8 && a < 20) rc[a-8] = d;
        else if (a >= 20 && a < 32) qs[a-20] = d;
        else if (a >= 32 && a < 36) lat[a-32] = d;
      end
    endcase
  endtask

  task automatic query(input int layer);
    sel_valid <= 1'b1; sel_layer <= LAYER_W'(layer);
    @(posedge clk);
    sel_valid <= 1'b0;
    @(posedge clk);
    check(sel_rsp_valid && int'(sel_mode) == best_mode(layer), $sformatf("mode for layer %0d: %0d expected %0d", layer, sel_mode, best_mode(layer)));
  endtask

  // ---------------- bandit model ----------------
  int nk [5], sk [5], tall = 0, arm = 2, n_sw = 0, ucb_c = 64;
  function automatic int log2q8(input int unsigned x);
    int p;
    int unsigned y;
    p = 0;
    for (int b = 0; b < 32; b++) if (x[b]) p = b;
    y = x << (31 - p);
    return (p << 8) | int'((y >> 23) & 8'hff);
  endfunction
  function automatic int unsigned isq(input int unsigned x);
    int unsigned r;
    r = 0;
    for (int b = 15; b >= 0; b--) if ((r | (1 << b)) * (r | (1 << b)) <= x) r |= (1 << b);
    return r;
  endfunction
  task automatic reward(input int v);
    int lnt, best, bsc, sc;
    rew_valid <= 1'b1; rew_val <= 9'(v);
    @(posedge clk);
    rew_valid <= 1'b0;
    nk[arm]++; sk[arm] += v; tall++;
    lnt = (log2q8(tall) * 177) >> 8;
    best = 0; bsc = 0;
    for (int a = 0; a < 5; a++) begin
      if (nk[a] == 0) sc = 24'hffffff;
      else sc = (sk[a] / nk[a] + ((ucb_c * int'(isq((lnt << 9) / nk[a]))) >> 8)) & 24'hffffff;
      if (a == 0 || sc > bsc) begin bsc = sc; best = a; end
    end
    if (best != arm) n_sw++;
    arm = best;
    repeat (7) @(posedge clk);
    check(int'(k_sel) == (1 << arm), $sformatf("bandit k %0d expected %0d", k_sel, 1 << arm));
  endtask

  initial begin
    for (int a = 0; a < 5; a++) begin nk[a] = 0; sk[a] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // throttle: saturated link, then light traffic
    link_busy <= 1'b1;
    repeat (40) @(posedge clk);
    link_busy <= 1'b0;
    repeat (40) @(posedge clk);
    check(int'(beta) == mbeta && mbeta < 256, "beta after saturation");
    for (int n = 0; n < 400; n++) begin
      link_busy <= ($urandom_range(0, 9) < 8);
      @(posedge clk);
      if (n % 16 == 0) check(int'(beta) == mbeta, $sformatf("beta %0d expected %0d", beta, mbeta));
      if (n == 200) begin cfg_valid <= 1'b1; cfg_addr <= 6'd0; cfg_data <= 16'd256; @(posedge clk); cfg_valid <= 1'b0; end
    end
    link_busy <= 1'b0;
    check(n_throttle == 32'(n_thr) && n_thr > 3, "throttle steps");
    // compression choice
    for (int l = 0; l < NL; l += 7) query(l);
    cfg(6, 252);
    query(40);
    check(sel_mode == MODE_DELTA, "higher quality bound selects delta");
    cfg(5, 100);
    query(40);
    check(sel_mode == MODE_RAW, "high latency weight selects raw");
    for (int n = 0; n < 150; n++) begin
      int a;
      a = $urandom_range(3, 35);
      if (a == 7) a = 6;
      cfg(a, (a >= 20 && a < 32) ? $urandom_range(240, 255) : $urandom_range(0, 70));
      query($urandom_range(0, NL - 1));
    end
    // bandit: arm 4 (k = 16) pays best
    for (int n = 0; n < 200; n++) reward((arm == 3) ? ($urandom_range(0, 9) < 8 ? 256 : 0) : ($urandom_range(0, 9) < 3 ? 256 : 0));
    check(n_k_switch == 32'(n_sw) && n_sw > 4, "bandit switches");
    $display("throttle steps %0d, bandit switches %0d, final k %0d", n_thr, n_sw, k_sel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
