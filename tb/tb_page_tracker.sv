// tb_page_tracker: self-checking test of the hot/cold page tracker.
//
// A small tracker (8 entries, aging every 4 tokens) gets random page
// accesses from a pool of 12 pages and token ticks, with random memory
// pressure and miss-rate flags. A model of the same rules (count, promote
// at th_hot, replace the lowest count, halve and demote below th_cold at
// each epoch, threshold steps) predicts every promote/demote event in
// order and the thresholds.
module tb_page_tracker;
  import speckv_pkg::*;

  localparam int unsigned N = 8, EPOCH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic acc_valid = 0, acc_ready, token_tick = 0, mem_pressure = 0, miss_high = 0;
  vaddr_t acc_va = '0;
  logic ev_valid, ev_promote;
  vaddr_t ev_va;
  logic [7:0] th_hot, th_cold;
  logic [31:0] n_promote, n_demote;

  page_tracker #(.N_TRK(N), .EPOCH(EPOCH), .TH_HOT0(8'd4), .TH_COLD0(8'd2)) dut (.*);

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

  // model
  bit     mv [N], mh [N];
  vaddr_t ma [N];
  int     mc [N];
  int     thh = 4, thc = 2, tok = 0;
  typedef struct { bit p; vaddr_t va; } ev_t;
  ev_t    expq [$];
  int     n_p = 0, n_d = 0;

  always @(posedge clk) if (rst_n && ev_valid) begin
    if (expq.size() == 0) check(1'b0, "unexpected event");
    else begin
      ev_t e;
      e = expq.pop_front();
      check(e.p == ev_promote && e.va == ev_va, "event kind and page");
    end
  end

  task automatic access(input vaddr_t va);
    int h, v, vmin;
    h = -1;
    for (int e = N - 1; e >= 0; e--) if (mv[e] && ma[e] == va) h = e;
    if (h >= 0) begin
      if (!mh[h] && mc[h] + 1 >= thh) begin mh[h] = 1; expq.push_back('{1'b1, va}); n_p++; end
      if (mc[h] != 255) mc[h]++;
    end else begin
      v = 0; vmin = 511;
      for (int e = 0; e < N; e++) begin
        if (!mv[e] && vmin != 0) begin vmin = 0; v = e; end
        else if (mv[e] && mc[e] < vmin) begin vmin = mc[e]; v = e; end
      end
      if (mv[v] && mh[v]) begin expq.push_back('{1'b0, ma[v]}); n_d++; end
      mv[v] = 1; mh[v] = 0; mc[v] = 1; ma[v] = va;
    end
    acc_valid <= 1'b1; acc_va <= va;
    @(posedge clk);
    while (!acc_ready) @(posedge clk);
  endtask

  task automatic tick(input bit pr, input bit mh_in);
    acc_valid <= 1'b0;
    @(posedge clk);
    mem_pressure <= pr; miss_high <= mh_in; token_tick <= 1'b1;
    if (tok == EPOCH - 1) begin
      tok = 0;
      if (pr) begin
        if (thc < thh - 1) thc++;
        if (thh < 255) thh++;
      end else if (mh_in && thh > thc + 1) thh--;
      for (int e = 0; e < N; e++) begin
        mc[e] = mc[e] >> 1;
        if (mv[e] && mh[e] && mc[e] < thc) begin mh[e] = 0; expq.push_back('{1'b0, ma[e]}); n_d++; end
      end
    end else tok++;
    @(posedge clk);
    token_tick <= 1'b0;
    @(posedge clk);
    while (!acc_ready) @(posedge clk);
    repeat (2) @(posedge clk);
    check(int'(th_hot) == thh && int'(th_cold) == thc, $sformatf("thresholds %0d/%0d expected %0d/%0d", th_hot, th_cold, thh, thc));
  endtask

  vaddr_t pool [12];
  initial begin
    for (int i = 0; i < 12; i++) pool[i] = '{req: 9'(i), layer: 7'(i * 3), pos: 11'(i * 5)};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      if ($urandom_range(0, 9) == 0) tick($urandom_range(0, 5) == 0, $urandom_range(0, 2) == 0);
      else access(pool[($urandom_range(0, 1) == 0) ? $urandom_range(0, 3) : $urandom_range(0, 11)]);
    end
    acc_valid <= 1'b0;
    repeat (5) @(posedge clk);
    check(expq.size() == 0, "all expected events seen");
    check(n_promote == 32'(n_p) && n_demote == 32'(n_d) && n_p > 10 && n_d > 10, "event counters");
    $display("promotions %0d demotions %0d thresholds %0d/%0d", n_p, n_d, thh, thc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
