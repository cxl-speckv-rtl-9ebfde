// tb_decompress_engine: self-checking test of the decompression pipeline.
//
// Pages are encoded by the reference encoder of speckv_tb_pkg (not by the
// RTL compressor), fed in as packed words, and every output beat is compared
// with the reference dequantization q*scale/127 rounded to FP16 (or with the
// original beat for RAW pages). Checks the 25-cycle compressed latency, the
// 5-cycle bypass latency, one beat per cycle on a highly compressed page,
// in-order delivery across RAW/compressed switches, and backpressure.
module tb_decompress_engine;
  import speckv_pkg::*;
  import speckv_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              s_valid = 1'b0, s_ready, s_last = 1'b0;
  logic [W_DATA-1:0] s_data = '0;
  cmode_e            s_mode = MODE_RAW;
  logic              m_valid, m_ready = 1'b1, m_last, m_bypass;
  logic [W_DATA-1:0] m_data;

  decompress_engine dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { logic [W_DATA-1:0] w; logic last; } word_t;
  word_t exp_q[$];
  longint in_cyc[$], out_cyc[$];
  bit bp_on = 1'b0;
  int n_byp = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  function automatic logic [W_DATA-1:0] expect_beat(input logic [W_DATA-1:0] b, input cmode_e mode);
    logic [15:0] mx;
    logic [W_DATA-1:0] r;
    if (mode == MODE_RAW) return b;
    mx = 0;
    for (int i = 0; i < LANES; i++) if (b[16*i +: 15] > mx[14:0]) mx = {1'b0, b[16*i +: 15]};
    for (int i = 0; i < LANES; i++) r[16*i +: 16] = ref_dq(ref_q(b[16*i +: 16], mx), mx);
    return r;
  endfunction

  task automatic send_page(input cmode_e mode, input int kind_sel);
    bitq_t bits;
    logic [W_DATA-1:0] words [$];
    for (int b = 0; b < PAGE_BEATS; b++) begin
      logic [W_DATA-1:0] beat;
      word_t x;
      beat = gen_beat((kind_sel >= 0) ? kind_sel : $urandom_range(0, 5));
      ref_record(beat, mode, bits);
      x.w = expect_beat(beat, mode);
      x.last = (b == PAGE_BEATS - 1);
      exp_q.push_back(x);
    end
    while (bits.size() % W_DATA != 0) bits.push_back(1'b0);
    for (int w = 0; w < bits.size() / W_DATA; w++) begin
      logic [W_DATA-1:0] x;
      for (int i = 0; i < W_DATA; i++) x[i] = bits[w*W_DATA + i];
      words.push_back(x);
    end
    foreach (words[w]) begin
      s_valid <= 1'b1; s_data <= words[w]; s_last <= (w == words.size() - 1); s_mode <= mode;
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      in_cyc.push_back(cyc);
    end
  endtask

  int nout = 0;
  always @(posedge clk) begin
    m_ready <= bp_on ? ($urandom_range(0, 3) != 0) : 1'b1;
    if (rst_n && m_valid && m_ready) begin
      out_cyc.push_back(cyc);
      nout++;
      if (m_bypass) n_byp++;
      if (exp_q.size() == 0) check(1'b0, "unexpected beat");
      else begin
        word_t x;
        x = exp_q.pop_front();
        check(m_data == x.w, $sformatf("beat %0d data", nout));
        if (m_data != x.w && failures < 4) for (int i = 0; i < LANES; i++) if (m_data[16*i+:16] != x.w[16*i+:16]) $display("lane %0d got %h exp %h", i, m_data[16*i+:16], x.w[16*i+:16]);
        check(m_last == x.last, $sformatf("beat %0d last", nout));
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drain();
    s_valid <= 1'b0;
    wait (exp_q.size() == 0);
    repeat (30) @(posedge clk);
    in_cyc.delete(); out_cyc.delete();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    // latency of the compressed path and II=1 on a highly compressed page
    send_page(MODE_RLE, 3);
    s_valid <= 1'b0;
    wait (exp_q.size() == 0);
    check(out_cyc[0] - in_cyc[0] == 25, $sformatf("compressed latency %0d != 25", out_cyc[0] - in_cyc[0]));
    check(out_cyc[PAGE_BEATS-1] - out_cyc[0] == PAGE_BEATS - 1, "II=1 on compressed page");
    drain();
    // bypass latency
    send_page(MODE_RAW, 0);
    s_valid <= 1'b0;
    wait (exp_q.size() == 0);
    check(out_cyc[0] - in_cyc[0] == 5, $sformatf("bypass latency %0d != 5", out_cyc[0] - in_cyc[0]));
    check(out_cyc[PAGE_BEATS-1] - out_cyc[0] == PAGE_BEATS - 1, "II=1 on bypass");
    drain();
    // every mode and kind back to back (RAW after compressed exercises ordering)
    for (int k = 0; k < 6; k++)
      for (int m = 3; m >= 0; m--) send_page(cmode_e'(m), k);
    drain();
    // random pages under backpressure
    bp_on = 1'b1;
    for (int p = 0; p < 16; p++) send_page(cmode_e'($urandom_range(0, 3)), -1);
    s_valid <= 1'b0;
    fork
      wait (exp_q.size() == 0);
      repeat (100000) @(posedge clk);
    join_any
    repeat (30) @(posedge clk);
    check(exp_q.size() == 0, "all beats produced");
    check(n_byp > 0, "bypass used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
