// tb_compress_engine: self-checking test of the compression pipeline.
//
// Sends pages in all four modes built from random, constant, ramp, zero,
// subnormal and sparse beats, compares every packed output word with a
// reference encoding computed in speckv_tb_pkg, and checks the 20-cycle
// latency and one-beat-per-cycle throughput on a RAW page, plus correct
// behaviour under random output backpressure.
module tb_compress_engine;
  import speckv_pkg::*;
  import speckv_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              s_valid = 1'b0, s_ready, s_last = 1'b0;
  logic [W_DATA-1:0] s_data = '0;
  cmode_e            s_mode = MODE_RAW;
  logic              m_valid, m_ready = 1'b1, m_last;
  logic [W_DATA-1:0] m_data;

  compress_engine dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { logic [W_DATA-1:0] w; logic last; } word_t;
  word_t exp_q[$];
  longint in_cyc[$], out_cyc[$];
  bit     bp_on = 1'b0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  task automatic send_page(input cmode_e mode, input int kind_sel);
    bitq_t bits;
    logic [W_DATA-1:0] beats [PAGE_BEATS];
    for (int b = 0; b < PAGE_BEATS; b++) begin
      int kind;
      kind = (kind_sel >= 0) ? kind_sel : $urandom_range(0, 5);
      beats[b] = gen_beat(kind);
      ref_record(beats[b], mode, bits);
    end
    while (bits.size() % W_DATA != 0) bits.push_back(1'b0);
    for (int w = 0; w < bits.size() / W_DATA; w++) begin
      word_t x;
      for (int i = 0; i < W_DATA; i++) x.w[i] = bits[w*W_DATA + i];
      x.last = (w == bits.size() / W_DATA - 1);
      exp_q.push_back(x);
    end
    for (int b = 0; b < PAGE_BEATS; b++) begin
      s_valid <= 1'b1; s_data <= beats[b]; s_last <= (b == PAGE_BEATS-1); s_mode <= mode;
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      in_cyc.push_back(cyc);
    end
  endtask

  int nout = 0;
  always @(posedge clk) begin
    if (bp_on) m_ready <= ($urandom_range(0, 3) != 0);
    else       m_ready <= 1'b1;
    if (rst_n && m_valid && m_ready) begin
      out_cyc.push_back(cyc);
      nout++;
      if (exp_q.size() == 0) check(1'b0, "unexpected output word");
      else begin
        word_t x;
        x = exp_q.pop_front();
        check(m_data == x.w, $sformatf("word %0d data", nout));
        if (m_data != x.w && failures < 4) $display("got %h\nexp %h", m_data[127:0], x.w[127:0]);
        check(m_last == x.last, $sformatf("word %0d last", nout));
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

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    // 1) latency and throughput on a RAW page with no backpressure
    send_page(MODE_RAW, 0);
    s_valid <= 1'b0;
    wait (exp_q.size() == 0);
    repeat (25) @(posedge clk);
    check(out_cyc.size() == PAGE_BEATS, "RAW word count");
    check(out_cyc[0] - in_cyc[0] == 20, $sformatf("latency %0d != 20", out_cyc[0] - in_cyc[0]));
    check(out_cyc[PAGE_BEATS-1] - out_cyc[0] == PAGE_BEATS - 1, "RAW II=1 output");
    check(in_cyc[PAGE_BEATS-1] - in_cyc[0] == PAGE_BEATS - 1, "RAW II=1 input");
    // 2) every mode and beat kind, back to back, no backpressure
    for (int m = 0; m < 4; m++)
      for (int k = 0; k < 6; k++) send_page(cmode_e'(m), k);
    // 3) mixed pages under backpressure
    bp_on = 1'b1;
    for (int p = 0; p < 16; p++) send_page(cmode_e'($urandom_range(0, 3)), -1);
    s_valid <= 1'b0;
    fork
      wait (exp_q.size() == 0);
      repeat (100000) @(posedge clk);
    join_any
    repeat (30) @(posedge clk);
    check(exp_q.size() == 0, "all expected words produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
