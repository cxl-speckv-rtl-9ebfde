// tb_mem_ctrl: self-checking test of the memory controller with 3 clients.
//
// Each client owns a disjoint address partition (as the engines do), writes
// random words and reads them back with up to 16 reads in flight; every read
// must return its own data and tag to its own client. A second phase drives
// all clients at one channel to check that each gets a share (no starvation)
// and that the channel carries a request nearly every cycle. Also checks the
// latency-and-queue weights against the formula.
module tb_mem_ctrl;
  import speckv_pkg::*;
  localparam int NC = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     c_req_valid [NC], c_req_ready [NC], c_rsp_valid [NC];
  mem_req_t c_req [NC];
  mem_rsp_t c_rsp [NC];
  logic     ch_req_valid [N_CH], ch_req_ready [N_CH], ch_rsp_valid [N_CH], ch_rsp_ready [N_CH];
  ch_req_t  ch_req [N_CH];
  ch_rsp_t  ch_rsp [N_CH];
  logic [7:0] weight [NC];

  mem_ctrl #(.N_CLI(NC)) dut (.*);
  hbm_model #(.LAT(12), .RAND_BP(1'b1)) hbm (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  logic [W_DATA-1:0] expd [NC][16];   // expected data per outstanding tag
  int   outst [NC];
  bit   busy [NC];
  int   hot_mode = 0;
  int   grants [NC];
  int   ch0_busy = 0;

  for (genvar c = 0; c < NC; c++) begin : g_cli
    logic [TAG_W-1:0] tag = '0;
    logic [W_DATA-1:0] ref_m [int];
    initial begin
      c_req_valid[c] = 1'b0; c_req[c] = '0; outst[c] = 0; grants[c] = 0; busy[c] = 1'b1;
      @(posedge rst_n);
      for (int n = 0; n < 400; n++) begin
        logic [ADDR_W-1:0] a;
        bit we;
        int idx;
        idx = $urandom_range(0, 63);
        a = {2'(c), 28'(idx * 37 + 5)};
        we = !ref_m.exists(idx) || ($urandom_range(0, 2) == 0);
        while (!we && outst[c] >= 16) @(posedge clk);
        c_req_valid[c] <= 1'b1;
        c_req[c].we <= we; c_req[c].addr <= a; c_req[c].tag <= tag;
        c_req[c].wdata <= {16{32'($urandom)}};
        @(posedge clk);
        while (!c_req_ready[c]) @(posedge clk);
        if (we) ref_m[idx] = c_req[c].wdata;
        else begin expd[c][tag[3:0]] = ref_m[idx]; outst[c]++; tag = (tag + 1) & 5'h0f; end
        c_req_valid[c] <= 1'b0;
        // writes are not answered: make sure a read never overtakes a write
        // to the same word by letting the write settle first
        if (we) repeat (2) @(posedge clk);
      end
      c_req_valid[c] <= 1'b0;
      wait (outst[c] == 0);
      busy[c] = 1'b0;
      // phase 2: everyone hammers channel 0
      wait (hot_mode == 1);
      c_req_valid[c] <= 1'b1; c_req[c].we <= 1'b1; c_req[c].addr <= {2'(c), 28'h40};
      while (hot_mode == 1) begin
        @(posedge clk);
        if (c_req_ready[c]) grants[c]++;
      end
      c_req_valid[c] <= 1'b0;
    end
    always @(posedge clk) if (rst_n && c_rsp_valid[c]) begin
      check(c_rsp[c].rdata == expd[c][c_rsp[c].tag[3:0]], $sformatf("client %0d read data", c));
      outst[c]--;
    end
  end

  always @(posedge clk) if (hot_mode == 1 && ch_req_valid[0] && ch_req_ready[0]) ch0_busy++;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1'b1;
    repeat (5) @(posedge clk);
    wait (!busy[0] && !busy[1] && !busy[2]);
    // the weight formula, independently: with nothing queued and the latency
    // average L (4 fraction bits), w = max(1, (128*Q + 128*64*16/L) / 256)
    for (int c = 0; c < NC; c++) begin
      int unsigned l, w;
      l = dut.lbar[c];
      w = (l == 0) ? 32 : ((128 * ((64 * 16) / l)) / 256);
      if (w == 0) w = 1;
      check(l >= 12 * 16 - 32 && l <= 30 * 16, $sformatf("latency average %0d plausible", l));
      check(weight[c] == w, $sformatf("weight %0d formula (%0d vs %0d)", c, weight[c], w));
    end
    hot_mode = 1;
    repeat (600) @(posedge clk);
    hot_mode = 2;
    repeat (5) @(posedge clk);
    for (int c = 0; c < NC; c++) check(grants[c] > 100, $sformatf("client %0d share %0d", c, grants[c]));
    check(ch0_busy > 400, $sformatf("channel 0 utilisation %0d/600", ch0_busy));
    check(hbm.n_rd > 300, "reads reached the channels");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
