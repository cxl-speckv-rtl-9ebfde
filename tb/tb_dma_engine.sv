// tb_dma_engine: self-checking test of the page DMA engine.
//
// The testbench stands in for the compressor (beats come back unchanged, as
// a RAW page would), for the decompressor (it takes words at random and
// reports page ends) and for memory (answers reads out of order, after 1-40
// cycles). Checks: written words land at {ppn, index} and wr_done carries the
// right entry; read words reach the decompressor in request order with the
// page's mode and last flag; rd_done reports slots in order; the outstanding
// window reaches but never exceeds 16.
module tb_dma_engine;
  import speckv_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic rd_desc_valid = 0, rd_desc_ready, wr_desc_valid = 0, wr_desc_ready;
  rd_desc_t rd_desc = '0;
  wr_desc_t wr_desc = '0;
  logic hw_valid = 0, hw_ready, hw_last = 0;
  logic [W_DATA-1:0] hw_data = '0;
  logic ci_valid, ci_ready, ci_last, co_valid, co_ready, co_last;
  logic [W_DATA-1:0] ci_data, co_data;
  cmode_e ci_mode, di_mode;
  logic di_valid, di_ready = 0, di_last, do_fire = 0, do_last = 0;
  logic [W_DATA-1:0] di_data;
  logic [SLOT_W-1:0] out_slot, rd_done_slot;
  logic rd_done, wr_done;
  vaddr_t wr_done_va;
  pte_t wr_done_pte;
  logic mem_req_valid, mem_req_ready = 1, mem_rsp_valid = 0;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp = '0;
  logic [4:0] outstanding;

  dma_engine dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // compressor stand-in: one-word pass-through register
  logic c_v = 0, c_l = 0; logic [W_DATA-1:0] c_d;
  assign ci_ready = !c_v || co_ready;
  assign co_valid = c_v; assign co_data = c_d; assign co_last = c_l;
  always @(posedge clk) if (ci_ready) begin c_v <= ci_valid; c_d <= ci_data; c_l <= ci_last; end

  // memory stand-in: random latency, out of order
  logic [W_DATA-1:0] mem [logic [ADDR_W-1:0]];
  typedef struct { mem_rsp_t r; longint due; } p_t;
  p_t pend [$];
  int max_out = 0;
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    mem_req_ready <= ($urandom_range(0, 4) != 0);
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req.we) mem[mem_req.addr] = mem_req.wdata;
      else begin
        p_t p;
        p.r.rdata = mem.exists(mem_req.addr) ? mem[mem_req.addr] : '0;
        p.r.tag = mem_req.tag; p.due = cyc + $urandom_range(1, 40);
        pend.push_back(p);
      end
    end
    foreach (pend[i]) if (pend[i].due <= cyc) begin
      mem_rsp_valid <= 1'b1; mem_rsp <= pend[i].r; pend.delete(i); break;
    end
    if (rst_n) begin
      if (outstanding > max_out) max_out = outstanding;
      check(outstanding <= 16, "window");
    end
  end

  // decompressor stand-in: takes words at random; the page's last word
  // becomes the page's last output beat a few cycles later
  typedef struct { logic [W_DATA-1:0] w; logic last; cmode_e m; } e_t;
  e_t exp_q [$];
  logic [SLOT_W-1:0] slot_q [$];
  int n_done = 0;
  always @(posedge clk) begin
    di_ready <= ($urandom_range(0, 2) != 0);
    do_fire <= 1'b0; do_last <= 1'b0;
    if (rst_n && di_valid && di_ready) begin
      e_t x;
      x = exp_q.pop_front();
      check(di_data == x.w && di_last == x.last && di_mode == x.m, "read word order/data/last/mode");
      if (di_last) begin do_fire <= 1'b1; do_last <= 1'b1; end
    end
    if (rd_done) begin
      check(slot_q.size() > 0 && rd_done_slot == slot_q.pop_front(), "rd_done slot order");
      n_done++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1'b1; repeat (2) @(posedge clk);
    // write two pages through the (stand-in) compressor
    for (int p = 0; p < 2; p++) begin
      logic [W_DATA-1:0] beats [PAGE_BEATS];
      wr_desc_valid <= 1'b1;
      wr_desc.va <= vaddr_t'(p + 100); wr_desc.ppn <= PPN_W'(p + 7); wr_desc.mode <= MODE_RAW;
      @(posedge clk); while (!wr_desc_ready) @(posedge clk);
      wr_desc_valid <= 1'b0;
      for (int b = 0; b < PAGE_BEATS; b++) begin
        beats[b] = {16{32'($urandom)}};
        hw_valid <= 1'b1; hw_data <= beats[b]; hw_last <= (b == PAGE_BEATS - 1);
        @(posedge clk); while (!hw_ready) @(posedge clk);
      end
      hw_valid <= 1'b0;
      while (!wr_done) @(posedge clk);
      check(wr_done_va == vaddr_t'(p + 100) && wr_done_pte.valid && wr_done_pte.nwords == 7'd64 &&
            wr_done_pte.ppn == PPN_W'(p + 7), "wr_done entry");
      for (int b = 0; b < PAGE_BEATS; b++)
        check(mem[{PPN_W'(p + 7), 6'(b)}] == beats[b], "written word");
    end
    // fill more pages directly in memory, then read 12 pages of varied length
    for (int p = 0; p < 12; p++) begin
      rd_desc_t d;
      int nw;
      nw = (p < 2) ? 64 : $urandom_range(1, 64);
      d.pte.valid = 1'b1; d.pte.mode = (p < 2) ? MODE_RAW : cmode_e'($urandom_range(1, 3));
      d.pte.nwords = 7'(nw); d.pte.ppn = (p < 2) ? PPN_W'(p + 7) : PPN_W'(p + 50);
      d.slot = SLOT_W'(p * 3 + 1);
      for (int w = 0; w < nw; w++) begin
        e_t x;
        if (p >= 2) mem[{d.pte.ppn, 6'(w)}] = {16{32'($urandom)}};
        x.w = mem[{d.pte.ppn, 6'(w)}]; x.last = (w == nw - 1); x.m = d.pte.mode;
        exp_q.push_back(x);
      end
      slot_q.push_back(d.slot);
      rd_desc_valid <= 1'b1; rd_desc <= d;
      @(posedge clk); while (!rd_desc_ready) @(posedge clk);
    end
    rd_desc_valid <= 1'b0;
    fork wait (n_done == 12); repeat (20000) @(posedge clk); join_any
    check(n_done == 12, "all reads completed");
    check(exp_q.size() == 0, "all words delivered");
    check(max_out == 16, $sformatf("window reached 16 (max %0d)", max_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
