// tb_cache_engine: self-checking round trip through one cache engine.
//
// The engine is connected to the memory controller and the HBM channel
// model. Pages are written in all four modes; the page-table entry of each
// (wr_done) must be valid with the right frame and mode and a size that
// matches the mode. Translations of the written entries must return those
// entries (first through a page-table walk, then from the TLB), unwritten
// entries must come back invalid. Reading every page back (several in
// flight, output backpressure) must deliver the reference data: the input
// for RAW pages, the dequantized values otherwise.
module tb_cache_engine;
  import speckv_pkg::*;
  import speckv_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic tr_req_valid = 0, tr_req_ready, tr_rsp_valid, tr_rsp_hit, inv_valid = 0;
  vaddr_t tr_req_va = '0, inv_va = '0;
  pte_t tr_rsp_pte;
  logic rd_desc_valid = 0, rd_desc_ready;
  rd_desc_t rd_desc = '0;
  logic out_valid, out_ready = 1, out_last, out_bypass, rd_done;
  logic [W_DATA-1:0] out_data;
  logic [SLOT_W-1:0] out_slot, rd_done_slot;
  logic wr_desc_valid = 0, wr_desc_ready;
  wr_desc_t wr_desc = '0;
  logic hw_valid = 0, hw_ready, hw_last = 0;
  logic [W_DATA-1:0] hw_data = '0;
  logic wr_done;
  vaddr_t wr_done_va;
  pte_t wr_done_pte;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  logic [31:0] tlb_hits, tlb_misses;
  logic [4:0] dma_outstanding;

  logic c_req_valid [1], c_req_ready [1], c_rsp_valid [1];
  mem_req_t c_req [1];
  mem_rsp_t c_rsp [1];
  logic ch_req_valid [N_CH], ch_req_ready [N_CH], ch_rsp_valid [N_CH], ch_rsp_ready [N_CH];
  ch_req_t ch_req [N_CH];
  ch_rsp_t ch_rsp [N_CH];
  logic [7:0] weight [1];

  cache_engine dut (.*);
  assign c_req_valid[0] = mem_req_valid;
  assign c_req[0] = mem_req;
  assign mem_req_ready = c_req_ready[0];
  assign mem_rsp_valid = c_rsp_valid[0];
  assign mem_rsp = c_rsp[0];
  mem_ctrl #(.N_CLI(1)) u_mc (.clk, .rst_n, .c_req_valid, .c_req_ready, .c_req, .c_rsp_valid, .c_rsp,
    .ch_req_valid, .ch_req_ready, .ch_req, .ch_rsp_valid, .ch_rsp_ready, .ch_rsp, .weight);
  hbm_model #(.LAT(12), .RAND_BP(1'b1)) hbm (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    #10ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  localparam int NP = 24;
  logic [W_DATA-1:0] pages [NP*PAGE_BEATS];
  pte_t ptes [NP];
  vaddr_t vas [NP];
  logic [W_DATA-1:0] exp_q [$];
  logic [SLOT_W-1:0] slot_q [$];
  int n_bypass = 0, n_stall = 0;

  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid && !out_ready) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      if (out_bypass) n_bypass++;
      if (exp_q.size() == 0) check(1'b0, "unexpected beat");
      else check(out_data === exp_q.pop_front(), "read-back data");
      if (slot_q.size() != 0) check(out_slot == slot_q[0], "beat slot");
      if (out_last && slot_q.size() != 0) void'(slot_q.pop_front());
    end
  end

  task automatic write_page(input int n, input cmode_e m);
    int t, kind;
    wr_desc_valid <= 1'b1;
    wr_desc <= '{va: vas[n], ppn: PPN_W'(100 + n), mode: m};
    @(posedge clk);
    while (!wr_desc_ready) @(posedge clk);
    wr_desc_valid <= 1'b0;
    kind = $urandom_range(0, 5);
    for (int j = 0; j < PAGE_BEATS; j++) begin
      pages[n*PAGE_BEATS + j] = gen_beat((j % 5 == 0) ? $urandom_range(0, 5) : kind);
      hw_valid <= 1'b1; hw_data <= pages[n*PAGE_BEATS + j]; hw_last <= (j == PAGE_BEATS - 1);
      @(posedge clk);
      while (!hw_ready) @(posedge clk);
    end
    hw_valid <= 1'b0; hw_last <= 1'b0;
    t = 0;
    while (!wr_done && t < 3000) begin @(posedge clk); t++; end
    check(wr_done && wr_done_va == vas[n], "wr_done for the page");
    check(wr_done_pte.valid && wr_done_pte.ppn == PPN_W'(100 + n) && wr_done_pte.mode == m, "entry fields");
    if (m == MODE_RAW) check(wr_done_pte.nwords == 7'd64, "RAW page size");
    else if (m != MODE_RLE) check(wr_done_pte.nwords == 7'd34, "INT8 page size (64 x 272 bits)");
    else check(wr_done_pte.nwords <= 7'd64 && wr_done_pte.nwords != 0, "RLE page size");
    ptes[n] = wr_done_pte;
    @(posedge clk);
  endtask

  task automatic translate(input vaddr_t va, output pte_t p, output logic hit);
    int t;
    tr_req_valid <= 1'b1; tr_req_va <= va;
    @(posedge clk);
    while (!tr_req_ready) @(posedge clk);
    tr_req_valid <= 1'b0;
    t = 0;
    while (!tr_rsp_valid && t < 200) begin @(posedge clk); t++; end
    check(tr_rsp_valid, "translation answered");
    p = tr_rsp_pte; hit = tr_rsp_hit;
    @(posedge clk);
  endtask

  initial begin
    pte_t p;
    logic h;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < NP; n++) vas[n] = '{req: 9'(n % 5), layer: 7'(n), pos: 11'(3 * n)};
    for (int n = 0; n < NP; n++) write_page(n, cmode_e'(n % 4));
    // translations of the written pages (page-table walks)
    for (int n = 0; n < NP; n++) begin
      translate(vas[n], p, h);
      check(p == ptes[n], "translation of a written page");
    end
    translate('{req: 9'd300, layer: 7'd1, pos: 11'd1}, p, h);
    check(!p.valid && !h, "unwritten entry: walk finds no mapping");
    inv_valid <= 1'b1; inv_va <= vas[3];
    @(posedge clk);
    inv_valid <= 1'b0;
    translate(vas[3], p, h);
    check(!h && p == ptes[3], "invalidated entry walked again");
    translate(vas[3], p, h);
    check(h && p == ptes[3], "then hits");
    // read everything back, descriptors back to back
    for (int r = 0; r < 2; r++)
      for (int n = 0; n < NP; n++) begin
        for (int j = 0; j < PAGE_BEATS; j++) exp_q.push_back(expect_beat(pages[n*PAGE_BEATS + j], ptes[n].mode));
        slot_q.push_back(SLOT_W'(n + 7));
        rd_desc_valid <= 1'b1; rd_desc <= '{pte: ptes[n], slot: SLOT_W'(n + 7)};
        @(posedge clk);
        while (!rd_desc_ready) @(posedge clk);
      end
    rd_desc_valid <= 1'b0;
    begin
      int t;
      t = 0;
      while (exp_q.size() != 0 && t < 50000) begin @(posedge clk); t++; end
    end
    check(exp_q.size() == 0, "all pages read back");
    check(n_bypass == 2 * 6 * PAGE_BEATS, "RAW pages took the bypass");
    check(n_stall > 0 && tlb_misses > 0 && tlb_hits > 0, "stalls, walks and hits happened");
    $display("bypass beats %0d stalls %0d tlb hits %0d misses %0d", n_bypass, n_stall, tlb_hits, tlb_misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
