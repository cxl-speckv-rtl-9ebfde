// tb_speckv_top: end-to-end test of the whole FPGA design at its default
// parameters.
//
// Around the design: the HBM channel model (random backpressure, 12-cycle
// latency), a token predictor model (answers 64 cycles after a request with
// the last token + 1 .. + 4), and GPU/host behaviour driven by the test.
// Sequence: pages are written in all four modes and in automatic mode (the
// policy engine picks, and a changed q_min makes it switch); token hints
// with right and wrong predictions make the prefetcher fetch pages into L2
// slots; GPU reads hit L2, fall back to CXL memory or find nothing; a GPU
// write invalidates an entry, a read of it finds it GPU-owned, its
// writeback is requested and served; repeated reads promote a page and
// later token epochs demote it. Every page delivered on out_* is compared
// with the reference of what was written (decompressed values or raw).
// Each mechanism is counted and a failure is counted for any that never
// happened.
module tb_speckv_top;
  import speckv_pkg::*;
  import speckv_tb_pkg::*;

  localparam int unsigned TOK_W = 18, HIST = 16, BEAM = 4, N_ENG = 1, N_STAT = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              hint_valid = 0, hint_ready;
  vaddr_t            hint_va = '0;
  logic [TOK_W-1:0]  hint_tok = '0;
  logic [TOK_W-1:0]  hint_hist [HIST];
  logic              pred_req_valid, pred_req_ready = 1;
  logic [TOK_W-1:0]  pred_req_hist [HIST];
  logic              pred_rsp_valid = 0;
  logic [TOK_W-1:0]  pred_rsp_tok [BEAM];
  logic              notify_valid;
  vaddr_t            notify_va;
  logic [7:0]        notify_pages;
  logic              gr_valid = 0, gr_ready, gr_rsp_valid;
  vaddr_t            gr_va = '0;
  logic [1:0]        gr_rsp_src;
  logic [SLOT_W-1:0] gr_rsp_slot;
  logic              gw_valid = 0, gw_ready;
  vaddr_t            gw_va = '0;
  logic              wb_req_valid, wb_req_ready = 1;
  vaddr_t            wb_req_va;
  logic              mode_auto = 0, wr_desc_valid = 0, wr_desc_ready;
  wr_desc_t          wr_desc = '0;
  logic              hw_valid = 0, hw_ready, hw_last = 0;
  logic [W_DATA-1:0] hw_data = '0;
  logic              wr_done_valid;
  vaddr_t            wr_done_va;
  pte_t              wr_done_pte;
  logic              out_valid [N_ENG], out_ready [N_ENG], out_last [N_ENG], out_bypass [N_ENG];
  logic [W_DATA-1:0] out_data [N_ENG];
  logic [SLOT_W-1:0] out_slot [N_ENG];
  logic              mem_pressure = 0, ev_valid, ev_promote;
  vaddr_t            ev_va;
  logic              inv_valid = 0;
  vaddr_t            inv_va = '0;
  logic              cfg_valid = 0;
  logic [5:0]        cfg_addr = '0;
  logic [15:0]       cfg_data = '0;
  logic              ch_req_valid [N_CH], ch_req_ready [N_CH], ch_rsp_valid [N_CH], ch_rsp_ready [N_CH];
  ch_req_t           ch_req [N_CH];
  ch_rsp_t           ch_rsp [N_CH];
  logic [8:0]        beta;
  logic [4:0]        k_sel;
  logic [31:0]       tlb_hits, tlb_misses;
  logic [31:0]       stat [N_STAT];

  speckv_top dut (.*);
  hbm_model #(.LAT(12), .RAND_BP(1'b1)) hbm (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %0t: %s", $time, what);
    end
  endtask

  initial begin
    #30ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $display("watchdog expired");
    $finish;
  end

  // ---------------- reference state ----------------
  logic [W_DATA-1:0] pages [longint];           // written data, {entry, beat}
  pte_t              ptes  [int];
  vaddr_t            wd_q [$];                  // writes waiting for wr_done
  cmode_e            wd_mode [$];
  logic              wd_auto [$];
  logic [W_DATA-1:0] exp_q [$];
  cmode_e            auto_last = MODE_RAW;
  int unsigned       ppn_next = 1;

  // mechanism counters kept by the testbench
  int n_bypass_beats = 0, n_comp_beats = 0, n_out_stall = 0, n_auto_switch = 0;
  int n_notify = 0, n_err_read = 0, n_ev_promote = 0, n_ev_demote = 0, max_outst = 0;
  bit auto_seen = 0;

  // ---------------- predictor model ----------------
  int pcnt = 0;
  logic [TOK_W-1:0] pbase = '0;
  always @(posedge clk) begin
    pred_rsp_valid <= 1'b0;
    if (pcnt > 0) begin
      pcnt <= pcnt - 1;
      if (pcnt == 1) begin
        pred_rsp_valid <= 1'b1;
        for (int b = 0; b < BEAM; b++) pred_rsp_tok[b] <= pbase + TOK_W'(b + 1);
      end
    end else if (pred_req_valid && pred_req_ready) begin
      pbase <= pred_req_hist[HIST-1];
      pcnt  <= 64;
    end
  end

  // ---------------- monitors ----------------
  always @(posedge clk) begin
    out_ready[0] <= ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid[0] && !out_ready[0]) n_out_stall++;
    if (rst_n && out_valid[0] && out_ready[0]) begin
      if (out_bypass[0]) n_bypass_beats++; else n_comp_beats++;
      if (exp_q.size() == 0) check(1'b0, "page beat with nothing expected");
      else check(out_data[0] === exp_q.pop_front(), "page beat data");
    end
    if (rst_n && int'(dut.e_outst[0]) > max_outst) max_outst = int'(dut.e_outst[0]);
    // page reads issued: queue what they must deliver
    if (rst_n && dut.pc_rd_valid && dut.pc_rd_ready) begin
      int k;
      pte_t e;
      logic [W_DATA-1:0] b, x;
      k = int'(dut.pc_rd_va);
      if (!pages.exists(longint'(k) * 64) || !ptes.exists(k)) check(1'b0, "read of an entry never written");
      else begin
        e = ptes[k];
        for (int j = 0; j < PAGE_BEATS; j++) begin
          b = pages[longint'(k) * 64 + j];
          x = expect_beat(b, e.mode);
          exp_q.push_back(x);
        end
      end
    end
    if (rst_n && wr_done_valid) begin
      if (wd_q.size() == 0) check(1'b0, "unexpected wr_done");
      else begin
        vaddr_t va;
        cmode_e m;
        logic au;
        va = wd_q.pop_front(); m = wd_mode.pop_front(); au = wd_auto.pop_front();
        check(wr_done_va == va, "wr_done address");
        check(wr_done_pte.valid, "wr_done entry valid");
        if (!au) check(wr_done_pte.mode == m, "wr_done mode");
        else begin
          if (auto_seen && wr_done_pte.mode != auto_last) n_auto_switch++;
          auto_seen = 1; auto_last = wr_done_pte.mode;
        end
        ptes[int'(va)] = wr_done_pte;
      end
    end
    if (rst_n && notify_valid) n_notify++;
    if (rst_n && ev_valid) begin
      if (ev_promote) n_ev_promote++; else n_ev_demote++;
    end
  end

  vaddr_t wb_pend [$];
  always @(posedge clk) if (rst_n && wb_req_valid && wb_req_ready) wb_pend.push_back(wb_req_va);

  // ---------------- driving tasks ----------------
  function automatic vaddr_t mk(input int r, input int l, input int p);
    return '{req: REQ_W'(r), layer: LAYER_W'(l), pos: POS_W'(p)};
  endfunction

  task automatic write_page(input vaddr_t va, input cmode_e m, input logic au);
    int kind;
    wr_desc_valid <= 1'b1;
    wr_desc <= '{va: va, ppn: PPN_W'(ppn_next), mode: m};
    mode_auto <= au;
    ppn_next++;
    @(posedge clk);
    while (!wr_desc_ready) @(posedge clk);
    wr_desc_valid <= 1'b0;
    wd_q.push_back(va); wd_mode.push_back(m); wd_auto.push_back(au);
    kind = $urandom_range(0, 5);
    for (int j = 0; j < PAGE_BEATS; j++) begin
      logic [W_DATA-1:0] b;
      b = gen_beat((j % 7 == 0) ? $urandom_range(0, 5) : kind);
      pages[longint'(int'(va)) * 64 + j] = b;
      hw_valid <= 1'b1; hw_data <= b; hw_last <= (j == PAGE_BEATS - 1);
      @(posedge clk);
      while (!hw_ready) @(posedge clk);
    end
    hw_valid <= 1'b0; hw_last <= 1'b0;
  endtask

  task automatic wait_writes();
    int t;
    t = 0;
    while (wd_q.size() != 0 && t < 5000) begin @(posedge clk); t++; end
    check(wd_q.size() == 0, "page writes completed");
  endtask

  task automatic set_cfg(input int a, input int d);
    cfg_valid <= 1'b1; cfg_addr <= 6'(a); cfg_data <= 16'(d);
    @(posedge clk);
    cfg_valid <= 1'b0;
  endtask

  logic [TOK_W-1:0] hist [int][HIST];
  logic [TOK_W-1:0] last_tok [int];

  task automatic hint(input vaddr_t va, input bit right);
    int r, t;
    logic [TOK_W-1:0] tok;
    r = int'(va.req);
    if (!last_tok.exists(r)) begin
      last_tok[r] = TOK_W'($urandom_range(0, 1000));
      for (int h = 0; h < HIST; h++) hist[r][h] = TOK_W'(h);
    end
    tok = right ? last_tok[r] + 1'b1 : last_tok[r] + TOK_W'(1000);
    hint_valid <= 1'b1; hint_va <= va; hint_tok <= tok;
    for (int h = 0; h < HIST; h++) hint_hist[h] <= hist[r][h];
    @(posedge clk);
    while (!hint_ready) @(posedge clk);
    hint_valid <= 1'b0;
    for (int h = 0; h < HIST - 1; h++) hist[r][h] = hist[r][h+1];
    hist[r][HIST-1] = tok;
    last_tok[r] = tok;
    t = 0;
    while (!notify_valid && t < 20000) begin @(posedge clk); t++; end
    check(notify_valid && notify_va == va, "prefetch notify");
    @(posedge clk);
  endtask

  task automatic gpu_read(input vaddr_t va, output logic [1:0] src);
    int t;
    gr_valid <= 1'b1; gr_va <= va;
    @(posedge clk);
    while (!gr_ready) @(posedge clk);
    gr_valid <= 1'b0;
    t = 0;
    while (!gr_rsp_valid && t < 5000) begin @(posedge clk); t++; end
    check(gr_rsp_valid, "GPU read answered");
    src = gr_rsp_src;
    if (src == 2'd3) n_err_read++;
    @(posedge clk);
  endtask

  task automatic gpu_write(input vaddr_t va);
    gw_valid <= 1'b1; gw_va <= va;
    @(posedge clk);
    while (!gw_ready) @(posedge clk);
    gw_valid <= 1'b0;
    @(posedge clk);
  endtask

  task automatic drain_reads();
    int t;
    t = 0;
    while ((exp_q.size() != 0 || dut.e_outst[0] != 0) && t < 20000) begin @(posedge clk); t++; end
    check(exp_q.size() == 0, "all page beats delivered");
  endtask

  // ---------------- test ----------------
  initial begin
    logic [1:0] src;
    for (int h = 0; h < HIST; h++) hint_hist[h] = '0;
    for (int b = 0; b < BEAM; b++) pred_rsp_tok[b] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // the L2 directory clears its sets after reset
    wait (dut.u_dir.op_ready);
    @(posedge clk);

    // 1. pages of request 0 (layers 0..2, positions 0..12) in all modes,
    //    layer 3 in automatic mode with a q_min change in the middle,
    //    request 1 layer 0 positions 0..3
    for (int l = 0; l < 3; l++)
      for (int p = 0; p <= 12; p++) write_page(mk(0, l, p), cmode_e'((l + p) % 4), 1'b0);
    for (int p = 0; p < 6; p++) begin
      if (p == 3) set_cfg(6, 252);        // q_min: lossy RLE no longer allowed
      write_page(mk(0, 3, p), MODE_RAW, 1'b1);
    end
    set_cfg(6, 250);
    for (int p = 0; p < 4; p++) write_page(mk(1, 0, p), cmode_e'(p % 4), 1'b0);
    wait_writes();
    check(stat[20] != 0, "throttle acted during the write burst");
    set_cfg(0, 256);                      // software restores beta

    // 2. hints for request 0, layer 0: a run of right predictions, then wrong
    for (int p = 0; p < 12; p++) hint(mk(0, 0, p), 1'b1);
    hint(mk(0, 0, 3), 1'b0);
    hint(mk(0, 0, 4), 1'b0);
    drain_reads();

    // 3. GPU reads: prefetched, fallback from memory, unmapped
    gpu_read(mk(0, 0, 1), src);
    check(src == 2'd0, "prefetched entry served from L2");
    gpu_read(mk(1, 0, 2), src);
    check(src == 2'd1, "entry not prefetched fetched from CXL memory");
    drain_reads();
    gpu_read(mk(1, 9, 9), src);
    check(src == 2'd3, "unmapped entry reported");

    // 4. coherence: GPU write, owned read, writeback
    gpu_write(mk(0, 1, 2));
    gpu_read(mk(0, 1, 2), src);
    check(src == 2'd2, "entry owned by the GPU");
    begin
      int t;
      t = 0;
      while (wb_pend.size() == 0 && t < 2000) begin @(posedge clk); t++; end
      check(wb_pend.size() != 0, "writeback requested");
      while (wb_pend.size() != 0) write_page(wb_pend.pop_front(), MODE_DELTA, 1'b0);
    end
    wait_writes();
    repeat (4) @(posedge clk);
    check(dut.u_coh.owned_cnt == 0, "owned entry released after writeback");
    gpu_read(mk(0, 1, 2), src);
    check(src == 2'd1, "written-back entry read from CXL memory");
    drain_reads();

    // 5. hot page: repeated reads promote it
    for (int n = 0; n < 10; n++) begin
      gpu_read(mk(0, 0, 1), src);
      check(src == 2'd0, "hot entry from L2");
    end

    // 6. token epochs on a request without pages: aging demotes the page
    for (int n = 0; n < 3 * 128 + 2; n++) hint(mk(2, 79, n), n % 3 != 0);
    drain_reads();
    repeat (100) @(posedge clk);

    // ---------------- mechanisms ----------------
    begin
      int m [string];
      m["bypass beats (RAW pages)"]       = n_bypass_beats;
      m["decompressed beats"]              = n_comp_beats;
      m["output backpressure stalls"]      = n_out_stall;
      m["TLB hits"]                        = int'(tlb_hits);
      m["TLB misses (page walks)"]         = int'(tlb_misses);
      m["predictions right"]               = int'(stat[1]);
      m["predictions wrong"]               = int'(stat[2]);
      m["prefetch pages issued"]           = int'(stat[3]);
      m["prefetch skipped, in L2"]         = int'(stat[4]);
      m["prefetch skipped, unmapped"]      = int'(stat[5]);
      m["demand fetches"]                  = int'(stat[6]);
      m["k raised"]                        = int'(stat[7]);
      m["k lowered"]                       = int'(stat[8]);
      m["L2 fills"]                        = int'(stat[11]);
      m["L2 entries dropped unused"]       = int'(stat[12]);
      m["reads served from L2"]            = int'(stat[13]);
      m["reads from CXL memory"]           = int'(stat[14]);
      m["reads of GPU-owned entries"]      = int'(stat[15]);
      m["invalidations"]                   = int'(stat[16]);
      m["writebacks"]                      = int'(stat[17]);
      m["promotions"]                      = n_ev_promote;
      m["demotions"]                       = n_ev_demote;
      m["throttle steps"]                  = int'(stat[20]);
      m["bandit k switches"]               = int'(stat[21]);
      m["automatic mode switches"]         = n_auto_switch;
      m["GPU notifications"]               = n_notify;
      m["unmapped reads"]                  = n_err_read;
      m["DMA reads overlapped (>1)"]       = (max_outst > 1) ? max_outst : 0;
      foreach (m[s]) begin
        $display("mechanism %-32s %0d", s, m[s]);
        check(m[s] > 0, {"mechanism never happened: ", s});
      end
    end
    check(stat[18] == n_ev_promote && stat[19] == n_ev_demote, "tracker counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
