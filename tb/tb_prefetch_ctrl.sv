// tb_prefetch_ctrl: self-checking test of the speculative prefetch
// controller.
//
// The controller works with a real L2 directory; the testbench models the
// token predictor (answers after 64 cycles with the last token + 1 .. + 4),
// the translation unit (entries with position <= 40 are mapped, answer
// after 3 cycles) and the DMA (takes descriptors, reports completions in
// order after 5-30 cycles, at least 16 cycles apart as a page takes 64). A model of Algorithm 1 with the depth rules
// (k from prediction outcomes, times beta, bounded by k_cap) predicts
// which entries are read, in which order, and what each notification says;
// demand fetches of mapped and unmapped entries are checked too.
module tb_prefetch_ctrl;
  import speckv_pkg::*;

  localparam int unsigned TOK_W = 18, HIST = 16, BEAM = 4, MAXPOS = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic hint_valid = 0, hint_ready;
  vaddr_t hint_va = '0;
  logic [TOK_W-1:0] hint_tok = '0, hint_hist [HIST];
  logic pred_req_valid, pred_req_ready = 1, pred_rsp_valid = 0;
  logic [TOK_W-1:0] pred_req_hist [HIST], pred_rsp_tok [BEAM];
  logic [8:0] beta = 9'd256;
  logic [4:0] k_cap = 5'd16;
  logic dm_valid = 0, dm_ready, dm_rsp_valid, dm_rsp_ok;
  vaddr_t dm_va = '0;
  logic [SLOT_W-1:0] dm_rsp_slot;
  logic notify_valid;
  vaddr_t notify_va;
  logic [7:0] notify_pages;
  logic tr_req_valid, tr_req_ready = 0, tr_rsp_valid = 0;
  vaddr_t tr_req_va;
  pte_t tr_rsp_pte = '0;
  logic dir_op_valid, dir_op_ready, dir_rsp_valid, dir_rsp_hit;
  dir_op_e dir_op;
  vaddr_t dir_op_va;
  logic [SLOT_W-1:0] dir_op_slot, dir_rsp_slot;
  logic rd_valid, rd_ready = 0;
  rd_desc_t rd_desc;
  vaddr_t rd_va;
  logic [0:0] rd_done = '0;
  logic [SLOT_W-1:0] rd_done_slot [1];
  logic [31:0] n_hints, n_pred_hit, n_pred_miss, n_issued, n_skip_present, n_skip_unmapped;
  logic [31:0] n_demand, n_k_up, n_k_down;
  logic [4:0] k_last;

  prefetch_ctrl #(.N_ENG(1)) dut (.*);
  prefetch_dir #(.SET_W(L2_SET_W)) u_dir (
    .clk, .rst_n, .op_valid(dir_op_valid), .op_ready(dir_op_ready), .op(dir_op), .op_va(dir_op_va),
    .op_slot(dir_op_slot), .rsp_valid(dir_rsp_valid), .rsp_hit(dir_rsp_hit), .rsp_slot(dir_rsp_slot),
    .n_use_hit(), .n_use_miss(), .n_fill(), .n_unused_evict()
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    #20ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // predictor
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
      pbase <= pred_req_hist[HIST-1]; pcnt <= 64;
    end
  end

  // translation model
  int tcnt = 0;
  vaddr_t tva;
  always @(posedge clk) begin
    tr_rsp_valid <= 1'b0;
    tr_req_ready <= (tcnt == 0);
    if (tcnt > 0) begin
      tcnt <= tcnt - 1;
      if (tcnt == 1) begin
        tr_rsp_valid <= 1'b1;
        tr_rsp_pte <= '{valid: (int'(tva.pos) <= MAXPOS), mode: MODE_INT8, nwords: 7'd40, ppn: PPN_W'(int'(tva))};
      end
    end else if (tr_req_valid && tr_req_ready) begin
      tva <= tr_req_va; tcnt <= 3; tr_req_ready <= 1'b0;
    end
  end

  // DMA model
  typedef struct { vaddr_t va; logic [SLOT_W-1:0] slot; int due; } rd_t;
  rd_t inflight [$];
  vaddr_t issued_q [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    rd_done <= '0;
    rd_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && rd_valid && rd_ready) begin
      rd_t r;
      r.va = rd_va; r.slot = rd_desc.slot; r.due = cyc + $urandom_range(5, 30);
      if (inflight.size() != 0 && inflight[$].due + 16 > r.due) r.due = inflight[$].due + 16;
      inflight.push_back(r);
      issued_q.push_back(rd_va);
      check(rd_desc.pte.valid && rd_desc.pte.ppn == PPN_W'(int'(rd_va)), "descriptor carries the entry's translation");
    end
    if (inflight.size() != 0 && inflight[0].due <= cyc) begin
      rd_done <= 1'b1; rd_done_slot[0] <= inflight[0].slot;
      void'(inflight.pop_front());
    end
  end

  // model of the controller
  int kexp [int];
  int streak [int];
  bit present [int];
  logic [TOK_W-1:0] last_tok [int];
  logic [TOK_W-1:0] hist [int][HIST];
  int e_hit = 0, e_miss = 0, e_issued = 0, e_present = 0, e_unmapped = 0, e_up = 0, e_down = 0;

  task automatic hint(input vaddr_t va, input bit right);
    int r, k, t, n;
    logic [TOK_W-1:0] tok;
    vaddr_t exp_list [$];
    r = int'(va.req);
    if (!last_tok.exists(r)) begin
      last_tok[r] = TOK_W'($urandom_range(0, 1000));
      for (int h = 0; h < HIST; h++) hist[r][h] = TOK_W'(h);
      kexp[r] = 2; streak[r] = 0;
    end else begin
      // scoring of the last prediction
      if (right) begin
        e_hit++;
        if (streak[r] == 7) begin streak[r] = 0; if (kexp[r] < 4) begin kexp[r]++; e_up++; end end
        else streak[r]++;
      end else begin
        e_miss++; streak[r] = 0;
        if (kexp[r] > 0) begin kexp[r]--; e_down++; end
      end
    end
    tok = right ? last_tok[r] + 1'b1 : last_tok[r] + TOK_W'(5000);
    k = ((1 << kexp[r]) * int'(beta)) >> 8;
    if (k == 0) k = 1;
    if (k > int'(k_cap)) k = (k_cap == 0) ? 1 : int'(k_cap);
    for (int lo = 0; lo < 3; lo++)
      for (int i = 1; i <= k; i++) begin
        vaddr_t e;
        if (int'(va.layer) + lo >= 80 || int'(va.pos) + i >= (1 << POS_W)) continue;
        e = '{req: va.req, layer: va.layer + LAYER_W'(lo), pos: va.pos + POS_W'(i)};
        if (int'(e.pos) > MAXPOS) e_unmapped++;
        else if (present.exists(int'(e))) e_present++;
        else begin present[int'(e)] = 1; exp_list.push_back(e); e_issued++; end
      end
    hint_valid <= 1'b1; hint_va <= va; hint_tok <= tok;
    for (int h = 0; h < HIST; h++) hint_hist[h] <= hist[r][h];
    @(posedge clk);
    while (!hint_ready) @(posedge clk);
    hint_valid <= 1'b0;
    for (int h = 0; h < HIST - 1; h++) hist[r][h] = hist[r][h+1];
    hist[r][HIST-1] = tok; last_tok[r] = tok;
    t = 0;
    while (!notify_valid && t < 20000) begin @(posedge clk); t++; end
    check(notify_valid && notify_va == va, "notify");
    check(int'(notify_pages) == exp_list.size(), $sformatf("pages %0d expected %0d", notify_pages, exp_list.size()));
    check(inflight.size() == 0, "notify only after all pages arrived");
    check(int'(k_last) == k, $sformatf("depth %0d expected %0d", k_last, k));
    n = issued_q.size();
    check(n == exp_list.size(), "number of reads");
    for (int j = 0; j < n && j < exp_list.size(); j++) check(issued_q[j] == exp_list[j], "read order");
    issued_q.delete();
    @(posedge clk);
  endtask

  task automatic demand(input vaddr_t va, input bit ok);
    int t;
    dm_valid <= 1'b1; dm_va <= va;
    @(posedge clk);
    while (!dm_ready) @(posedge clk);
    dm_valid <= 1'b0;
    t = 0;
    while (!dm_rsp_valid && t < 2000) begin @(posedge clk); t++; end
    check(dm_rsp_valid && dm_rsp_ok == ok, "demand answer");
    if (ok) begin
      check(issued_q.size() == 1 && issued_q[0] == va, "demand read issued");
      check(inflight.size() == 0, "demand answered after its page");
      present[int'(va)] = 1;
    end else check(issued_q.size() == 0, "no read for an unmapped entry");
    issued_q.delete();
    @(posedge clk);
  endtask

  initial begin
    for (int h = 0; h < HIST; h++) hint_hist[h] = '0;
    for (int b = 0; b < BEAM; b++) pred_rsp_tok[b] = '0;
    rd_done_slot[0] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    wait (dir_op_ready);
    // a run of right predictions raises k to 8, then to 16
    for (int p = 0; p < 20; p++) hint('{req: 9'd1, layer: 7'd0, pos: 11'(p)}, 1'b1);
    // wrong predictions lower it
    for (int p = 20; p < 24; p++) hint('{req: 9'd1, layer: 7'd0, pos: 11'(p)}, 1'b0);
    // throttle and cap
    beta <= 9'd64;
    @(posedge clk);
    hint('{req: 9'd2, layer: 7'd10, pos: 11'd0}, 1'b1);
    beta <= 9'd256; k_cap <= 5'd2;
    @(posedge clk);
    hint('{req: 9'd2, layer: 7'd78, pos: 11'd2}, 1'b1);
    k_cap <= 5'd16;
    @(posedge clk);
    // demand fetches
    demand('{req: 9'd3, layer: 7'd5, pos: 11'd5}, 1'b1);
    demand('{req: 9'd3, layer: 7'd5, pos: 11'd100}, 1'b0);
    // random mix
    for (int n = 0; n < 60; n++) begin
      if ($urandom_range(0, 4) == 0) begin
        vaddr_t d;
        d = '{req: 9'($urandom_range(0, 3)), layer: 7'($urandom_range(0, 79)), pos: 11'($urandom_range(0, 50))};
        demand(d, int'(d.pos) <= MAXPOS);
      end
      else hint('{req: 9'($urandom_range(0, 3)), layer: 7'($urandom_range(0, 79)), pos: 11'($urandom_range(0, 45))}, $urandom_range(0, 2) != 0);
    end
    check(n_pred_hit == 32'(e_hit) && n_pred_miss == 32'(e_miss), "prediction counters");
    check(n_issued == 32'(e_issued) && n_skip_present == 32'(e_present) && n_skip_unmapped == 32'(e_unmapped), "issue counters");
    check(n_k_up == 32'(e_up) && n_k_down == 32'(e_down) && e_up >= 2 && e_down >= 2, "depth changes");
    $display("issued %0d present %0d unmapped %0d k up %0d down %0d", e_issued, e_present, e_unmapped, e_up, e_down);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
