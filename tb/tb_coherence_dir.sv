// tb_coherence_dir: self-checking test of the home-agent directory.
//
// The testbench models the L2 directory (a set of present entries, answers
// 2 cycles after an operation) and the demand fetch path (entries with
// position <= 40 exist, answered after 10 cycles). Checks: reads are
// answered from L2, from memory, as unmapped or as GPU-owned according to a
// model; writes drop the L2 copy; writebacks are requested only when the
// link is idle unless a read made them urgent; finished writebacks release
// entries; a full table holds writes back.
module tb_coherence_dir;
  import speckv_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic rd_valid = 0, rd_ready, rd_rsp_valid;
  vaddr_t rd_va = '0;
  logic [1:0] rd_rsp_src;
  logic [SLOT_W-1:0] rd_rsp_slot;
  logic wr_valid = 0, wr_ready;
  vaddr_t wr_va = '0;
  logic link_idle = 0, wb_req_valid, wb_req_ready = 1, wb_done_valid = 0;
  vaddr_t wb_req_va, wb_done_va = '0;
  logic dir_op_valid, dir_op_ready = 1, dir_rsp_valid = 0, dir_rsp_hit = 0;
  dir_op_e dir_op;
  vaddr_t dir_op_va;
  logic [SLOT_W-1:0] dir_rsp_slot = '0;
  logic dm_valid, dm_ready = 1, dm_rsp_valid = 0, dm_rsp_ok = 0;
  vaddr_t dm_va;
  logic [SLOT_W-1:0] dm_rsp_slot = '0;
  logic [31:0] n_l2_hit, n_mem_fetch, n_owned, n_inval, n_wb;
  logic [5:0] owned_cnt;

  coherence_dir dut (.*);

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

  function automatic logic [SLOT_W-1:0] slot_of(input vaddr_t va);
    return SLOT_W'(int'(va) * 7);
  endfunction

  // L2 directory and demand models
  bit l2 [int];
  int dcnt = 0, mcnt = 0;
  vaddr_t dva, mva;
  dir_op_e dop;
  int n_dm = 0, n_dirinv = 0;
  always @(posedge clk) begin
    dir_rsp_valid <= 1'b0;
    dm_rsp_valid <= 1'b0;
    dir_op_ready <= (dcnt == 0);
    if (dcnt > 0) begin
      dcnt <= dcnt - 1;
      if (dcnt == 1) begin
        dir_rsp_valid <= 1'b1;
        dir_rsp_hit <= l2.exists(int'(dva));
        dir_rsp_slot <= slot_of(dva);
        if (dop == DIR_INVAL) l2.delete(int'(dva));
      end
    end else if (dir_op_valid && dir_op_ready) begin
      dva <= dir_op_va; dop <= dir_op; dcnt <= 2; dir_op_ready <= 1'b0;
      check(dir_op == DIR_USE || dir_op == DIR_INVAL, "directory op kind");
      if (dir_op == DIR_INVAL) n_dirinv++;
    end
    if (mcnt > 0) begin
      mcnt <= mcnt - 1;
      if (mcnt == 1) begin
        dm_rsp_valid <= 1'b1; dm_rsp_ok <= (int'(mva.pos) <= 40); dm_rsp_slot <= slot_of(mva);
      end
    end else if (dm_valid && dm_ready) begin
      mva <= dm_va; mcnt <= 10; n_dm++;
    end
  end

  // writeback requests
  bit owned [int];
  bit urgent [int];
  vaddr_t wbq [$];
  always @(posedge clk) if (rst_n && wb_req_valid && wb_req_ready) begin
    check(owned.exists(int'(wb_req_va)), "writeback of an owned entry");
    check(link_idle || urgent.exists(int'(wb_req_va)), "writeback only when idle or urgent");
    wbq.push_back(wb_req_va);
  end

  task automatic gpu_write(input vaddr_t va);
    wr_valid <= 1'b1; wr_va <= va;
    @(posedge clk);
    while (!wr_ready) @(posedge clk);
    wr_valid <= 1'b0;
    owned[int'(va)] = 1;
    repeat (6) @(posedge clk);
    check(!l2.exists(int'(va)), "L2 copy dropped on write");
  endtask

  task automatic gpu_read(input vaddr_t va);
    int t, e;
    if (owned.exists(int'(va))) begin e = 2; urgent[int'(va)] = 1; end
    else if (l2.exists(int'(va))) e = 0;
    else e = (int'(va.pos) <= 40) ? 1 : 3;
    rd_valid <= 1'b1; rd_va <= va;
    @(posedge clk);
    while (!rd_ready) @(posedge clk);
    rd_valid <= 1'b0;
    t = 0;
    while (!rd_rsp_valid && t < 100) begin @(posedge clk); t++; end
    check(rd_rsp_valid && int'(rd_rsp_src) == e, $sformatf("read source %0d expected %0d", rd_rsp_src, e));
    if (e < 2) check(rd_rsp_slot == slot_of(va), "read slot");
    @(posedge clk);
  endtask

  task automatic finish_wb();
    vaddr_t va;
    va = wbq.pop_front();
    wb_done_valid <= 1'b1; wb_done_va <= va;
    @(posedge clk);
    wb_done_valid <= 1'b0;
    owned.delete(int'(va)); urgent.delete(int'(va));
    @(posedge clk);
  endtask

  function automatic vaddr_t rva();
    return '{req: 9'($urandom_range(0, 3)), layer: 7'($urandom_range(0, 3)), pos: 11'($urandom_range(0, 50))};
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // L2 holds some entries
    for (int i = 0; i < 200; i++) l2[int'(rva())] = 1;
    // directed: owned read makes the writeback urgent though the link is busy
    gpu_write('{req: 9'd1, layer: 7'd1, pos: 11'd1});
    repeat (20) @(posedge clk);
    check(wbq.size() == 0, "no writeback while the link is busy");
    gpu_read('{req: 9'd1, layer: 7'd1, pos: 11'd1});
    repeat (3) @(posedge clk);
    check(wbq.size() == 1, "urgent writeback requested");
    finish_wb();
    check(owned_cnt == 0, "entry released");
    // table full
    for (int i = 0; i < 32; i++) gpu_write('{req: 9'd5, layer: 7'd0, pos: 11'(i)});
    wr_valid <= 1'b1; wr_va <= '{req: 9'd6, layer: 7'd0, pos: 11'd0};
    repeat (5) @(posedge clk);
    check(!wr_ready && owned_cnt == 32, "full table holds writes");
    link_idle <= 1'b1;
    repeat (40) @(posedge clk);
    check(wbq.size() == 32, "idle link: all writebacks requested");
    owned[int'(wr_va)] = 1;               // taken as soon as an entry frees
    finish_wb();
    @(posedge clk);
    while (!wr_ready) @(posedge clk);
    wr_valid <= 1'b0;
    repeat (6) @(posedge clk);
    while (wbq.size() != 0) finish_wb();
    repeat (10) @(posedge clk);
    while (wbq.size() != 0) finish_wb();
    // random
    for (int n = 0; n < 800; n++) begin
      int o;
      link_idle <= ($urandom_range(0, 3) == 0);
      o = $urandom_range(0, 9);
      if (o < 6) gpu_read(rva());
      else if (o < 8) gpu_write(rva());
      else if (wbq.size() != 0) finish_wb();
      if ($urandom_range(0, 5) == 0) l2[int'(rva())] = 1;
    end
    check(n_l2_hit > 20 && n_mem_fetch > 20 && n_owned > 2 && n_wb > 20, "all answers seen");
    check(32'(n_dirinv) == n_inval, "invalidation count");
    $display("l2 %0d mem %0d owned %0d inval %0d wb %0d", n_l2_hit, n_mem_fetch, n_owned, n_inval, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
