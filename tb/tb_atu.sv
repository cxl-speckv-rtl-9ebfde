// tb_atu: self-checking test of the address translation unit.
//
// A page table held in the testbench (associative array) answers walk reads
// after 8 cycles. Checks translations against the table, TLB hit latency (4),
// miss latency (4 + 15), hit/miss counters, write-through updates, TLB
// invalidation and replacement when more pages are touched than the TLB holds.
module tb_atu;
  import speckv_pkg::*;

  localparam int unsigned TLB_N = 8;
  localparam logic [ADDR_W-1:0] PTB = 30'h3000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, rsp_valid, rsp_hit, upd_valid = 0, upd_ready, inv_valid = 0;
  vaddr_t req_va = '0, upd_va = '0, inv_va = '0;
  pte_t rsp_pte, upd_pte = '0;
  logic mem_req_valid, mem_req_ready = 1'b1, mem_req_we, mem_rsp_valid = 1'b0;
  logic [ADDR_W-1:0] mem_req_addr;
  logic [W_DATA-1:0] mem_req_wdata, mem_rsp_data = '0;
  logic [31:0] n_hits, n_misses;

  atu #(.TLB_ENTRIES(TLB_N), .PT_BASE(PTB)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // page table model
  pte_t pt [vaddr_t];
  logic [W_DATA-1:0] rsp_pipe [8];
  logic [7:0]        rsp_v = '0;
  always @(posedge clk) begin
    rsp_v <= {rsp_v[6:0], 1'b0};
    for (int i = 7; i > 0; i--) rsp_pipe[i] <= rsp_pipe[i-1];
    if (mem_req_valid && mem_req_ready) begin
      vaddr_t v;
      v = vaddr_t'(mem_req_addr - PTB);
      check(mem_req_addr >= PTB, "page-table address range");
      if (mem_req_we) pt[v] = pte_t'(mem_req_wdata[$bits(pte_t)-1:0]);
      else begin
        rsp_v[0] <= 1'b1;
        rsp_pipe[0] <= pt.exists(v) ? W_DATA'(pt[v]) : '0;
      end
    end
    mem_rsp_valid <= rsp_v[6];
    mem_rsp_data  <= rsp_pipe[6];
  end

  function automatic pte_t mk(input int i);
    pte_t p;
    p.valid = 1'b1; p.mode = cmode_e'(i % 4); p.nwords = 7'(1 + i % 64); p.ppn = PPN_W'(i * 7 + 3);
    return p;
  endfunction
  function automatic vaddr_t va_of(input int i);
    vaddr_t v;
    v.req = REQ_W'(i % 5); v.layer = LAYER_W'(i % 80); v.pos = POS_W'(i * 3);
    return v;
  endfunction

  task automatic translate(input vaddr_t v, output pte_t p, output bit h, output int lat);
    longint t0;
    req_valid <= 1'b1; req_va <= v;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    t0 = cyc;
    req_valid <= 1'b0;
    @(posedge clk);
    while (!rsp_valid) @(posedge clk);
    p = rsp_pte; h = rsp_hit; lat = int'(cyc - t0);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pte_t p; bit h; int lat;
    for (int i = 0; i < 40; i++) pt[va_of(i)] = mk(i);
    repeat (3) @(posedge clk); rst_n <= 1'b1; repeat (2) @(posedge clk);
    // miss then hit
    translate(va_of(1), p, h, lat);
    check(p == mk(1) && !h, "first access misses and translates");
    check(lat == 4 + 15, $sformatf("miss latency %0d != 19", lat));
    translate(va_of(1), p, h, lat);
    check(p == mk(1) && h, "second access hits");
    check(lat == 4, $sformatf("hit latency %0d != 4", lat));
    // working set that fits the TLB: one miss each, then all hits
    for (int i = 2; i < 2 + TLB_N - 1; i++) begin translate(va_of(i), p, h, lat); check(p == mk(i) && !h, "fill"); end
    for (int r = 0; r < 3; r++)
      for (int i = 1; i < 1 + TLB_N; i++) begin translate(va_of(i), p, h, lat); check(p == mk(i) && h, "resident hit"); end
    check(n_hits == 1 + 3 * TLB_N && n_misses == TLB_N, $sformatf("counters %0d %0d", n_hits, n_misses));
    // streaming through more pages than the TLB: round-robin eviction
    for (int i = 10; i < 40; i++) begin translate(va_of(i), p, h, lat); check(p == mk(i) && !h, "stream miss"); end
    // update: write-through to memory and TLB
    begin
      pte_t np;
      np = mk(99);
      upd_valid <= 1'b1; upd_va <= va_of(39); upd_pte <= np;
      @(posedge clk); while (!upd_ready) @(posedge clk);
      upd_valid <= 1'b0;
      repeat (3) @(posedge clk);
      check(pt[va_of(39)] == np, "update written through");
      translate(va_of(39), p, h, lat);
      check(p == np && h, "update visible in TLB");
      // invalidate, then the next access walks again
      inv_valid <= 1'b1; inv_va <= va_of(39); @(posedge clk); inv_valid <= 1'b0;
      translate(va_of(39), p, h, lat);
      check(p == np && !h, "invalidated entry walks again");
    end
    // unmapped page returns an invalid entry
    translate(va_of(200), p, h, lat);
    check(!p.valid, "unmapped page reported invalid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
