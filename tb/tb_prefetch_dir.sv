// tb_prefetch_dir: self-checking test of the L2 prefetch directory.
//
// A small directory (4 sets) gets random ALLOC / USE / FILL / INVAL
// operations on a small pool of entry addresses, so sets fill up, entries
// are evicted, dropped and reallocated. A model of the same organisation
// (4 ways, lowest free way first, global round-robin victim) predicts every
// answer (hit flag and slot) and the counters.
module tb_prefetch_dir;
  import speckv_pkg::*;

  localparam int unsigned SET_W = 2;
  localparam int unsigned SETS = 1 << SET_W;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic op_valid = 0, op_ready, rsp_valid, rsp_hit;
  dir_op_e op = DIR_ALLOC;
  vaddr_t op_va = '0;
  logic [SET_W+1:0] op_slot = '0, rsp_slot;
  logic [31:0] n_use_hit, n_use_miss, n_fill, n_unused_evict;

  prefetch_dir #(.SET_W(SET_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, what); end
  endtask
  initial begin
    #2ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // model
  bit     mv [SETS][4], mf [SETS][4], mu [SETS][4];
  vaddr_t ma [SETS][4];
  int     victim = 0;
  int     e_hit = 0, e_miss = 0, e_fill = 0, e_unused = 0;

  function automatic int set_of(input vaddr_t va);
    logic [SET_W-1:0] h;
    h = '0;
    for (int b = 0; b < VPN_W; b += SET_W) h ^= SET_W'(va >> b);
    return int'(h);
  endfunction

  task automatic do_op(input dir_op_e o, input vaddr_t va, input int slot);
    int s, w, hw, fw, t;
    bit hit, free, ehit;
    int eslot;
    s = (o == DIR_FILL) ? slot >> 2 : set_of(va);
    hit = 0; hw = 0; free = 0; fw = 0;
    for (w = 3; w >= 0; w--) begin
      if (mv[s][w] && ma[s][w] == va) begin hit = 1; hw = w; end
      if (!mv[s][w]) begin free = 1; fw = w; end
    end
    case (o)
      DIR_ALLOC: begin
        ehit = hit;
        if (hit) eslot = s * 4 + hw;
        else begin
          w = free ? fw : victim;
          if (!free) begin
            if (!mu[s][w]) e_unused++;
            victim = (victim + 1) % 4;
          end
          mv[s][w] = 1; mf[s][w] = 0; mu[s][w] = 0; ma[s][w] = va;
          eslot = s * 4 + w;
        end
      end
      DIR_USE: begin
        ehit = hit && mf[s][hw];
        eslot = s * 4 + hw;
        if (ehit) begin mu[s][hw] = 1; e_hit++; end else e_miss++;
      end
      DIR_FILL: begin
        w = slot % 4;
        ehit = mv[s][w];
        eslot = slot;
        if (mv[s][w]) begin mf[s][w] = 1; e_fill++; end
      end
      default: begin
        ehit = hit; eslot = s * 4 + hw;
        if (hit) begin
          if (!mu[s][hw]) e_unused++;
          mv[s][hw] = 0;
        end
      end
    endcase
    op_valid <= 1'b1; op <= o; op_va <= va; op_slot <= (SET_W+2)'(slot);
    @(posedge clk);
    while (!op_ready) @(posedge clk);
    op_valid <= 1'b0;
    t = 0;
    while (!rsp_valid && t < 20) begin @(posedge clk); t++; end
    check(rsp_valid, "answer");
    check(rsp_hit == ehit, $sformatf("hit flag op %0d", o));
    if (ehit || o == DIR_ALLOC) check(int'(rsp_slot) == eslot, $sformatf("slot op %0d", o));
  endtask

  vaddr_t pool [24];
  int     slots_of [int];

  initial begin
    for (int i = 0; i < 24; i++) pool[i] = '{req: REQ_W'($urandom_range(0, 3)), layer: LAYER_W'(i), pos: POS_W'($urandom_range(0, 7))};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // directed: allocate, use before fill, fill, use, invalidate, realloc
    do_op(DIR_ALLOC, pool[0], 0);
    check(!rsp_hit, "first allocation misses");
    slots_of[0] = int'(rsp_slot);
    do_op(DIR_ALLOC, pool[0], 0);
    check(rsp_hit, "second allocation finds the entry");
    do_op(DIR_USE, pool[0], 0);
    check(!rsp_hit, "not filled yet");
    do_op(DIR_FILL, pool[0], slots_of[0]);
    do_op(DIR_USE, pool[0], 0);
    check(rsp_hit && int'(rsp_slot) == slots_of[0], "filled entry used");
    do_op(DIR_INVAL, pool[0], 0);
    do_op(DIR_USE, pool[0], 0);
    check(!rsp_hit, "dropped entry gone");
    // random
    for (int n = 0; n < 3000; n++) begin
      int k, o;
      k = $urandom_range(0, 23);
      o = $urandom_range(0, 9);
      if (o < 4) do_op(DIR_ALLOC, pool[k], 0);
      else if (o < 7) do_op(DIR_USE, pool[k], 0);
      else if (o < 9) do_op(DIR_FILL, pool[k], $urandom_range(0, 4 * SETS - 1));
      else do_op(DIR_INVAL, pool[k], 0);
    end
    @(posedge clk);
    check(n_use_hit == 32'(e_hit) && n_use_miss == 32'(e_miss), "demand counters");
    check(n_fill == 32'(e_fill) && n_unused_evict == 32'(e_unused), "fill and eviction counters");
    check(e_unused > 10 && e_hit > 10, "evictions and hits happened");
    $display("hits %0d misses %0d fills %0d unused drops %0d", e_hit, e_miss, e_fill, e_unused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
