// hbm_model: behavioural model of the FPGA's HBM stacks for simulation.
//
// N_CH independent channels behind the channel ports of mem_ctrl. Each
// channel accepts one request per cycle (optionally refusing at random),
// answers reads after LAT cycles in order, and holds a response until it is
// taken. Storage is one sparse associative array over the full word address
// {in-channel address, channel}; the testbench reads and writes it directly
// through peek/poke. Not synthesizable, no timing beyond the fixed latency.
module hbm_model
  import speckv_pkg::*;
#(
  parameter int unsigned LAT      = 12,
  parameter bit          RAND_BP  = 1'b0
) (
  input  logic     clk,
  input  logic     ch_req_valid [N_CH],
  output logic     ch_req_ready [N_CH],
  input  ch_req_t  ch_req       [N_CH],
  output logic     ch_rsp_valid [N_CH],
  input  logic     ch_rsp_ready [N_CH],
  output ch_rsp_t  ch_rsp       [N_CH]
);
  logic [W_DATA-1:0] mem [logic [ADDR_W-1:0]];
  int unsigned n_rd = 0, n_wr = 0;

  function automatic void poke(input logic [ADDR_W-1:0] a, input logic [W_DATA-1:0] d);
    mem[a] = d;
  endfunction
  function automatic logic [W_DATA-1:0] peek(input logic [ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  typedef struct { ch_rsp_t r; longint due; } pend_t;
  pend_t  q [N_CH][$];
  longint cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int h = 0; h < N_CH; h++) begin
      if (ch_rsp_valid[h] && ch_rsp_ready[h]) void'(q[h].pop_front());
      if (ch_req_valid[h] && ch_req_ready[h]) begin
        logic [ADDR_W-1:0] a;
        a = {ch_req[h].addr, CH_W'(h)};
        if (ch_req[h].we) begin mem[a] = ch_req[h].wdata; n_wr++; end
        else begin
          pend_t p;
          p.r.rdata = mem.exists(a) ? mem[a] : '0;
          p.r.cid = ch_req[h].cid; p.r.tag = ch_req[h].tag;
          p.due = cyc + LAT - 1;
          q[h].push_back(p);
          n_rd++;
        end
      end
      ch_req_ready[h] <= RAND_BP ? ($urandom_range(0, 3) != 0) : 1'b1;
    end
  end
  always_comb begin
    for (int h = 0; h < N_CH; h++) begin
      ch_rsp_valid[h] = (q[h].size() != 0) && (q[h][0].due <= cyc);
      ch_rsp[h]       = (q[h].size() != 0) ? q[h][0].r : '0;
    end
  end
endmodule
