// prefetch_dir: directory of the L2 prefetch buffer.
//
// The L2 prefetch buffer itself is GPU memory; this block is the FPGA's
// record of what it holds, used to skip prefetches of entries already there
// and to tell demand accesses where their data is. It is 4-way set
// associative with 2^SET_W sets; a slot number is {set, way}. The set index
// is the virtual entry address folded by XOR. Every way holds the entry
// address and three flags: valid, filled (the DMA has delivered the data)
// and used (the GPU has read it since it was filled).
//
// Operations (one at a time, op_valid/op_ready, answer 2 cycles later):
//   DIR_ALLOC  lookup; on a miss allocate a way: an invalid way if the set
//              has one (lazy invalidation: dropped entries are simply
//              overwritten), else the ways in turn (eviction when full)
//   DIR_USE    lookup for a demand access; hit only if filled; marks used
//   DIR_FILL   mark slot op_slot filled
//   DIR_INVAL  drop the entry for op_va if present
// Counters report demand hits and misses, entries evicted or dropped before
// being used (the over-prefetching behind prefetch precision) and fills.
// After reset the block clears its sets, one per cycle, before taking ops.
//
// Follows the paper: L2 holds speculated entries, prefetches are skipped for
// entries already present, invalid entries are overwritten lazily, entries
// invalidated by GPU writes are discarded. Own choices: set-associative
// organisation, the index hash and the victim choice.
module prefetch_dir
  import speckv_pkg::*;
#(
  parameter int unsigned SET_W = L2_SET_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              op_valid,
  output logic              op_ready,
  input  dir_op_e           op,
  input  vaddr_t            op_va,
  input  logic [SET_W+1:0]  op_slot,
  output logic              rsp_valid,
  output logic              rsp_hit,
  output logic [SET_W+1:0]  rsp_slot,
  output logic [31:0]       n_use_hit,
  output logic [31:0]       n_use_miss,
  output logic [31:0]       n_fill,
  output logic [31:0]       n_unused_evict
);

  localparam int unsigned SETS = 1 << SET_W;

  typedef struct packed {
    logic   valid;
    logic   filled;
    logic   used;
    vaddr_t va;
  } way_t;

  way_t [L2_WAYS-1:0] ram [SETS];

  function automatic logic [SET_W-1:0] set_of(input vaddr_t va);
    logic [SET_W-1:0] h;
    h = '0;
    for (int b = 0; b < VPN_W; b += SET_W) h ^= SET_W'(va >> b);
    return h;
  endfunction

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_CMP} state_e;
  state_e             st;
  logic [SET_W-1:0]   clr, idx;
  dir_op_e            cop;
  vaddr_t             cva;
  logic [1:0]         cway;         // way for DIR_FILL
  way_t [L2_WAYS-1:0] rd;           // set read in S_IDLE
  logic [1:0]         victim;

  assign op_ready = (st == S_IDLE);

  // compare stage
  logic             hit;
  logic [1:0]       hway, fway;
  logic             has_free;
  way_t [L2_WAYS-1:0] nw;
  always_comb begin
    hit = 1'b0; hway = '0; has_free = 1'b0; fway = '0;
    for (int w = L2_WAYS - 1; w >= 0; w--) begin
      if (rd[w].valid && rd[w].va == cva) begin hit = 1'b1; hway = 2'(w); end
      if (!rd[w].valid) begin has_free = 1'b1; fway = 2'(w); end
    end
    nw = rd;
    case (cop)
      DIR_ALLOC: if (!hit) nw[has_free ? fway : victim] = '{valid: 1'b1, filled: 1'b0, used: 1'b0, va: cva};
      DIR_USE:   if (hit && rd[hway].filled) nw[hway].used = 1'b1;
      DIR_FILL:  if (rd[cway].valid) nw[cway].filled = 1'b1;
      default:   if (hit) nw[hway].valid = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (st == S_CLEAR) ram[clr] <= '0;
    else if (st == S_IDLE && op_valid)
      rd <= ram[(op == DIR_FILL) ? op_slot[SET_W+1:2] : set_of(op_va)];
    else if (st == S_CMP) ram[idx] <= nw;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_CLEAR; clr <= '0; idx <= '0; cop <= DIR_ALLOC; cva <= '0; cway <= '0; victim <= '0;
      rsp_valid <= 1'b0; rsp_hit <= 1'b0; rsp_slot <= '0;
      n_use_hit <= '0; n_use_miss <= '0; n_fill <= '0; n_unused_evict <= '0;
    end else begin
      rsp_valid <= 1'b0;
      case (st)
        S_CLEAR: begin
          clr <= clr + 1'b1;
          if (clr == SET_W'(SETS - 1)) st <= S_IDLE;
        end
        S_IDLE: if (op_valid) begin
          cop  <= op;
          cva  <= op_va;
          cway <= op_slot[1:0];
          idx  <= (op == DIR_FILL) ? op_slot[SET_W+1:2] : set_of(op_va);
          st   <= S_CMP;
        end
        default: begin
          rsp_valid <= 1'b1;
          st <= S_IDLE;
          case (cop)
            DIR_ALLOC: begin
              rsp_hit  <= hit;
              rsp_slot <= {idx, hit ? hway : (has_free ? fway : victim)};
              if (!hit && !has_free) begin
                victim <= victim + 2'd1;
                if (!rd[victim].used) n_unused_evict <= n_unused_evict + 1;
              end
            end
            DIR_USE: begin
              rsp_hit  <= hit && rd[hway].filled;
              rsp_slot <= {idx, hway};
              if (hit && rd[hway].filled) n_use_hit <= n_use_hit + 1;
              else n_use_miss <= n_use_miss + 1;
            end
            DIR_FILL: begin
              rsp_hit <= rd[cway].valid; rsp_slot <= {idx, cway};
              if (rd[cway].valid) n_fill <= n_fill + 1;
            end
            default: begin
              rsp_hit <= hit; rsp_slot <= {idx, hway};
              if (hit && !rd[hway].used) n_unused_evict <= n_unused_evict + 1;
            end
          endcase
        end
      endcase
    end
  end

endmodule
