// speckv_pkg: types and constants shared by the KV-cache engine blocks.
//
// The cache engine moves 4 KB KV-cache pages as streams of 512-bit beats, each
// beat holding 32 FP16 values. A page is 64 beats. The compressor turns every
// beat into one variable-length "record" and packs records densely into
// 512-bit words; the decompressor reverses this. The record layouts, the mode
// encoding and the page-table-entry layout are defined here so that both sides
// (and the testbenches) agree on them.
//
// Record layouts (bit 0 first, records packed back to back, LSB first):
//   MODE_RAW   : 512 bits, the beat unchanged                       (512 bits)
//   MODE_INT8  : [15:0] scale = FP16 max|x| of the beat, then 32 INT8 (272 bits)
//   MODE_DELTA : as MODE_INT8 but lane i>0 holds q[i]-q[i-1] mod 256 (272 bits)
//   MODE_RLE   : [15:0] scale, [20:16] pairs-1, then pairs of 13 bits,
//                pair = {run_length-1 (5 b), delta byte (8 b)}      (21+13*pairs)
// The four modes are the four rows of the paper's compression ablation
// (none / INT8 / INT8+delta / INT8+delta+RLE); MODE_RLE is the full scheme.
package speckv_pkg;

  localparam int unsigned W_DATA     = 512;          // AXI-Stream data width (paper)
  localparam int unsigned LANES      = W_DATA / 16;  // FP16 values per beat
  localparam int unsigned PAGE_BYTES = 4096;         // page size (paper)
  localparam int unsigned PAGE_BEATS = PAGE_BYTES / (W_DATA / 8);  // 64 beats

  localparam int unsigned REC_HDR_INT8 = 16;         // scale field
  localparam int unsigned REC_HDR_RLE  = 21;         // scale + pair count
  localparam int unsigned PAIR_W       = 13;
  localparam int unsigned LEN_W        = 10;         // record length in bits, <= 512

  typedef enum logic [1:0] {
    MODE_RAW   = 2'd0,
    MODE_INT8  = 2'd1,
    MODE_DELTA = 2'd2,
    MODE_RLE   = 2'd3
  } cmode_e;

  // Ceil(127 * 2^32 / m) for the quantizer and ceil(2^32 / 127) for the
  // dequantizer (see compress_engine / decompress_engine).
  localparam logic [25:0] INV127_Q32 = 26'd33818641;

  // Length in bits of a record, given its mode and (for MODE_RLE) its pair
  // count minus one.
  function automatic logic [LEN_W-1:0] rec_len(cmode_e mode, logic [4:0] npairs_m1);
    case (mode)
      MODE_RAW:   rec_len = LEN_W'(W_DATA);
      MODE_INT8,
      MODE_DELTA: rec_len = LEN_W'(REC_HDR_INT8 + 8 * LANES);
      default:    rec_len = LEN_W'(REC_HDR_RLE) + LEN_W'(PAIR_W) * (LEN_W'(npairs_m1) + 1'b1);
    endcase
  endfunction

  // Page-table entry, one per 512-bit word of the page table in device memory.
  localparam int unsigned PPN_W = 24;                // 64 GB / 4 KB pages
  typedef struct packed {
    logic             valid;
    cmode_e           mode;     // how the page is stored
    logic [6:0]       nwords;   // 512-bit words the stored page occupies (1..64)
    logic [PPN_W-1:0] ppn;      // physical page number
  } pte_t;                      // 34 bits

  // Virtual KV entry address (Algorithm 1: reqID, layer, position). One entry
  // is one 4 KB page. Widths cover 512 requests, 128 layers and 4096 positions.
  localparam int unsigned REQ_W   = 9;
  localparam int unsigned LAYER_W = 7;
  localparam int unsigned POS_W   = 12;
  typedef struct packed {
    logic [REQ_W-1:0]   req;
    logic [LAYER_W-1:0] layer;
    logic [POS_W-1:0]   pos;
  } vaddr_t;                    // 28 bits = virtual page number
  localparam int unsigned VPN_W = $bits(vaddr_t);

  // Device memory is addressed in 512-bit words: 64 GB / 64 B = 2^30.
  localparam int unsigned ADDR_W = 30;
  // Memory request tag: bit 4 set marks a page-table read of the ATU, the
  // low 4 bits number the DMA engine's 16 outstanding reads.
  localparam int unsigned TAG_W  = 5;
  localparam int unsigned OMEGA_MAX = 16;  // outstanding DMA reads (paper)

  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [W_DATA-1:0] wdata;
    logic [TAG_W-1:0]  tag;
  } mem_req_t;
  typedef struct packed {
    logic [W_DATA-1:0] rdata;
    logic [TAG_W-1:0]  tag;
  } mem_rsp_t;

  // Requests as they leave the memory controller for an HBM channel.
  localparam int unsigned N_CH   = 16;              // HBM channels (paper)
  localparam int unsigned CH_W   = 4;
  localparam int unsigned CID_W  = 3;               // client id, up to 8 engines
  typedef struct packed {
    logic                   we;
    logic [ADDR_W-CH_W-1:0] addr;   // word address inside the channel
    logic [W_DATA-1:0]      wdata;
    logic [CID_W-1:0]       cid;
    logic [TAG_W-1:0]       tag;
  } ch_req_t;
  typedef struct packed {
    logic [W_DATA-1:0]      rdata;
    logic [CID_W-1:0]       cid;
    logic [TAG_W-1:0]       tag;
  } ch_rsp_t;

  // DMA descriptors. A read moves one stored page to an L2 prefetch-buffer
  // slot; a write stores one page arriving from the host.
  // L2 slot number = {set, way} of the prefetch directory: 2^19 slots of
  // 4 KB = 2 GB, the lower end of the paper's L2 size.
  localparam int unsigned L2_WAYS  = 4;
  localparam int unsigned L2_SET_W = 17;
  localparam int unsigned SLOT_W   = L2_SET_W + 2;
  typedef struct packed {
    pte_t              pte;
    logic [SLOT_W-1:0] slot;
  } rd_desc_t;
  typedef struct packed {
    vaddr_t            va;
    logic [PPN_W-1:0]  ppn;
    cmode_e            mode;
  } wr_desc_t;

  typedef enum logic [1:0] {
    DIR_ALLOC = 2'd0,   // look up; on a miss, take a slot for the entry
    DIR_USE   = 2'd1,   // demand access by the GPU; marks a filled entry used
    DIR_FILL  = 2'd2,   // data of a slot has arrived
    DIR_INVAL = 2'd3    // entry overwritten by the GPU: drop it
  } dir_op_e;

endpackage
