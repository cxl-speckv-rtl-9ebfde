// decompress_engine: KV-cache decompression pipeline, the inverse of
// compress_engine, producing one 512-bit beat (32 FP16 values) per cycle.
//
// Input is the packed word stream of one or more pages, each page with s_last
// on its final word and a constant s_mode. Words first pass four input register
// stages (F1-F4). Uncompressed (MODE_RAW) pages leave there on the early-exit
// bypass and reach the output register in 5 cycles. Compressed pages enter the
// unpacker, a 1024-bit bit buffer that cuts one record per cycle off its low
// end (record lengths follow from the mode and, for MODE_RLE, from the record's
// pair count) and refills with a 512-bit word whenever at most 512 bits remain.
// A page is known to hold 64 records; the padding after the 64th is dropped.
// Each record then goes through 20 stages (D1-D20):
//   D1       record register
//   D2       field parsing into (value, run length) pairs
//   D3-D7    5-level prefix sum of run lengths -> start lane of every pair
//   D8       scatter of pair values to their start lanes
//   D9-D13   5-level segmented fill: each lane takes its run's value
//   D14      delta decoding (prefix sum mod 256) for MODE_DELTA / MODE_RLE
//   D15-D18  dequantization: |q| * M_scale, * ceil(2^32/127), leading-one
//            detection, rounding and FP16 packing (normal and subnormal)
//   D19      beat assembly;  D20 output register
// The dequantized value is round-to-nearest FP16 of q * scale / 127; the
// reciprocal is kept to 32 fraction bits, enough for this to be exact.
//
// Timing: the first beat of a compressed page appears 25 cycles after its first
// word was accepted; a RAW word appears after 5 cycles. A RAW page that follows
// a compressed one waits until the compressed pipeline has drained, so beats
// always leave in arrival order. m_ready low stalls the unpacker and D stages.
//
// Follows the paper: 20-stage II=1 pipeline, dequantization multipliers in
// stages 15-18, 5-cycle bypass for uncompressed data, 25-cycle compressed
// latency. Own choices: the four input stages shared by both paths (so that
// both paper latencies hold), the unpacker, and the record formats.
module decompress_engine
  import speckv_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [W_DATA-1:0] s_data,
  input  logic              s_last,
  input  cmode_e            s_mode,
  output logic              m_valid,
  input  logic              m_ready,
  output logic [W_DATA-1:0] m_data,
  output logic              m_last,
  output logic              m_bypass      // the current output beat took the bypass
);

  localparam int N = LANES;

  logic en;
  assign en = !m_valid || m_ready;

  // ------------------------------------------------------ F1..F4 front
  logic [4:1]        fv, fl;
  logic [W_DATA-1:0] fd [1:4];
  cmode_e            fm [1:4];
  logic              f_adv, f4_take, f4_byp, f4_comp;
  logic              comp_empty;

  assign f_adv   = !fv[4] || f4_take;
  assign s_ready = f_adv;
  assign f4_take = f4_byp || f4_comp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fv <= '0; fl <= '0;
      for (int k = 1; k <= 4; k++) fm[k] <= MODE_RAW;
    end else if (f_adv) begin
      fv <= {fv[3:1], s_valid};
      fl <= {fl[3:1], s_last};
      fm[1] <= s_mode;
      for (int k = 2; k <= 4; k++) fm[k] <= fm[k-1];
    end
  end
  always_ff @(posedge clk) if (f_adv) begin
    fd[1] <= s_data;
    for (int k = 2; k <= 4; k++) fd[k] <= fd[k-1];
  end

  // ------------------------------------------------------------ unpacker
  logic [2*W_DATA-1:0] acc;
  logic [LEN_W:0]      cnt;          // 0..1024
  logic [6:0]          recs_left;
  logic                wait_end;     // page's last word taken, records pending
  cmode_e              pmode;
  logic [LEN_W-1:0]    need;
  logic                ext;
  logic [LEN_W:0]      ext_len, cnt_rem;

  always_comb begin
    need    = rec_len(pmode, acc[20:16]);
    ext     = en && (recs_left != 0) && (cnt >= (LEN_W+1)'(need));
    ext_len = ext ? (LEN_W+1)'(need) : '0;
    cnt_rem = cnt - ext_len;
    f4_comp = en && fv[4] && (fm[4] != MODE_RAW) && !wait_end && (cnt_rem <= (LEN_W+1)'(W_DATA));
  end

  logic [19:1] dv;                   // D-stage valid bits
  assign comp_empty = (dv == '0) && (recs_left == 0);
  assign f4_byp = en && fv[4] && (fm[4] == MODE_RAW) && comp_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; cnt <= '0; recs_left <= '0; wait_end <= 1'b0; pmode <= MODE_RAW;
    end else begin
      if (ext && recs_left == 7'd1) begin
        // last record of the page: drop the padding
        acc <= '0; cnt <= '0; wait_end <= 1'b0;
      end else begin
        acc <= (acc >> ext_len) |
               (f4_comp ? ({{W_DATA{1'b0}}, fd[4]} << cnt_rem) : '0);
        cnt <= cnt_rem + (f4_comp ? (LEN_W+1)'(W_DATA) : '0);
        if (f4_comp && fl[4]) wait_end <= 1'b1;
      end
      if (ext) recs_left <= recs_left - 7'd1;
      else if (f4_comp && recs_left == 0) begin
        recs_left <= 7'(PAGE_BEATS);
        pmode     <= fm[4];
      end
    end
  end

  // ------------------------------------------------------------ D stages
  logic [19:1] dlast;
  cmode_e      dm [1:19];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv <= '0; dlast <= '0;
      for (int k = 1; k <= 19; k++) dm[k] <= MODE_RAW;
    end else if (en) begin
      dv    <= {dv[18:1], ext};
      dlast <= {dlast[18:1], recs_left == 7'd1};
      dm[1] <= pmode;
      for (int k = 2; k <= 19; k++) dm[k] <= dm[k-1];
    end
  end

  logic [W_DATA-1:0] rec1;
  logic [15:0]       sc [2:18];            // stored scale, FP16 max|x|
  logic [7:0]        pv [2:8][N];          // pair values
  logic [5:0]        rl [2:8][N];          // run lengths, 0 = unused slot
  logic [6:0]        ps [3:7][N];          // inclusive prefix sums
  logic [N-1:0]      ff [8:13];            // lane holds a value (fill flags)
  logic [7:0]        lv [8:14][N];         // lane values

  always_ff @(posedge clk) begin
    if (en) begin
      rec1 <= acc[W_DATA-1:0];
      // D2: parse
      sc[2] <= rec1[15:0];
      for (int k = 0; k < N; k++) begin
        if (dm[1] == MODE_RLE) begin
          pv[2][k] <= rec1[REC_HDR_RLE + PAIR_W*k +: 8];
          rl[2][k] <= (k <= int'(rec1[20:16])) ? 6'(rec1[REC_HDR_RLE + PAIR_W*k + 8 +: 5]) + 6'd1 : 6'd0;
        end else begin
          pv[2][k] <= rec1[REC_HDR_INT8 + 8*k +: 8];
          rl[2][k] <= 6'd1;
        end
      end
      // D3..D7: inclusive prefix sum of run lengths
      for (int k = 0; k < N; k++) begin
        ps[3][k] <= (k >= 1)  ? 7'(rl[2][k]) + 7'(rl[2][k-1]) : 7'(rl[2][k]);
        ps[4][k] <= (k >= 2)  ? ps[3][k] + ps[3][k-2]  : ps[3][k];
        ps[5][k] <= (k >= 4)  ? ps[4][k] + ps[4][k-4]  : ps[4][k];
        ps[6][k] <= (k >= 8)  ? ps[5][k] + ps[5][k-8]  : ps[5][k];
        ps[7][k] <= (k >= 16) ? ps[6][k] + ps[6][k-16] : ps[6][k];
      end
      for (int s = 3; s <= 8; s++) begin
        pv[s] <= pv[s-1];
        rl[s] <= rl[s-1];
      end
      // D8: scatter pair values to their start lanes
      for (int i = 0; i < N; i++) begin
        logic       f;
        logic [7:0] val;
        f = 1'b0; val = '0;
        for (int k = 0; k < N; k++)
          if (rl[7][k] != 0 && (ps[7][k] - 7'(rl[7][k])) == 7'(i)) begin
            f = 1'b1; val |= pv[7][k];
          end
        ff[8][i] <= f;
        lv[8][i] <= val;
      end
      // D9..D13: segmented fill, offsets 1, 2, 4, 8, 16
      for (int s = 0; s < 5; s++)
        for (int i = 0; i < N; i++) begin
          if (!ff[8+s][i] && i >= (1 << s)) begin
            ff[9+s][i] <= ff[8+s][i - (1 << s)];
            lv[9+s][i] <= lv[8+s][i - (1 << s)];
          end else begin
            ff[9+s][i] <= ff[8+s][i];
            lv[9+s][i] <= lv[8+s][i];
          end
        end
      for (int s = 3; s <= 18; s++) sc[s] <= sc[s-1];
    end
  end

  // D14: delta decode; D15..D18: dequantize
  logic [7:0]  q14 [N];
  logic [N-1:0] sg15, sg16, sg17, sg18;
  logic [18:0] n15 [N];
  logic [44:0] z16 [N], z17 [N];
  logic [5:0]  p17 [N];
  logic [14:0] mag18 [N];
  logic [W_DATA-1:0] beat19;

  function automatic logic [10:0] mant(input logic [14:0] m);
    mant = (m[14:10] == 5'd0) ? {1'b0, m[9:0]} : {1'b1, m[9:0]};
  endfunction
  function automatic logic [4:0] expo(input logic [14:0] m);
    expo = (m[14:10] == 5'd0) ? 5'd1 : m[14:10];
  endfunction

  always_ff @(posedge clk) begin
    if (en) begin
      // D14
      begin
        logic [7:0] a [N];
        for (int i = 0; i < N; i++) a[i] = lv[13][i];
        if (dm[13] == MODE_DELTA || dm[13] == MODE_RLE)
          for (int s = 0; s < 5; s++)
            for (int i = N-1; i >= 0; i--)
              if (i >= (1 << s)) a[i] = a[i] + a[i - (1 << s)];
        for (int i = 0; i < N; i++) q14[i] <= a[i];
      end
      // D15: |q| * scale mantissa
      for (int i = 0; i < N; i++) begin
        logic [7:0] mq;
        mq = q14[i][7] ? 8'(-q14[i]) : q14[i];
        n15[i]  <= 19'(mq) * 19'(mant(sc[14][14:0]));
        sg15[i] <= q14[i][7];
      end
      // D16: times ceil(2^32/127)
      for (int i = 0; i < N; i++) z16[i] <= 45'(n15[i]) * 45'(INV127_Q32);
      sg16 <= sg15;
      // D17: leading one
      for (int i = 0; i < N; i++) begin
        logic [5:0] p;
        p = '0;
        for (int b = 0; b < 45; b++) if (z16[i][b]) p = 6'(b);
        p17[i] <= p;
        z17[i] <= z16[i];
      end
      sg17 <= sg16;
      // D18: round to FP16 (normal or subnormal)
      for (int i = 0; i < N; i++) begin
        logic signed [7:0] e;
        logic [44:0] t;
        logic [14:0] m;
        e = 8'(p17[i]) + 8'(expo(sc[17][14:0])) - 8'sd42;
        if (z17[i] == '0) m = '0;
        else if (e >= 8'sd1) begin
          t = z17[i] >> (p17[i] - 6'd10);
          m = {e[4:0], t[9:0]} + 15'(z17[i][p17[i] - 6'd11]);
        end else begin
          t = z17[i] >> (6'd32 - 6'(expo(sc[17][14:0])));
          m = 15'((t + 45'd1) >> 1);
        end
        mag18[i] <= m;
      end
      sg18 <= sg17;
      // D19: assemble
      for (int i = 0; i < N; i++) beat19[16*i +: 16] <= {sg18[i], mag18[i]};
    end
  end

  // ------------------------------------------------------- output register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_last <= 1'b0; m_data <= '0; m_bypass <= 1'b0;
    end else if (en) begin
      if (f4_byp) begin
        m_valid <= 1'b1; m_data <= fd[4]; m_last <= fl[4]; m_bypass <= 1'b1;
      end else if (dv[19]) begin
        m_valid <= 1'b1; m_data <= beat19; m_last <= dlast[19]; m_bypass <= 1'b0;
      end else begin
        m_valid <= 1'b0;
      end
    end
  end

  a_order: assert property (@(posedge clk) disable iff (!rst_n) !(f4_byp && dv[19]));

endmodule
