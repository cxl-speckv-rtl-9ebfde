// compress_engine: 20-stage KV-cache compression pipeline, one 512-bit beat per
// cycle (II = 1).
//
// Each input beat carries 32 FP16 values. The pipeline quantizes them to INT8
// against the beat's largest magnitude, optionally delta-encodes neighbouring
// lanes, optionally run-length encodes the deltas, and packs the resulting
// variable-length record (layouts in speckv_pkg) densely into 512-bit output
// words. A page (s_last on its final beat) always ends on a word boundary: the
// packer pads the last word with zeros, so each stored page starts aligned.
//
// Stage map (the paper's stage numbers where it gives them):
//   1      input register, lane magnitudes
//   2-4    max-magnitude tree 32 -> 8 -> 2 -> 1
//   5-8    scaling: reciprocal R = ceil(127*2^32/M_max), product, shift,
//          round-half-up and sign  -> q = round(127*|x|/max|x|), |q| <= 127
//   9      delta q[i]-q[i-1] mod 256 (lane 0 kept), MODE_DELTA / MODE_RLE only
//   10-14  run-start flags and their 5-level prefix count (pair index per lane)
//   15-18  run-length encoding: run ends, pair scatter, run lengths, record
//   19-20  bit packer and output register
// The rounding is exact: the reciprocal is rounded up and kept to 32 fraction
// bits, which is enough that round(A) equals round(127*|x|/max) for all FP16
// inputs, ties included (ties go away from zero).
//
// Interface: AXI-Stream-like valid/ready on both sides. s_mode must be constant
// over a page. Backpressure (m_ready low) stalls the whole pipeline; so does the
// extra cycle needed when a page's padded tail needs a second output word.
// Timing: a RAW-mode beat accepted in cycle n is presented on m_data in cycle
// n+20. Infinity and NaN inputs get no special treatment (exponent 31 is used
// as a number).
//
// Follows the paper: 512-bit datapath, 20 stages with II = 1, scaling in
// stages 5-8, delta in 9-14, RLE in 15-18, max-abs INT8 scale per group.
// Own choices: the scale group is one beat (32 values) rather than a whole
// page, so the pipeline needs no page buffer; the stored scale is max|x| itself
// (the /127 is folded into the arithmetic); the record formats; the packer.
module compress_engine
  import speckv_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // uncompressed page beats in
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [W_DATA-1:0] s_data,
  input  logic              s_last,
  input  cmode_e            s_mode,
  // packed compressed words out
  output logic              m_valid,
  input  logic              m_ready,
  output logic [W_DATA-1:0] m_data,
  output logic              m_last
);

  localparam int N = LANES;   // 32

  // ---------------------------------------------------------------- control
  logic pend;                 // a padded tail word is still to be sent
  logic en;                   // whole pipeline advances
  logic [19:1] v;             // stage valid bits (stage 20 is m_valid)
  logic [19:1] lst;
  cmode_e      md [1:19];

  assign en      = (!m_valid || m_ready) && !pend;
  assign s_ready = en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v   <= '0;
      lst <= '0;
      for (int k = 1; k <= 19; k++) md[k] <= MODE_RAW;
    end else if (en) begin
      v   <= {v[18:1], s_valid};
      lst <= {lst[18:1], s_last};
      md[1] <= s_mode;
      for (int k = 2; k <= 19; k++) md[k] <= md[k-1];
    end
  end

  // ------------------------------------------------------ stage 1..4: max
  logic [W_DATA-1:0] d1, d2, d3, d4, d5, d6, d7, d8;  // raw beat carried along
  logic [14:0] mx2 [8];
  logic [14:0] mx3 [2];
  logic [14:0] mx4;

  always_ff @(posedge clk) begin
    if (en) begin
      d1 <= s_data;
      for (int g = 0; g < 8; g++) begin
        logic [14:0] m;
        m = '0;
        for (int j = 0; j < 4; j++)
          if (d1[16*(4*g+j) +: 15] > m) m = d1[16*(4*g+j) +: 15];
        mx2[g] <= m;
      end
      d2 <= d1;
      for (int g = 0; g < 2; g++) begin
        logic [14:0] m;
        m = '0;
        for (int j = 0; j < 4; j++)
          if (mx2[4*g+j] > m) m = mx2[4*g+j];
        mx3[g] <= m;
      end
      d3 <= d2;
      mx4 <= (mx3[0] > mx3[1]) ? mx3[0] : mx3[1];
      d4 <= d3;
    end
  end

  // --------------------------------------------------- stage 5..8: scaling
  logic [38:0] r5;            // ceil(127*2^32 / M_max)
  logic [4:0]  em5;           // effective exponent of max (1 for subnormal)
  logic [15:0] scale5, scale6, scale7, scale8;
  logic [49:0] p6 [N];        // |x| mantissa * R
  logic [4:0]  dsh6 [N];      // exponent difference (>= 0)
  logic [N-1:0] sg6, sg7;
  logic [31:0] t7 [N];        // product shifted to 1 fraction bit
  logic [7:0]  q8 [N];        // INT8 results (two's complement)

  function automatic logic [10:0] mant(input logic [14:0] m);
    mant = (m[14:10] == 5'd0) ? {1'b0, m[9:0]} : {1'b1, m[9:0]};
  endfunction
  function automatic logic [4:0] expo(input logic [14:0] m);
    expo = (m[14:10] == 5'd0) ? 5'd1 : m[14:10];
  endfunction

  always_ff @(posedge clk) begin
    if (en) begin
      // stage 5: reciprocal of the beat maximum
      begin
        logic [10:0] mm;
        mm = mant(mx4);
        if (mm == '0) r5 <= '0;
        else          r5 <= 39'(((64'd127 << 32) + 64'(mm) - 64'd1) / 64'(mm));
        em5    <= expo(mx4);
        scale5 <= {1'b0, mx4};
      end
      d5 <= d4;
      // stage 6: per-lane product
      for (int i = 0; i < N; i++) begin
        p6[i]   <= 50'(mant(d5[16*i +: 15])) * 50'(r5);
        dsh6[i] <= em5 - expo(d5[16*i +: 15]);
        sg6[i]  <= d5[16*i + 15];
      end
      scale6 <= scale5;
      d6 <= d5;
      // stage 7: shift so that one fraction bit remains
      for (int i = 0; i < N; i++) begin
        logic [6:0] sh;
        sh = 7'd31 + 7'(dsh6[i]);
        t7[i] <= (sh > 7'd49) ? 32'd0 : 32'(p6[i] >> sh);
      end
      sg7 <= sg6;
      scale7 <= scale6;
      d7 <= d6;
      // stage 8: round half up, saturate to 127, apply sign
      for (int i = 0; i < N; i++) begin
        logic [31:0] r;
        logic [6:0]  a;
        r = (t7[i] + 32'd1) >> 1;
        a = (r > 32'd127) ? 7'd127 : r[6:0];
        q8[i] <= sg7[i] ? 8'(-{1'b0, a}) : {1'b0, a};
      end
      scale8 <= scale7;
      d8 <= d7;
    end
  end

  // --------------------------------------------------- stage 9..14: delta
  logic [7:0]  dq [9:18][N];           // per-lane bytes carried to stage 18
  logic [15:0] sc [9:18];
  logic [W_DATA-1:0] dr [9:18];        // raw beat for MODE_RAW
  logic [N-1:0] b10;                   // run starts
  logic [5:0]  c [11:14][N];           // prefix count of run starts

  always_ff @(posedge clk) begin
    if (en) begin
      // stage 9
      for (int i = 0; i < N; i++)
        dq[9][i] <= (i > 0 && (md[8] == MODE_DELTA || md[8] == MODE_RLE)) ? q8[i] - q8[i-1] : q8[i];
      sc[9] <= scale8;
      dr[9] <= d8;
      // stage 10: run-start flags
      for (int i = 0; i < N; i++)
        b10[i] <= (i == 0) || (dq[9][i] != dq[9][i-1]);
      // stage 11: prefix levels 1 and 2
      for (int i = 0; i < N; i++) begin
        logic [5:0] a0, a1;
        a0 = (i >= 1) ? 6'(b10[i]) + 6'(b10[i-1]) : 6'(b10[i]);
        a1 = a0;
        if (i >= 2) a1 = a0 + ((i >= 3) ? 6'(b10[i-2]) + 6'(b10[i-3]) : 6'(b10[i-2]));
        c[11][i] <= a1;
      end
      // stages 12..14: prefix levels 3..5 (offsets 4, 8, 16)
      for (int i = 0; i < N; i++) begin
        c[12][i] <= (i >= 4)  ? c[11][i] + c[11][i-4]  : c[11][i];
        c[13][i] <= (i >= 8)  ? c[12][i] + c[12][i-8]  : c[12][i];
        c[14][i] <= (i >= 16) ? c[13][i] + c[13][i-16] : c[13][i];
      end
      for (int k = 10; k <= 18; k++) begin
        dq[k] <= dq[k-1];
        sc[k] <= sc[k-1];
        dr[k] <= dr[k-1];
      end
    end
  end

  // run-start flags travel with the counts
  logic [N-1:0] b [11:16];
  always_ff @(posedge clk) if (en) begin
    b[11] <= b10;
    for (int k = 12; k <= 16; k++) b[k] <= b[k-1];
  end

  // ----------------------------------------------------- stage 15..18: RLE
  logic [4:0]  idx15 [N];              // pair slot of each lane
  logic [N-1:0] e15;                   // run ends
  logic [5:0]  np15, np16, np17;       // number of pairs
  logic [4:0]  idx16 [N];
  logic [N-1:0] e16;
  logic [7:0]  pv17 [N];               // pair value
  logic [4:0]  ps17 [N], pe17 [N];     // pair start / end lane
  logic [7:0]  pv18 [N];
  logic [4:0]  pl18 [N];               // run length - 1
  logic [5:0]  np18;

  always_ff @(posedge clk) begin
    if (en) begin
      for (int i = 0; i < N; i++) begin
        idx15[i] <= 5'(c[14][i] - 6'd1);
        e15[i]   <= (i == N-1) ? 1'b1 : b[14][i+1];
      end
      np15 <= c[14][N-1];
      idx16 <= idx15;
      e16   <= e15;
      np16  <= np15;
      // stage 17: scatter the run starts and ends into pair slots
      for (int k = 0; k < N; k++) begin
        logic [7:0] val;
        logic [4:0] st, nd;
        val = '0; st = '0; nd = '0;
        for (int i = 0; i < N; i++) begin
          if (b[16][i] && idx16[i] == 5'(k)) begin val |= dq[16][i]; st |= 5'(i); end
          if (e16[i]   && idx16[i] == 5'(k)) nd |= 5'(i);
        end
        pv17[k] <= val;
        ps17[k] <= st;
        pe17[k] <= nd;
      end
      np17 <= np16;
      // stage 18: run lengths
      for (int k = 0; k < N; k++) begin
        pv18[k] <= pv17[k];
        pl18[k] <= pe17[k] - ps17[k];
      end
      np18 <= np17;
    end
  end

  // record assembly (end of stage 18) into the stage-19 register
  logic [W_DATA-1:0] rec18;
  logic [LEN_W-1:0]  len18;
  always_comb begin
    rec18 = '0;
    case (md[18])
      MODE_RAW: rec18 = dr[18];
      MODE_INT8, MODE_DELTA: begin
        rec18[15:0] = sc[18];
        for (int i = 0; i < N; i++) rec18[16 + 8*i +: 8] = dq[18][i];
      end
      default: begin
        rec18[15:0]  = sc[18];
        rec18[20:16] = 5'(np18 - 6'd1);
        for (int k = 0; k < N; k++)
          if (6'(k) < np18) rec18[REC_HDR_RLE + PAIR_W*k +: PAIR_W] = {pl18[k], pv18[k]};
      end
    endcase
    len18 = rec_len(md[18], 5'(np18 - 6'd1));
  end

  logic [W_DATA-1:0] rec19;
  logic [LEN_W-1:0]  len19;
  always_ff @(posedge clk) if (en) begin
    rec19 <= rec18;
    len19 <= len18;
  end

  // ------------------------------------------------- stage 20: bit packer
  logic [W_DATA-1:0]   res;            // bits waiting for a full word
  logic [LEN_W-1:0]    cnt;            // number of them (< 512)
  logic [2*W_DATA-1:0] comb;
  logic [LEN_W:0]      tot;

  always_comb begin
    comb = {{W_DATA{1'b0}}, res} | ({{W_DATA{1'b0}}, rec19} << cnt);
    tot  = (LEN_W+1)'(cnt) + (LEN_W+1)'(len19);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res <= '0; cnt <= '0; pend <= 1'b0;
      m_valid <= 1'b0; m_last <= 1'b0; m_data <= '0;
    end else if (pend) begin
      if (!m_valid || m_ready) begin
        m_data <= res; m_last <= 1'b1; m_valid <= 1'b1;
        res <= '0; cnt <= '0; pend <= 1'b0;
      end
    end else if (en) begin
      m_valid <= 1'b0;
      if (v[19]) begin
        if (tot >= (LEN_W+1)'(W_DATA)) begin
          m_data  <= comb[W_DATA-1:0];
          m_valid <= 1'b1;
          if (lst[19] && tot > (LEN_W+1)'(W_DATA)) begin
            res <= comb[2*W_DATA-1:W_DATA]; cnt <= LEN_W'(tot - (LEN_W+1)'(W_DATA));
            m_last <= 1'b0; pend <= 1'b1;
          end else if (lst[19]) begin
            res <= '0; cnt <= '0; m_last <= 1'b1;
          end else begin
            res <= comb[2*W_DATA-1:W_DATA]; cnt <= LEN_W'(tot - (LEN_W+1)'(W_DATA));
            m_last <= 1'b0;
          end
        end else if (lst[19]) begin
          m_data <= comb[W_DATA-1:0]; m_valid <= 1'b1; m_last <= 1'b1;
          res <= '0; cnt <= '0;
        end else begin
          res <= comb[W_DATA-1:0]; cnt <= LEN_W'(tot);
        end
      end
    end
  end

  // an output word that is not taken stays offered
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid);

endmodule
