// speckv_tb_pkg: reference models used by the testbenches.
//
// Everything here is written from the format definitions, with real
// arithmetic, independently of the RTL: FP16 <-> real conversion, the
// per-beat INT8 quantizer q = round(127*|x|/max|x|) (ties away from zero),
// the record encoder for each mode, and generators for test beats.
package speckv_tb_pkg;
  import speckv_pkg::*;

  function automatic real fp16_to_real(input logic [15:0] h);
    real m;
    int  e;
    e = int'(h[14:10]);
    if (e == 0) begin m = real'(h[9:0]) / 1024.0; e = 1; end
    else        m = 1.0 + real'(h[9:0]) / 1024.0;
    fp16_to_real = m * (2.0 ** (e - 15));
    if (h[15]) fp16_to_real = -fp16_to_real;
  endfunction

  // round to nearest, ties to even; no overflow handling (not needed here)
  function automatic logic [15:0] real_to_fp16(input real r);
    logic s;
    real  a, f;
    int   e;
    longint mi;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a == 0.0) return {s, 15'd0};
    e = 15;
    while (e > -14 && a < 2.0 ** e) e--;
    // a in [2^e, 2^(e+1)) or subnormal (e == -14 and a < 2^-14)
    f = a / (2.0 ** (e - 10));          // 1024..2047.x (or less if subnormal)
    mi = longint'($floor(f));
    if (f - real'(mi) > 0.5 || (f - real'(mi) == 0.5 && mi[0])) mi++;
    if (a < 2.0 ** -14) return {s, 15'(mi)};   // subnormal; 1024 rounds up to the smallest normal
    if (mi == 2048) begin mi = 1024; e++; end
    return {s, 5'(e + 15), 10'(mi - 1024)};
  endfunction

  function automatic logic [7:0] ref_q(input logic [15:0] x, input logic [15:0] mx);
    real v;
    int  qi;
    if (mx[14:0] == 0) return 8'd0;
    v  = 127.0 * fp16_to_real({1'b0, x[14:0]}) / fp16_to_real({1'b0, mx[14:0]});
    qi = int'($floor(v + 0.5));
    if (qi > 127) qi = 127;
    return x[15] ? 8'(-qi) : 8'(qi);
  endfunction

  typedef bit bitq_t[$];

  // Append the record of one beat to a bit queue (LSB first).
  function automatic void ref_record(input logic [W_DATA-1:0] beat, input cmode_e mode,
                                     ref bitq_t bits);
    logic [15:0] mx;
    logic [7:0]  q [LANES];
    logic [7:0]  d [LANES];
    int k, i, j;
    if (mode == MODE_RAW) begin
      for (i = 0; i < W_DATA; i++) bits.push_back(beat[i]);
      return;
    end
    mx = 0;
    for (i = 0; i < LANES; i++) if (beat[16*i +: 15] > mx[14:0]) mx = {1'b0, beat[16*i +: 15]};
    for (i = 0; i < LANES; i++) q[i] = ref_q(beat[16*i +: 16], mx);
    for (i = 0; i < LANES; i++) d[i] = (i > 0 && mode != MODE_INT8) ? q[i] - q[i-1] : q[i];
    for (i = 0; i < 16; i++) bits.push_back(mx[i]);
    if (mode != MODE_RLE) begin
      for (i = 0; i < LANES; i++) for (j = 0; j < 8; j++) bits.push_back(d[i][j]);
      return;
    end
    begin
      logic [7:0] pv [$];
      int         pl [$];
      i = 0;
      while (i < LANES) begin
        k = i;
        while (k + 1 < LANES && d[k+1] == d[i]) k++;
        pv.push_back(d[i]);
        pl.push_back(k - i);
        i = k + 1;
      end
      for (j = 0; j < 5; j++) bits.push_back(5'(pv.size() - 1) >> j);
      foreach (pv[n]) begin
        for (j = 0; j < 8; j++) bits.push_back(pv[n][j]);
        for (j = 0; j < 5; j++) bits.push_back(5'(pl[n]) >> j);
      end
    end
  endfunction

  // Reference dequantized value of one INT8 code against a stored scale.
  function automatic logic [15:0] ref_dq(input logic [7:0] q, input logic [15:0] mx);
    real v;
    v = real'($signed(q)) * fp16_to_real(mx) / 127.0;
    if (q == 8'd0) return 16'd0;
    return real_to_fp16(v);
  endfunction

  // Expected decompressor output for one input beat stored in a mode.
  function automatic logic [W_DATA-1:0] expect_beat(input logic [W_DATA-1:0] b, input cmode_e mode);
    logic [15:0] mx;
    logic [W_DATA-1:0] r;
    if (mode == MODE_RAW) return b;
    mx = 0;
    for (int i = 0; i < LANES; i++) if (b[16*i +: 15] > mx[14:0]) mx = {1'b0, b[16*i +: 15]};
    for (int i = 0; i < LANES; i++) r[16*i +: 16] = ref_dq(ref_q(b[16*i +: 16], mx), mx);
    return r;
  endfunction

  // Test beat generator. kind: 0 random, 1 constant, 2 ramp, 3 zeros,
  // 4 small (subnormal range), 5 sparse
  function automatic logic [W_DATA-1:0] gen_beat(input int kind);
    logic [W_DATA-1:0] b;
    logic [15:0] base, step;
    b = '0;
    base = 16'($urandom);
    base[14] = 1'b0;
    step = 16'($urandom_range(0, 40));
    for (int i = 0; i < LANES; i++) begin
      case (kind)
        0: b[16*i +: 16] = 16'($urandom);
        1: b[16*i +: 16] = base;
        2: b[16*i +: 16] = {1'b0, 5'd15, 10'(i * 16)};
        3: b[16*i +: 16] = 16'd0;
        4: b[16*i +: 16] = {1'($urandom), 5'd0, 10'($urandom)};
        default: b[16*i +: 16] = ($urandom_range(0, 7) == 0) ? 16'($urandom) & 16'hbfff : 16'd0;
      endcase
      if (kind == 0 && b[16*i + 10 +: 5] == 5'd31) b[16*i + 14] = 1'b0;
      if (kind == 1 && step == 0) b[16*i +: 16] = base;
    end
    return b;
  endfunction
endpackage
