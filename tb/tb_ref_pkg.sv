// tb_ref_pkg -- reference models used by the testbenches.
//
// Written independently of the RTL: the Hamming code is computed as the XOR of the
// codeword positions of all set payload bits (payload bits fill the positions 3, 5, 6,
// 7, 9, ... that are not powers of two), and the FP MAC model takes the maximum exponent
// sum over all rows directly instead of per block.
package tb_ref_pkg;

  // Codeword position of payload bit j.
  function automatic int ref_pos(int j);
    int n = 0;
    for (int pos = 1; pos < 4096; pos++) begin
      if ((pos & (pos - 1)) == 0) continue;
      if (n == j) return pos;
      n++;
    end
    return -1;
  endfunction

  // {P7, P6..P0} for a 104-bit payload.
  function automatic logic [7:0] ref_encode(logic [103:0] d);
    logic [6:0] p = '0;
    for (int j = 0; j < 104; j++)
      if (d[j]) p ^= 7'(ref_pos(j));
    return {(^d) ^ (^p), p};
  endfunction

  // Half-precision value as a real (exponent field 0 read as zero).
  function automatic real fp16_to_real(logic [15:0] h);
    real v;
    if (h[14:10] == 0) return 0.0;
    v = 1.0 + real'(h[9:0]) / 1024.0;
    for (int i = 15; i < int'(h[14:10]); i++) v = v * 2.0;
    for (int i = int'(h[14:10]); i < 15; i++) v = v / 2.0;
    return h[15] ? -v : v;
  endfunction

  // Column MAC as the hardware defines it: returns the fixed-point sum and E_max.
  // we_r is the shared exponent of row r's block, ws_r/wm_r its sign and mantissa.
  function automatic longint ref_colsum(input logic [15:0] x[], input int we_r[],
                                        input bit ws_r[], input int wm_r[], output int emax);
    longint s = 0;
    emax = 0;
    for (int r = 0; r < x.size(); r++)
      if (x[r][14:10] != 0 && we_r[r] != 0 && int'(x[r][14:10]) + we_r[r] > emax)
        emax = int'(x[r][14:10]) + we_r[r];
    for (int r = 0; r < x.size(); r++) begin
      int d;
      longint al, p;
      if (x[r][14:10] == 0 || we_r[r] == 0) continue;
      d = emax - (int'(x[r][14:10]) + we_r[r]);
      if (d >= 11) continue;
      al = (1024 + longint'(x[r][9:0])) >> d;
      p  = al * (1024 + longint'(wm_r[r]));
      s  = (x[r][15] ^ ws_r[r]) ? s - p : s + p;
    end
    return s;
  endfunction

  // Normalisation to FP16 with truncation, infinity on overflow, zero on underflow.
  function automatic logic [15:0] ref_norm(longint s, int emax, output bit ovf, output bit unf);
    longint mag = (s < 0) ? -s : s;
    int lead = 0;
    int e;
    logic [15:0] res;
    ovf = 0;
    unf = 0;
    if (mag == 0) return 16'h0000;
    for (int i = 0; i < 62; i++) if ((mag >> i) & 1) lead = i;
    e = emax - 15 + lead - 20;
    res[15] = (s < 0);
    if (e >= 31) begin
      ovf = 1;
      res[14:0] = {5'h1f, 10'h0};
    end else if (e <= 0) begin
      unf = 1;
      res[14:0] = '0;
    end else begin
      res[14:10] = 5'(e);
      res[9:0]   = (lead >= 10) ? 10'(mag >> (lead - 10)) : 10'(mag << (10 - lead));
    end
    return res;
  endfunction

  // One4N block payload for COLS = 16, N = 8: shared exponents then the sign bits.
  function automatic logic [207:0] ref_payload(input int we_c[16], input bit ws_nc[8][16]);
    logic [207:0] p = '0;
    for (int c = 0; c < 16; c++) p[5*c +: 5] = 5'(we_c[c]);
    for (int n = 0; n < 8; n++)
      for (int c = 0; c < 16; c++) p[80 + 16*n + c] = ws_nc[n][c];
    return p;
  endfunction

  // Stored ECC row k ({code, payload slice}) of a block payload.
  function automatic logic [111:0] ref_esa_row(logic [207:0] p, int k);
    logic [103:0] d = p[104*k +: 104];
    return {ref_encode(d), d};
  endfunction

endpackage
