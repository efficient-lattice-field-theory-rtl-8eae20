// anf_ref_pkg: reference model used by the testbenches of layer_engine and
// anf_solver. It holds its own copy of every memory of the solver (crossbar
// conductances, feature buffer, time embeddings, normalization pairs, LoRA
// weights) as plain integers and recomputes a layer, or a whole coupling
// step, from the arithmetic rules of the design written out directly:
//   input   x' = bn(sat(x + temb)),  bn(v) = sat(floor(v * gamma / 256) + beta)
//   crossbar a_j = floor(floor(sum_i (G[r][c] - G[r][31]) * x'_i / 16) / 4)
//            (ReLU before the last division if relu_analog), clipped to 14 bits
//   output  y_j = 4 * a_j + lora_j, ReLU if relu_digital, + old value if
//           residual, saturated to 16 bits
//   update  x <- sat(floor((x - s1) * E / 256)) with E = e^(-s2) built from
//           a 2^(k/16) table computed here with real arithmetic.
// It also counts how often each mechanism occurred, for coverage checks.
package anf_ref_pkg;
  import anf_pkg::*;

  int G    [32][32];
  int fb   [256];
  int temb [8][32];
  int bng  [64];
  int bnb  [64];
  int lw   [512];

  // event counters
  int n_relu_analog_clip, n_relu_digital_clip, n_residual, n_lora, n_temb, n_bn;
  int n_adc_sat, n_out_sat, n_frozen, n_updated, n_exp_sat;

  function automatic void init();
    for (int r = 0; r < 32; r++) for (int c = 0; c < 32; c++) G[r][c] = 50;
    for (int a = 0; a < 256; a++) fb[a] = 0;
    for (int s = 0; s < 8; s++) for (int c = 0; c < 32; c++) temb[s][c] = 0;
    for (int k = 0; k < 64; k++) begin bng[k] = 256; bnb[k] = 0; end
    for (int k = 0; k < 512; k++) lw[k] = 0;
    n_relu_analog_clip = 0; n_relu_digital_clip = 0; n_residual = 0; n_lora = 0;
    n_temb = 0; n_bn = 0; n_adc_sat = 0; n_out_sat = 0; n_frozen = 0; n_updated = 0;
    n_exp_sat = 0;
  endfunction

  function automatic longint fdiv(longint a, longint b);   // floor division, b > 0
    longint q = a / b;
    if (a < 0 && q * b != a) q -= 1;
    return q;
  endfunction

  function automatic int clip16(longint v, bit count);
    if (v > 32767)  begin if (count) n_out_sat++; return 32767; end
    if (v < -32768) begin if (count) n_out_sat++; return -32768; end
    return int'(v);
  endfunction

  function automatic void run_layer(layer_desc_t d, int step);
    int xin [32];
    int h [2];
    int ly [32];
    for (int v = 0; v < int'(d.n_vec); v++) begin
      for (int i = 0; i < int'(d.in_len); i++) begin
        int a = (int'(d.src_base) + v * int'(d.src_vstride) + i * int'(d.src_estride)) % 256;
        int ch = d.chan_is_vec ? v : i;
        int x = fb[a];
        if (d.temb_en) begin x = clip16(longint'(x) + temb[step][ch % 32], 0); n_temb++; end
        if (d.bn_en) begin
          int k = (int'(d.bn_base) + ch) % 64;
          x = clip16(fdiv(longint'(x) * bng[k], 256) + bnb[k], 0); n_bn++;
        end
        xin[i] = x;
      end
      if (d.lora_en) begin
        int lb = int'(d.lora_base);
        for (int r = 0; r < 2; r++) begin
          longint acc = 0;
          for (int i = 0; i < int'(d.in_len); i++) acc += longint'(lw[(lb + r * int'(d.in_len) + i) % 512]) * xin[i];
          h[r] = clip16(fdiv(acc, 256), 0);
        end
        for (int j = 0; j < int'(d.out_len); j++) begin
          longint acc = 0;
          for (int r = 0; r < 2; r++) acc += longint'(lw[(lb + 2 * int'(d.in_len) + j * 2 + r) % 512]) * h[r];
          ly[j] = clip16(fdiv(acc, 256), 0);
        end
      end
      for (int j = 0; j < int'(d.out_len); j++) begin
        int c = (int'(d.col_base) + j) % 32;
        longint acc = 0, q;
        int a = (int'(d.dst_base) + v * int'(d.dst_vstride) + j * int'(d.dst_estride)) % 256;
        for (int i = 0; i < int'(d.in_len); i++) begin
          int r = (int'(d.row_base) + i) % 32;
          acc += longint'(G[r][c] - G[r][31]) * xin[i];
        end
        q = fdiv(acc, 16);
        if (d.relu_analog && q < 0) begin q = 0; n_relu_analog_clip++; end
        q = fdiv(q, 4);
        if (q > 8191)  begin q = 8191;  n_adc_sat++; end
        if (q < -8192) begin q = -8192; n_adc_sat++; end
        q = q * 4;
        if (d.lora_en) begin q += ly[j]; n_lora++; end
        if (d.relu_digital && q < 0) begin q = 0; n_relu_digital_clip++; end
        if (d.residual) begin q += fb[a]; n_residual++; end
        fb[a] = clip16(q, 1);
      end
    end
  endfunction

  function automatic int exp_neg(int s);
    int lut [17];
    longint u, n, f, m, sc;
    for (int k = 0; k <= 16; k++) lut[k] = int'($floor(16384.0 * $pow(2.0, k / 16.0) + 0.5));
    u = fdiv(-longint'(s) * longint'($floor(1.4426950408889634 * 4096.0 + 0.5)), 4096);
    n = fdiv(u, 256);
    f = u - n * 256;
    m = lut[f / 16] + ((lut[f / 16 + 1] - lut[f / 16]) * (f % 16)) / 16;
    if (n >= 7) begin n_exp_sat++; return 32767; end
    if (n < -15) return 0;
    sc = (n >= 0) ? (m << n) : (m >> (-n));
    return clip16(sc / 64, 0);
  endfunction

  function automatic int paddr(int i, int j, int l, int p);
    return ((i / p) * (l / p) + (j / p)) * p * p + (i % p) * p + (j % p);
  endfunction

  // One coupling update of the field xf (row-major L x L), step t.
  function automatic void coupling(ref int xf [], input int t, input int out_base,
                                   input int l, input int p, ref longint logdet);
    for (int k = 0; k < l * l; k++) begin
      int i = k / l, j = k % l;
      bit frozen = ((i + j) % 2 == 0) ? (t % 2 == 1) : (t % 2 == 0);
      if (frozen) n_frozen++;
      else begin
        int s1 = fb[(out_base + 2 * paddr(i, j, l, p)) % 256];
        int s2 = fb[(out_base + 2 * paddr(i, j, l, p) + 1) % 256];
        xf[k] = clip16(fdiv((longint'(xf[k]) - s1) * exp_neg(s2), 256), 1);
        logdet += s2;
        n_updated++;
      end
    end
  endfunction

  // Copy the frozen half of the field into the feature buffer, patch order.
  function automatic void load_frozen(ref int xf [], input int t, input int in_base,
                                      input int l, input int p);
    for (int k = 0; k < l * l; k++) begin
      int i = k / l, j = k % l;
      bit frozen = ((i + j) % 2 == 0) ? (t % 2 == 1) : (t % 2 == 0);
      fb[(in_base + paddr(i, j, l, p)) % 256] = frozen ? xf[k] : 0;
    end
  endfunction
endpackage
