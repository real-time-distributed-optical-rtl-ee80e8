// tb_ref_pkg: plain reference model of the DSCNN-3 network for the testbenches.
//
// It computes the network on whole feature maps held in integer arrays, with
// ordinary multiplication by the weight value (+-2^(6-e), or 0) in place of the
// shifts of the hardware and explicit floor division, so it shares only the
// weight table (dscnn_pkg::wcode/bias) with the design. Maps are flat arrays
// indexed (r*W + c)*C + ch.
package tb_ref_pkg;
  import dscnn_pkg::*;

  // Weight value scaled by 2^6.
  function automatic int wval(input logic [3:0] code);
    int e;
    e = int'(code[2:0]);
    if (e == 7) return 0;
    return code[3] ? -(2 ** (6 - e)) : (2 ** (6 - e));
  endfunction

  function automatic int floor64(input int v);
    int m;
    m = v % 64;
    if (m < 0) m += 64;
    return (v - m) / 64;
  endfunction

  function automatic int sat8(input int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // Depth-wise output of channel ch from its nine taps.
  function automatic int ref_dw(input int layer, input int ch, input int taps[9]);
    int s;
    s = int'(bias(layer, KIND_DWB, ch)) * 64;
    for (int k = 0; k < 9; k++) s += taps[k] * wval(wcode(layer, KIND_DW, ch * 9 + k));
    return sat8(floor64(s));
  endfunction

  // Point-wise output o from the CIN depth-wise outputs (ReLU, saturation).
  function automatic int ref_pw(input int layer, input int cin, input int o, input int x[]);
    int s, q;
    s = int'(bias(layer, KIND_PWB, o)) * 64;
    for (int i = 0; i < cin; i++) s += x[i] * wval(wcode(layer, KIND_PW, o * cin + i));
    q = floor64(s);
    return (q < 0) ? 0 : sat8(q);
  endfunction

  // Whole depth-wise separable layer, "same" zero padding.
  function automatic void ref_layer(input int h, input int w, input int cin, input int cout,
                                    input int layer, input int fin[], output int fout[]);
    int taps[9];
    int dw[];
    fout = new[h * w * cout];
    dw   = new[cin];
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        for (int ch = 0; ch < cin; ch++) begin
          for (int dr = -1; dr <= 1; dr++)
            for (int dc = -1; dc <= 1; dc++) begin
              int rr, cc;
              rr = r + dr;
              cc = c + dc;
              taps[3 * (dr + 1) + dc + 1] =
                (rr >= 0 && rr < h && cc >= 0 && cc < w) ? fin[(rr * w + cc) * cin + ch] : 0;
            end
          dw[ch] = ref_dw(layer, ch, taps);
        end
        for (int o = 0; o < cout; o++) fout[(r * w + c) * cout + o] = ref_pw(layer, cin, o, dw);
      end
  endfunction

  // 2x2 stride-2 pooling, floor on odd sizes; avg = floor(sum / 4).
  function automatic void ref_pool(input int h, input int w, input int ch, input bit avg,
                                   input int fin[], output int fout[]);
    int ho, wo;
    ho = h / 2;
    wo = w / 2;
    fout = new[ho * wo * ch];
    for (int r = 0; r < ho; r++)
      for (int c = 0; c < wo; c++)
        for (int k = 0; k < ch; k++) begin
          int v[4];
          int s, m;
          v[0] = fin[((2 * r) * w + 2 * c) * ch + k];
          v[1] = fin[((2 * r) * w + 2 * c + 1) * ch + k];
          v[2] = fin[((2 * r + 1) * w + 2 * c) * ch + k];
          v[3] = fin[((2 * r + 1) * w + 2 * c + 1) * ch + k];
          s = 0;
          m = v[0];
          foreach (v[i]) begin
            s += v[i];
            if (v[i] > m) m = v[i];
          end
          if (avg) begin
            int q;
            q = s % 4;
            if (q < 0) q += 4;
            fout[(r * wo + c) * ch + k] = (s - q) / 4;
          end else begin
            fout[(r * wo + c) * ch + k] = m;
          end
        end
  endfunction

  // Fully connected layer on npos pixels of ch channels; logits in 2^6 scale.
  function automatic void ref_fc(input int npos, input int ch, input int fin[],
                                 output longint logits[3], output int cls);
    int flat;
    flat = npos * ch;
    for (int k = 0; k < 3; k++) begin
      logits[k] = longint'(bias(4, KIND_PWB, k)) * 64;
      for (int p = 0; p < npos; p++)
        for (int c = 0; c < ch; c++)
          logits[k] += longint'(fin[p * ch + c]) * wval(wcode(4, KIND_PW, k * flat + c * npos + p));
    end
    cls = 0;
    for (int k = 1; k < 3; k++) if (logits[k] > logits[cls]) cls = k;
  endfunction

endpackage
