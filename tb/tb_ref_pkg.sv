// tb_ref_pkg -- reference model of one accelerator layer, for testbenches.
//
// Computes OACT = MPOOL(ReLU(CONV(IA, W, B))) straight from Eq. (1) of the
// accelerator's definition, with the same DFP post-processing contract as
// the RTL (bias << bias_shift, rounded arithmetic right shift by out_shift,
// saturation to 8 bits) and floor-mode max-pool with stride 2. Arrays are
// flat: ia[(y*W + x)*C_i + c], w[((co*F + fh)*F + fw)*C_i + ci], and the
// result out[(y*W_out + x)*C_o + co].
package tb_ref_pkg;
  import accel_pkg::*;

  typedef byte signed bytes_t[];

  function automatic byte signed post(longint acc, byte signed b, int bsh, int osh, bit relu);
    longint v;
    v = acc + (longint'(b) <<< bsh);
    if (osh > 0) v = (v + (longint'(1) <<< (osh - 1))) >>> osh;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    if (relu && v < 0) v = 0;
    return byte'(v);
  endfunction

  function automatic void ref_layer(input layer_cfg_t cfg, input bytes_t ia,
                                    input bytes_t w, input bytes_t b,
                                    output bytes_t out, output int oh, output int ow);
    int H, W, CI, CO, F, S, P, HO, WO;
    bytes_t conv;
    H = cfg.in_h; W = cfg.in_w; CI = cfg.in_c; CO = cfg.out_c;
    F = cfg.fsize; S = cfg.stride; P = cfg.pad;
    HO = (H + 2 * P - F) / S + 1;
    WO = (W + 2 * P - F) / S + 1;
    conv = new[HO * WO * CO];
    for (int yo = 0; yo < HO; yo++)
      for (int xo = 0; xo < WO; xo++)
        for (int co = 0; co < CO; co++) begin
          longint acc = 0;
          for (int fh = 0; fh < F; fh++)
            for (int fw = 0; fw < F; fw++) begin
              int y = yo * S - P + fh;
              int x = xo * S - P + fw;
              if (y >= 0 && y < H && x >= 0 && x < W)
                for (int ci = 0; ci < CI; ci++)
                  acc += longint'(ia[(y * W + x) * CI + ci]) *
                         longint'(w[((co * F + fh) * F + fw) * CI + ci]);
            end
          conv[(yo * WO + xo) * CO + co] = post(acc, b[co], cfg.bias_shift, cfg.out_shift,
                                                cfg.relu_en);
        end
    if (!cfg.pool_en) begin
      out = conv; oh = HO; ow = WO;
      return;
    end
    begin
      int K, PH, PW;
      K = cfg.pool_k;
      PH = (HO - K) / 2 + 1;
      PW = (WO - K) / 2 + 1;
      out = new[PH * PW * CO];
      for (int py = 0; py < PH; py++)
        for (int px = 0; px < PW; px++)
          for (int c = 0; c < CO; c++) begin
            byte signed m = -128;
            for (int i = 0; i < K; i++)
              for (int j = 0; j < K; j++)
                if (conv[((py * 2 + i) * WO + px * 2 + j) * CO + c] > m)
                  m = conv[((py * 2 + i) * WO + px * 2 + j) * CO + c];
            out[(py * PW + px) * CO + c] = m;
          end
      oh = PH; ow = PW;
    end
  endfunction
endpackage
