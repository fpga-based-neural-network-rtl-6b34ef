// tb_ref_pkg: reference models of the network layers for the testbenches, written
// straight from the layer equations (bias plus sum over channels and taps, zero
// padding (KS-1)/2, Leaky-ReLU with slope 0.25, pool of 2, sign binarisation) with
// no knowledge of the hardware's two-lane schedule. Feature maps are flat arrays,
// channel-major; one-bit values hold the sign (1 = -1, 0 = +1).
package tb_ref_pkg;
  import tb_fp_pkg::*;

  typedef logic [31:0] fq_t [$];
  typedef bit          bq_t [$];
  typedef int          iq_t [$];

  // fp32 convolution, Leaky-ReLU, pool of 2 (CNN layers)
  function automatic fq_t conv_fp(fq_t x, int in_ch, int len, fq_t w, fq_t b, int out_ch, int ks);
    fq_t y;
    logic [31:0] acc, act [$];
    int pad = (ks - 1) / 2;
    for (int m = 0; m < out_ch; m++) begin
      act = {};
      for (int p = 0; p < len; p++) begin
        acc = b[m];
        for (int n = 0; n < in_ch; n++)
          for (int k = 0; k < ks; k++)
            if (p + k - pad >= 0 && p + k - pad < len)
              acc = fadd(acc, fmul(x[n*len + p + k - pad], w[(m*in_ch + n)*ks + k]));
        act.push_back(fleaky(acc));
      end
      for (int j = 0; j < len / 2; j++) y.push_back(fmax(act[2*j], act[2*j+1]));
    end
    return y;
  endfunction

  // fully-connected fp32 layer
  function automatic fq_t fc_fp(fq_t x, fq_t w, fq_t b, int n_out);
    fq_t y;
    logic [31:0] acc;
    for (int o = 0; o < n_out; o++) begin
      acc = b[o];
      foreach (x[j]) acc = fadd(acc, fmul(x[j], w[o*x.size() + j]));
      y.push_back(acc);
    end
    return y;
  endfunction

  function automatic int argmax_fp(fq_t v);
    int best = 0;
    for (int i = 1; i < v.size(); i++) if (f2r(v[i]) > f2r(v[best])) best = i;
    return best;
  endfunction

  // BCNN first layer: fp32 input, +/-1 kernels, Leaky-ReLU, binarisation, no pool
  function automatic bq_t conv_fp_bin(fq_t x, int in_ch, int len, bq_t w, fq_t b, int out_ch, int ks);
    bq_t y;
    logic [31:0] acc;
    int pad = (ks - 1) / 2;
    for (int m = 0; m < out_ch; m++)
      for (int p = 0; p < len; p++) begin
        acc = b[m];
        for (int n = 0; n < in_ch; n++)
          for (int k = 0; k < ks; k++)
            if (p + k - pad >= 0 && p + k - pad < len) begin
              logic [31:0] xv = x[n*len + p + k - pad];
              if (w[(m*in_ch + n)*ks + k]) xv[31] = ~xv[31];
              acc = fadd(acc, xv);
            end
        y.push_back(f2r(fleaky(acc)) < 0.0);
      end
    return y;
  endfunction

  // binary convolution: sum of sign products, Leaky-ReLU (shift by 2), pool 2, sign
  function automatic bq_t conv_bin(bq_t x, int in_ch, int len, bq_t w, iq_t b, int out_ch, int ks);
    bq_t y;
    int acc, act [$];
    int pad = (ks - 1) / 2;
    for (int m = 0; m < out_ch; m++) begin
      act = {};
      for (int p = 0; p < len; p++) begin
        acc = b[m];
        for (int n = 0; n < in_ch; n++)
          for (int k = 0; k < ks; k++)
            if (p + k - pad >= 0 && p + k - pad < len)
              acc += (x[n*len + p + k - pad] == w[(m*in_ch + n)*ks + k]) ? 1 : -1;
        act.push_back(acc < 0 ? (acc >>> 2) : acc);
      end
      for (int j = 0; j < len / 2; j++)
        y.push_back(((act[2*j] > act[2*j+1]) ? act[2*j] : act[2*j+1]) < 0);
    end
    return y;
  endfunction

  // binary fully-connected layer
  function automatic iq_t fc_bin(bq_t x, bq_t w, iq_t b, int n_out);
    iq_t y;
    int acc;
    for (int o = 0; o < n_out; o++) begin
      acc = b[o];
      foreach (x[j]) acc += (x[j] == w[o*x.size() + j]) ? 1 : -1;
      y.push_back(acc);
    end
    return y;
  endfunction

  function automatic int argmax_int(iq_t v);
    int best = 0;
    for (int i = 1; i < v.size(); i++) if (v[i] > v[best]) best = i;
    return best;
  endfunction

endpackage
