// dreamnet_ref_pkg -- plain integer reference model of the Dreamnet layers,
// used by the testbenches to compute expected results independently of the
// RTL. Feature maps are flat int arrays indexed (map*h + y)*w + x.
//   conv layer: out[o](y,x) = clamp(floor((sum_i sum_ky,kx in[i](y+ky,x+kx)
//               * w[o][i][3ky+kx] + b[o]*256) / 2^(B-1)), 0, 255)
//   pool layer: out(y,x) = max of in(2y..2y+1, 2x..2x+1)
//   fc layer:   score[c] = sum_pos,i in[i](pos) * w[pos][i][c] + b[c]*256
// The conv layer also counts how many outputs were clipped at 0 (ReLU) and
// how many saturated at 255.
package dreamnet_ref_pkg;

  int n_relu_zero = 0;
  int n_sat       = 0;

  // floor division by 2^f, valid for negative numbers too
  function automatic longint floor_div_pow2(longint a, int f);
    longint d = longint'(1) << f;
    if (a >= 0) return a / d;
    return -((-a + d - 1) / d);
  endfunction

  function automatic void conv_layer(input int in[], input int nin, input int w, input int h,
                                     input int wt[], input int b[], input int nout, input int wgt_w,
                                     output int out[]);
    int ow = w - 2, oh = h - 2;
    out = new[nout * ow * oh];
    for (int o = 0; o < nout; o++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          longint acc = longint'(b[o]) * 256;
          longint q;
          for (int i = 0; i < nin; i++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                acc += longint'(in[(i*h + y + ky)*w + x + kx]) * wt[(o*nin + i)*9 + ky*3 + kx];
          q = floor_div_pow2(acc, wgt_w - 1);
          if (q < 0) begin q = 0; n_relu_zero++; end
          else if (q > 255) begin q = 255; n_sat++; end
          out[(o*oh + y)*ow + x] = int'(q);
        end
  endfunction

  function automatic void pool_layer(input int in[], input int n, input int w, input int h,
                                     output int out[]);
    int ow = w / 2, oh = h / 2;
    out = new[n * ow * oh];
    for (int m = 0; m < n; m++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          int v = 0;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++)
              if (in[(m*h + 2*y + dy)*w + 2*x + dx] > v) v = in[(m*h + 2*y + dy)*w + 2*x + dx];
          out[(m*oh + y)*ow + x] = v;
        end
  endfunction

  // wt indexed (pos*nin + i)*ncls + c
  function automatic void fc_layer(input int in[], input int nin, input int npos,
                                   input int wt[], input int b[], input int ncls,
                                   output longint score[]);
    score = new[ncls];
    for (int c = 0; c < ncls; c++) begin
      score[c] = longint'(b[c]) * 256;
      for (int p = 0; p < npos; p++)
        for (int i = 0; i < nin; i++)
          score[c] += longint'(in[i*npos + p]) * wt[(p*nin + i)*ncls + c];
    end
  endfunction

  function automatic int argmax(input longint score[]);
    int k = 0;
    for (int c = 1; c < score.size(); c++) if (score[c] > score[k]) k = c;
    return k;
  endfunction

endpackage
