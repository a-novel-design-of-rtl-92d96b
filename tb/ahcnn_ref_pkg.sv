// ahcnn_ref_pkg -- behavioural reference model of the AH-CNN datapath, used by
// the testbenches to work out expected outputs independently of the RTL.
//
// It computes with plain integers and reals, layer by layer, on package-level
// arrays: ref_in (input map, [channel][y][x]) -> ref_conv -> ref_out, with the
// weights in ref_w[oc][ic][tap] as integers (+1/-1 for binary layers). Pooling,
// classifier and the softmax confidence use real arithmetic (exp), not the
// table-based approximation of the hardware.
package ahcnn_ref_pkg;

  int ref_in  [64][32][32];
  int ref_out [64][32][32];
  int ref_w   [64][64][9];
  int ref_fcw [100][64];      // +1 / -1
  int ref_z   [100];

  // one 3x3 conv layer, padding 1, ReLU, >>> shift, clamp to 0..31
  function automatic void ref_conv(int ic, int oc, int din, int stride, int shift);
    int dout = din / stride;
    for (int o = 0; o < oc; o++)
      for (int y = 0; y < dout; y++)
        for (int x = 0; x < dout; x++) begin
          longint acc = 0;
          for (int t = 0; t < 9; t++) begin
            int iy = y * stride + t / 3 - 1;
            int ix = x * stride + t % 3 - 1;
            if (iy >= 0 && ix >= 0 && iy < din && ix < din)
              for (int i = 0; i < ic; i++) acc += longint'(ref_in[i][iy][ix]) * ref_w[o][i][t];
          end
          acc = acc >>> shift;
          ref_out[o][y][x] = acc < 0 ? 0 : (acc > 31 ? 31 : int'(acc));
        end
  endfunction

  function automatic void ref_out_to_in(int ch, int dim);
    for (int c = 0; c < ch; c++)
      for (int y = 0; y < dim; y++)
        for (int x = 0; x < dim; x++) ref_in[c][y][x] = ref_out[c][y][x];
  endfunction

  // global average pool (Q5.3 mean, truncated) + binary classifier on ref_in
  function automatic void ref_pool_fc(int ch, int dim, int fc_shift, int ncls);
    int p [64];
    int lg = $clog2(dim);
    for (int c = 0; c < 64; c++) begin
      int s = 0;
      if (c < ch)
        for (int y = 0; y < dim; y++)
          for (int x = 0; x < dim; x++) s += ref_in[c][y][x];
      p[c] = s >> (2 * lg - 3);
    end
    for (int j = 0; j < ncls; j++) begin
      int s = 0;
      for (int c = 0; c < 64; c++) s += ref_fcw[j][c] * p[c];
      ref_z[j] = s >>> fc_shift;
    end
  endfunction

  // label, exact max-softmax and high-priority top-n test on ref_z (Q.3 logits)
  function automatic void ref_softmax(int ncls, bit [127:0] hp, int topn,
                                      output int label, output real beta, output bit hp_hit);
    real s = 0.0;
    label = 0;
    for (int j = 1; j < ncls; j++) if (ref_z[j] > ref_z[label]) label = j;
    for (int j = 0; j < ncls; j++) s += $exp((ref_z[j] - ref_z[label]) / 8.0);
    beta = 1.0 / s;
    hp_hit = 0;
    for (int j = 0; j < ncls; j++) begin
      int rank = 0;
      for (int k = 0; k < ncls; k++)
        if (ref_z[k] > ref_z[j] || (ref_z[k] == ref_z[j] && k < j)) rank++;
      if (hp[j] && rank < topn) hp_hit = 1;
    end
  endfunction

endpackage
