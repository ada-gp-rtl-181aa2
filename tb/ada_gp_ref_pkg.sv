// ada_gp_ref_pkg: bit-exact reference model of the ADA-GP-MAX datapath,
// written independently of the RTL from the command semantics, for the
// layer_sequencer and ada_gp_top testbenches. It keeps its own copy of the
// global buffer and of the predictor weights, and applies one layer command
// at a time:
//   FW: y[n][c] = rq(sum_k x[n][k] w[c][k]); a[c][p] = sum of y[n][c] over
//       the batch and the positions pooled into p, shifted right by
//       log2_b + log2_pool; g[c][j] = rq(sum_p Wp[p][j] a[c][p]) for j < K;
//       in Phase GP w[c][k] -= g[c][k] >>> lr.
//   BW (not Phase GP): dx[n][k] = rq(sum_c dy[n][c] w[c][k]);
//       dW[c][k] = rq(sum_n x[n][k] dy[n][c]); w[c][k] -= dW >>> lr;
//       Wp[p][j] -= (a[c][p] * (g[c][j] - dW[c][j])) >>> (8 + lrp).
// rq() is the arithmetic shift by 8 with saturation to 16 bits.
package ada_gp_ref_pkg;
  import ada_gp_pkg::*;

  localparam int RP = 8, RG = 10, RCOLS = 15;

  vec_t gb [4096];
  vec_t wp [RP];

  function automatic data_t lane(input vec_t v, input int i);
    return v[i];
  endfunction

  function automatic void fw(input layer_cmd_t c, input phase_e ph, input int lr);
    int K = int'(c.k_len), C = int'(c.c_len), N = int'(c.n_len);
    int S = 1 << c.log2_s;
    acc_t acc [RP][RCOLS];
    data_t a [RCOLS][RP];
    data_t g [RCOLS][RG];
    for (int p = 0; p < RP; p++) for (int ch = 0; ch < RCOLS; ch++) acc[p][ch] = 0;
    for (int n = 0; n < N; n++) begin
      vec_t y = '0;
      int p = (n % S) >> c.log2_pool;
      for (int ch = 0; ch < C; ch++) begin
        acc_t s = 0;
        for (int k = 0; k < K; k++)
          s += acc_t'(lane(gb[int'(c.x_addr) + n], k)) * acc_t'(lane(gb[int'(c.w_addr) + ch], k));
        y[ch] = requant(s);
        if (p < RP) acc[p][ch] += acc_t'(y[ch]);
      end
      gb[int'(c.y_addr) + n] = y;
    end
    for (int ch = 0; ch < C; ch++) begin
      vec_t av = '0, gv = '0;
      for (int p = 0; p < RP; p++) begin
        a[ch][p] = sat16(acc[p][ch] >>> (c.log2_b + c.log2_pool));
        av[p] = a[ch][p];
      end
      for (int j = 0; j < RG; j++) begin
        acc_t s = 0;
        for (int p = 0; p < RP; p++) s += acc_t'(lane(wp[p], j)) * acc_t'(a[ch][p]);
        g[ch][j] = (j < K) ? requant(s) : '0;
        gv[j] = g[ch][j];
      end
      gb[int'(c.a_addr) + ch]  = av;
      gb[int'(c.gp_addr) + ch] = gv;
    end
    if (ph == PH_GP)
      for (int ch = 0; ch < C; ch++) begin
        vec_t w = gb[int'(c.w_addr) + ch];
        for (int k = 0; k < K; k++) w[k] = sat16(acc_t'(w[k]) - (acc_t'(g[ch][k]) >>> lr));
        gb[int'(c.w_addr) + ch] = w;
      end
  endfunction

  function automatic void bw(input layer_cmd_t c, input int lr, input int lrp);
    int K = int'(c.k_len), C = int'(c.c_len), N = int'(c.n_len);
    if (c.dx_en)
      for (int n = 0; n < N; n++) begin
        vec_t dx = '0;
        for (int k = 0; k < K; k++) begin
          acc_t s = 0;
          for (int ch = 0; ch < C; ch++)
            s += acc_t'(lane(gb[int'(c.dy_addr) + n], ch)) * acc_t'(lane(gb[int'(c.w_addr) + ch], k));
          dx[k] = requant(s);
        end
        gb[int'(c.dx_addr) + n] = dx;
      end
    for (int ch = 0; ch < C; ch++) begin
      data_t gt [RG];
      vec_t w = gb[int'(c.w_addr) + ch];
      vec_t gpv = gb[int'(c.gp_addr) + ch];
      vec_t av  = gb[int'(c.a_addr) + ch];
      for (int j = 0; j < RG; j++) gt[j] = '0;
      for (int k = 0; k < K; k++) begin
        acc_t s = 0;
        for (int n = 0; n < N; n++)
          s += acc_t'(lane(gb[int'(c.x_addr) + n], k)) * acc_t'(lane(gb[int'(c.dy_addr) + n], ch));
        gt[k] = requant(s);
        w[k] = sat16(acc_t'(w[k]) - (acc_t'(gt[k]) >>> lr));
      end
      gb[int'(c.w_addr) + ch] = w;
      for (int p = 0; p < RP; p++) begin
        vec_t row = wp[p];
        for (int j = 0; j < RG; j++) begin
          data_t e = (j < K) ? sat16(acc_t'(gpv[j]) - acc_t'(gt[j])) : '0;
          row[j] = sat16(acc_t'(row[j]) - ((acc_t'(av[p]) * acc_t'(e)) >>> (FRAC + lrp)));
        end
        wp[p] = row;
      end
    end
  endfunction
endpackage
