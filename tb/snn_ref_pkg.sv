// snn_ref_pkg: reference model of one BW-SNN convolutional layer for testbenches.
//
// snn_layer_ref holds the weights (+1/-1), per-kernel thresholds and biases and the
// membrane potentials of a layer and computes one time step directly from the
// convolution loop nest
//     O[k][x][y] = sum_{c,i,j} W[k][c][i][j] * S[c][x+i][y+j]
// followed by the integrate-and-fire update of the hardware's neuron rule
//     v = clamp(V + O + bias); spike = v >= th; V = spike ? clamp(v - th) : v.
// With dw set only channel c == k contributes to kernel k (depthwise layer).
// Spike maps are flat: S[(c*H + h)*W + w], output [(k*X + x)*Y + y]. It counts
// spikes and saturations so a testbench can report which cases occurred.
package snn_ref_pkg;

  class snn_layer_ref;
    int C, H, W, I, J, K, X, Y, VW;
    bit wt [];          // [((k*C + c)*I + i)*J + j], 1 = +1
    int th [], bias [];
    int v [];           // [(k*X + x)*Y + y]
    int n_spikes, n_sat;
    bit dw;             // depthwise: kernel k sees channel k only

    function new(int c, int h, int w, int i, int j, int k, int vw);
      C = c; H = h; W = w; I = i; J = j; K = k; VW = vw;
      X = H - I + 1; Y = W - J + 1;
      wt = new[K * C * I * J];
      th = new[K];
      bias = new[K];
      v = new[K * X * Y];
      foreach (th[q]) begin th[q] = 1; bias[q] = 0; end
      n_spikes = 0; n_sat = 0; dw = 0;
    endfunction

    function int widx(int k, int c, int i, int j);
      return ((k * C + c) * I + i) * J + j;
    endfunction

    function int clamp(int a);
      int vmax = (1 << (VW - 1)) - 1;
      int vmin = -(1 << (VW - 1));
      return a > vmax ? vmax : (a < vmin ? vmin : a);
    endfunction

    // Weight column of kernel k at (i,j) as the C-bit word of the hardware port.
    function bit [15:0] wt_word(int k, int i, int j);
      bit [15:0] r = '0;
      for (int c = 0; c < C; c++) r[c] = wt[widx(k, c, i, j)];
      return r;
    endfunction

    // One time step; first = potentials start from zero.
    function void step(input bit s [], output bit o [], input bit first);
      o = new[K * X * Y];
      for (int k = 0; k < K; k++)
        for (int x = 0; x < X; x++)
          for (int y = 0; y < Y; y++) begin
            int sum = 0, acc, vv, n;
            n = (k * X + x) * Y + y;
            for (int c = 0; c < C; c++)
              for (int i = 0; i < I; i++)
                for (int j = 0; j < J; j++)
                  if ((!dw || c == k) && s[(c * H + x + i) * W + y + j]) sum += wt[widx(k, c, i, j)] ? 1 : -1;
            acc = (first ? 0 : v[n]) + sum + bias[k];
            vv = clamp(acc);
            if (vv != acc) n_sat++;
            o[n] = (vv >= th[k]);
            if (o[n]) n_spikes++;
            v[n] = o[n] ? clamp(vv - th[k]) : vv;
          end
    endfunction
  endclass

endpackage
