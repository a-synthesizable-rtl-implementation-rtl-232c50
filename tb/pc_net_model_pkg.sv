// pc_net_model_pkg -- reference model of a whole predictive-coding network,
// built from one pc_core_model per neuron.
//
// A tick follows the hardware's data exchange: every neuron reads the states
// and back products its neighbours published at the end of the previous
// tick, then all neurons update. Layer 0 is the output layer, the last
// layer the input layer.
package pc_net_model_pkg;
  import pc_core_model_pkg::*;

  class pc_net_model;
    int           nl;
    int           sz[];
    pc_core_model n[][];

    function new(int sizes[], int acts[], bit clamp_hard);
      nl = sizes.size();
      sz = sizes;
      n  = new[nl];
      for (int l = 0; l < nl; l++) begin
        n[l] = new[sz[l]];
        for (int i = 0; i < sz[l]; i++)
          n[l][i] = new((l < nl - 1) ? sz[l + 1] : 0, (l > 0) ? sz[l - 1] : 0,
                        (l < nl - 1) ? acts[l + 1] : 0, acts[l], clamp_hard);
      end
    endfunction

    // set_en[l][i], obs[l][i]: boundary conditions of this tick.
    function void tick(bit set_en[][], real obs[][], real alpha, real alpha_bias, real gamma);
      real xs[][], bk[][][];
      real pre[], bin[];
      xs = new[nl];
      bk = new[nl];
      for (int l = 0; l < nl; l++) begin
        xs[l] = new[sz[l]];
        bk[l] = new[sz[l]];
        for (int i = 0; i < sz[l]; i++) begin
          xs[l][i] = n[l][i].x;
          bk[l][i] = n[l][i].back;
        end
      end
      for (int l = 0; l < nl; l++) begin
        for (int i = 0; i < sz[l]; i++) begin
          pre = new[(l < nl - 1) ? sz[l + 1] : 1];
          bin = new[(l > 0) ? sz[l - 1] : 1];
          pre[0] = 0.0; bin[0] = 0.0;
          if (l < nl - 1) foreach (pre[j]) pre[j] = xs[l + 1][j];
          if (l > 0)      foreach (bin[k]) bin[k] = bk[l - 1][k][i];
          n[l][i].tick(pre, bin, set_en[l][i], obs[l][i], alpha, alpha_bias, gamma);
        end
      end
    endfunction
  endclass

endpackage
