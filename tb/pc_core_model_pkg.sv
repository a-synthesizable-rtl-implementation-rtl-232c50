// pc_core_model_pkg -- reference model of one predictive-coding neuron tick, for
// the testbenches.
//
// Written from the update equations in double precision, rounding to
// binary32 at each point where the hardware stores or accumulates a value
// (one rounding per multiply-add), so the model and the core agree to a few
// units in the last place. Activations are evaluated exactly (tanh with
// $tanh), so a tanh layer agrees only to the accuracy of the hardware table.
package pc_core_model_pkg;
  import fp_ref_pkg::*;

  class pc_core_model;
    int    n_in, n_back;
    int    act_in, act_own;   // 0 linear, 1 relu, 2 tanh
    bit    clamp_hard;
    real   w[], back[];
    real   x, eps, mu, b;

    function new(int n_in_, int n_back_, int act_in_, int act_own_, bit clamp_hard_);
      n_in = n_in_; n_back = n_back_; act_in = act_in_; act_own = act_own_;
      clamp_hard = clamp_hard_;
      w    = new[n_in + 1];
      back = new[(n_in > 0) ? n_in : 1];
      foreach (w[j]) w[j] = 0.0;
      foreach (back[j]) back[j] = 0.0;
      x = 0.0; eps = 0.0; mu = 0.0; b = 0.0;
    endfunction

    static function real act(int kind, real v);
      if (kind == 1) return (v > 0.0) ? v : 0.0;
      if (kind == 2) return $tanh(v);
      return v;
    endfunction

    static function real dact(int kind, real v);
      real t;
      if (kind == 1) return (v > 0.0) ? 1.0 : 0.0;
      if (kind == 2) begin t = $tanh(v); return 1.0 - t * t; end
      return 1.0;
    endfunction

    // One tick. pre[] are the upper layer's raw states, bin[] the products
    // from the layer below, all as seen at the start of the tick.
    function void tick(real pre[], real bin[], bit set_en, real obs,
                       real alpha, real alpha_bias, real gamma);
      real x_eff, fd, ae, t;
      x_eff = set_en ? obs : x;
      mu = 0.0;
      for (int j = 0; j <= n_in; j++)
        mu = q32(w[j] * ((j == n_in) ? 1.0 : act(act_in, pre[j])) + mu);
      eps = q32(x_eff - mu);
      fd  = dact(act_own, x_eff);
      b   = 0.0;
      for (int k = 0; k < n_back; k++) b = q32(bin[k] + b);
      for (int j = 0; j < n_in; j++) back[j] = q32(w[j] * eps);
      w[n_in] = q32(alpha_bias * eps + w[n_in]);
      ae = q32(alpha * eps);
      for (int j = 0; j < n_in; j++) w[j] = q32(ae * act(act_in, pre[j]) + w[j]);
      t = q32(fd * b - eps);
      x = (clamp_hard && set_en) ? obs : q32(gamma * t + x);
    endfunction
  endclass

endpackage
