// pc_neural_core -- one predictive-coding neuron (unit i of layer l).
//
// The core owns its state x, its prediction error eps, and the weights
// theta[0..N_IN] of its connections from the layer above, where lane N_IN
// is the bias lane whose presynaptic feature is the constant 1. On every
// start pulse it runs one tick of a fixed schedule on a sequential
// multiply-add datapath (fp32_fma, binary32, round to nearest even). The
// main unit does one operation per cycle; a second, auxiliary unit forms
// alpha*eps in the first WUP cycle and f'(x_eff)*b - eps in the STATE cycle
// so that neither stage needs an extra cycle (the source describes a single
// MAC datapath; the auxiliary unit is this design's way of meeting its
// cycle counts):
//
//   PRED    N_IN+1 cycles  mu  = sum_j theta_j * f(x_pre_j)   (bias lane last)
//   ERR     1 cycle        eps = x_eff - mu,  f'(x_eff) captured
//   BACKSUM N_BACK cycles  b   = sum_k back_in_k      (products from below)
//   BACKVEC N_IN cycles    back_out_j = theta_j * eps (sent to the layer above)
//   WUP     N_IN+1 cycles  theta_j += alpha * eps * f(x_pre_j); the bias lane
//                          is updated first with its own rate alpha_bias
//   STATE   1 cycle        x = x + gamma * (f'(x_eff) * b - eps),
//                          or x = x_obs under hard clamping
//
// so a tick takes 3*N_IN + N_BACK + 4 cycles, during which busy is high;
// done pulses for one cycle after the STATE cycle. x_eff is the externally
// observed value x_obs when x_set_en is high, else the stored state.
//
// Clamping and the inference/learning switch are external: with alpha = 0
// the WUP stage still runs but leaves every weight unchanged, and with
// CLAMP_HARD = 1 a neuron whose x_set_en is high takes x_obs as its stored
// state at the end of the tick. x_set_en and x_obs are sampled on the start
// pulse and hold for the whole tick.
//
// Neighbour interface. pre_x[j] is the raw state of neuron j of the layer
// above; f (activation ACT_IN, that layer's) is applied here as it is
// consumed. back_in[k] is the product theta_ki * eps_k published by neuron
// k of the layer below. x_out and back_out are this core's published
// values. They are snapshots taken on the start pulse: during a tick every
// core reads the values its neighbours held at the end of the previous
// tick, whatever the relative timing of layers with different fan-in.
// This double-buffering is this design's own choice; the source description
// fixes the stage order, the per-stage cycle counts, the clamping rule and
// the bias lane, but not when a neighbour's value is sampled.
//
// Weight port: w_wr_en writes w_wr_data to lane w_wr_idx (only while idle);
// w_rd_idx reads a lane combinationally. alpha, alpha_bias and gamma are
// read during the tick and must be stable while busy.
module pc_neural_core
  import pc_pkg::*;
#(
  parameter int unsigned N_IN       = 2,          // presynaptic fan-in N
  parameter int unsigned N_BACK     = 3,          // back-error fan-in M
  parameter act_e        ACT_IN     = ACT_LINEAR, // f of the layer above
  parameter act_e        ACT_OWN    = ACT_RELU,   // f of this layer (for f')
  parameter bit          CLAMP_HARD = 1'b1,
  localparam int unsigned NI_P = (N_IN   > 0) ? N_IN   : 1,
  localparam int unsigned NB_P = (N_BACK > 0) ? N_BACK : 1,
  localparam int unsigned IW   = $clog2(((N_IN > N_BACK) ? N_IN : N_BACK) + 2),
  // index widths of the arrays of NI_P, N_IN+1 and NB_P entries
  localparam int unsigned PW   = (NI_P > 1) ? $clog2(NI_P) : 1,
  localparam int unsigned WW   = (N_IN > 0) ? $clog2(N_IN + 1) : 1,
  localparam int unsigned BW   = (NB_P > 1) ? $clog2(NB_P) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  fp32_t             alpha,
  input  fp32_t             alpha_bias,
  input  fp32_t             gamma,
  input  logic              x_set_en,
  input  fp32_t             x_obs,
  input  fp32_t             pre_x    [NI_P],
  input  fp32_t             back_in  [NB_P],
  input  logic              w_wr_en,
  input  logic [IW-1:0]     w_wr_idx,
  input  fp32_t             w_wr_data,
  input  logic [IW-1:0]     w_rd_idx,
  output fp32_t             w_rd_data,
  output fp32_t             x_out,
  output fp32_t             x_state,
  output fp32_t             eps_out,
  output fp32_t             back_out [NI_P],
  output logic              busy,
  output logic              done
);

  stage_e        stage;
  logic [IW-1:0] idx;

  fp32_t w        [N_IN+1];
  fp32_t back_wk  [NI_P];
  fp32_t back_pub [NI_P];
  fp32_t x_q, x_pub, obs_q, acc, eps_q, b_acc, fd_q, ae_q;
  logic  set_q;

  // ---- effective state and activations ----
  fp32_t x_eff;
  assign x_eff = set_q ? obs_q : x_q;

  // Presynaptic lane read this cycle: PRED walks 0..N_IN, WUP visits the
  // bias lane first and then 0..N_IN-1.
  logic [IW-1:0] lane;
  always_comb begin
    if (stage == ST_WUP) lane = (idx == '0) ? IW'(N_IN) : idx - 1'b1;
    else                 lane = idx;
  end

  fp32_t pre_sel, f_pre, fd_pre_unused, f_own_unused, fd_own;
  assign pre_sel = (int'(lane) < N_IN) ? pre_x[PW'(lane)] : FP_POS_ZERO;

  pc_activation #(.ACT(ACT_IN))  u_act_in  (.x(pre_sel), .f(f_pre),        .fd(fd_pre_unused));
  pc_activation #(.ACT(ACT_OWN)) u_act_own (.x(x_eff),   .f(f_own_unused), .fd(fd_own));

  fp32_t feat;     // presynaptic feature: f(x_j), or 1 on the bias lane
  assign feat = (int'(lane) == N_IN) ? FP_ONE : f_pre;

  fp32_t w_lane;
  assign w_lane = w[WW'(lane)];   // lane <= N_IN by construction

  // ---- datapath: one main multiply-add and one auxiliary one ----
  fp32_t mac_a, mac_b, mac_c, mac_y, aux_a, aux_b, aux_c, aux_y;

  always_comb begin
    mac_a = FP_POS_ZERO; mac_b = FP_POS_ZERO; mac_c = FP_NEG_ZERO;
    aux_a = FP_POS_ZERO; aux_b = FP_POS_ZERO; aux_c = FP_NEG_ZERO;
    unique case (stage)
      ST_PRED:    begin mac_a = w_lane; mac_b = feat;   mac_c = acc;   end
      ST_ERR:     begin mac_a = acc;    mac_b = FP_NEG_ONE; mac_c = x_eff; end
      ST_BACKSUM: begin mac_a = FP_ONE; mac_b = back_in[BW'(idx)]; mac_c = b_acc; end
      ST_BACKVEC: begin mac_a = w_lane; mac_b = eps_q;  mac_c = FP_NEG_ZERO; end
      ST_WUP: begin
        if (idx == '0) begin
          mac_a = alpha_bias; mac_b = eps_q; mac_c = w_lane;
          aux_a = alpha;      aux_b = eps_q;            // ae = alpha * eps
        end else begin
          mac_a = ae_q;       mac_b = feat;  mac_c = w_lane;
        end
      end
      ST_STATE: begin
        aux_a = fd_q;  aux_b = b_acc; aux_c = fp_neg(eps_q);   // f'*b - eps
        mac_a = gamma; mac_b = aux_y; mac_c = x_q;
      end
      default: ;
    endcase
  end

  fp32_fma u_mac (.a(mac_a), .b(mac_b), .c(mac_c), .y(mac_y));
  fp32_fma u_aux (.a(aux_a), .b(aux_b), .c(aux_c), .y(aux_y));

  // ---- scheduler ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage <= ST_IDLE;
      idx   <= '0;
      done  <= 1'b0;
      x_q   <= FP_POS_ZERO;
      x_pub <= FP_POS_ZERO;
      obs_q <= FP_POS_ZERO;
      set_q <= 1'b0;
      acc   <= FP_NEG_ZERO;
      eps_q <= FP_POS_ZERO;
      b_acc <= FP_NEG_ZERO;
      fd_q  <= FP_POS_ZERO;
      ae_q  <= FP_POS_ZERO;
      for (int j = 0; j <= N_IN; j++) w[j] <= FP_POS_ZERO;
      for (int j = 0; j < NI_P; j++) begin
        back_wk[j]  <= FP_POS_ZERO;
        back_pub[j] <= FP_POS_ZERO;
      end
    end else begin
      done <= 1'b0;
      unique case (stage)
        ST_IDLE: begin
          if (w_wr_en && int'(w_wr_idx) <= N_IN) w[WW'(w_wr_idx)] <= w_wr_data;
          if (start) begin
            // Publish last tick's results and sample the boundary condition.
            x_pub    <= x_q;
            back_pub <= back_wk;
            set_q    <= x_set_en;
            obs_q    <= x_obs;
            acc      <= FP_NEG_ZERO;
            idx      <= '0;
            stage    <= ST_PRED;
          end
        end
        ST_PRED: begin
          acc <= mac_y;
          if (int'(idx) == N_IN) begin idx <= '0; stage <= ST_ERR; end
          else idx <= idx + 1'b1;
        end
        ST_ERR: begin
          eps_q <= mac_y;
          fd_q  <= fd_own;
          b_acc <= FP_NEG_ZERO;
          idx   <= '0;
          if (N_BACK > 0)    stage <= ST_BACKSUM;
          else if (N_IN > 0) stage <= ST_BACKVEC;
          else               stage <= ST_WUP;
        end
        ST_BACKSUM: begin
          b_acc <= mac_y;
          if (int'(idx) == N_BACK - 1) begin
            idx   <= '0;
            stage <= (N_IN > 0) ? ST_BACKVEC : ST_WUP;
          end else idx <= idx + 1'b1;
        end
        ST_BACKVEC: begin
          back_wk[PW'(idx)] <= mac_y;
          if (int'(idx) == N_IN - 1) begin idx <= '0; stage <= ST_WUP; end
          else idx <= idx + 1'b1;
        end
        ST_WUP: begin
          w[WW'(lane)] <= mac_y;
          if (idx == '0) ae_q <= aux_y;
          if (int'(idx) == N_IN) begin idx <= '0; stage <= ST_STATE; end
          else idx <= idx + 1'b1;
        end
        ST_STATE: begin
          x_q   <= (CLAMP_HARD && set_q) ? obs_q : mac_y;
          done  <= 1'b1;
          stage <= ST_IDLE;
        end
        default: stage <= ST_IDLE;
      endcase
    end
  end

  assign busy      = (stage != ST_IDLE);
  assign x_out     = x_pub;
  assign x_state   = x_q;
  assign eps_out   = eps_q;
  assign back_out  = back_pub;
  assign w_rd_data = (int'(w_rd_idx) <= N_IN) ? w[WW'(w_rd_idx)] : FP_POS_ZERO;

  // A new tick may only be requested, and weights only written, while idle.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("start while a tick is in progress");
  assert property (@(posedge clk) disable iff (!rst_n) w_wr_en |-> !busy)
    else $error("weight write while a tick is in progress");

endmodule
