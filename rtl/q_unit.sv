// q_unit: action selection and the Bellman error that starts backpropagation.
//
// The network's last layer gives one Q value per action (five actions: forward,
// two left turns, two right turns). Following the paper's Q-learning rule
//   Q(s,a) <- r + gamma * max_a' Q(s',a')
// this unit
//   Q_SELECT : latches Q(s,.) and picks a_t = argmax_a Q(s,a) (lowest index wins a
//              tie), presented on `action` from the next clock;
//   Q_TARGET : takes Q(s',.) of the next frame and the reward r, forms the target
//              r + gamma * max Q(s',.) and the output-layer error
//              err[a_t] = Q(s,a_t) - target, err[other] = 0,
//              i.e. the gradient of 0.5*(Q(s,a_t) - target)^2. err_valid pulses.
// gamma and r are Q8.8 inputs (the paper gives neither a value nor a format).
// Exploration (random actions early in learning) is left to the software that
// drives the chip; the paper does not say how it is done.
module q_unit
  import rl_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  q_op_e op,
  input  fx_t   q_in [N_ACTIONS],
  input  fx_t   reward,
  input  fx_t   gamma,
  output logic [2:0] action,
  output fx_t   q_max,
  output fx_t   target,
  output vec_t  err,
  output logic  err_valid
);

  fx_t        q_sa [N_ACTIONS];
  fx_t        best;
  logic [2:0] best_idx;
  fx_t        tgt;

  // comparator chain: argmax / max of the incoming Q values
  always_comb begin
    best     = q_in[0];
    best_idx = '0;
    for (int a = 1; a < N_ACTIONS; a++) begin
      if (q_in[a] > best) begin
        best     = q_in[a];
        best_idx = 3'(a);
      end
    end
  end

  assign tgt = fx_add(reward, fx_mul(gamma, best));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      action    <= '0;
      q_max     <= '0;
      target    <= '0;
      err       <= '0;
      err_valid <= 1'b0;
      for (int a = 0; a < N_ACTIONS; a++) q_sa[a] <= '0;
    end else begin
      err_valid <= 1'b0;
      unique case (op)
        Q_SELECT: begin
          for (int a = 0; a < N_ACTIONS; a++) q_sa[a] <= q_in[a];
          action <= best_idx;
          q_max  <= best;
        end
        Q_TARGET: begin
          target    <= tgt;
          q_max     <= best;
          err       <= '0;
          err[action] <= fx_add(q_sa[action], fx_sat(-48'(tgt)));
          err_valid <= 1'b1;
        end
        default: ;
      endcase
    end
  end

endmodule
