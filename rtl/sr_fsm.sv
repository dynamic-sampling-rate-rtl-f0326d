// sr_fsm: next-state function of the Dynamic Sampling Rate state machine.
//
// Each tile is in one of five states (1x, 1/4x, 1/16x, 1/64x, 1/256x). After a
// tile has been rendered its MaxC values decide the state for the next frame:
//   * 1/256x                          -> 1/64x always (a one-colour tile has no
//                                        spectrum to judge)
//   * MaxC_R <  T_R(state)            -> one level lower rate   (Reduce)
//   * else MaxC_I >= T_I(state)       -> one level higher rate  (Increase),
//                                        not possible from 1x
//   * otherwise                       -> unchanged              (Maintain)
// MaxC_R and MaxC_I are the MaxC values computed ignoring D_R(state) and
// D_I(state) low-frequency diagonals; this block also outputs those two D
// values so that the MaxC logic can use them. Four Reduce tuples (states
// 1x..1/64x) and three Increase tuples (1/4x..1/64x) are used, as in the paper.
// The order of the tests and the ">=" of the Increase test follow the paper's
// parameter-search algorithm. Purely combinational.
module sr_fsm
  import dsr_pkg::*;
(
  input  sr_level_e    cur,
  input  mag_t         maxc_reduce,
  input  mag_t         maxc_increase,
  input  dsr_params_t  params,
  output diag_t        d_reduce,
  output diag_t        d_increase,
  output sr_level_e    nxt,
  output sr_decision_e decision
);

  mag_t t_r, t_i;
  logic has_inc;

  always_comb begin
    t_r        = '1;
    d_reduce   = '0;
    t_i        = '1;
    d_increase = '0;
    has_inc    = 1'b0;
    if (cur <= SR_1_64X) begin
      t_r      = params.t_reduce[cur[1:0]];
      d_reduce = params.d_reduce[cur[1:0]];
    end
    if (cur >= SR_1_4X && cur <= SR_1_64X) begin
      has_inc    = 1'b1;
      t_i        = params.t_increase[2'(cur - SR_1_4X)];
      d_increase = params.d_increase[2'(cur - SR_1_4X)];
    end

    if (cur == SR_1_256X) begin
      decision = DEC_ALWAYS;
      nxt      = SR_1_64X;
    end else if (maxc_reduce < t_r) begin
      decision = DEC_REDUCE;
      nxt      = sr_level_e'(cur + 3'd1);
    end else if (has_inc && maxc_increase >= t_i) begin
      decision = DEC_INCREASE;
      nxt      = sr_level_e'(cur - 3'd1);
    end else begin
      decision = DEC_MAINTAIN;
      nxt      = cur;
    end
  end

endmodule
