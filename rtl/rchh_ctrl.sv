// rchh_ctrl: the top-level FSM of one RCHH neuron and its two sub-FSMs.
//
// Top FSM: IDLE -> RATE_CALC (on start_sim) -> POWER_CALC (on done_rates)
// -> CURRENT_CALC (on done_powers) -> UPDATE_STATE (on done_currents) -> DONE
// -> IDLE. The rate sub-FSM runs while the top FSM is in RATE_CALC (its
// "start"): IDLE -> PRE_EXP -> EXP_CALC -> DIV_CALC -> FINAL_MUL -> UPDATE ->
// COMPLETE, each step taken on the done flag the datapath returns for the
// state; COMPLETE holds while start stays high and returns to IDLE when it
// drops. done_rates is "rate sub-FSM in COMPLETE". The power sub-FSM runs
// likewise while the top FSM is in POWER_CALC: IDLE -> SQ_CALC (stage1_done)
// -> POWER_FOUR_CALC (stage2_done) -> COMPLETE, and done_powers is "power
// sub-FSM in COMPLETE". State names and transition conditions are the
// paper's (its single-neuron FSM drawing). The drawing's arrow between
// SQ_CALC and POWER_FOUR_CALC labelled stage1_done=1 has its head at SQ_CALC;
// this FSM moves SQ_CALC -> POWER_FOUR_CALC on stage1_done, the order the
// stage names imply. UPDATE_STATE and DONE last one cycle each.
//
// Outputs: the three states, and one-cycle go_* pulses in the first cycle of
// the states in which the datapath must launch work. done is high for the
// cycle spent in DONE.
module rchh_ctrl
  import relance_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start_sim,
  // done flags returned by the datapath
  input  logic         pre_exp_done,
  input  logic         exp_stage_done,
  input  logic         div_stage_done,
  input  logic         final_mul_done,
  input  logic         gate_update_done,
  input  logic         stage1_done,
  input  logic         stage2_done,
  input  logic         done_currents,
  // state
  output top_state_e   top_state,
  output rate_state_e  rate_state,
  output power_state_e power_state,
  // launch pulses (first cycle of the state)
  output logic         go_pre_exp,
  output logic         go_exp,
  output logic         go_final_mul,
  output logic         go_sq,
  output logic         go_p4,
  output logic         go_current,
  output logic         done,
  output logic         busy
);

  top_state_e   top_q, top_d;
  rate_state_e  rate_q, rate_d;
  power_state_e pow_q, pow_d;
  logic         rate_start, pow_start, done_rates, done_powers;

  assign rate_start  = (top_q == TOP_RATE_CALC);
  assign pow_start   = (top_q == TOP_POWER_CALC);
  assign done_rates  = (rate_q == R_COMPLETE);
  assign done_powers = (pow_q == P_COMPLETE);

  always_comb begin
    top_d = top_q;
    unique case (top_q)
      TOP_IDLE:         if (start_sim)     top_d = TOP_RATE_CALC;
      TOP_RATE_CALC:    if (done_rates)    top_d = TOP_POWER_CALC;
      TOP_POWER_CALC:   if (done_powers)   top_d = TOP_CURRENT_CALC;
      TOP_CURRENT_CALC: if (done_currents) top_d = TOP_UPDATE_STATE;
      TOP_UPDATE_STATE:                    top_d = TOP_DONE;
      TOP_DONE:                            top_d = TOP_IDLE;
      default:                             top_d = TOP_IDLE;
    endcase
  end

  always_comb begin
    rate_d = rate_q;
    unique case (rate_q)
      R_IDLE:      if (rate_start)       rate_d = R_PRE_EXP;
      R_PRE_EXP:   if (pre_exp_done)     rate_d = R_EXP_CALC;
      R_EXP_CALC:  if (exp_stage_done)   rate_d = R_DIV_CALC;
      R_DIV_CALC:  if (div_stage_done)   rate_d = R_FINAL_MUL;
      R_FINAL_MUL: if (final_mul_done)   rate_d = R_UPDATE;
      R_UPDATE:    if (gate_update_done) rate_d = R_COMPLETE;
      R_COMPLETE:  if (!rate_start)      rate_d = R_IDLE;
      default:                           rate_d = R_IDLE;
    endcase
  end

  always_comb begin
    pow_d = pow_q;
    unique case (pow_q)
      P_IDLE:            if (pow_start)   pow_d = P_SQ_CALC;
      P_SQ_CALC:         if (stage1_done) pow_d = P_POWER_FOUR_CALC;
      P_POWER_FOUR_CALC: if (stage2_done) pow_d = P_COMPLETE;
      P_COMPLETE:        if (!pow_start)  pow_d = P_IDLE;
      default:                            pow_d = P_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      top_q        <= TOP_IDLE;
      rate_q       <= R_IDLE;
      pow_q        <= P_IDLE;
      go_pre_exp   <= 1'b0;
      go_exp       <= 1'b0;
      go_final_mul <= 1'b0;
      go_sq        <= 1'b0;
      go_p4        <= 1'b0;
      go_current   <= 1'b0;
    end else begin
      top_q        <= top_d;
      rate_q       <= rate_d;
      pow_q        <= pow_d;
      go_pre_exp   <= (rate_d == R_PRE_EXP)         && (rate_q != R_PRE_EXP);
      go_exp       <= (rate_d == R_EXP_CALC)        && (rate_q != R_EXP_CALC);
      go_final_mul <= (rate_d == R_FINAL_MUL)       && (rate_q != R_FINAL_MUL);
      go_sq        <= (pow_d == P_SQ_CALC)          && (pow_q != P_SQ_CALC);
      go_p4        <= (pow_d == P_POWER_FOUR_CALC)  && (pow_q != P_POWER_FOUR_CALC);
      go_current   <= (top_d == TOP_CURRENT_CALC)   && (top_q != TOP_CURRENT_CALC);
    end
  end

  assign top_state   = top_q;
  assign rate_state  = rate_q;
  assign power_state = pow_q;
  assign done        = (top_q == TOP_DONE);
  assign busy        = (top_q != TOP_IDLE);

  // A sub-FSM only leaves IDLE while its stage of the top FSM is active.
  a_rate_in_stage: assert property (@(posedge clk) disable iff (!rst_n)
    (rate_q inside {R_PRE_EXP, R_EXP_CALC, R_DIV_CALC, R_FINAL_MUL, R_UPDATE}) |-> rate_start);
  a_pow_in_stage: assert property (@(posedge clk) disable iff (!rst_n)
    (pow_q inside {P_SQ_CALC, P_POWER_FOUR_CALC}) |-> pow_start);

endmodule
