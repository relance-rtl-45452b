// tb_rchh_ctrl: drives the neuron FSM through several time steps with a
// responder that raises each done flag a random number of cycles after its
// state is entered (and raises stray done flags of other stages meanwhile),
// then checks the visited state sequences of the top FSM and both sub-FSMs
// against the sequence the paper's FSM drawing gives, that each go_* pulse
// fires once per step in the first cycle of its state, that done lasts one
// cycle, and that a step takes exactly the sum of the responder delays plus
// the fixed one-cycle hops.
module tb_rchh_ctrl;
  import relance_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start_sim = 1'b0;
  logic pre_exp_done, exp_stage_done, div_stage_done, final_mul_done;
  logic gate_update_done, stage1_done, stage2_done, done_currents;
  top_state_e top_state; rate_state_e rate_state; power_state_e power_state;
  logic go_pre_exp, go_exp, go_final_mul, go_sq, go_p4, go_current, done, busy;
  int checks = 0, failures = 0;

  rchh_ctrl dut (.*);
  always #5 clk = ~clk;

  // responder: per state a delay, re-drawn every step
  int d_pre, d_exp, d_div, d_fin, d_upd, d_s1, d_s2, d_cur;
  // cycles spent in the current state of each FSM, 1 in its first cycle
  int c_top_q, c_rate_q, c_pow_q, c_top, c_rate, c_pow;
  top_state_e top_prev; rate_state_e rate_prev; power_state_e pow_prev;
  logic stray;
  always_comb begin
    c_top  = (top_state != top_prev)    ? 1 : c_top_q;
    c_rate = (rate_state != rate_prev)  ? 1 : c_rate_q;
    c_pow  = (power_state != pow_prev)  ? 1 : c_pow_q;
  end
  always_ff @(posedge clk) begin
    top_prev <= top_state; rate_prev <= rate_state; pow_prev <= power_state;
    c_top_q <= c_top + 1; c_rate_q <= c_rate + 1; c_pow_q <= c_pow + 1;
  end
  always_comb begin
    pre_exp_done     = (rate_state == R_PRE_EXP)   && c_rate >= d_pre;
    exp_stage_done   = (rate_state == R_EXP_CALC)  && c_rate >= d_exp;
    div_stage_done   = (rate_state == R_DIV_CALC)  && c_rate >= d_div;
    final_mul_done   = (rate_state == R_FINAL_MUL) && c_rate >= d_fin;
    gate_update_done = (rate_state == R_UPDATE)    && c_rate >= d_upd;
    stage1_done      = ((power_state == P_SQ_CALC) && c_pow >= d_s1) || stray;
    stage2_done      = ((power_state == P_POWER_FOUR_CALC) && c_pow >= d_s2) || stray;
    done_currents    = ((top_state == TOP_CURRENT_CALC) && c_top >= d_cur) ||
                       (stray && top_state != TOP_POWER_CALC && top_state != TOP_RATE_CALC && top_state != TOP_IDLE);
  end

  // recorders
  top_state_e   top_seq  [$];
  rate_state_e  rate_seq [$];
  power_state_e pow_seq  [$];
  int n_go [6];
  int n_done;
  always @(posedge clk) if (rst_n) begin
    if (top_seq.size() == 0 || top_seq[$] != top_state)    top_seq.push_back(top_state);
    if (rate_seq.size() == 0 || rate_seq[$] != rate_state) rate_seq.push_back(rate_state);
    if (pow_seq.size() == 0 || pow_seq[$] != power_state)  pow_seq.push_back(power_state);
    if (go_pre_exp) begin n_go[0]++; checks++; if (rate_state != R_PRE_EXP || $past(rate_state) == R_PRE_EXP) begin failures++; $display("FAIL go_pre_exp"); end end
    if (go_exp) begin n_go[1]++; checks++; if (rate_state != R_EXP_CALC || $past(rate_state) == R_EXP_CALC) begin failures++; $display("FAIL go_exp"); end end
    if (go_final_mul) begin n_go[2]++; checks++; if (rate_state != R_FINAL_MUL) begin failures++; $display("FAIL go_final_mul"); end end
    if (go_sq) begin n_go[3]++; checks++; if (power_state != P_SQ_CALC) begin failures++; $display("FAIL go_sq"); end end
    if (go_p4) begin n_go[4]++; checks++; if (power_state != P_POWER_FOUR_CALC) begin failures++; $display("FAIL go_p4"); end end
    if (go_current) begin n_go[5]++; checks++; if (top_state != TOP_CURRENT_CALC) begin failures++; $display("FAIL go_current"); end end
    if (done) n_done++;
  end

  localparam int NSTEP = 6;
  initial begin
    top_state_e   top_exp[$];
    rate_state_e  rate_exp[$];
    power_state_e pow_exp[$];
    stray = 1'b0;
    d_pre = 1; d_exp = 1; d_div = 1; d_fin = 1; d_upd = 1; d_s1 = 1; d_s2 = 1; d_cur = 1;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    top_exp.push_back(TOP_IDLE); rate_exp.push_back(R_IDLE); pow_exp.push_back(P_IDLE);
    for (int s = 0; s < NSTEP; s++) begin
      int t0, t1, expect_len;
      d_pre = 1; d_exp = $urandom_range(1, 12); d_div = $urandom_range(1, 12); d_fin = $urandom_range(1, 12);
      d_upd = 1; d_s1 = $urandom_range(1, 12); d_s2 = $urandom_range(1, 12); d_cur = $urandom_range(1, 25);
      // stray flags of the power / current stages are raised while idle on odd steps
      stray = s[0];
      repeat (2) @(posedge clk);
      stray = 1'b0;
      checks++;
      if (top_state != TOP_IDLE || busy) begin failures++; $display("FAIL stray done flag moved the FSM"); end
      start_sim <= 1'b1;
      @(posedge clk);
      start_sim <= 1'b0;
      t0 = $time;
      wait (done);
      t1 = $time;
      // IDLE->RATE 1, rate IDLE->PRE_EXP 1, sub-states, COMPLETE 1 cycle seen by top,
      // power IDLE->SQ 1, sub-states, COMPLETE 1, current, UPDATE_STATE 1
      expect_len = 1 + d_pre + d_exp + d_div + d_fin + d_upd + 1 + 1 + d_s1 + d_s2 + 1 + d_cur + 1;
      checks++;
      if ((t1 - t0) / 10 != expect_len) begin
        failures++; $display("FAIL step length %0d exp %0d", (t1 - t0) / 10, expect_len);
      end
      @(posedge clk);
      @(posedge clk);
      checks++;
      if (done || busy) begin failures++; $display("FAIL done longer than one cycle"); end
      top_exp.push_back(TOP_RATE_CALC); top_exp.push_back(TOP_POWER_CALC); top_exp.push_back(TOP_CURRENT_CALC);
      top_exp.push_back(TOP_UPDATE_STATE); top_exp.push_back(TOP_DONE); top_exp.push_back(TOP_IDLE);
      rate_exp.push_back(R_PRE_EXP); rate_exp.push_back(R_EXP_CALC); rate_exp.push_back(R_DIV_CALC);
      rate_exp.push_back(R_FINAL_MUL); rate_exp.push_back(R_UPDATE); rate_exp.push_back(R_COMPLETE); rate_exp.push_back(R_IDLE);
      pow_exp.push_back(P_SQ_CALC); pow_exp.push_back(P_POWER_FOUR_CALC); pow_exp.push_back(P_COMPLETE); pow_exp.push_back(P_IDLE);
    end
    repeat (3) @(posedge clk);
    checks++;
    if (top_seq != top_exp) begin failures++; $display("FAIL top sequence"); foreach (top_seq[i]) $display("  %s", top_seq[i].name()); end
    checks++;
    if (rate_seq != rate_exp) begin failures++; $display("FAIL rate sequence"); foreach (rate_seq[i]) $display("  %s", rate_seq[i].name()); end
    checks++;
    if (pow_seq != pow_exp) begin failures++; $display("FAIL power sequence"); foreach (pow_seq[i]) $display("  %s", pow_seq[i].name()); end
    for (int g = 0; g < 6; g++) begin
      checks++;
      if (n_go[g] != NSTEP) begin failures++; $display("FAIL go pulse %0d fired %0d times", g, n_go[g]); end
    end
    checks++;
    if (n_done != NSTEP) begin failures++; $display("FAIL done %0d times", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
