// rchh_neuron: one Resource-efficient CORDIC-based Hodgkin-Huxley (RCHH)
// neuron. Each start_sim advances the neuron by one forward-Euler time step of
//   C dV/dt = I - gNa m^3 h (V - VNa) - gK n^4 (V - VK) - gl (V - Vl)
//   dx/dt   = alpha_x(V) (1 - x) - beta_x(V) x,   x in {m, h, n}
// with the standard HH rate functions (alpha_m, beta_h and alpha_n contain a
// division, the other three only an exponential).
//
// Datapath (Constraint-Aware Modular Parallelism): six exponential lanes,
// three divider lanes and six multiplier lanes, each a pipelined CORDIC
// hardwired to one mode. The rates split into a low-latency group (beta_m,
// alpha_h, beta_n: exponential only) and a high-latency group (alpha_m,
// beta_h, alpha_n: exponential then division). All six exponentials start
// together. When they return, the low-latency rates go straight into their
// multiplier lanes for the partial gate terms (beta_m m, alpha_h (1-h),
// beta_n n) while the dividers are still working, and the three multiplier
// lanes that wait for the dividers are re-tasked meanwhile with the
// conductance-times-driving-force products g (V - E) of the current
// equation. When the quotients arrive, the remaining gate terms are formed
// and the gate variables are updated. Powers (m^2, n^2, then m^3, n^4) and
// currents (m^3 h, then the Na and K products) reuse the multiplier lanes;
// finally V is updated and a spike is flagged when V crosses V_TH upwards.
// The sequencing is the per-neuron FSM in rchh_ctrl.
//
// Follows the paper: the HH equations and rate constants, parameter set 1 as
// default (C_m = 1, so the V update needs no division), the CORDIC kinds and
// iteration counts (8/10/11), six lanes each of exponential and multiplier,
// the low/high latency grouping and overlap, the FSM, the 2^-10 singularity
// neighbourhood with its L'Hopital value. This design's choices: Q16.16
// numbers, dt = 2^-DT_SHIFT ms applied as a shift, three dividers rather than
// six (only three rates divide), constant factors of the rate functions
// folded into the exponent argument (4 e^a = e^(a + ln 4) and so on), large
// conductances pre-scaled by 2^-S to fit the multiplier's |z| < 2 range and
// the product shifted back, alpha_m divided as (u/8)/(1-e^-u) and shifted
// back by 3 for the same reason, gate variables clamped to [0, 1], spike
// threshold 0 mV, reset state the resting point V = -65 mV.
//
// Interface: pulse start_sim while busy is low; done rises 87 cycles after
// the clock edge that samples start_sim and stays high for one cycle; v, m, h, n
// and spike (valid with done, held until the next step) show the new state.
// i_ext (uA/cm^2, Q16.16) must be held during the step.
module rchh_neuron
  import relance_pkg::*;
#(
  // HH parameter set 1 of the paper
  parameter real E_NA   = 57.86,
  parameter real E_K    = -75.76,
  parameter real E_L    = -53.86,
  parameter real G_NA   = 130.0,
  parameter real G_K    = 37.0,
  parameter real G_L    = 0.6,
  parameter int  S_NA   = 8,        // g_Na is applied as (g_Na / 2^S_NA) << S_NA
  parameter int  S_K    = 6,
  parameter int  S_L    = 0,
  parameter int  DT_SHIFT = 7,      // dt = 2^-7 ms
  parameter real V_TH   = 0.0,      // spike threshold, mV
  parameter real V_INIT = -65.0,
  parameter real M_INIT = 0.0529,
  parameter real H_INIT = 0.5961,
  parameter real N_INIT = 0.3177
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start_sim,
  input  fx_t  i_ext,
  output logic busy,
  output logic done,
  output logic spike,
  output fx_t  v,
  output fx_t  m,
  output fx_t  h,
  output fx_t  n
);

  localparam int NLANE    = 6;
  localparam int AM_SHIFT = 3;            // alpha_m quotient pre-scale
  // rate lane order: 0 alpha_m, 1 beta_m, 2 alpha_h, 3 beta_h, 4 alpha_n, 5 beta_n
  localparam int L_AM = 0, L_BM = 1, L_AH = 2, L_BH = 3, L_AN = 4, L_BN = 5;

  // exponent arguments arg_i = A_i * V + B_i
  localparam fx_t ARG_A [NLANE] = '{to_fx(-0.1), to_fx(-1.0/18.0), to_fx(-1.0/20.0),
                                    to_fx(-0.1), to_fx(-0.1),      to_fx(-1.0/80.0)};
  localparam fx_t ARG_B [NLANE] = '{to_fx(-4.0),
                                    to_fx(-65.0/18.0 + $ln(4.0)),
                                    to_fx(-65.0/20.0 + $ln(0.07)),
                                    to_fx(-3.5),
                                    to_fx(-5.5),
                                    to_fx(-65.0/80.0 + $ln(0.125))};
  localparam fx_t AN_NUM_A = to_fx(0.01);   // 0.01 (V + 55)
  localparam fx_t AN_NUM_B = to_fx(0.55);
  localparam fx_t ENA_FX = to_fx(E_NA), EK_FX = to_fx(E_K), EL_FX = to_fx(E_L);
  localparam fx_t GNA_FX = to_fx(G_NA / real'(1 << S_NA));
  localparam fx_t GK_FX  = to_fx(G_K  / real'(1 << S_K));
  localparam fx_t GL_FX  = to_fx(G_L  / real'(1 << S_L));
  localparam fx_t VTH_FX = to_fx(V_TH);

  function automatic fx_t affine(input fx_t vv, input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = (2*FX_W)'(vv) * (2*FX_W)'(a);
    return fx_t'(p >>> FX_F) + b;
  endfunction

  function automatic fx_t clamp01(input logic signed [FX_W+7:0] x);
    if (x < 0) return '0;
    if (x > (FX_W+8)'(FX_ONE)) return FX_ONE;
    return fx_t'(x);
  endfunction

  // ---------------------------------------------------------------- control
  top_state_e   top_state;
  rate_state_e  rate_state;
  power_state_e power_state;
  logic go_pre_exp, go_exp, go_sq, go_p4, go_current;
  logic pre_exp_done, exp_stage_done, div_stage_done, final_mul_done;
  logic gate_update_done, stage1_done, stage2_done, done_currents;

  rchh_ctrl u_ctrl (
    .clk, .rst_n, .start_sim,
    .pre_exp_done, .exp_stage_done, .div_stage_done, .final_mul_done,
    .gate_update_done, .stage1_done, .stage2_done, .done_currents,
    .top_state, .rate_state, .power_state,
    .go_pre_exp, .go_exp, .go_final_mul(), .go_sq, .go_p4, .go_current,
    .done, .busy
  );

  // ---------------------------------------------------------------- state
  fx_t v_q, m_q, h_q, n_q;
  logic spike_q;

  // ---------------------------------------------------------------- PRE_EXP
  fx_t  arg_q [NLANE];
  fx_t  um_q;           // (V + 40)/10
  fx_t  wn_q;           // (V + 55)/10
  fx_t  yn_q;           // 0.01 (V + 55)
  logic sp_am, sp_an;
  fx_t  lim_am, lim_an;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NLANE; i++) arg_q[i] <= '0;
      um_q <= '0; wn_q <= '0; yn_q <= '0;
    end else if (go_pre_exp) begin
      for (int i = 0; i < NLANE; i++) arg_q[i] <= affine(v_q, ARG_A[i], ARG_B[i]);
      um_q <= -affine(v_q, ARG_A[L_AM], ARG_B[L_AM]);
      wn_q <= -affine(v_q, ARG_A[L_AN], ARG_B[L_AN]);
      yn_q <= affine(v_q, AN_NUM_A, AN_NUM_B);
    end
  end
  assign pre_exp_done = (rate_state == R_PRE_EXP);

  // Precision & stability: special-case detectors for the 0/0 points
  rate_special_case #(.K(1.0)) u_sc_am (.u(um_q), .special(sp_am), .value(lim_am));
  rate_special_case #(.K(0.1)) u_sc_an (.u(wn_q), .special(sp_an), .value(lim_an));

  // ---------------------------------------------------------------- exp lanes
  logic ex_v [NLANE];
  fx_t  ex_e [NLANE];

  for (genvar i = 0; i < NLANE; i++) begin : g_exp
    cordic_exp #(.TAG_W(4)) u_exp (
      .clk, .rst_n, .in_valid(go_exp), .x(arg_q[i]), .in_tag(4'(i)),
      .out_valid(ex_v[i]), .e(ex_e[i]), .out_tag()
    );
  end
  assign exp_stage_done = ex_v[0];

  // ---------------------------------------------------------------- div lanes
  // div 0: alpha_m, div 1: beta_h, div 2: alpha_n
  fx_t  dv_y [3], dv_x [3];
  logic dv_v [3];
  fx_t  dv_q [3];

  always_comb begin
    dv_y[0] = um_q >>> AM_SHIFT;
    dv_x[0] = FX_ONE - ex_e[L_AM];
    dv_y[1] = FX_ONE;
    dv_x[1] = sat_fx((FX_W+8)'(FX_ONE) + (FX_W+8)'(ex_e[L_BH]));
    dv_y[2] = yn_q;
    dv_x[2] = FX_ONE - ex_e[L_AN];
  end

  for (genvar j = 0; j < 3; j++) begin : g_div
    cordic_div #(.TAG_W(4)) u_div (
      .clk, .rst_n, .in_valid(ex_v[0]), .y(dv_y[j]), .x(dv_x[j]), .in_tag(4'(j)),
      .out_valid(dv_v[j]), .q(dv_q[j]), .out_tag()
    );
  end
  assign div_stage_done = dv_v[0];

  // rates, with the special-case substitution at the divider outputs
  fx_t rate_am, rate_bh, rate_an;
  always_comb begin
    rate_am = sp_am ? lim_am : (dv_q[0] <<< AM_SHIFT);
    rate_bh = dv_q[1];
    rate_an = sp_an ? lim_an : dv_q[2];
  end

  fx_t rates_q [NLANE];    // last computed alpha/beta values, for observation
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NLANE; i++) rates_q[i] <= '0;
    end else begin
      if (ex_v[0]) begin
        rates_q[L_BM] <= ex_e[L_BM];
        rates_q[L_AH] <= ex_e[L_AH];
        rates_q[L_BN] <= ex_e[L_BN];
      end
      if (dv_v[0]) begin
        rates_q[L_AM] <= rate_am;
        rates_q[L_BH] <= rate_bh;
        rates_q[L_AN] <= rate_an;
      end
    end
  end

  // ---------------------------------------------------------------- mul lanes
  fx_t     mres [16];     // results, indexed by operation tag
  logic    got  [16];     // result arrived during this step
  logic    mu_in_v [NLANE];
  fx_t     mu_x [NLANE], mu_z [NLANE];
  mul_op_e mu_op [NLANE];
  logic    mu_v [NLANE];
  fx_t     mu_p [NLANE];
  logic [3:0] mu_tag [NLANE];
  logic    m3h_arrived_q;

  always_comb begin
    for (int i = 0; i < NLANE; i++) begin
      mu_in_v[i] = 1'b0;
      mu_x[i]    = '0;
      mu_z[i]    = '0;
      mu_op[i]   = OP_AM_1M;
    end
    if (ex_v[0]) begin
      // Stage B: low-latency rates go straight on to their gate terms
      mu_in_v[L_BM] = 1'b1; mu_x[L_BM] = ex_e[L_BM]; mu_z[L_BM] = m_q;          mu_op[L_BM] = OP_BM_M;
      mu_in_v[L_AH] = 1'b1; mu_x[L_AH] = ex_e[L_AH]; mu_z[L_AH] = FX_ONE - h_q; mu_op[L_AH] = OP_AH_1H;
      mu_in_v[L_BN] = 1'b1; mu_x[L_BN] = ex_e[L_BN]; mu_z[L_BN] = n_q;          mu_op[L_BN] = OP_BN_N;
      // Stage C: lanes waiting for the dividers are re-tasked with g (V - E)
      mu_in_v[L_AM] = 1'b1; mu_x[L_AM] = v_q - ENA_FX; mu_z[L_AM] = GNA_FX; mu_op[L_AM] = OP_GNA_V;
      mu_in_v[L_BH] = 1'b1; mu_x[L_BH] = v_q - EK_FX;  mu_z[L_BH] = GK_FX;  mu_op[L_BH] = OP_GK_V;
      mu_in_v[L_AN] = 1'b1; mu_x[L_AN] = v_q - EL_FX;  mu_z[L_AN] = GL_FX;  mu_op[L_AN] = OP_GL_V;
    end else if (dv_v[0]) begin
      // high-latency rates, as soon as the quotients are out
      mu_in_v[L_AM] = 1'b1; mu_x[L_AM] = rate_am; mu_z[L_AM] = FX_ONE - m_q; mu_op[L_AM] = OP_AM_1M;
      mu_in_v[L_BH] = 1'b1; mu_x[L_BH] = rate_bh; mu_z[L_BH] = h_q;          mu_op[L_BH] = OP_BH_H;
      mu_in_v[L_AN] = 1'b1; mu_x[L_AN] = rate_an; mu_z[L_AN] = FX_ONE - n_q; mu_op[L_AN] = OP_AN_1N;
    end else if (go_sq) begin
      mu_in_v[0] = 1'b1; mu_x[0] = m_q; mu_z[0] = m_q; mu_op[0] = OP_M2;
      mu_in_v[1] = 1'b1; mu_x[1] = n_q; mu_z[1] = n_q; mu_op[1] = OP_N2;
    end else if (go_p4) begin
      mu_in_v[0] = 1'b1; mu_x[0] = mres[OP_M2]; mu_z[0] = m_q;         mu_op[0] = OP_M3;
      mu_in_v[1] = 1'b1; mu_x[1] = mres[OP_N2]; mu_z[1] = mres[OP_N2]; mu_op[1] = OP_N4;
    end else if (go_current) begin
      mu_in_v[0] = 1'b1; mu_x[0] = mres[OP_M3];   mu_z[0] = h_q;         mu_op[0] = OP_M3H;
      mu_in_v[1] = 1'b1; mu_x[1] = mres[OP_GK_V]; mu_z[1] = mres[OP_N4]; mu_op[1] = OP_IK;
    end else if (m3h_arrived_q) begin
      mu_in_v[0] = 1'b1; mu_x[0] = mres[OP_GNA_V]; mu_z[0] = mres[OP_M3H]; mu_op[0] = OP_INA;
    end
  end

  for (genvar i = 0; i < NLANE; i++) begin : g_mul
    cordic_mul #(.TAG_W(4)) u_mul (
      .clk, .rst_n, .in_valid(mu_in_v[i]), .x(mu_x[i]), .z(mu_z[i]), .in_tag(mu_op[i]),
      .out_valid(mu_v[i]), .p(mu_p[i]), .out_tag(mu_tag[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < 16; t++) begin
        mres[t] <= '0;
        got[t]  <= 1'b0;
      end
      m3h_arrived_q <= 1'b0;
    end else begin
      m3h_arrived_q <= 1'b0;
      if (go_pre_exp)
        for (int t = 0; t < 16; t++) got[t] <= 1'b0;
      for (int i = 0; i < NLANE; i++) begin
        if (mu_v[i]) begin
          mres[mu_tag[i]] <= mu_p[i];
          got[mu_tag[i]]  <= 1'b1;
          if (mu_tag[i] == OP_M3H) m3h_arrived_q <= 1'b1;
        end
      end
    end
  end

  assign final_mul_done   = (rate_state == R_FINAL_MUL) && got[OP_AM_1M] && got[OP_BH_H] && got[OP_AN_1N]
                            && got[OP_BM_M] && got[OP_AH_1H] && got[OP_BN_N];
  assign gate_update_done = (rate_state == R_UPDATE);
  assign stage1_done      = (power_state == P_SQ_CALC) && got[OP_M2] && got[OP_N2];
  assign stage2_done      = (power_state == P_POWER_FOUR_CALC) && got[OP_M3] && got[OP_N4];
  assign done_currents    = (top_state == TOP_CURRENT_CALC) && got[OP_INA] && got[OP_IK];

  // ---------------------------------------------------------------- updates
  logic signed [FX_W+7:0] dm, dh, dn, i_na, i_k, i_l, i_tot, v_next;
  always_comb begin
    dm     = ((FX_W+8)'(mres[OP_AM_1M]) - (FX_W+8)'(mres[OP_BM_M])) >>> DT_SHIFT;
    dh     = ((FX_W+8)'(mres[OP_AH_1H]) - (FX_W+8)'(mres[OP_BH_H])) >>> DT_SHIFT;
    dn     = ((FX_W+8)'(mres[OP_AN_1N]) - (FX_W+8)'(mres[OP_BN_N])) >>> DT_SHIFT;
    i_na   = (FX_W+8)'(mres[OP_INA]) <<< S_NA;
    i_k    = (FX_W+8)'(mres[OP_IK])  <<< S_K;
    i_l    = (FX_W+8)'(mres[OP_GL_V]) <<< S_L;
    i_tot  = (FX_W+8)'(i_ext) - i_na - i_k - i_l;
    v_next = (FX_W+8)'(v_q) + (i_tot >>> DT_SHIFT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q     <= to_fx(V_INIT);
      m_q     <= to_fx(M_INIT);
      h_q     <= to_fx(H_INIT);
      n_q     <= to_fx(N_INIT);
      spike_q <= 1'b0;
    end else begin
      if (gate_update_done) begin
        m_q <= clamp01((FX_W+8)'(m_q) + dm);
        h_q <= clamp01((FX_W+8)'(h_q) + dh);
        n_q <= clamp01((FX_W+8)'(n_q) + dn);
      end
      if (top_state == TOP_UPDATE_STATE) begin
        v_q     <= sat_fx(v_next);
        spike_q <= (v_q < VTH_FX) && (sat_fx(v_next) >= VTH_FX);
      end
    end
  end

  assign v     = v_q;
  assign m     = m_q;
  assign h     = h_q;
  assign n     = n_q;
  assign spike = spike_q;

  // all lanes of a kind run in lock-step
  a_exp_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    ex_v[0] |-> (ex_v[1] && ex_v[2] && ex_v[3] && ex_v[4] && ex_v[5]));
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start_sim |-> !busy);

endmodule
