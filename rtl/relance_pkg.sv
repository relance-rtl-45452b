// relance_pkg: number format, CORDIC constants and FSM state types shared by
// the RCHH neuron, its CORDIC cores and the neural pool.
//
// All datapath values use one signed fixed-point format, FX_W bits with FX_F
// fraction bits (Q16.16 by default), so membrane voltage in mV, currents,
// rates and gating variables share one word. The iteration counts of the
// three CORDIC kinds (8 exponential, 10 multiplication, 11 division) and the
// singularity neighbourhood epsilon = 2^-10 follow the paper. The word width
// is this design's choice: the paper calls its neurons 16-bit but gives no
// format, and with a single 16-bit format the per-step change of a gating
// variable (dt * rate, around 1e-3) falls below one LSB.
package relance_pkg;

  localparam int FX_W = 32;           // word width
  localparam int FX_F = 16;           // fraction bits
  typedef logic signed [FX_W-1:0] fx_t;

  localparam fx_t FX_ONE = fx_t'(1) <<< FX_F;
  localparam fx_t FX_MAX = {1'b0, {(FX_W-1){1'b1}}};
  localparam fx_t FX_MIN = {1'b1, {(FX_W-1){1'b0}}};

  // CORDIC iteration counts (paper: 8 exp, 10 mul, 11 div)
  localparam int EXP_ITERS = 8;
  localparam int MUL_ITERS = 10;
  localparam int DIV_ITERS = 11;

  // Singularity neighbourhood, epsilon = 2^-10 (paper)
  localparam int EPS_LOG2 = 10;

  // Convert a real constant to the fixed-point format (elaboration time only).
  function automatic fx_t to_fx(input real r);
    return fx_t'($rtoi(r * real'(longint'(1) << FX_F) + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  // Saturate a wider signed value to fx_t.
  function automatic fx_t sat_fx(input logic signed [FX_W+7:0] v);
    if (v > (FX_W+8)'(FX_MAX)) return FX_MAX;
    if (v < (FX_W+8)'(FX_MIN)) return FX_MIN;
    return fx_t'(v);
  endfunction

  // Hyperbolic CORDIC shift sequence for 8 iterations: 1,2,3,4,4,5,6,7
  // (index 4 is repeated for convergence).
  function automatic int hyp_shift(input int k);
    return (k < 4) ? k + 1 : k;
  endfunction

  // atanh(2^-i) in Q.16, i = 1..7; entry 0 unused.
  function automatic fx_t atanh_tab(input int i);
    case (i)
      1: return fx_t'(35999);
      2: return fx_t'(16739);
      3: return fx_t'(8235);
      4: return fx_t'(4101);
      5: return fx_t'(2049);
      6: return fx_t'(1024);
      7: return fx_t'(512);
      default: return '0;
    endcase
  endfunction

  // 1/K_h for the shift sequence above: 1/prod(sqrt(1-2^-2i)) = 1.207485
  localparam fx_t HYP_INV_GAIN = fx_t'(79134);
  localparam fx_t LOG2E        = fx_t'(94548);   // log2(e)
  localparam fx_t LN2          = fx_t'(45426);   // ln(2)

  // Single-neuron top-level FSM (Fig. 3(b))
  typedef enum logic [2:0] {
    TOP_IDLE, TOP_RATE_CALC, TOP_POWER_CALC, TOP_CURRENT_CALC, TOP_UPDATE_STATE, TOP_DONE
  } top_state_e;

  // RATE_CALC_STAGE sub-FSM
  typedef enum logic [2:0] {
    R_IDLE, R_PRE_EXP, R_EXP_CALC, R_DIV_CALC, R_FINAL_MUL, R_UPDATE, R_COMPLETE
  } rate_state_e;

  // POWER_CALC_STAGE sub-FSM
  typedef enum logic [1:0] {
    P_IDLE, P_SQ_CALC, P_POWER_FOUR_CALC, P_COMPLETE
  } power_state_e;

  // Operation tags carried through the multiplier lanes of a neuron, so a
  // lane can be re-tasked and its result routed by tag.
  typedef enum logic [3:0] {
    OP_AM_1M,   // alpha_m * (1 - m)
    OP_BM_M,    // beta_m  * m
    OP_AH_1H,   // alpha_h * (1 - h)
    OP_BH_H,    // beta_h  * h
    OP_AN_1N,   // alpha_n * (1 - n)
    OP_BN_N,    // beta_n  * n
    OP_GNA_V,   // (V - V_Na) * g_Na / 2^S_Na
    OP_GK_V,    // (V - V_K)  * g_K  / 2^S_K
    OP_GL_V,    // (V - V_l)  * g_l  / 2^S_l
    OP_M2,      // m^2
    OP_N2,      // n^2
    OP_M3,      // m^3
    OP_N4,      // n^4
    OP_M3H,     // m^3 h
    OP_INA,     // sodium current / 2^S_Na
    OP_IK       // potassium current / 2^S_K
  } mul_op_e;

endpackage
