// rate_special_case: singularity detector for the "a/b" rate functions.
//
// alpha_m and alpha_n have the form K * u / (1 - e^-u), which is 0/0 at u = 0
// (V = -40 mV and V = -55 mV). Following the paper, when |u| lies inside the
// neighbourhood epsilon = 2^-EPS_LOG2 the CORDIC quotient is replaced by the
// L'Hopital limit, expanded to first order: K * (1 + u/2). The detector is a
// magnitude compare; the limit is K plus K*u shifted right by one (the K*u
// term is a constant multiply, i.e. shift-and-add). The first-order
// expansion is this design's reading of "L'Hopital's rule approximations".
//
// Purely combinational: special and value follow u in the same cycle.
module rate_special_case
  import relance_pkg::*;
#(
  parameter real K        = 1.0,       // gain of the rate function (1.0 alpha_m, 0.1 alpha_n)
  parameter int  EPS_SHIFT = EPS_LOG2  // epsilon = 2^-EPS_SHIFT
) (
  input  fx_t  u,         // normalised argument, (V - V0)/10
  output logic special,   // |u| < epsilon
  output fx_t  value      // K * (1 + u/2)
);

  localparam fx_t K_FX = to_fx(K);
  localparam fx_t EPS  = FX_ONE >>> EPS_SHIFT;

  logic signed [2*FX_W-1:0] ku;
  fx_t                      abs_u;

  always_comb begin
    abs_u   = u[FX_W-1] ? -u : u;
    special = (abs_u < EPS);
    ku      = (2*FX_W)'(u) * (2*FX_W)'(K_FX);
    value   = K_FX + (fx_t'(ku >>> FX_F) >>> 1);
  end

endmodule
