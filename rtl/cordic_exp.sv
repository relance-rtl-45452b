// cordic_exp: exponential e^x in hardwired hyperbolic-rotation CORDIC with
// base-2 range reduction.
//
// Hyperbolic CORDIC converges only for |z| < 1.1, while the HH rate functions
// need e^x for x of several units. The argument is therefore rewritten as
// e^x = 2^(x*log2 e) = 2^k * e^(f*ln 2): k is the integer part and f in [0,1)
// the fraction part of t = x*log2 e, taken in two's complement so that k is
// floor(t). The fraction part goes through EXP_ITERS = 8 hyperbolic rotation
// iterations (shifts 1,2,3,4,4,5,6,7, seeded with 1/K_h) giving
// cosh + sinh = e^(f ln 2) in [1, 2); a barrel shifter then applies 2^k, to
// the left for k >= 0 and to the right for k < 0. The split of the word into
// sign, integer part and fraction part, the two shifters and the 2^x output
// follow the neuron datapath drawing of the paper; the iteration count
// (8) is the paper's. Computing e^x through log2 e, and one iteration per
// pipeline stage, are this design's choices. Results above the word range
// saturate to FX_MAX.
//
// Interface: one argument per cycle (in_valid, x, in_tag); out_valid, e and
// out_tag follow ITERS + 2 cycles later (range reduction, ITERS rotations,
// final shift). No stall.
module cordic_exp
  import relance_pkg::*;
#(
  parameter int ITERS = EXP_ITERS,
  parameter int TAG_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t              x,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fx_t              e,
  output logic [TAG_W-1:0] out_tag
);

  localparam int INT_W = FX_W - FX_F;   // integer bits incl. sign

  // ---- stage 0: range reduction ----
  logic signed [2*FX_W-1:0] t_full;
  fx_t                      t;
  fx_t                      k_c;        // floor(t), integer
  fx_t                      f_c;        // t - k, in [0,1)
  logic signed [2*FX_W-1:0] r_full;

  always_comb begin
    t_full = (2*FX_W)'(x) * (2*FX_W)'(LOG2E);
    t      = fx_t'(t_full >>> FX_F);
    k_c    = t >>> FX_F;
    f_c    = {{INT_W{1'b0}}, t[FX_F-1:0]};
    r_full = (2*FX_W)'(f_c) * (2*FX_W)'(LN2);
  end

  logic             v0_q;
  fx_t              k0_q, r0_q;
  logic [TAG_W-1:0] t0_q;

  // ---- rotation stages ----
  logic             v_q [ITERS];
  fx_t              cx_q [ITERS];
  fx_t              cy_q [ITERS];
  fx_t              cz_q [ITERS];
  fx_t              k_q [ITERS];
  logic [TAG_W-1:0] t_q [ITERS];

  function automatic void rot(input fx_t xi, input fx_t yi, input fx_t zi, input int k,
                              output fx_t xo, output fx_t yo, output fx_t zo);
    int s;
    s = hyp_shift(k);
    if (!zi[FX_W-1]) begin
      xo = xi + (yi >>> s);
      yo = yi + (xi >>> s);
      zo = zi - atanh_tab(s);
    end else begin
      xo = xi - (yi >>> s);
      yo = yi - (xi >>> s);
      zo = zi + atanh_tab(s);
    end
  endfunction

  // ---- output stage: 2^k shift with saturation ----
  fx_t er;          // e^(f ln 2)
  fx_t k_last;
  fx_t e_c;
  logic signed [2*FX_W-1:0] e_wide;
  always_comb begin
    e_wide = '0;
    er     = cx_q[ITERS-1] + cy_q[ITERS-1];
    k_last = k_q[ITERS-1];
    if (k_last >= fx_t'(INT_W - 1))
      e_c = FX_MAX;                         // 2^k * [1,2) overflows
    else if (k_last <= -fx_t'(FX_W - 1))
      e_c = '0;                             // underflows to zero
    else if (!k_last[FX_W-1]) begin
      e_wide = (2*FX_W)'(er) <<< k_last[4:0];   // shifter to the left
      e_c    = (e_wide > (2*FX_W)'(FX_MAX)) ? FX_MAX : fx_t'(e_wide);
    end
    else
      e_c = er >>> (-k_last);               // shifter to the right
  end

  // next value of every rotation stage
  fx_t xn [ITERS], yn [ITERS], zn [ITERS];
  always_comb begin
    rot(HYP_INV_GAIN, '0, r0_q, 0, xn[0], yn[0], zn[0]);
    for (int s = 1; s < ITERS; s++)
      rot(cx_q[s-1], cy_q[s-1], cz_q[s-1], s, xn[s], yn[s], zn[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0_q <= 1'b0; k0_q <= '0; r0_q <= '0; t0_q <= '0;
      for (int s = 0; s < ITERS; s++) begin
        v_q[s] <= 1'b0; cx_q[s] <= '0; cy_q[s] <= '0; cz_q[s] <= '0;
        k_q[s] <= '0; t_q[s] <= '0;
      end
      out_valid <= 1'b0; e <= '0; out_tag <= '0;
    end else begin
      v0_q <= in_valid;
      k0_q <= k_c;
      r0_q <= fx_t'(r_full >>> FX_F);
      t0_q <= in_tag;
      v_q[0] <= v0_q; cx_q[0] <= xn[0]; cy_q[0] <= yn[0]; cz_q[0] <= zn[0];
      k_q[0] <= k0_q; t_q[0] <= t0_q;
      for (int s = 1; s < ITERS; s++) begin
        v_q[s] <= v_q[s-1]; cx_q[s] <= xn[s]; cy_q[s] <= yn[s]; cz_q[s] <= zn[s];
        k_q[s] <= k_q[s-1]; t_q[s] <= t_q[s-1];
      end
      out_valid <= v_q[ITERS-1];
      e         <= e_c;
      out_tag   <= t_q[ITERS-1];
    end
  end

endmodule
