// cordic_mul: fixed-point multiplier built as a linear-mode CORDIC in rotation
// mode, hardwired to that mode (no mode-select multiplexers).
//
// p = x * z. Each iteration i = 0..ITERS-1 adds or subtracts x/2^i to the
// product and drives z towards zero by 2^-i, so z must lie in (-2, 2), and z
// is resolved only to 2^-(ITERS-1). Because the neuron multiplies by gating
// products as small as 1e-4, a z with |z| < 1/2 is first normalised: it is
// shifted left by k (a leading-zero count, at most FX_F-1) until
// |z| >= 1/2, and the product is shifted right by k at the output; z = 0
// gives exactly 0 (the iterations alone would leave +-|x| 2^-(ITERS-1)). The error
// is then about 2^-(ITERS-2) of the product rather than of x. The paper fixes
// 10 iterations for multiplication; the normalisation and one iteration per
// pipeline stage are this design's choices.
//
// Interface: in_valid/x/z/in_tag are taken every cycle (no stall, no
// back-pressure); ITERS cycles later out_valid, p and out_tag appear. The tag
// travels with the operands so a lane can be re-tasked to another operation.
module cordic_mul
  import relance_pkg::*;
#(
  parameter int ITERS = MUL_ITERS,
  parameter int TAG_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t              x,
  input  fx_t              z,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fx_t              p,
  output logic [TAG_W-1:0] out_tag
);

  logic             v_q [ITERS];
  fx_t              x_q [ITERS];
  fx_t              y_q [ITERS];
  fx_t              z_q [ITERS];
  logic [TAG_W-1:0] t_q [ITERS];
  logic [4:0]       k_q [ITERS];
  logic             zz_q [ITERS];    // z was zero

  // normalisation of z
  fx_t        abs_z, z_n;
  logic [4:0] k_c;
  always_comb begin
    abs_z = z[FX_W-1] ? -z : z;
    k_c   = '0;
    for (int b = FX_F - 2; b >= 0; b--)
      if (abs_z < (FX_ONE >>> (FX_F - 1 - b)) && abs_z != '0) k_c = 5'(FX_F - 1 - b);
    z_n = z <<< k_c;
  end

  // One linear rotation step with shift i.
  function automatic void step(input fx_t xi, input fx_t yi, input fx_t zi, input int i,
                               output fx_t yo, output fx_t zo);
    fx_t pw;
    pw = FX_ONE >>> i;
    if (!zi[FX_W-1]) begin
      yo = yi + (xi >>> i);
      zo = zi - pw;
    end else begin
      yo = yi - (xi >>> i);
      zo = zi + pw;
    end
  endfunction

  // next value of every stage
  fx_t yn [ITERS], zn [ITERS];
  always_comb begin
    step(x, '0, z_n, 0, yn[0], zn[0]);
    for (int s = 1; s < ITERS; s++)
      step(x_q[s-1], y_q[s-1], z_q[s-1], s, yn[s], zn[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < ITERS; s++) begin
        v_q[s] <= 1'b0;
        x_q[s] <= '0;
        y_q[s] <= '0;
        z_q[s] <= '0;
        t_q[s] <= '0;
        k_q[s] <= '0;
        zz_q[s] <= 1'b0;
      end
    end else begin
      v_q[0] <= in_valid;
      x_q[0] <= x;
      y_q[0] <= yn[0];
      z_q[0] <= zn[0];
      t_q[0] <= in_tag;
      k_q[0] <= k_c;
      zz_q[0] <= (z == '0);
      for (int s = 1; s < ITERS; s++) begin
        v_q[s] <= v_q[s-1];
        x_q[s] <= x_q[s-1];
        y_q[s] <= yn[s];
        z_q[s] <= zn[s];
        t_q[s] <= t_q[s-1];
        k_q[s] <= k_q[s-1];
        zz_q[s] <= zz_q[s-1];
      end
    end
  end

  assign out_valid = v_q[ITERS-1];
  assign p         = zz_q[ITERS-1] ? fx_t'(0) : fx_t'(y_q[ITERS-1] >>> k_q[ITERS-1]);
  assign out_tag   = t_q[ITERS-1];

endmodule
