// cordic_div: fixed-point divider built as a linear-mode CORDIC in vectoring
// mode, hardwired to that mode.
//
// q = y / x. Iteration i = 0..ITERS-1 adds or subtracts x/2^i to drive the
// residual y towards zero and accumulates +-2^-i into q, so the quotient must
// lie in (-2, 2) and is resolved to 2^-(ITERS-1). The direction test uses the
// signs of both residual and divisor, so x may have either sign. The paper
// fixes 11 iterations for division; one iteration per pipeline stage is this
// design's choice.
//
// Interface: one operation per cycle may enter (in_valid, y, x, in_tag);
// ITERS cycles later out_valid, q and out_tag appear. No stall.
module cordic_div
  import relance_pkg::*;
#(
  parameter int ITERS = DIV_ITERS,
  parameter int TAG_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t              y,
  input  fx_t              x,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fx_t              q,
  output logic [TAG_W-1:0] out_tag
);

  logic             v_q [ITERS];
  fx_t              x_q [ITERS];
  fx_t              y_q [ITERS];
  fx_t              z_q [ITERS];
  logic [TAG_W-1:0] t_q [ITERS];

  // One linear vectoring step with shift i.
  function automatic void step(input fx_t xi, input fx_t yi, input fx_t zi, input int i,
                               output fx_t yo, output fx_t zo);
    fx_t pw;
    pw = FX_ONE >>> i;
    if (yi[FX_W-1] == xi[FX_W-1]) begin
      yo = yi - (xi >>> i);
      zo = zi + pw;
    end else begin
      yo = yi + (xi >>> i);
      zo = zi - pw;
    end
  endfunction

  // next value of every stage
  fx_t yn [ITERS], zn [ITERS];
  always_comb begin
    step(x, y, '0, 0, yn[0], zn[0]);
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
      end
    end else begin
      v_q[0] <= in_valid;
      x_q[0] <= x;
      y_q[0] <= yn[0];
      z_q[0] <= zn[0];
      t_q[0] <= in_tag;
      for (int s = 1; s < ITERS; s++) begin
        v_q[s] <= v_q[s-1];
        x_q[s] <= x_q[s-1];
        y_q[s] <= yn[s];
        z_q[s] <= zn[s];
        t_q[s] <= t_q[s-1];
      end
    end
  end

  assign out_valid = v_q[ITERS-1];
  assign q         = z_q[ITERS-1];
  assign out_tag   = t_q[ITERS-1];

endmodule
