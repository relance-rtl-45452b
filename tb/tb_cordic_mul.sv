// tb_cordic_mul: streams random operands into the linear-rotation CORDIC
// multiplier, one per cycle, and compares every product with x*z computed in
// real arithmetic (tolerance |x| * 2^-(ITERS-1) plus a few LSBs of rounding).
// Also checks that each result appears exactly ITERS cycles after its
// operands and that the tag travels with it.
module tb_cordic_mul;
  import relance_pkg::*;
  localparam int ITERS = MUL_ITERS;
  localparam int NVEC  = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  fx_t  x = '0, z = '0;
  logic [3:0] in_tag = '0;
  logic out_valid;
  fx_t  p;
  logic [3:0] out_tag;
  int checks = 0, failures = 0;
  int cycle = 0;

  cordic_mul #(.ITERS(ITERS), .TAG_W(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  real exp_q [$];
  real tol_q [$];
  int  cyc_q [$];
  int  tag_q [$];

  function automatic real r(input fx_t a); return $itor(a) / 65536.0; endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real e, t, got; int c, tg;
      e = exp_q.pop_front(); t = tol_q.pop_front(); c = cyc_q.pop_front(); tg = tag_q.pop_front();
      got = r(p);
      checks++;
      if ((got - e > t) || (e - got > t)) begin
        failures++;
        $display("FAIL product got %f exp %f tol %f", got, e, t);
      end
      checks++;
      if (cycle - c != ITERS || int'(out_tag) != tg) begin
        failures++;
        $display("FAIL latency %0d (exp %0d) tag %0d/%0d", cycle - c, ITERS, out_tag, tg);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < NVEC; i++) begin
      real xr, zr;
      xr = ($itor($urandom_range(0, 40000)) - 20000.0) / 100.0;   // [-200, 200]
      zr = ($itor($urandom_range(0, 3800)) - 1900.0) / 1000.0;    // [-1.9, 1.9]
      if (i == 0) begin xr = 3.0; zr = 0.5; end
      x <= to_fx(xr); z <= to_fx(zr); in_valid <= 1'b1; in_tag <= 4'(i);
      exp_q.push_back(r(to_fx(xr)) * r(to_fx(zr)));
      tol_q.push_back((xr < 0 ? -xr : xr) / 512.0 + 16.0 / 65536.0);
      cyc_q.push_back(cycle + 1);
      tag_q.push_back(i % 16);
      @(posedge clk);
      if ((i % 7) == 3) begin in_valid <= 1'b0; @(posedge clk); end
    end
    in_valid <= 1'b0;
    repeat (ITERS + 4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
