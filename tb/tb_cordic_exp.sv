// tb_cordic_exp: streams arguments in [-12, 10] into the exponential core,
// one per cycle, and compares each result with $exp in real arithmetic
// (relative tolerance 2 %, absolute 2^-12 for tiny results), checks that
// arguments whose result exceeds the word range saturate, and that results
// appear ITERS + 2 cycles after their argument with the tag preserved.
module tb_cordic_exp;
  import relance_pkg::*;
  localparam int ITERS = EXP_ITERS;
  localparam int LAT   = ITERS + 2;
  localparam int NVEC  = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  fx_t  x = '0;
  logic [3:0] in_tag = '0;
  logic out_valid;
  fx_t  e;
  logic [3:0] out_tag;
  int checks = 0, failures = 0;
  int cycle = 0;

  cordic_exp #(.ITERS(ITERS), .TAG_W(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  real exp_q [$];
  int  cyc_q [$];
  int  tag_q [$];

  function automatic real r(input fx_t a); return $itor(a) / 65536.0; endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real ex, got, tol; int c, tg;
      ex = exp_q.pop_front(); c = cyc_q.pop_front(); tg = tag_q.pop_front();
      got = r(e);
      checks++;
      if (ex > 32767.0) begin
        if (e != FX_MAX) begin failures++; $display("FAIL no saturation for %f", ex); end
      end else begin
        tol = ex * 0.02 + 1.0 / 4096.0;
        if ((got - ex > tol) || (ex - got > tol)) begin
          failures++;
          $display("FAIL exp got %f exp %f", got, ex);
        end
      end
      checks++;
      if (cycle - c != LAT || int'(out_tag) != tg) begin
        failures++;
        $display("FAIL latency %0d (exp %0d) tag %0d/%0d", cycle - c, LAT, out_tag, tg);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < NVEC; i++) begin
      real xr;
      xr = ($itor($urandom_range(0, 22000)) - 12000.0) / 1000.0;  // [-12, 10]
      if (i == 0) xr = 0.0;
      if (i == 1) xr = 1.0;
      if (i == 2) xr = 11.0;     // e^11 > 32767: saturates
      x <= to_fx(xr); in_valid <= 1'b1; in_tag <= 4'(i);
      exp_q.push_back($exp(r(to_fx(xr))));
      cyc_q.push_back(cycle + 1);
      tag_q.push_back(i % 16);
      @(posedge clk);
      if ((i % 5) == 2) begin in_valid <= 1'b0; @(posedge clk); end
    end
    in_valid <= 1'b0;
    repeat (LAT + 4) @(posedge clk);
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
