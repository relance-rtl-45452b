// tb_rate_special_case: sweeps u across and around the epsilon = 2^-10
// neighbourhood of the alpha_m / alpha_n singularity and checks the detector
// flag and the L'Hopital value K (1 + u/2) for K = 1 (alpha_m) and K = 0.1
// (alpha_n), computed in real arithmetic.
module tb_rate_special_case;
  import relance_pkg::*;
  fx_t  u;
  logic sp1, sp2;
  fx_t  val1, val2;
  int checks = 0, failures = 0;

  rate_special_case #(.K(1.0)) dut1 (.u(u), .special(sp1), .value(val1));
  rate_special_case #(.K(0.1)) dut2 (.u(u), .special(sp2), .value(val2));

  function automatic real r(input fx_t a); return $itor(a) / 65536.0; endfunction

  task automatic check(input fx_t uu);
    real ur, e1, e2;
    logic exp_sp;
    u = uu;
    #1;
    ur = r(uu);
    exp_sp = (ur < 1.0 / 1024.0) && (ur > -1.0 / 1024.0);
    checks++;
    if (sp1 !== exp_sp || sp2 !== exp_sp) begin
      failures++;
      $display("FAIL special flag u=%f got %b/%b exp %b", ur, sp1, sp2, exp_sp);
    end
    e1 = 1.0 + ur / 2.0;
    e2 = 0.1 * (1.0 + ur / 2.0);
    checks++;
    if (r(val1) - e1 > 3e-5 || e1 - r(val1) > 3e-5 || r(val2) - e2 > 3e-5 || e2 - r(val2) > 3e-5) begin
      failures++;
      $display("FAIL value u=%f got %f/%f exp %f/%f", ur, r(val1), r(val2), e1, e2);
    end
  endtask

  initial begin
    // every value from -3 epsilon to +3 epsilon, LSB by LSB
    for (int k = -192; k <= 192; k++) check(fx_t'(k));
    // random values further away
    for (int k = 0; k < 200; k++) check(fx_t'($urandom_range(0, 400000)) - fx_t'(200000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
