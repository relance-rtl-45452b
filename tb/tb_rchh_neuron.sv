// tb_rchh_neuron: runs the RCHH neuron for many time steps and checks it
// against a real-arithmetic Hodgkin-Huxley model written here.
//  * Every step, the model is advanced one step from the neuron's own state
//    before the step (same Euler ordering: rates from V[t], gates updated,
//    powers from the new gates, currents with V[t], then V) and the new
//    V, m, h, n must agree within the CORDIC precision.
//  * A free-running model over the whole run must produce the same number of
//    spikes (+-1), for a spiking current step and for zero current.
//  * Each step must take STEP_CYCLES cycles.
//  * Two more neurons start exactly on the 0/0 points of alpha_m (V = -40 mV)
//    and alpha_n (V = -55 mV) so the special-case path is taken, and their
//    first step is checked against the model using the analytic limit.
module tb_rchh_neuron;
  import relance_pkg::*;
  localparam int STEP_CYCLES = 87;
  localparam int NSTEPS      = 2400;     // ~18.75 ms at dt = 2^-7 ms
  localparam real DT = 1.0 / 128.0;

  logic clk = 1'b0, rst_n = 1'b0, start_sim = 1'b0;
  fx_t  i_ext = '0;
  logic busy, done, spike;
  fx_t  v, m, h, n;
  logic busy2, done2, spike2, busy3, done3, spike3;
  fx_t  v2, m2, h2, n2, v3, m3, h3, n3;
  int checks = 0, failures = 0;

  rchh_neuron dut (.*);
  rchh_neuron #(.V_INIT(-40.0)) dut_am (.clk, .rst_n, .start_sim, .i_ext,
    .busy(busy2), .done(done2), .spike(spike2), .v(v2), .m(m2), .h(h2), .n(n2));
  rchh_neuron #(.V_INIT(-55.0)) dut_an (.clk, .rst_n, .start_sim, .i_ext,
    .busy(busy3), .done(done3), .spike(spike3), .v(v3), .m(m3), .h(h3), .n(n3));

  always #5 clk = ~clk;

  function automatic real r(input fx_t a); return $itor(a) / 65536.0; endfunction
  function automatic real clip01(input real x); return x < 0.0 ? 0.0 : (x > 1.0 ? 1.0 : x); endfunction
  function automatic real vtrap(input real u); // u / (1 - e^-u)
    if (u < 1.0/1024.0 && u > -1.0/1024.0) return 1.0 + u / 2.0;
    return u / (1.0 - $exp(-u));
  endfunction

  // one model step; state in/out by reference
  task automatic model_step(inout real vv, inout real mm, inout real hh, inout real nn,
                            input real ii, output logic spk);
    real am, bm, ah, bh, an, bn, ina, ik, il, vn;
    am = vtrap((vv + 40.0) / 10.0);
    bm = 4.0 * $exp(-(vv + 65.0) / 18.0);
    ah = 0.07 * $exp(-(vv + 65.0) / 20.0);
    bh = 1.0 / (1.0 + $exp(-(vv + 35.0) / 10.0));
    an = 0.1 * vtrap((vv + 55.0) / 10.0);
    bn = 0.125 * $exp(-(vv + 65.0) / 80.0);
    mm = clip01(mm + DT * (am * (1.0 - mm) - bm * mm));
    hh = clip01(hh + DT * (ah * (1.0 - hh) - bh * hh));
    nn = clip01(nn + DT * (an * (1.0 - nn) - bn * nn));
    ina = 130.0 * mm * mm * mm * hh * (vv - 57.86);
    ik  = 37.0 * nn * nn * nn * nn * (vv + 75.76);
    il  = 0.6 * (vv + 53.86);
    vn  = vv + DT * (ii - ina - ik - il);
    spk = (vv < 0.0) && (vn >= 0.0);
    vv  = vn;
  endtask

  function automatic bit near(input real a, input real b, input real tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  int n_spk_dut, n_spk_ref, n_spk_dut0, n_spk_ref0;

  task automatic run(input real iamp, input int nsteps, output int sd, output int sr);
    real fv, fm, fh, fn;         // free-running model
    logic fs;
    fv = r(v); fm = r(m); fh = r(h); fn = r(n);
    sd = 0; sr = 0;
    i_ext <= to_fx(iamp);
    for (int s = 0; s < nsteps; s++) begin
      real pv, pm, ph, pn, vb, gtol; logic ps; int t0, t1;
      vb = r(v);
      pv = r(v); pm = r(m); ph = r(h); pn = r(n);
      model_step(pv, pm, ph, pn, r(to_fx(iamp)), ps);
      model_step(fv, fm, fh, fn, r(to_fx(iamp)), fs);
      if (fs) sr++;
      @(posedge clk);
      start_sim <= 1'b1;
      @(posedge clk);
      start_sim <= 1'b0;
      t0 = $time;
      wait (done);
      t1 = $time;
      @(posedge clk);
      checks++;
      if ((t1 - t0) / 10 != STEP_CYCLES) begin
        failures++; $display("FAIL step took %0d cycles", (t1 - t0) / 10);
      end
      checks++;
      // Close to the 0/0 points (but outside the 2^-10 neighbourhood) the
      // 8-iteration exponential's error is amplified by 1 - e^-u, so the
      // gate tolerance is wider there.
      gtol = (near(vb, -40.0, 1.0) || near(vb, -55.0, 1.0)) ? 0.02 : 0.004;
      if (!near(r(m), pm, gtol) || !near(r(h), ph, gtol) || !near(r(n), pn, gtol) ||
          !near(r(v), pv, 0.1 + 0.05 * ((pv - vb < 0) ? vb - pv : pv - vb))) begin
        failures++;
        if (failures < 10)
          $display("FAIL step %0d: V %f/%f m %f/%f h %f/%f n %f/%f", s, r(v), pv, r(m), pm, r(h), ph, r(n), pn);
      end
      if (spike) sd++;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // singularity points: check the first step of the two extra neurons
    begin
      real pv, pm, ph, pn; logic ps;
      @(posedge clk); start_sim <= 1'b1; @(posedge clk); start_sim <= 1'b0;
      wait (done); @(posedge clk);
      checks++;
      if (!(dut_am.sp_am && dut_an.sp_an)) begin failures++; $display("FAIL special case not detected"); end
      pv = -40.0; pm = 0.0529; ph = 0.5961; pn = 0.3177;
      model_step(pv, pm, ph, pn, 0.0, ps);
      checks++;
      if (!near(r(v2), pv, 0.15) || !near(r(m2), pm, 0.004)) begin
        failures++; $display("FAIL alpha_m singular step V %f/%f m %f/%f", r(v2), pv, r(m2), pm);
      end
      checks++;
      if (!near(r(dut_am.rates_q[0]), 1.0, 0.002)) begin
        failures++; $display("FAIL alpha_m limit %f", r(dut_am.rates_q[0]));
      end
      pv = -55.0; pm = 0.0529; ph = 0.5961; pn = 0.3177;
      model_step(pv, pm, ph, pn, 0.0, ps);
      checks++;
      if (!near(r(v3), pv, 0.15) || !near(r(n3), pn, 0.004)) begin
        failures++; $display("FAIL alpha_n singular step V %f/%f n %f/%f", r(v3), pv, r(n3), pn);
      end
      checks++;
      if (!near(r(dut_an.rates_q[4]), 0.1, 0.002)) begin
        failures++; $display("FAIL alpha_n limit %f", r(dut_an.rates_q[4]));
      end
    end

    // no input: stays near rest, no spikes
    run(0.0, 300, n_spk_dut0, n_spk_ref0);
    checks++;
    if (n_spk_dut0 != 0 || n_spk_ref0 != 0) begin failures++; $display("FAIL spikes without input %0d/%0d", n_spk_dut0, n_spk_ref0); end
    // current step: tonic spiking
    run(10.0, NSTEPS, n_spk_dut, n_spk_ref);
    $display("spikes: neuron %0d model %0d, V end %f", n_spk_dut, n_spk_ref, r(v));
    checks++;
    if (n_spk_dut < 1 || n_spk_dut - n_spk_ref > 1 || n_spk_ref - n_spk_dut > 1) begin
      failures++; $display("FAIL spike count %0d vs model %0d", n_spk_dut, n_spk_ref);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NSTEPS + 400) * (STEP_CYCLES + 4)) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
