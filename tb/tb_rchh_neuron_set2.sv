// tb_rchh_neuron_set2: the paper's second HH parameter set (V_Na = 55,
// V_K = -110, V_l = -95 mV; g_Na = 70, g_K = 8, g_l = 0.23 mS/cm^2) on one
// neuron, by parameter override. A sweep of constant currents is applied, one
// run per current from reset, and each step is compared with a
// real-arithmetic model step taken from the neuron's own state, and the spike
// count of each run with a free-running model (+-1).
module tb_rchh_neuron_set2;
  import relance_pkg::*;
  import hh_ref_pkg::*;
  localparam int STEP_CYCLES = 87;
  localparam int NSTEPS      = 2000;
  localparam int NCUR        = 4;

  logic clk = 1'b0, rst_n = 1'b0, start_sim = 1'b0;
  fx_t  i_ext = '0;
  logic busy, done, spike;
  fx_t  v, m, h, n;
  int checks = 0, failures = 0;

  rchh_neuron #(.E_NA(55.0), .E_K(-110.0), .E_L(-95.0),
                .G_NA(70.0), .G_K(8.0), .G_L(0.23)) dut (.*);
  always #5 clk = ~clk;

  function automatic real r(input fx_t a); return $itor(a) / 65536.0; endfunction
  function automatic bit near(input real a, input real b, input real tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  initial begin
    real cur [NCUR];
    int  total_spikes;
    cur[0] = 0.0; cur[1] = 10.0; cur[2] = 30.0; cur[3] = 60.0;
    total_spikes = 0;
    for (int c = 0; c < NCUR; c++) begin
      hh_state_t fr;
      int sd, sr;
      rst_n <= 1'b0;
      repeat (3) @(posedge clk);
      rst_n <= 1'b1;
      repeat (2) @(posedge clk);
      i_ext <= to_fx(cur[c]);
      fr = hh_rest();
      sd = 0; sr = 0;
      for (int s = 0; s < NSTEPS; s++) begin
        hh_state_t ps;
        real vb, gtol;
        int t0, t1;
        vb = r(v);
        ps.v = r(v); ps.m = r(m); ps.h = r(h); ps.n = r(n);
        void'(hh_step_p(ps, r(to_fx(cur[c])), hh_set2()));
        if (hh_step_p(fr, r(to_fx(cur[c])), hh_set2())) sr++;
        @(posedge clk); start_sim <= 1'b1; @(posedge clk); start_sim <= 1'b0;
        t0 = $time; wait (done); t1 = $time; @(posedge clk);
        checks++;
        if ((t1 - t0) / 10 != STEP_CYCLES) begin failures++; $display("FAIL step cycles %0d", (t1 - t0) / 10); end
        gtol = (near(vb, -40.0, 1.0) || near(vb, -55.0, 1.0)) ? 0.02 : 0.004;
        checks++;
        if (!near(r(m), ps.m, gtol) || !near(r(h), ps.h, gtol) || !near(r(n), ps.n, gtol) ||
            !near(r(v), ps.v, 0.1 + 0.05 * ((ps.v - vb < 0) ? vb - ps.v : ps.v - vb))) begin
          failures++;
          if (failures < 10) $display("FAIL I=%f step %0d: V %f/%f m %f/%f h %f/%f n %f/%f",
                                      cur[c], s, r(v), ps.v, r(m), ps.m, r(h), ps.h, r(n), ps.n);
        end
        if (spike) sd++;
      end
      $display("set 2, I = %f: spikes %0d, model %0d", cur[c], sd, sr);
      total_spikes += sd;
      checks++;
      if (sd - sr > 1 || sr - sd > 1) begin failures++; $display("FAIL spike count"); end
    end
    checks++;
    if (total_spikes == 0) begin failures++; $display("FAIL set 2 never spiked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCUR * (NSTEPS + 10) * (STEP_CYCLES + 4)) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
