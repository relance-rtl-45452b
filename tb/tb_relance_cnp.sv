// tb_relance_cnp: end-to-end test of the Cortical Neural Pool with a reduced
// pool of N neurons, each driven by a different constant current (from below
// the firing threshold to strong drive). Over NSTEPS time steps it checks:
//  * the spike count of every neuron against a free-running real-arithmetic
//    HH model (+-1 spike); with parameter set 1 the resting state V = -65 mV
//    is not an equilibrium, so even undriven neurons fire once at first;
//  * spike_count and steps against the spikes seen on the spike vector;
//  * winner against the argmax of those counts; clear_counts;
//  * the step latency.
// It also counts how often each mechanism of the design occurred and fails
// if one never did: spikes, the low-latency gate terms finishing while the
// dividers are still busy (CAMP overlap), the re-tasked multiplier lanes
// returning g (V - E) during the divider phase, and the alpha_m / alpha_n
// special-case path (provoked once by loading V = -40 mV and -55 mV into
// two neurons while the pool is idle).
module tb_relance_cnp;
  import relance_pkg::*;
  import hh_ref_pkg::*;
  localparam int N      = 8;
  localparam int NSTEPS = 4000;
  localparam int STEP_CYCLES = 88;   // start sampled -> pool done

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, clear_counts = 1'b0;
  fx_t  i_ext [N];
  logic busy, done;
  logic [N-1:0] spikes;
  fx_t  v [N];
  logic [15:0] spike_count [N];
  logic [$clog2(N+1)-1:0] winner;
  logic [31:0] steps;
  int checks = 0, failures = 0;

  relance_cnp #(.N_NEURONS(N)) dut (.*);
  always #5 clk = ~clk;

  function automatic real r(input fx_t a); return $itor(a) / 65536.0; endfunction

  // mechanism counters
  int n_overlap = 0, n_retask = 0, n_special = 0, n_spikes = 0;
  always @(posedge clk) begin
    if (dut.g_neuron[0].u_neuron.mu_v[1] && dut.g_neuron[0].u_neuron.mu_tag[1] == OP_BM_M &&
        dut.g_neuron[0].u_neuron.rate_state == R_DIV_CALC)
      n_overlap++;
    if (dut.g_neuron[0].u_neuron.mu_v[0] && dut.g_neuron[0].u_neuron.mu_tag[0] == OP_GNA_V &&
        dut.g_neuron[0].u_neuron.rate_state == R_DIV_CALC)
      n_retask++;
  end
  for (genvar k = 0; k < N; k++) begin : g_mon
    always @(posedge clk)
      if (dut.g_neuron[k].u_neuron.dv_v[0] &&
          (dut.g_neuron[k].u_neuron.sp_am || dut.g_neuron[k].u_neuron.sp_an))
        n_special++;
  end

  real       iamp [N];
  hh_state_t ref_s [N];
  int        ref_cnt [N];
  int        seen_cnt [N];

  task automatic do_step();
    int t0, t1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t0 = $time;
    wait (done);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != STEP_CYCLES) begin
      failures++; $display("FAIL pool step took %0d cycles", (t1 - t0) / 10);
    end
    for (int k = 0; k < N; k++) if (spikes[k]) begin seen_cnt[k]++; n_spikes++; end
    @(posedge clk);
  endtask

  initial begin
    for (int k = 0; k < N; k++) begin
      iamp[k] = (k < 2) ? 0.0 : 2.0 * $itor(k) + 1.0;    // 0, 0, 5, 7, ... 15 uA/cm^2
      i_ext[k] = to_fx(iamp[k]);
      ref_s[k] = hh_rest();
      ref_cnt[k] = 0; seen_cnt[k] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // special case: put neurons 2 and 3 exactly on the 0/0 points for one step
    force dut.g_neuron[2].u_neuron.v_q = to_fx(-40.0);
    @(posedge clk);
    release dut.g_neuron[2].u_neuron.v_q;
    force dut.g_neuron[3].u_neuron.v_q = to_fx(-55.0);
    @(posedge clk);
    release dut.g_neuron[3].u_neuron.v_q;
    ref_s[2].v = -40.0; ref_s[3].v = -55.0;
    do_step();
    for (int k = 0; k < N; k++) void'(hh_step(ref_s[k], r(i_ext[k])));
    for (int k = 2; k < 4; k++) begin
      checks++;
      if (r(v[k]) - ref_s[k].v > 0.2 || ref_s[k].v - r(v[k]) > 0.2) begin
        failures++; $display("FAIL singular step neuron %0d V %f model %f", k, r(v[k]), ref_s[k].v);
      end
    end
    // restart counting from a clean slate
    clear_counts <= 1'b1; @(posedge clk); clear_counts <= 1'b0; @(posedge clk);
    for (int k = 0; k < N; k++) seen_cnt[k] = 0;
    n_spikes = 0;

    for (int s = 0; s < NSTEPS; s++) begin
      do_step();
      for (int k = 0; k < N; k++) if (hh_step(ref_s[k], r(i_ext[k]))) ref_cnt[k]++;
    end

    checks++;
    if (steps != 32'(NSTEPS)) begin failures++; $display("FAIL steps %0d", steps); end
    for (int k = 0; k < N; k++) begin
      $display("neuron %0d I=%5.1f spikes %0d model %0d", k, iamp[k], spike_count[k], ref_cnt[k]);
      checks++;
      if (int'(spike_count[k]) != seen_cnt[k]) begin failures++; $display("FAIL counter %0d", k); end
      checks++;
      if (int'(spike_count[k]) - ref_cnt[k] > 1 || ref_cnt[k] - int'(spike_count[k]) > 1) begin
        failures++; $display("FAIL spikes neuron %0d: %0d vs model %0d", k, spike_count[k], ref_cnt[k]);
      end
    end
    begin
      int best; best = 0;
      for (int k = 1; k < N; k++) if (spike_count[k] > spike_count[best]) best = k;
      checks++;
      if (int'(winner) != best) begin failures++; $display("FAIL winner %0d exp %0d", winner, best); end
    end
    clear_counts <= 1'b1; @(posedge clk); clear_counts <= 1'b0; @(posedge clk);
    checks++;
    if (steps != 0 || spike_count[N-1] != 0 || winner != 0) begin failures++; $display("FAIL clear_counts"); end

    $display("mechanisms: spikes %0d overlap %0d retask %0d special %0d", n_spikes, n_overlap, n_retask, n_special);
    checks++; if (n_spikes == 0)  begin failures++; $display("FAIL no spikes"); end
    checks++; if (n_overlap == 0) begin failures++; $display("FAIL no CAMP overlap seen"); end
    checks++; if (n_retask == 0)  begin failures++; $display("FAIL no lane re-tasking seen"); end
    checks++; if (n_special < 2)  begin failures++; $display("FAIL special case not taken"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NSTEPS + 10) * (STEP_CYCLES + 4)) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
