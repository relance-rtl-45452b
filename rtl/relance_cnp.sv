// relance_cnp: Cortical Neural Pool (CNP), the top of the ReLANCE engine.
//
// N_NEURONS RCHH neurons (64 in the evaluated pool) share one injected-current
// bus interface: each neuron has its own current input i_ext[k] and its own
// state, and all are stepped in lock-step. A pulse on start (while busy is
// low) launches one time step in every neuron; when all neurons report done,
// the pool raises done for one cycle, presents the spike vector of that step
// on spikes, adds it to per-neuron spike counters and updates winner, the
// index of the neuron with the most spikes since the last clear (lowest index
// on ties), which is how the paper's network reads out its class. Because every
// neuron keeps its own constant-size state and FSM, the pool grows linearly
// with N_NEURONS; larger layers are processed by tiling them over the pool.
//
// Follows the paper: the pool of RCHH neurons with a common external current
// path and spike outputs, 64 neurons, one FSM per neuron. This design's
// choices: the lock-step start/done handshake, spike counters of CNT_W bits
// (saturating) and the winner output. The "g Normalized" feedback block drawn
// next to the pool is not built (its function is not given); its input, the
// spike vector, is available on spikes.
//
// Timing: done follows the sampling edge of start by the neuron step latency
// plus one cycle; i_ext must be held stable while busy.
module relance_cnp
  import relance_pkg::*;
#(
  parameter int N_NEURONS = 64,
  parameter int CNT_W     = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         clear_counts,
  input  fx_t                          i_ext   [N_NEURONS],
  output logic                         busy,
  output logic                         done,
  output logic [N_NEURONS-1:0]         spikes,
  output fx_t                          v       [N_NEURONS],
  output logic [CNT_W-1:0]             spike_count [N_NEURONS],
  output logic [$clog2(N_NEURONS+1)-1:0] winner,
  output logic [31:0]                  steps
);

  typedef enum logic [1:0] {C_IDLE, C_RUN, C_DONE} cnp_state_e;
  cnp_state_e state_q;

  logic [N_NEURONS-1:0] n_done, n_spike;
  logic                 start_sim;

  assign start_sim = (state_q == C_IDLE) && start;

  for (genvar k = 0; k < N_NEURONS; k++) begin : g_neuron
    rchh_neuron u_neuron (
      .clk, .rst_n, .start_sim, .i_ext(i_ext[k]),
      .busy(), .done(n_done[k]), .spike(n_spike[k]),
      .v(v[k]), .m(), .h(), .n()
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= C_IDLE;
      spikes  <= '0;
      steps   <= '0;
      for (int k = 0; k < N_NEURONS; k++) spike_count[k] <= '0;
    end else begin
      unique case (state_q)
        C_IDLE: if (start) state_q <= C_RUN;
        C_RUN:  if (&n_done) begin
                  state_q <= C_DONE;
                  spikes  <= n_spike;
                  steps   <= steps + 1;
                  for (int k = 0; k < N_NEURONS; k++)
                    if (n_spike[k] && spike_count[k] != '1) spike_count[k] <= spike_count[k] + 1'b1;
                end
        C_DONE: state_q <= C_IDLE;
        default: state_q <= C_IDLE;
      endcase
      if (clear_counts) begin
        for (int k = 0; k < N_NEURONS; k++) spike_count[k] <= '0;
        steps <= '0;
      end
    end
  end

  // winner: neuron with the largest spike count
  always_comb begin
    logic [CNT_W-1:0] best;
    best   = spike_count[0];
    winner = '0;
    for (int k = 1; k < N_NEURONS; k++)
      if (spike_count[k] > best) begin
        best   = spike_count[k];
        winner = ($clog2(N_NEURONS+1))'(k);
      end
  end

  assign busy = (state_q != C_IDLE);
  assign done = (state_q == C_DONE);

  // neurons run in lock-step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (|n_done) |-> (&n_done));

endmodule
