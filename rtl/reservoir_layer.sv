// reservoir_layer -- all N reservoir neurons and the state register.
//
// Every neuron is evaluated in parallel from the registered state s(t-1) and
// the current sample u(t); the new state s(t) is captured at the clock edge
// on which in_valid is high.  One complete reservoir update therefore takes
// one clock, and a new sample can be accepted on every clock -- the
// one-sample-per-cycle behaviour of a fully unrolled direct-logic
// accelerator.  The leaking rate is 1, so the new state replaces the old one.
//
// This design's own choices: when seq_start accompanies a sample, the neurons
// see a zero state in place of s(t-1), so every sequence (for example one
// time series to classify) starts from rest; when in_valid is low the state
// holds.  rst_n is synchronous and active low and clears the state.
//
// Interface: clk, rst_n, in_valid, seq_start, u[NU] (Q-bit signed)
//            -> state[N] (Q-bit signed), registered.
// Timing: state reflects a sample one clock after it was presented.
module reservoir_layer
  import rc_pkg::*;
#(
  parameter int N         = N_DEF,
  parameter int NU        = NU_DEF,
  parameter int Q         = Q_DEF,
  parameter int NCRL      = NCRL_DEF,
  parameter int PRUNE_PCT = PRUNE_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                seq_start,
  input  logic signed [Q-1:0] u     [NU],
  output logic signed [Q-1:0] state [N]
);

  logic signed [Q-1:0] s_prev [N];
  logic signed [Q-1:0] s_next [N];

  always_comb begin
    for (int i = 0; i < N; i++) s_prev[i] = seq_start ? '0 : state[i];
  end

  for (genvar i = 0; i < N; i++) begin : g_neuron
    reservoir_neuron #(
      .IDX(i), .N(N), .NU(NU), .Q(Q), .NCRL(NCRL), .PRUNE_PCT(PRUNE_PCT)
    ) u_neuron (
      .u(u), .s_prev(s_prev), .s_next(s_next[i])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) state[i] <= '0;
    end else if (in_valid) begin
      state <= s_next;
    end
  end

endmodule
