// rc_accel_top -- quantized, pruned reservoir-computing accelerator.
//
// A fully unrolled echo-state network: the reservoir layer (N neurons, sparse
// pruned recurrent connections, multi-threshold HardTanh, state register)
// feeds a linear readout.  All weights are constants folded into shift/add
// logic, so the design uses only logic and flip-flops, no memory.
//
// Operation: present one sample u(t) with in_valid; assert seq_start with the
// first sample of each sequence to restart the reservoir from a zero state.
// On the next clock the state holds s(t) and y holds W_out s(t), flagged by
// out_valid.  A new sample may be presented on every clock (throughput one
// sample per cycle, latency one cycle); cycles without in_valid leave the
// state and y unchanged and drop out_valid.
//
// The readout follows the state register combinationally, so the sample-to-
// result path is one clock, matching an accelerator whose reported latency is
// the inverse of its throughput.  rst_n is synchronous, active low.
//
// Interface: clk, rst_n, in_valid, seq_start, u[NU] (Q-bit signed)
//            -> out_valid, y[NY] (YW-bit signed), state[N] (Q-bit signed).
module rc_accel_top
  import rc_pkg::*;
#(
  parameter int N         = N_DEF,
  parameter int NU        = NU_DEF,
  parameter int NY        = NY_DEF,
  parameter int Q         = Q_DEF,
  parameter int NCRL      = NCRL_DEF,
  parameter int PRUNE_PCT = PRUNE_DEF,
  parameter int YW        = y_w(Q, N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 seq_start,
  input  logic signed [Q-1:0]  u     [NU],
  output logic                 out_valid,
  output logic signed [YW-1:0] y     [NY],
  output logic signed [Q-1:0]  state [N]
);

  reservoir_layer #(
    .N(N), .NU(NU), .Q(Q), .NCRL(NCRL), .PRUNE_PCT(PRUNE_PCT)
  ) u_reservoir (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .seq_start(seq_start),
    .u(u), .state(state)
  );

  readout_layer #(.N(N), .NY(NY), .Q(Q), .YW(YW)) u_readout (
    .s(state), .y(y)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
