// sum_unit -- the adder (the "sum" box) of one neuron or one readout output.
//
// Adds M signed terms into one signed value, wide enough by construction of
// OUT_W in the callers.  The terms are the weighted contributions of the
// inputs and of the surviving reservoir connections of a neuron, or the
// weighted states of a readout channel.  The adder shape is left to the
// synthesis tool, which balances a chain of constant-free additions into a
// tree of carry chains / LUT adders.
//
// Interface: terms[M] (IN_W-bit signed) -> sum (OUT_W-bit signed).
// Timing: purely combinational.  M = 0 is allowed and gives zero.
module sum_unit #(
  parameter int M     = 6,
  parameter int IN_W  = 12,
  parameter int OUT_W = 16
) (
  input  logic signed [IN_W-1:0]  terms [M],
  output logic signed [OUT_W-1:0] sum
);

  always_comb begin
    sum = '0;
    for (int m = 0; m < M; m++) sum = sum + OUT_W'(terms[m]);
  end

endmodule
