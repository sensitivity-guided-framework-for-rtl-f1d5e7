// readout_layer -- linear readout y(t) = W_out s(t).
//
// Each of the NY outputs multiplies all N reservoir states by its hardwired
// Q-bit readout weights (const_mult, shift/add only) and adds the products
// (sum_unit).  The result is kept at full precision, YW bits, with no output
// quantization and no class decision; what a host does with y (threshold,
// arg-max, regression value) is outside this block.  The linear readout with
// trained constant weights follows the published design; the placeholder
// weight values come from rc_pkg.
//
// Interface: s[N] (Q-bit signed) -> y[NY] (YW-bit signed).
// Timing: purely combinational.
module readout_layer
  import rc_pkg::*;
#(
  parameter int N  = N_DEF,
  parameter int NY = NY_DEF,
  parameter int Q  = Q_DEF,
  parameter int YW = y_w(Q, N)
) (
  input  logic signed [Q-1:0]  s [N],
  output logic signed [YW-1:0] y [NY]
);

  localparam int PW = 2 * Q + 1;

  for (genvar o = 0; o < NY; o++) begin : g_out
    logic signed [PW-1:0] terms [N];
    for (genvar i = 0; i < N; i++) begin : g_mul
      const_mult #(.IN_W(Q), .WEIGHT(w_out(o, i, Q)), .OUT_W(PW)) u_mul (
        .x(s[i]), .p(terms[i])
      );
    end
    sum_unit #(.M(N), .IN_W(PW), .OUT_W(YW)) u_sum (
      .terms(terms), .sum(y[o])
    );
  end

endmodule
