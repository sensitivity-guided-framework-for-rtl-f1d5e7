// multi_threshold -- quantized HardTanh activation as a bank of integer
// thresholds.
//
// After streamlining, the floating-point scale and bias of the quantizer are
// folded into 2^Q - 1 integer thresholds.  The pre-activation is compared
// with all of them in parallel and the output level is the number of
// thresholds reached, offset to the signed Q-bit range:
//
//   y = -2^(Q-1) + #{ j in 1 .. 2^Q-1 : acc >= T_j }
//
// Evaluating the activation as threshold comparisons follows the published
// accelerator.  The threshold values belong to a trained model; here they are
// uniformly spaced, T_j = (j - 2^(Q-1)) * STEP - floor(STEP/2), which makes y
// the round-half-up of acc / STEP clamped to [-2^(Q-1), 2^(Q-1)-1] -- the
// HardTanh shape with STEP standing for the absorbed quantization scale.
//
// Interface: acc (ACC_W-bit signed) -> y (Q-bit signed).
// Timing: purely combinational.
module multi_threshold #(
  parameter int Q     = 4,
  parameter int ACC_W = 16,
  parameter int STEP  = 8
) (
  input  logic signed [ACC_W-1:0] acc,
  output logic signed [Q-1:0]     y
);

  localparam int NT   = (1 << Q) - 1;   // number of thresholds
  localparam int HALF = 1 << (Q - 1);

  typedef logic signed [ACC_W-1:0] thr_t;

  function automatic thr_t thr(input int j);
    return thr_t'((j - HALF) * STEP - STEP / 2);
  endfunction

  logic [NT:1] hit;   // thermometer code: hit[j] = (acc >= T_j)

  always_comb begin
    for (int j = 1; j <= NT; j++) hit[j] = (acc >= thr(j));
  end

  always_comb begin
    logic [Q:0] cnt;
    cnt = '0;
    for (int j = 1; j <= NT; j++) cnt = cnt + (Q + 1)'(hit[j]);
    y = Q'(cnt - (Q + 1)'(HALF));
  end

endmodule
