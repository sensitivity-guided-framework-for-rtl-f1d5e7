// const_mult -- multiply a signed operand by a hardwired constant weight
// using shifts and adds only.
//
// The accelerator never stores weights: every product W * x is built from the
// constant W at elaboration time.  The constant is recoded into canonical
// signed digits (CSD: digits -1, 0, +1, no two non-zero digits adjacent), and
// the product is the sum of the operand shifted to each non-zero digit
// position, added or subtracted by the digit's sign.  A 4-bit weight thus
// costs at most two adders, an 8-bit weight at most four.  A weight of zero
// produces no logic at all, which is how a pruned connection disappears.
//
// Replacing multipliers by shift/add networks follows the published
// accelerator; the CSD recoding is this design's choice of decomposition.
//
// Interface: x (IN_W-bit signed) -> p (OUT_W-bit signed) = x * WEIGHT.
// Timing: purely combinational.
module const_mult #(
  parameter int IN_W   = 4,
  parameter int WEIGHT = 5,
  parameter int OUT_W  = 12
) (
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] p
);

  localparam int DW = 32;

  // CSD digits of WEIGHT: bit k of .pos / .neg set when digit k is +1 / -1.
  typedef struct packed {
    logic [DW-1:0] pos;
    logic [DW-1:0] neg;
  } csd_t;

  function automatic csd_t csd(input int w);
    csd_t r;
    longint m;
    bit     negw;
    r    = '0;
    negw = (w < 0);
    m    = negw ? -longint'(w) : longint'(w);
    for (int k = 0; k < DW; k++) begin
      if (m[0]) begin
        if (m[1]) begin            // ...11 -> digit -1, carry upward
          r.neg[k] = 1'b1;
          m = m + 1;
        end else begin             // ...01 -> digit +1
          r.pos[k] = 1'b1;
          m = m - 1;
        end
      end
      m = m >>> 1;
    end
    if (negw) r = '{pos: r.neg, neg: r.pos};
    return r;
  endfunction

  localparam csd_t DIG = csd(WEIGHT);

  always_comb begin
    logic signed [OUT_W-1:0] xe;
    xe = OUT_W'(x);                // sign-extend the operand
    p  = '0;
    for (int k = 0; k < DW && k < OUT_W; k++) begin
      if (DIG.pos[k]) p = p + (xe <<< k);
      if (DIG.neg[k]) p = p - (xe <<< k);
    end
  end

endmodule
