// reservoir_neuron -- one neuron of the echo-state reservoir, in direct logic.
//
// Computes   s_IDX(t) = f( sum_j W_in[IDX][j] u_j(t) + sum_k W_r[IDX][k] s_src(k)(t-1) )
// with every weight a hardwired constant.  The structure is the chain the
// published accelerator draws for each neuron: one constant product per
// incoming connection (const_mult, shift/add only), one adder (sum_unit) and
// the multi-threshold HardTanh (multi_threshold).
//
// Reservoir connections: the neuron has NCRL/N incoming connections, each
// with a source neuron and a Q-bit weight taken from rc_pkg.  Connections
// chosen for removal by the pruning step (the lowest-scored PRUNE_PCT % of all
// NCRL reservoir connections) get no multiplier and no adder input.  Input
// weights are never pruned.  The weight values, the connection pattern and the
// scores are placeholders defined in rc_pkg; the fan-in, pruning rule and
// datapath follow the published design.
//
// Interface: u[NU] and s_prev[N] (Q-bit signed each) -> s_next (Q-bit signed).
// Timing: purely combinational; the state register is in reservoir_layer.
module reservoir_neuron
  import rc_pkg::*;
#(
  parameter int IDX       = 0,
  parameter int N         = N_DEF,
  parameter int NU        = NU_DEF,
  parameter int Q         = Q_DEF,
  parameter int NCRL      = NCRL_DEF,
  parameter int PRUNE_PCT = PRUNE_DEF
) (
  input  logic signed [Q-1:0] u      [NU],
  input  logic signed [Q-1:0] s_prev [N],
  output logic signed [Q-1:0] s_next
);

  localparam int FI    = fan_in(N, NCRL);
  localparam int M     = NU + FI;
  localparam int PW    = 2 * Q + 1;        // product width
  localparam int ACC_W = acc_w(Q);

  logic signed [PW-1:0]    terms [M];
  logic signed [ACC_W-1:0] acc;

  // input connections (dense)
  for (genvar j = 0; j < NU; j++) begin : g_in
    const_mult #(.IN_W(Q), .WEIGHT(w_in(IDX, j, Q)), .OUT_W(PW)) u_mul (
      .x(u[j]), .p(terms[j])
    );
  end

  // reservoir connections (sparse, pruned)
  for (genvar k = 0; k < FI; k++) begin : g_res
    if (is_pruned(IDX * FI + k, NCRL, PRUNE_PCT, Q)) begin : g_pruned
      assign terms[NU + k] = '0;
    end else begin : g_kept
      const_mult #(.IN_W(Q), .WEIGHT(w_r(IDX, k, Q)), .OUT_W(PW)) u_mul (
        .x(s_prev[r_src(IDX, k, N)]), .p(terms[NU + k])
      );
    end
  end

  sum_unit #(.M(M), .IN_W(PW), .OUT_W(ACC_W)) u_sum (
    .terms(terms), .sum(acc)
  );

  multi_threshold #(.Q(Q), .ACC_W(ACC_W), .STEP(act_step(Q))) u_act (
    .acc(acc), .y(s_next)
  );

endmodule
