// rc_top_driver -- stimulus and scoreboard for one rc_accel_top instance.
//
// Drives NSEQ sequences of SLEN random samples, with idle cycles inserted at
// random (IDLE_PCT percent of cycles), and seq_start on the first sample of
// every sequence.  After each clock it checks, against rc_ref_pkg's model:
//   * out_valid equals in_valid of the previous clock (latency one cycle),
//   * the full reservoir state,
//   * every readout value whenever out_valid is high.
// It counts how often each mechanism of the design was exercised: idle
// (stalled) cycles, back-to-back samples, sequence restarts, state levels at
// the upper and lower saturation limit, and pruned connections; a mechanism
// that never happens counts as a failure (pruning only when P > 0).
// done rises when the last sequence has been checked.
module rc_top_driver #(
  parameter int N        = rc_pkg::N_DEF,
  parameter int NU       = rc_pkg::NU_DEF,
  parameter int NY       = rc_pkg::NY_DEF,
  parameter int Q        = rc_pkg::Q_DEF,
  parameter int NCRL     = rc_pkg::NCRL_DEF,
  parameter int P        = rc_pkg::PRUNE_DEF,
  parameter int YW       = rc_pkg::y_w(Q, N),
  parameter int SLEN     = 24,
  parameter int NSEQ     = 10,
  parameter int IDLE_PCT = 20
) (
  input  logic                 clk,
  output logic                 rst_n,
  output logic                 in_valid,
  output logic                 seq_start,
  output logic signed [Q-1:0]  u     [NU],
  input  logic                 out_valid,
  input  logic signed [YW-1:0] y     [NY],
  input  logic signed [Q-1:0]  state [N],
  output logic                 done,
  output int                   checks,
  output int                   failures
);
  import rc_ref_pkg::*;

  int n_idle = 0, n_b2b = 0, n_restart = 0, n_sat_hi = 0, n_sat_lo = 0, n_pruned = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("FAIL [Q=%0d P=%0d NU=%0d NY=%0d] %s", Q, P, NU, NY, msg);
  endtask

  task automatic check_all(input int s [], input bit exp_ov, input bit chk_y);
    checks++;
    if (out_valid !== exp_ov) fail($sformatf("out_valid=%0b expected %0b", out_valid, exp_ov));
    for (int i = 0; i < N; i++) begin
      checks++;
      if (int'(state[i]) != s[i]) fail($sformatf("state[%0d]=%0d expected %0d", i, state[i], s[i]));
      if (s[i] == (1 << (Q - 1)) - 1) n_sat_hi++;
      if (s[i] == -(1 << (Q - 1)))    n_sat_lo++;
    end
    if (chk_y) begin
      for (int o = 0; o < NY; o++) begin
        checks++;
        if (longint'(y[o]) != ref_readout(o, s, Q))
          fail($sformatf("y[%0d]=%0d expected %0d", o, y[o], ref_readout(o, s, Q)));
      end
    end
  endtask

  initial begin
    bit mask [];
    int s [], sn [], uv [], zero [];
    bit prev_valid;
    checks    = 0;
    failures  = 0;
    done      = 1'b0;
    rst_n     = 1'b0;
    in_valid  = 1'b0;
    seq_start = 1'b0;
    for (int j = 0; j < NU; j++) u[j] = '0;
    prune_mask(NCRL, P, Q, mask);
    foreach (mask[c]) n_pruned += mask[c];
    s    = new[N];
    zero = new[N];
    uv   = new[NU];
    foreach (s[i]) begin s[i] = 0; zero[i] = 0; end
    repeat (3) @(posedge clk);
    #1 check_all(zero, 1'b0, 1'b0);
    @(negedge clk);
    rst_n = 1'b1;
    prev_valid = 1'b0;
    for (int q = 0; q < NSEQ; q++) begin
      int pos;
      pos = 0;
      while (pos < SLEN) begin
        @(negedge clk);
        in_valid = ($urandom_range(99) >= IDLE_PCT);
        seq_start = in_valid && (pos == 0);
        for (int j = 0; j < NU; j++) begin
          uv[j] = rand_q(Q);
          u[j]  = Q'(uv[j]);
        end
        @(posedge clk);
        #1;
        if (in_valid) begin
          ref_step(uv, seq_start ? zero : s, mask, N, Q, NCRL, sn);
          s = sn;
          if (seq_start) n_restart++;
          if (prev_valid) n_b2b++;
          pos++;
        end else begin
          n_idle++;
        end
        check_all(s, in_valid, in_valid);
        prev_valid = in_valid;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    seq_start = 1'b0;
    @(posedge clk);
    #1 check_all(s, 1'b0, 1'b0);   // state holds, result flag drops
    checks++;
    if (n_idle == 0 && IDLE_PCT > 0) fail("no idle cycle");
    checks++;
    if (n_b2b == 0) fail("no back-to-back samples");
    checks++;
    if (n_restart != NSEQ) fail($sformatf("%0d sequence restarts, expected %0d", n_restart, NSEQ));
    checks++;
    if (n_sat_hi == 0 || n_sat_lo == 0) fail("activation never saturated");
    checks++;
    if (P > 0 && n_pruned != (NCRL * P) / 100) fail($sformatf("%0d pruned connections", n_pruned));
    $display("[Q=%0d P=%0d NU=%0d NY=%0d SLEN=%0d] idle=%0d back_to_back=%0d restarts=%0d sat_hi=%0d sat_lo=%0d pruned=%0d of %0d",
             Q, P, NU, NY, SLEN, n_idle, n_b2b, n_restart, n_sat_hi, n_sat_lo, n_pruned, NCRL);
    done = 1'b1;
  end
endmodule
