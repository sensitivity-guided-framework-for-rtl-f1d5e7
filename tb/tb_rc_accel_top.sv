// tb_rc_accel_top -- end-to-end test of the accelerator at its default
// (main) configuration: 50 neurons, 250 reservoir connections, 4-bit
// quantization, 15 % pruning, one input, one readout.
//
// rc_top_driver runs 20 sequences of 24 samples (the sequence length of the
// pedestrian-count classification benchmark) with random idle cycles and
// checks state, readout and the one-cycle latency on every clock.
module tb_rc_accel_top;
  localparam int N = rc_pkg::N_DEF, NU = rc_pkg::NU_DEF, NY = rc_pkg::NY_DEF;
  localparam int Q = rc_pkg::Q_DEF;
  localparam int YW = rc_pkg::y_w(Q, N);

  logic clk = 1'b0;
  logic rst_n, in_valid, seq_start, out_valid, done;
  logic signed [Q-1:0]  u     [NU];
  logic signed [YW-1:0] y     [NY];
  logic signed [Q-1:0]  state [N];
  int checks, failures;

  always #5 clk = ~clk;

  rc_accel_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .seq_start(seq_start), .u(u),
    .out_valid(out_valid), .y(y), .state(state)
  );

  rc_top_driver #(.SLEN(24), .NSEQ(20), .IDLE_PCT(20)) drv (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .seq_start(seq_start), .u(u),
    .out_valid(out_valid), .y(y), .state(state),
    .done(done), .checks(checks), .failures(failures)
  );

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
