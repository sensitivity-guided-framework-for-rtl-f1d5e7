// tb_reservoir_layer -- clocked check of the reservoir layer (main
// configuration: 50 neurons, 4-bit, 15 % pruned).
//
// Feeds random samples in sequences of 24 with random idle cycles, starts
// each sequence with seq_start, and after every clock compares the whole
// registered state with the reference recurrence s(t) = f(W_in u + W_r s(t-1)).
// Also checks that reset clears the state, that idle cycles hold it, and that
// seq_start restarts from a zero state.  A state update must be visible one
// clock after its sample.
module tb_reservoir_layer;
  import rc_ref_pkg::*;
  localparam int N = 50, Q = 4, NCRL = 250, P = 15, SLEN = 24;

  int checks = 0, failures = 0;
  int n_idle = 0, n_restart = 0, n_upd = 0;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, seq_start = 1'b0;
  logic signed [Q-1:0] u [1];
  logic signed [Q-1:0] state [N];

  reservoir_layer dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
                       .seq_start(seq_start), .u(u), .state(state));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input int exp_s [], input string what);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (int'(state[i]) != exp_s[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s neuron %0d: %0d expected %0d", what, i, state[i], exp_s[i]);
      end
    end
  endtask

  initial begin
    bit mask [];
    int s [], sn [], uv [], zero [];
    int pos;
    prune_mask(NCRL, P, Q, mask);
    s = new[N];
    zero = new[N];
    uv = new[1];
    foreach (s[i]) begin s[i] = 0; zero[i] = 0; end
    u[0] = '0;
    repeat (3) @(posedge clk);
    #1 compare(zero, "reset");
    rst_n = 1'b1;
    pos = 0;
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(99) < 75);
      seq_start = in_valid && (pos == 0);
      uv[0]     = rand_q(Q);
      u[0]      = Q'(uv[0]);
      @(posedge clk);
      #1;
      if (in_valid) begin
        ref_step(uv, seq_start ? zero : s, mask, N, Q, NCRL, sn);
        s = sn;
        n_upd++;
        if (seq_start) n_restart++;
        pos = (pos + 1) % SLEN;
      end else begin
        n_idle++;
      end
      compare(s, in_valid ? "update" : "hold");
    end
    checks++;
    if (n_idle == 0 || n_restart < 2 || n_upd == 0) begin
      failures++;
      $display("FAIL mechanism not exercised: idle=%0d restart=%0d", n_idle, n_restart);
    end
    $display("updates=%0d idle=%0d restarts=%0d", n_upd, n_idle, n_restart);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
