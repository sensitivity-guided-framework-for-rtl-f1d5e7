// tb_readout_layer -- check of the linear readout y = W_out s.
//
// A 50-state, 4-bit readout with three outputs and a 50-state, 8-bit readout
// with one output are driven with random states and with all-minimum /
// all-maximum states; every output is compared with an integer dot product.
module tb_readout_layer;
  import rc_ref_pkg::*;
  localparam int N = 50;
  localparam int YW4 = rc_pkg::y_w(4, N);
  localparam int YW8 = rc_pkg::y_w(8, N);

  int checks = 0, failures = 0;

  logic signed [3:0]     s4 [N];
  logic signed [YW4-1:0] y4 [3];
  logic signed [7:0]     s8 [N];
  logic signed [YW8-1:0] y8 [1];

  readout_layer #(.NY(3))       dut4 (.s(s4), .y(y4));
  readout_layer #(.Q(8), .NY(1)) dut8 (.s(s8), .y(y8));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input int mode);
    int a4 [], a8 [];
    a4 = new[N];
    a8 = new[N];
    for (int i = 0; i < N; i++) begin
      a4[i] = (mode == 0) ? rand_q(4) : (mode == 1 ? -8 : 7);
      a8[i] = (mode == 0) ? rand_q(8) : (mode == 1 ? -128 : 127);
      s4[i] = 4'(a4[i]);
      s8[i] = 8'(a8[i]);
    end
    #1;
    for (int o = 0; o < 3; o++) begin
      checks++;
      if (longint'(y4[o]) != ref_readout(o, a4, 4)) begin
        failures++;
        $display("FAIL q=4 y[%0d]=%0d expected %0d", o, y4[o], ref_readout(o, a4, 4));
      end
    end
    checks++;
    if (longint'(y8[0]) != ref_readout(0, a8, 8)) begin
      failures++;
      $display("FAIL q=8 y=%0d expected %0d", y8[0], ref_readout(0, a8, 8));
    end
  endtask

  initial begin
    apply(1);
    apply(2);
    repeat (500) apply(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
