// tb_multi_threshold -- check of the threshold-bank HardTanh.
//
// 4-bit levels with step 8 are checked over every pre-activation from -400 to
// 400 (both saturation regions and every threshold edge); 8-bit levels with
// step 128 over a sweep of 20000 values.  The reference is round-half-up of
// acc/step clamped to the signed range (rc_ref_pkg::ref_act).
module tb_multi_threshold;
  import rc_ref_pkg::*;
  int checks = 0, failures = 0;
  int sat_lo = 0, sat_hi = 0;

  logic signed [15:0] acc4;
  logic signed [3:0]  y4;
  logic signed [23:0] acc8;
  logic signed [7:0]  y8;

  multi_threshold #(.Q(4), .ACC_W(16), .STEP(8))   dut4 (.acc(acc4), .y(y4));
  multi_threshold #(.Q(8), .ACC_W(24), .STEP(128)) dut8 (.acc(acc8), .y(y8));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = -400; a <= 400; a++) begin
      acc4 = 16'(a);
      #1;
      checks++;
      if (int'(y4) != ref_act(a, 4, 8)) begin
        failures++;
        $display("FAIL q=4 acc=%0d y=%0d expected %0d", a, y4, ref_act(a, 4, 8));
      end
      if (y4 == -4'sd8) sat_lo++;
      if (y4 == 4'sd7)  sat_hi++;
    end
    for (int a = -20000; a <= 20000; a += 2) begin
      acc8 = 24'(a + (a % 3));
      #1;
      checks++;
      if (int'(y8) != ref_act(a + (a % 3), 8, 128)) begin
        failures++;
        $display("FAIL q=8 acc=%0d y=%0d", a + (a % 3), y8);
      end
    end
    checks++;
    if (sat_lo == 0 || sat_hi == 0) begin
      failures++;
      $display("FAIL saturation not reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
