// tb_sum_unit -- random and corner-case check of the neuron adder.
//
// Drives six signed 12-bit terms with random values and with all-maximum /
// all-minimum patterns and compares the 16-bit sum with an integer sum.
module tb_sum_unit;
  localparam int M = 6;
  int checks = 0, failures = 0;

  logic signed [11:0] terms [M];
  logic signed [15:0] sum;

  sum_unit #(.M(M), .IN_W(12), .OUT_W(16)) dut (.terms(terms), .sum(sum));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int ref_sum;
    #1;
    ref_sum = 0;
    for (int m = 0; m < M; m++) ref_sum += int'(terms[m]);
    checks++;
    if (int'(sum) != ref_sum) begin
      failures++;
      $display("FAIL sum=%0d expected %0d", sum, ref_sum);
    end
  endtask

  initial begin
    for (int m = 0; m < M; m++) terms[m] = 12'sd2047;
    check();
    for (int m = 0; m < M; m++) terms[m] = -12'sd2048;
    check();
    repeat (2000) begin
      for (int m = 0; m < M; m++) terms[m] = 12'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
