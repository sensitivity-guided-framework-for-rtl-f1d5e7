// tb_const_mult -- exhaustive check of the shift/add constant multiplier.
//
// Instantiates const_mult for every 4-bit weight (-7..7) and for a set of
// 8-bit weights including the extremes, drives every operand value of the
// respective width and compares the product with an integer multiplication.
module tb_const_mult;
  localparam int NW4 = 15;
  localparam int NW8 = 8;
  localparam int W8 [NW8] = '{-127, -86, -1, 0, 1, 85, 100, 127};

  int checks = 0, failures = 0;

  logic signed [3:0]  x4;
  logic signed [7:0]  x8;
  logic signed [8:0]  p4 [NW4];
  logic signed [16:0] p8 [NW8];

  for (genvar w = 0; w < NW4; w++) begin : g4
    const_mult #(.IN_W(4), .WEIGHT(w - 7), .OUT_W(9)) dut (.x(x4), .p(p4[w]));
  end
  for (genvar w = 0; w < NW8; w++) begin : g8
    const_mult #(.IN_W(8), .WEIGHT(W8[w]), .OUT_W(17)) dut (.x(x8), .p(p8[w]));
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -8; v < 8; v++) begin
      x4 = 4'(v);
      #1;
      for (int w = 0; w < NW4; w++) begin
        checks++;
        if (int'(p4[w]) != v * (w - 7)) begin
          failures++;
          $display("FAIL 4-bit x=%0d w=%0d p=%0d", v, w - 7, p4[w]);
        end
      end
    end
    for (int v = -128; v < 128; v++) begin
      x8 = 8'(v);
      #1;
      for (int w = 0; w < NW8; w++) begin
        checks++;
        if (int'(p8[w]) != v * W8[w]) begin
          failures++;
          $display("FAIL 8-bit x=%0d w=%0d p=%0d", v, W8[w], p8[w]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
