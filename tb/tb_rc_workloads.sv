// tb_rc_workloads -- the accelerator in every evaluated compression setting.
//
// Instantiates rc_accel_top for each combination of quantization width
// Q in {4, 6, 8} and pruning rate P in {0, 15, 30, 45, 60, 75, 90} % with the
// single-input / single-output shape of the pedestrian-count (MELBORN) and
// Henon-map (HENON) benchmarks, 50 neurons and 250 reservoir connections, plus
//   * the pen-digit (PEN) shape: two inputs (pen x/y position), ten readout
//     outputs, sequences of 8 samples, at Q = 4, 6, 8 and P = 15 %;
//   * one Henon-length run: a single 5000-sample sequence at Q = 4, P = 15 %.
// Each instance has its own rc_top_driver scoreboard; the testbench ends when
// all are done.  Model constants are placeholders, so this shows that every
// configuration is built and computed correctly, not the published accuracy.
module tb_rc_workloads;
  localparam int NQ = 3, NP = 7;
  localparam int QS [NQ] = '{4, 6, 8};
  localparam int PS [NP] = '{0, 15, 30, 45, 60, 75, 90};
  localparam int NG = NQ * NP + NQ + 1;   // grid, PEN shapes, long run

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NG-1:0] done;
  int chk [NG];
  int fl  [NG];

  // one accelerator plus scoreboard
  for (genvar g = 0; g < NG; g++) begin : g_cfg
    localparam bit IS_GRID = (g < NQ * NP);
    localparam bit IS_PEN  = (g >= NQ * NP) && (g < NQ * NP + NQ);
    localparam int Q    = IS_GRID ? QS[g / NP] : (IS_PEN ? QS[g - NQ * NP] : 4);
    localparam int P    = IS_GRID ? PS[g % NP] : 15;
    localparam int NU   = IS_PEN ? 2 : 1;
    localparam int NY   = IS_PEN ? 10 : 1;
    localparam int SLEN = IS_GRID ? 24 : (IS_PEN ? 8 : 5000);
    localparam int NSEQ = IS_GRID ? 4 : (IS_PEN ? 10 : 1);
    localparam int YW   = rc_pkg::y_w(Q, 50);

    logic rst_n, in_valid, seq_start, out_valid;
    logic signed [Q-1:0]  u     [NU];
    logic signed [YW-1:0] y     [NY];
    logic signed [Q-1:0]  state [50];

    rc_accel_top #(.NU(NU), .NY(NY), .Q(Q), .PRUNE_PCT(P)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .seq_start(seq_start), .u(u),
      .out_valid(out_valid), .y(y), .state(state)
    );

    rc_top_driver #(.NU(NU), .NY(NY), .Q(Q), .P(P), .SLEN(SLEN), .NSEQ(NSEQ),
                    .IDLE_PCT(15)) drv (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .seq_start(seq_start), .u(u),
      .out_valid(out_valid), .y(y), .state(state),
      .done(done[g]), .checks(chk[g]), .failures(fl[g])
    );
  end

  function automatic void report(input int extra_fail);
    int c, f;
    c = 0;
    f = extra_fail;
    for (int g = 0; g < NG; g++) begin
      c += chk[g];
      f += fl[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    report(1);
    $finish;
  end

  initial begin
    wait (&done);
    report(0);
    $finish;
  end
endmodule
