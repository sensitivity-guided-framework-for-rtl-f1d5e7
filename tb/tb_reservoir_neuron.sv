// tb_reservoir_neuron -- check of single reservoir neurons against the
// reference model.
//
// All 50 neurons of the main configuration (4-bit, 15 % pruning) and 50
// neurons of an 8-bit, 90 % pruned configuration are instantiated side by
// side and driven with random inputs and random previous states; each output
// is compared with rc_ref_pkg's integer model.  The pruned-connection count
// of the reference mask and rc_pkg's per-connection rule are also compared.
module tb_reservoir_neuron;
  import rc_ref_pkg::*;
  localparam int N = 50, NCRL = 250;

  int checks = 0, failures = 0;

  logic signed [3:0] u4 [1];
  logic signed [3:0] s4 [N];
  logic signed [3:0] y4 [N];
  logic signed [7:0] u8 [1];
  logic signed [7:0] s8 [N];
  logic signed [7:0] y8 [N];

  for (genvar i = 0; i < N; i++) begin : g_dut
    reservoir_neuron #(.IDX(i)) dut4 (.u(u4), .s_prev(s4), .s_next(y4[i]));
    reservoir_neuron #(.IDX(i), .Q(8), .PRUNE_PCT(90)) dut8 (.u(u8), .s_prev(s8), .s_next(y8[i]));
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int q, input int p, input int iters);
    bit mask [];
    int uv [], sv [], sn [];
    int npr;
    prune_mask(NCRL, p, q, mask);
    npr = 0;
    foreach (mask[c]) begin
      npr += mask[c];
      checks++;
      if (mask[c] != rc_pkg::is_pruned(c, NCRL, p, q)) begin
        failures++;
        $display("FAIL prune rule differs at connection %0d", c);
      end
    end
    checks++;
    if (npr != (NCRL * p) / 100) begin
      failures++;
      $display("FAIL pruned %0d connections, expected %0d", npr, (NCRL * p) / 100);
    end
    uv = new[1];
    sv = new[N];
    repeat (iters) begin
      uv[0] = rand_q(q);
      foreach (sv[i]) sv[i] = rand_q(q);
      if (q == 4) begin
        u4[0] = 4'(uv[0]);
        foreach (sv[i]) s4[i] = 4'(sv[i]);
      end else begin
        u8[0] = 8'(uv[0]);
        foreach (sv[i]) s8[i] = 8'(sv[i]);
      end
      #1;
      ref_step(uv, sv, mask, N, q, NCRL, sn);
      for (int i = 0; i < N; i++) begin
        int got;
        got = (q == 4) ? int'(y4[i]) : int'(y8[i]);
        checks++;
        if (got != sn[i]) begin
          failures++;
          if (failures < 10) $display("FAIL q=%0d neuron %0d: %0d expected %0d", q, i, got, sn[i]);
        end
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      s4[i] = '0;
      s8[i] = '0;
    end
    u4[0] = '0;
    u8[0] = '0;
    run(4, 15, 200);
    run(8, 90, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
