// tb_q_sweep: the full canceller at five datapath widths, Q = 15, 17, 20,
// 23 and 26 (FRAC = Q - 5 each), fed with an interference signal computed
// in double precision from the same random network. Each instance checks
// its outputs bit for bit and measures the cancellation left by the
// fixed-point arithmetic alone. The test requires the cancellation to grow
// by at least 2 dB per extra bit (about 4 to 6 dB per bit is typical) and
// to reach 30 dB at Q = 17.
module tb_q_sweep;
  localparam int NQ = 5;
  localparam int QS [NQ] = '{15, 17, 20, 23, 26};

  logic clk = 0, rst = 1;
  int c [NQ], f [NQ], cdb [NQ];
  logic [NQ-1:0] d;

  for (genvar i = 0; i < NQ; i++) begin : g_q
    q_sweep_check #(.Q(QS[i])) u_chk (
      .clk, .rst, .checks(c[i]), .failures(f[i]), .canc_cdb(cdb[i]), .done(d[i])
    );
  end

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", 0, 1);
    $finish;
  end

  initial begin
    int checks, failures;
    repeat (3) @(posedge clk);
    rst = 0;
    wait (&d);
    checks = 0; failures = 0;
    for (int i = 0; i < NQ; i++) begin
      checks += c[i]; failures += f[i];
      $display("Q=%0d: %0d outputs checked, %0d wrong, fixed-point cancellation %0d.%02d dB",
               QS[i], c[i], f[i], cdb[i] / 100, cdb[i] % 100);
      checks++;
      if (c[i] == 0) failures++;
      if (i > 0) begin
        checks++;
        if (cdb[i] - cdb[i-1] < 200 * (QS[i] - QS[i-1])) begin
          failures++;
          $display("cancellation did not improve enough from Q=%0d to Q=%0d", QS[i-1], QS[i]);
        end
      end
    end
    checks++;
    if (cdb[1] < 3000) begin
      failures++;
      $display("cancellation at Q=17 below 30 dB");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
