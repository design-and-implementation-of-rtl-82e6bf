// tb_cpe: self-checking testbench of the complex MAC processing element.
// Random complex operands are accumulated over random-length sums with
// random enable gaps; the expected value uses the direct product
// (ac - bd) + j(ad + bc), truncated by FRAC and saturated, so the
// three-multiplier form of the PE is checked against the textbook formula.
module tb_cpe;
  import sic_ref_pkg::*;

  localparam int Q = 17, FRAC = 12;

  logic clk = 0, rst = 1;
  logic signed [Q-1:0] xr, xi, hr, hi, dre, dim;
  logic init, en;
  int checks = 0, failures = 0;
  longint mre = 0, mim = 0, ere, eim, a, b, c, d;

  cpe #(.Q(Q), .FRAC(FRAC)) dut (
    .clk, .rst, .x_re(xr), .x_im(xi), .h_re(hr), .h_im(hi),
    .init_sum_i(init), .en_i(en), .dout_re(dre), .dout_im(dim)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xr = 0; xi = 0; hr = 0; hi = 0; init = 0; en = 0;
    @(posedge clk); @(posedge clk); #1 rst = 0;
    for (int n = 0; n < 4000; n++) begin
      if ($urandom_range(0, 7) == 0) begin
        xr = Q'(rnd(Q)); xi = Q'(rnd(Q)); hr = Q'(rnd(Q)); hi = Q'(rnd(Q));
      end else begin
        xr = Q'(rnd(14)); xi = Q'(rnd(14)); hr = Q'(rnd(13)); hi = Q'(rnd(13));
      end
      init = ($urandom_range(0, 5) == 0);
      en   = ($urandom_range(0, 6) != 0);
      #1;
      a = sx(xr, Q); b = sx(xi, Q); c = sx(hr, Q); d = sx(hi, Q);
      if (en) begin
        ere = addq(satq((a*c - b*d) >>> FRAC, Q), init ? 0 : mre, Q);
        eim = addq(satq((a*d + b*c) >>> FRAC, Q), init ? 0 : mim, Q);
      end else begin
        ere = mre; eim = mim;
      end
      checks++;
      if (sx(dre, Q) != ere || sx(dim, Q) != eim) begin
        failures++;
        if (failures < 10) $display("cpe mismatch %0d: got %0d,%0d exp %0d,%0d", n, sx(dre,Q), sx(dim,Q), ere, eim);
      end
      @(posedge clk); #1;
      mre = ere; mim = eim;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
