// tb_pe: self-checking testbench of the processing element. It drives random
// operands, init/enable and addresses into a 3-word PE and compares dout with
// a model of the MAC and its memory every cycle, including saturation of the
// product and of the sum.
module tb_pe;
  import sic_ref_pkg::*;

  localparam int Q = 17, FRAC = 12, DEPTH = 3;

  logic clk = 0, rst = 1;
  logic signed [Q-1:0] din, w, dout;
  logic init, en;
  logic [1:0] addr;
  int checks = 0, failures = 0, cyc = 0;
  longint model [DEPTH];
  longint exp_v, p;
  int nsat = 0;

  pe #(.Q(Q), .FRAC(FRAC), .DEPTH(DEPTH)) dut (
    .clk, .rst, .din, .weight_i(w), .init_sum_i(init), .en_i(en), .addr_i(addr), .dout
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = 0; w = 0; init = 0; en = 0; addr = 0;
    for (int i = 0; i < DEPTH; i++) model[i] = 0;
    @(posedge clk); @(posedge clk);
    #1 rst = 0;
    for (cyc = 0; cyc < 5000; cyc++) begin
      // mostly small operands, sometimes full range to reach saturation
      if ($urandom_range(0, 3) == 0) begin
        din = Q'(rnd(Q)); w = Q'(rnd(Q));
      end else begin
        din = Q'(rnd(14)); w = Q'(rnd(14));
      end
      init = ($urandom_range(0, 4) == 0);
      en   = ($urandom_range(0, 5) != 0);
      addr = 2'($urandom_range(0, DEPTH - 1));
      #1;
      p = mulq(sx(din, Q), sx(w, Q), Q, FRAC);
      if (en) exp_v = addq(p, init ? 0 : model[addr], Q);
      else    exp_v = model[addr];
      if ((((sx(din, Q) * sx(w, Q)) >>> FRAC) != p) ||
          (en && p + (init ? 0 : model[addr]) != exp_v)) nsat++;
      checks++;
      if (sx(dout, Q) != exp_v) begin
        failures++;
        if (failures < 10) $display("pe mismatch cyc %0d: got %0d exp %0d", cyc, sx(dout, Q), exp_v);
      end
      @(posedge clk);
      model[addr] = exp_v;
      #1;
    end
    // reset clears the memory
    rst = 1; @(posedge clk); #1 rst = 0;
    for (int a = 0; a < DEPTH; a++) begin
      addr = 2'(a); en = 0; #1;
      checks++;
      if (dout != 0) failures++;
    end
    checks++;
    if (nsat == 0) begin
      failures++;
      $display("saturation never exercised");
    end
    $display("saturating operations seen: %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
