// tb_denorm: self-checking testbench of the power-of-two denormalisation.
// For every shift from -8 to +7 and random values it compares the output
// with v * 2^s (left, saturated) or floor(v / 2^-s) (right).
module tb_denorm;
  import sic_ref_pkg::*;

  localparam int Q = 17, SHW = 4;

  logic [1:0][Q-1:0] din, dout;
  logic signed [SHW-1:0] sh;
  int checks = 0, failures = 0;
  longint e;

  denorm #(.Q(Q), .N(2), .SHW(SHW)) dut (.din, .shift_i(sh), .dout);

  initial begin
    for (int s = -8; s <= 7; s++) begin
      for (int n = 0; n < 200; n++) begin
        sh = SHW'(s);
        din[0] = Q'(rnd(Q));
        din[1] = Q'(rnd(n % 2 ? 8 : Q));
        #1;
        for (int i = 0; i < 2; i++) begin
          if (s >= 0) e = satq(sx(din[i], Q) * (longint'(1) <<< s), Q);
          else        e = sx(din[i], Q) >>> (-s);
          checks++;
          if (sx(dout[i], Q) != e) begin
            failures++;
            if (failures < 10) $display("shift %0d value %0d: got %0d exp %0d", s, sx(din[i], Q), sx(dout[i], Q), e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
