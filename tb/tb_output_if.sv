// tb_output_if: self-checking testbench of the output interface. Two
// instances, one with ReLU (K = 2 neurons of 26 partial sums, as in the
// hidden layer) and one without activation (K = 2 neurons of 3 partial sums,
// a tree that is not a power of two), are fed random partial sums and biases;
// outputs are compared with an integer sum, saturated, and clipped at zero
// for ReLU.
module tb_output_if;
  import sic_pkg::*;
  import sic_ref_pkg::*;

  localparam int Q = 17;

  logic [2*26-1:0][Q-1:0] ps_a;
  logic [2*3-1:0][Q-1:0]  ps_b;
  logic [1:0][Q-1:0]      b_a, b_b, o_a, o_b;
  int checks = 0, failures = 0, nneg = 0, nsat = 0;
  longint s, e;

  output_if #(.Q(Q), .K(2), .NSUM(26), .ACT(ACT_RELU)) dut_a (.psum_i(ps_a), .bias_i(b_a), .dout(o_a));
  output_if #(.Q(Q), .K(2), .NSUM(3),  .ACT(ACT_NONE)) dut_b (.psum_i(ps_b), .bias_i(b_b), .dout(o_b));

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 52; i++) ps_a[i] = Q'(rnd((n % 3 == 0) ? Q : 13));
      for (int i = 0; i < 6; i++)  ps_b[i] = Q'(rnd((n % 3 == 0) ? Q : 13));
      for (int k = 0; k < 2; k++) begin
        b_a[k] = Q'(rnd(14));
        b_b[k] = Q'(rnd(Q));
      end
      #1;
      for (int k = 0; k < 2; k++) begin
        s = sx(b_a[k], Q);
        for (int i = 0; i < 26; i++) s += sx(ps_a[k*26+i], Q);
        e = (s < 0) ? 0 : satq(s, Q);
        if (s < 0) nneg++;
        if (s != satq(s, Q)) nsat++;
        checks++;
        if (sx(o_a[k], Q) != e) begin
          failures++;
          if (failures < 10) $display("relu neuron %0d: got %0d exp %0d", k, sx(o_a[k], Q), e);
        end
        s = sx(b_b[k], Q);
        for (int i = 0; i < 3; i++) s += sx(ps_b[k*3+i], Q);
        e = satq(s, Q);
        checks++;
        if (sx(o_b[k], Q) != e) begin
          failures++;
          if (failures < 10) $display("linear neuron %0d: got %0d exp %0d", k, sx(o_b[k], Q), e);
        end
      end
    end
    checks++;
    if (nneg == 0 || nsat == 0) failures++;
    $display("negative pre-activations %0d, saturations %0d", nneg, nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
