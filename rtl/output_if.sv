// output_if: output interface of a macro-pipeline stage.
//
// For each of K neurons finished in the same cycle it adds the NSUM partial
// sums coming from the PE pipeline register with a balanced binary adder tree,
// adds the neuron's bias and applies the activation function (ReLU for the
// hidden layer, none for the output layer). The tree and the bias addition are
// carried out at full precision and the result is saturated once to Q bits
// (own choice; the source only states that saturation is used on overflow).
//
// Interface: psum_i[k*NSUM + s] is partial sum s of neuron k, bias_i[k] its
// bias, dout[k] its output. Purely combinational.
module output_if
  import sic_pkg::*;
#(
  parameter int unsigned Q    = sic_pkg::Q_DEF,
  parameter int unsigned K    = 2,
  parameter int unsigned NSUM = 26,
  parameter act_e        ACT  = ACT_RELU
) (
  input  logic [K*NSUM-1:0][Q-1:0] psum_i,
  input  logic [K-1:0][Q-1:0]      bias_i,
  output logic [K-1:0][Q-1:0]      dout
);

  // Leaves of the tree padded to a power of two.
  localparam int unsigned LV = (NSUM > 1) ? $clog2(NSUM) : 0;
  localparam int unsigned NP = 1 << LV;
  localparam int unsigned SW = Q + LV + 1;
  localparam logic signed [Q-1:0] MAXV = {1'b0, {(Q-1){1'b1}}};
  localparam logic signed [Q-1:0] MINV = {1'b1, {(Q-1){1'b0}}};

  logic signed [SW-1:0] node [K][2*NP];
  logic signed [SW-1:0] total [K];

  always_comb begin
    for (int unsigned k = 0; k < K; k++) begin
      for (int unsigned i = 0; i < 2*NP; i++) node[k][i] = '0;
      for (int unsigned s = 0; s < NP; s++)
        node[k][NP+s] = (s < NSUM) ? SW'($signed(psum_i[k*NSUM+s])) : '0;
      for (int unsigned i = NP-1; i >= 1; i--)
        node[k][i] = node[k][2*i] + node[k][2*i+1];
      total[k] = ((NP > 1) ? node[k][1] : node[k][NP]) + SW'($signed(bias_i[k]));
      if (ACT == ACT_RELU && total[k] < 0)
        dout[k] = '0;
      else if (total[k] > SW'(MAXV))
        dout[k] = MAXV;
      else if (total[k] < SW'(MINV))
        dout[k] = MINV;
      else
        dout[k] = total[k][Q-1:0];
    end
  end

endmodule
