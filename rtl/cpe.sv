// cpe: complex multiply-accumulate processing element of the linear canceller.
//
// Each cycle it can add the complex product x * h to a complex partial sum.
// The complex product uses three real multipliers and five real additions
// (the operation count assumed by the source design):
//   k1 = c (a + b), k2 = a (d - c), k3 = b (c + d)
//   Re = k1 - k3,   Im = k1 + k2      for x = a + jb, h = c + jd.
// The pre-additions keep one extra bit; each real product is shifted right by
// FRAC and the two product combinations are saturated to Q bits before the
// saturating accumulation, as in the real PE (own choice of rounding).
//
// Control is the same as the real PE: init_sum_i starts a new sum, en_i = 0
// holds the accumulator. The accumulator is a single complex register.
// dout_* is combinational (the value written at the next edge).
// rst: synchronous, active high, clears the accumulator.
module cpe #(
  parameter int unsigned Q    = sic_pkg::Q_DEF,
  parameter int unsigned FRAC = sic_pkg::FRAC_DEF
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [Q-1:0] x_re,
  input  logic signed [Q-1:0] x_im,
  input  logic signed [Q-1:0] h_re,
  input  logic signed [Q-1:0] h_im,
  input  logic                init_sum_i,
  input  logic                en_i,
  output logic signed [Q-1:0] dout_re,
  output logic signed [Q-1:0] dout_im
);

  localparam int unsigned PW = 2*Q + 3;
  localparam logic signed [Q-1:0] MAXV = {1'b0, {(Q-1){1'b1}}};
  localparam logic signed [Q-1:0] MINV = {1'b1, {(Q-1){1'b0}}};

  function automatic logic signed [Q-1:0] sat(input logic signed [PW-1:0] v);
    if (v > PW'(MAXV))      return MAXV;
    else if (v < PW'(MINV)) return MINV;
    else                    return v[Q-1:0];
  endfunction

  logic signed [Q:0]    apb, dmc, cpd;
  logic signed [PW-1:0] k1, k2, k3;
  logic signed [Q-1:0]  p_re, p_im;
  logic signed [Q-1:0]  acc_re, acc_im;
  logic signed [Q-1:0]  a_re, a_im;

  always_comb begin
    apb = (Q+1)'(x_re) + (Q+1)'(x_im);
    dmc = (Q+1)'(h_im) - (Q+1)'(h_re);
    cpd = (Q+1)'(h_re) + (Q+1)'(h_im);
    k1  = PW'(h_re) * PW'(apb);
    k2  = PW'(x_re) * PW'(dmc);
    k3  = PW'(x_im) * PW'(cpd);
    p_re = sat((k1 - k3) >>> FRAC);
    p_im = sat((k1 + k2) >>> FRAC);
    a_re = init_sum_i ? '0 : acc_re;
    a_im = init_sum_i ? '0 : acc_im;
    dout_re = en_i ? sat(PW'(p_re) + PW'(a_re)) : acc_re;
    dout_im = en_i ? sat(PW'(p_im) + PW'(a_im)) : acc_im;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc_re <= '0;
      acc_im <= '0;
    end else begin
      acc_re <= dout_re;
      acc_im <= dout_im;
    end
  end

endmodule
