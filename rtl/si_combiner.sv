// si_combiner: forms the cancellation signal and removes it from the
// received signal,
//   y_hat(n) = y_lin(n) + y_nn(n),   y_c(n) = y(n) - y_hat(n)
// for the real and the imaginary part, with saturation to Q bits.
//
// It joins two valid/stall streams: the (denormalised) network output and
// the linear canceller output carrying y(n). Both are taken in the same
// cycle, when both are valid and the output register is free or being read;
// each input is stalled until the other one is there. The result and y_hat
// are registered (one cycle latency). rst: synchronous, active high.
module si_combiner #(
  parameter int unsigned Q = sic_pkg::Q_DEF
) (
  input  logic         clk,
  input  logic         rst,
  // network branch
  input  logic [Q-1:0] ynn_re_i,
  input  logic [Q-1:0] ynn_im_i,
  input  logic         nn_valid_i,
  output logic         nn_stall_o,
  // linear branch with the received sample
  input  logic [Q-1:0] ylin_re_i,
  input  logic [Q-1:0] ylin_im_i,
  input  logic [Q-1:0] y_re_i,
  input  logic [Q-1:0] y_im_i,
  input  logic         lin_valid_i,
  output logic         lin_stall_o,
  // output
  output logic [Q-1:0] yhat_re_o,
  output logic [Q-1:0] yhat_im_o,
  output logic [Q-1:0] yc_re_o,
  output logic [Q-1:0] yc_im_o,
  output logic         valid_o,
  input  logic         stall_next_i
);

  localparam logic signed [Q-1:0] MAXV = {1'b0, {(Q-1){1'b1}}};
  localparam logic signed [Q-1:0] MINV = {1'b1, {(Q-1){1'b0}}};

  function automatic logic [Q-1:0] sat(input logic signed [Q+1:0] v);
    if (v > (Q+2)'(MAXV))      return MAXV;
    else if (v < (Q+2)'(MINV)) return MINV;
    else                       return v[Q-1:0];
  endfunction

  logic                  frozen, fire;
  logic [Q-1:0]          hre, him;

  assign frozen      = valid_o && stall_next_i;
  assign fire        = nn_valid_i && lin_valid_i && !frozen;
  assign nn_stall_o  = !(lin_valid_i && !frozen);
  assign lin_stall_o = !(nn_valid_i && !frozen);

  always_comb begin
    hre = sat((Q+2)'($signed(ylin_re_i)) + (Q+2)'($signed(ynn_re_i)));
    him = sat((Q+2)'($signed(ylin_im_i)) + (Q+2)'($signed(ynn_im_i)));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_o   <= 1'b0;
      yhat_re_o <= '0;
      yhat_im_o <= '0;
      yc_re_o   <= '0;
      yc_im_o   <= '0;
    end else if (!frozen) begin
      valid_o <= fire;
      if (fire) begin
        yhat_re_o <= hre;
        yhat_im_o <= him;
        yc_re_o   <= sat((Q+2)'($signed(y_re_i)) - (Q+2)'($signed(hre)));
        yc_im_o   <= sat((Q+2)'($signed(y_im_i)) - (Q+2)'($signed(him)));
      end
    end
  end

endmodule
