// nn_si_canceller: neural-network aided digital self-interference canceller
// for a full-duplex radio.
//
// From the transmit window x(n) .. x(n-L+1) it rebuilds the self-interference
// seen in the received sample y(n) and outputs y_c(n) = y(n) - y_hat(n), with
//   y_hat(n) = y_lin(n) + 2^s * y_nn(n).
// y_lin is a complex L-tap FIR (linear_canceller). y_nn comes from a two-layer
// real-valued network whose 2L inputs are Re/Im of the window
// (order Re x(n), Im x(n), Re x(n-1), ...): a ReLU hidden layer of NH neurons
// computed neuron by neuron (nbn_layer) and a linear output layer of two
// neurons (Re, Im) computed input by input (ibi_layer). The output layer
// consumes each group of hidden neurons the cycle after it is produced, so the
// two layers overlap. 2^s is the power-of-two denormalisation (denorm).
//
// Pipeline (follows the source design): input register -> hidden layer ->
// register -> output layer, with valid/stall control between all stages. The
// window goes through two input registers (one for the network, one for the
// linear canceller with y(n)); a window is accepted only when both are free
// (own choice). With the defaults (L = 13, NH = 18, Q = 17, 52 hidden PEs,
// 4 output PEs, 2 complex linear PEs) every stage needs 9 cycles per sample,
// so one cancelled sample leaves every 9 cycles; the first one 13 cycles
// after its window was presented (cycle counted from the accepting edge).
//
// Parameters are loaded through one write port: cfg_sel_i picks the memory
// (hidden/output weights or biases, linear coefficients), cfg_addr_i the word
// and the low bits of cfg_data_i the word's contents (layouts are described
// in each stage). rst: synchronous, active high.
module nn_si_canceller
  import sic_pkg::*;
#(
  parameter int unsigned Q     = sic_pkg::Q_DEF,
  parameter int unsigned FRAC  = sic_pkg::FRAC_DEF,
  parameter int unsigned L     = sic_pkg::L_DEF,
  parameter int unsigned NH    = sic_pkg::NH_DEF,
  parameter int unsigned NPE_H = sic_pkg::NPE_H_DEF,
  parameter int unsigned NPE_O = sic_pkg::NPE_O_DEF,
  parameter int unsigned NPE_L = sic_pkg::NPE_L_DEF,
  parameter int unsigned SHW   = sic_pkg::SHW_DEF,
  localparam int unsigned NI_H = 2 * L,
  localparam int unsigned K_H  = (NPE_H > NI_H) ? NPE_H / NI_H : 1,
  localparam int unsigned K_O  = (NPE_O > 2) ? NPE_O / 2 : 1,
  localparam int unsigned CW   = ((NPE_H > 2*NPE_L) ? NPE_H : 2*NPE_L) * Q,
  // words of each memory, for the width of the write address
  localparam int unsigned CIN_H = (NPE_H > NI_H) ? 1 : (NI_H + NPE_H - 1) / NPE_H,
  localparam int unsigned G_H   = (NH + K_H - 1) / K_H,
  localparam int unsigned C_H   = G_H * CIN_H,
  localparam int unsigned C_O   = ((NH + K_O - 1) / K_O) * ((NPE_O > 2) ? 1 : (3 - NPE_O)),
  localparam int unsigned C_L   = (L + NPE_L - 1) / NPE_L,
  localparam int unsigned AW_H  = (C_H > 1) ? $clog2(C_H) : 1,
  localparam int unsigned AW_B  = (G_H > 1) ? $clog2(G_H) : 1,
  localparam int unsigned AW_O  = (C_O > 1) ? $clog2(C_O) : 1,
  localparam int unsigned AW_L  = (C_L > 1) ? $clog2(C_L) : 1,
  localparam int unsigned AW    = (AW_H > AW_O) ? ((AW_H > AW_L) ? AW_H : AW_L)
                                                : ((AW_O > AW_L) ? AW_O : AW_L)
) (
  input  logic                 clk,
  input  logic                 rst,
  // transmit window and received sample
  input  logic [L-1:0][Q-1:0]  x_re_i,
  input  logic [L-1:0][Q-1:0]  x_im_i,
  input  logic [Q-1:0]         y_re_i,
  input  logic [Q-1:0]         y_im_i,
  input  logic                 valid_prev_i,
  output logic                 stall_o,
  // residual after cancellation and the cancellation signal
  output logic [Q-1:0]         yc_re_o,
  output logic [Q-1:0]         yc_im_o,
  output logic [Q-1:0]         yhat_re_o,
  output logic [Q-1:0]         yhat_im_o,
  output logic                 valid_o,
  input  logic                 stall_next_i,
  // denormalisation shift (signed power of two)
  input  logic signed [SHW-1:0] denorm_shift_i,
  // parameter memory write port
  input  logic                 cfg_we_i,
  input  cfg_sel_e             cfg_sel_i,
  input  logic [AW-1:0]        cfg_addr_i,
  input  logic [CW-1:0]        cfg_data_i
);

  initial assert (K_H == K_O)
    else $error("nn_si_canceller: hidden beat width K_H must equal output-layer input lanes K_O");

  localparam int unsigned WH = NI_H * Q;
  localparam int unsigned WL = 2 * L * Q + 2 * Q;

  // ---------------- input registers (fork) ----------------
  logic          nn_rstall, lin_rstall;
  logic          nn_rvalid, lin_rvalid;
  logic [WH-1:0] nn_rdata;
  logic [WL-1:0] lin_rdata;
  logic [NI_H-1:0][Q-1:0] hid_din;
  logic          hid_stall, lin_stall;

  always_comb begin
    for (int unsigned l = 0; l < L; l++) begin
      hid_din[2*l]   = x_re_i[l];
      hid_din[2*l+1] = x_im_i[l];
    end
  end

  assign stall_o = nn_rstall || lin_rstall;

  pipe_reg #(.W(WH)) u_reg_nn (
    .clk, .rst,
    .valid_i(valid_prev_i && !lin_rstall), .data_i(hid_din), .stall_o(nn_rstall),
    .valid_o(nn_rvalid), .data_o(nn_rdata), .stall_i(hid_stall)
  );

  pipe_reg #(.W(WL)) u_reg_lin (
    .clk, .rst,
    .valid_i(valid_prev_i && !nn_rstall), .data_i({y_im_i, y_re_i, x_im_i, x_re_i}),
    .stall_o(lin_rstall),
    .valid_o(lin_rvalid), .data_o(lin_rdata), .stall_i(lin_stall)
  );

  // ---------------- hidden layer (NBN) ----------------
  logic [K_H-1:0][Q-1:0] hid_dout;
  logic                  hid_valid, hid_nstall;

  nbn_layer #(.Q(Q), .FRAC(FRAC), .NI(NI_H), .NN(NH), .NPE(NPE_H), .ACT(ACT_RELU)) u_hidden (
    .clk, .rst,
    .din(nn_rdata), .valid_prev_i(nn_rvalid), .stall_o(hid_stall),
    .dout(hid_dout), .valid_o(hid_valid), .stall_next_i(hid_nstall),
    .w_we_i(cfg_we_i && cfg_sel_i == CFG_HID_W), .w_addr_i(cfg_addr_i[AW_H-1:0]),
    .w_data_i(cfg_data_i[NPE_H*Q-1:0]),
    .b_we_i(cfg_we_i && cfg_sel_i == CFG_HID_B), .b_addr_i(cfg_addr_i[AW_B-1:0]),
    .b_data_i(cfg_data_i[K_H*Q-1:0])
  );

  // ---------------- register between the layers ----------------
  logic [K_O-1:0][Q-1:0] mid_data;
  logic                  mid_valid, out_stall;

  pipe_reg #(.W(K_O*Q)) u_reg_mid (
    .clk, .rst,
    .valid_i(hid_valid), .data_i(hid_dout), .stall_o(hid_nstall),
    .valid_o(mid_valid), .data_o(mid_data), .stall_i(out_stall)
  );

  // ---------------- output layer (IBI) ----------------
  logic [1:0][Q-1:0] nn_out, nn_den;
  logic              nn_valid, nn_stall;

  ibi_layer #(.Q(Q), .FRAC(FRAC), .NI(NH), .NN(2), .NPE(NPE_O), .ACT(ACT_NONE)) u_output (
    .clk, .rst,
    .din(mid_data), .valid_prev_i(mid_valid), .stall_o(out_stall),
    .dout(nn_out), .valid_o(nn_valid), .stall_next_i(nn_stall),
    .w_we_i(cfg_we_i && cfg_sel_i == CFG_OUT_W), .w_addr_i(cfg_addr_i[AW_O-1:0]),
    .w_data_i(cfg_data_i[NPE_O*Q-1:0]),
    .b_we_i(cfg_we_i && cfg_sel_i == CFG_OUT_B), .b_data_i(cfg_data_i[2*Q-1:0])
  );

  denorm #(.Q(Q), .N(2), .SHW(SHW)) u_denorm (
    .din(nn_out), .shift_i(denorm_shift_i), .dout(nn_den)
  );

  // ---------------- linear canceller ----------------
  logic [Q-1:0] ylin_re, ylin_im, yd_re, yd_im;
  logic         lin_valid, lin_nstall;

  linear_canceller #(.Q(Q), .FRAC(FRAC), .L(L), .NPE(NPE_L)) u_linear (
    .clk, .rst,
    .x_re_i(lin_rdata[L*Q-1:0]), .x_im_i(lin_rdata[2*L*Q-1:L*Q]),
    .y_re_i(lin_rdata[2*L*Q+Q-1:2*L*Q]), .y_im_i(lin_rdata[2*L*Q+2*Q-1:2*L*Q+Q]),
    .valid_prev_i(lin_rvalid), .stall_o(lin_stall),
    .ylin_re_o(ylin_re), .ylin_im_o(ylin_im), .y_re_o(yd_re), .y_im_o(yd_im),
    .valid_o(lin_valid), .stall_next_i(lin_nstall),
    .h_we_i(cfg_we_i && cfg_sel_i == CFG_LIN_H), .h_addr_i(cfg_addr_i[AW_L-1:0]),
    .h_data_i(cfg_data_i[NPE_L*2*Q-1:0])
  );

  // ---------------- combination and subtraction ----------------
  si_combiner #(.Q(Q)) u_comb (
    .clk, .rst,
    .ynn_re_i(nn_den[0]), .ynn_im_i(nn_den[1]), .nn_valid_i(nn_valid), .nn_stall_o(nn_stall),
    .ylin_re_i(ylin_re), .ylin_im_i(ylin_im), .y_re_i(yd_re), .y_im_i(yd_im),
    .lin_valid_i(lin_valid), .lin_stall_o(lin_nstall),
    .yhat_re_o, .yhat_im_o, .yc_re_o, .yc_im_o, .valid_o, .stall_next_i
  );

endmodule
