// ibi_layer: input-by-input (IBI) macro-pipeline stage, used for the output
// layer of the canceller's neural network. It computes
//   o_j = f(b_j + sum_i w_ij x_i),  j = 0 .. NN-1,  i = 0 .. NI-1
// but takes its inputs as a stream: each beat on din carries K consecutive
// inputs x_(bK) .. x_(bK+K-1), exactly what an NBN stage ahead of it emits per
// cycle, so the stage starts as soon as the first hidden neurons are known.
//
// Schedule (from the source design): if NPE > NN then NPE = K*NN and K inputs
// are processed per cycle, PE p updating neuron p % NN with input lane p / NN;
// if NPE <= NN then K = 1 and each input is applied to the neurons in
// D = ceil(NN/NPE) consecutive cycles, PE p holding the partial sums of neurons
// d*NPE + p in word d of its memory (D words of Q bits). NI*NN/NPE cycles per
// vector; with the defaults (NI = 18, NN = 2, NPE = 4) K = 2 and 9 beats.
//
// Parts: input interface (the lane multiplexers), NPE PEs with D-word memory,
// weights memory (NPE weights per word, one word per cycle), biases memory
// (all NN biases in one word), control unit (beat and neuron-slice counters),
// the PE -> output interface pipeline register, and the output interface
// (adder tree over the K lanes of each neuron, bias, activation). All NN
// outputs are presented together on dout with valid_o.
//
// Timing: the results appear one cycle after the last beat has been used,
// i.e. C + 1 cycles after the first beat when the beats arrive back to back.
// While a valid result is stalled by the next stage, the stage freezes.
// Handshake: valid/stall; stall_o is low in the cycle a beat is used.
// rst: synchronous, active high.
module ibi_layer
  import sic_pkg::*;
#(
  parameter int unsigned Q    = sic_pkg::Q_DEF,
  parameter int unsigned FRAC = sic_pkg::FRAC_DEF,
  parameter int unsigned NI   = sic_pkg::NH_DEF,
  parameter int unsigned NN   = 2,
  parameter int unsigned NPE  = sic_pkg::NPE_O_DEF,
  parameter act_e        ACT  = ACT_NONE,
  localparam int unsigned K    = (NPE > NN) ? NPE / NN : 1,
  localparam int unsigned D    = (NPE > NN) ? 1 : (NN + NPE - 1) / NPE,
  localparam int unsigned NB   = (NI + K - 1) / K,
  localparam int unsigned C    = NB * D,
  localparam int unsigned WAW  = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned DAW  = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned NR   = NPE * D
) (
  input  logic                  clk,
  input  logic                  rst,
  // input stream: K inputs per beat
  input  logic [K-1:0][Q-1:0]   din,
  input  logic                  valid_prev_i,
  output logic                  stall_o,
  // all NN outputs
  output logic [NN-1:0][Q-1:0]  dout,
  output logic                  valid_o,
  input  logic                  stall_next_i,
  // external access to the weights and biases memories
  input  logic                  w_we_i,
  input  logic [WAW-1:0]        w_addr_i,
  input  logic [NPE-1:0][Q-1:0] w_data_i,
  input  logic                  b_we_i,
  input  logic [NN-1:0][Q-1:0]  b_data_i
);

  initial assert (NPE <= NN || NPE % NN == 0)
    else $error("ibi_layer: NPE must be <= NN or a multiple of NN");

  logic [$clog2(NB+1)-1:0] beat;
  logic [DAW-1:0]          sub;
  logic                    frozen, work, sub_done, vec_done;
  logic [NPE-1:0][Q-1:0]   wword;
  logic [NN-1:0][Q-1:0]    bword;
  logic [NPE-1:0][Q-1:0]   pe_in, pe_out;
  logic [NR-1:0][Q-1:0]    preg;
  logic [K*NN-1:0][Q-1:0]  psum;
  logic                    pvalid;
  logic [WAW-1:0]          waddr;

  // ---------------- control unit ----------------
  assign frozen   = pvalid && stall_next_i;
  assign work     = valid_prev_i && !frozen;
  assign sub_done = (32'(sub) == D - 1);
  assign vec_done = sub_done && (32'(beat) == NB - 1);
  assign stall_o  = !(work && sub_done);
  assign waddr    = WAW'(32'(beat) * D + 32'(sub));

  always_ff @(posedge clk) begin
    if (rst) begin
      beat <= '0;
      sub  <= '0;
    end else if (work) begin
      if (sub_done) begin
        sub  <= '0;
        beat <= vec_done ? '0 : beat + 1'b1;
      end else begin
        sub <= sub + 1'b1;
      end
    end
  end

  // ---------------- memories ----------------
  param_mem #(.W(NPE*Q), .DEPTH(C)) u_wmem (
    .clk, .we_i(w_we_i), .waddr_i(w_addr_i), .wdata_i(w_data_i),
    .raddr_i(waddr), .rdata_o(wword)
  );

  param_mem #(.W(NN*Q), .DEPTH(1)) u_bmem (
    .clk, .we_i(b_we_i), .waddr_i(1'b0), .wdata_i(b_data_i),
    .raddr_i(1'b0), .rdata_o(bword)
  );

  // ---------------- input interface and PEs ----------------
  for (genvar p = 0; p < NPE; p++) begin : g_pe
    assign pe_in[p] = din[(NPE > NN) ? p / NN : 0];

    pe #(.Q(Q), .FRAC(FRAC), .DEPTH(D)) u_pe (
      .clk, .rst,
      .din(pe_in[p]), .weight_i(wword[p]),
      .init_sum_i(beat == '0), .en_i(work), .addr_i(sub),
      .dout(pe_out[p])
    );
  end

  // ---------------- PE -> output interface register ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      pvalid <= 1'b0;
      preg   <= '0;
    end else if (!frozen) begin
      pvalid <= work && vec_done;
      if (work && 32'(beat) == NB - 1) begin
        for (int unsigned p = 0; p < NPE; p++) preg[32'(sub) * NPE + p] <= pe_out[p];
      end
    end
  end

  // ---------------- output interface ----------------
  // Partial sum of neuron n from lane l sits in slot l*NN + n of the register.
  always_comb begin
    for (int unsigned n = 0; n < NN; n++)
      for (int unsigned l = 0; l < K; l++)
        psum[n*K + l] = preg[l*NN + n];
  end

  output_if #(.Q(Q), .K(NN), .NSUM(K), .ACT(ACT)) u_oif (
    .psum_i(psum), .bias_i(bword), .dout(dout)
  );

  assign valid_o = pvalid;

  a_out_hold : assert property (@(posedge clk) disable iff (rst)
                                valid_o && stall_next_i |=> valid_o && $stable(dout));

endmodule
