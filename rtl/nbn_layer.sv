// nbn_layer: neuron-by-neuron (NBN) macro-pipeline stage, used for the hidden
// layer of the canceller's neural network. It computes
//   o_j = f(b_j + sum_i w_ij x_i),  j = 0 .. NN-1,  i = 0 .. NI-1
// for one input vector din (all NI inputs in parallel, held by the pipeline
// register in front of the stage).
//
// Schedule (from the source design): neurons are processed one group after
// another. If NPE > NI then NPE = K*NI and K neurons are computed per cycle,
// each PE forming one product w_ij x_i (PE p serves neuron p / NI of the group
// and input p % NI); NN*NI/NPE cycles per vector. If NPE <= NI then K = 1 and
// one neuron takes CIN = ceil(NI/NPE) cycles, PE p taking input c*NPE + p in
// cycle c. With the defaults (NI = 26, NN = 18, NPE = 52) K = 2 and a vector
// takes 9 cycles.
//
// Parts: input interface (one multiplexer per PE choosing its input), NPE PEs
// with a one-word memory, weights memory (one word of NPE weights per cycle),
// biases memory (K biases per word), control unit (input and neuron-group
// counters, memory addresses, PE init/enable, stall), a pipeline register
// between PEs and output interface, and the output interface (adder tree,
// bias, activation).
//
// Timing: a vector is used in cycles 0 .. C-1 (C = G*CIN); the K results of
// neuron group g appear on dout with valid_o one cycle after that group's
// last cycle, so the first outputs after CIN + 1 cycles and all of them after
// C + 1 cycles, and a new vector can start right after cycle C-1 (one vector
// every C cycles). stall_o stays high until the last cycle of the vector so
// that the pipeline register ahead keeps it. When the next stage stalls a
// valid output, the whole stage freezes.
// Handshake: valid/stall; rst synchronous, active high.
module nbn_layer
  import sic_pkg::*;
#(
  parameter int unsigned Q    = sic_pkg::Q_DEF,
  parameter int unsigned FRAC = sic_pkg::FRAC_DEF,
  parameter int unsigned NI   = 2 * sic_pkg::L_DEF,
  parameter int unsigned NN   = sic_pkg::NH_DEF,
  parameter int unsigned NPE  = sic_pkg::NPE_H_DEF,
  parameter act_e        ACT  = ACT_RELU,
  localparam int unsigned K    = (NPE > NI) ? NPE / NI : 1,
  localparam int unsigned CIN  = (NPE > NI) ? 1 : (NI + NPE - 1) / NPE,
  localparam int unsigned G    = (NN + K - 1) / K,
  localparam int unsigned C    = G * CIN,
  localparam int unsigned NSUM = (NPE > NI) ? NI : NPE,
  localparam int unsigned WAW  = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned BAW  = (G > 1) ? $clog2(G) : 1
) (
  input  logic                  clk,
  input  logic                  rst,
  // input vector from the pipeline register
  input  logic [NI-1:0][Q-1:0]  din,
  input  logic                  valid_prev_i,
  output logic                  stall_o,
  // K neuron outputs per beat
  output logic [K-1:0][Q-1:0]   dout,
  output logic                  valid_o,
  input  logic                  stall_next_i,
  // external access to the weights and biases memories
  input  logic                  w_we_i,
  input  logic [WAW-1:0]        w_addr_i,
  input  logic [NPE-1:0][Q-1:0] w_data_i,
  input  logic                  b_we_i,
  input  logic [BAW-1:0]        b_addr_i,
  input  logic [K-1:0][Q-1:0]   b_data_i
);

  // NPE > NI needs NPE to be a multiple of NI.
  initial assert (NPE <= NI || NPE % NI == 0)
    else $error("nbn_layer: NPE must be <= NI or a multiple of NI");

  logic [$clog2(CIN+1)-1:0] cnt_in;
  logic [BAW-1:0]           grp;
  logic                     frozen, work, grp_done, vec_done;
  logic [NPE-1:0][Q-1:0]    wword;
  logic [K-1:0][Q-1:0]      bword;
  logic [NPE-1:0][Q-1:0]    pe_in, pe_out;
  logic [NPE-1:0][Q-1:0]    preg;
  logic                     pvalid;
  logic [BAW-1:0]           pgrp;
  logic [WAW-1:0]           waddr;

  // ---------------- control unit ----------------
  assign frozen   = pvalid && stall_next_i;
  assign work     = valid_prev_i && !frozen;
  assign grp_done = (32'(cnt_in) == CIN - 1);
  assign vec_done = grp_done && (32'(grp) == G - 1);
  assign stall_o  = !(work && vec_done);
  assign waddr    = WAW'(32'(grp) * CIN + 32'(cnt_in));

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_in <= '0;
      grp    <= '0;
    end else if (work) begin
      if (grp_done) begin
        cnt_in <= '0;
        grp    <= vec_done ? '0 : grp + 1'b1;
      end else begin
        cnt_in <= cnt_in + 1'b1;
      end
    end
  end

  // ---------------- memories ----------------
  param_mem #(.W(NPE*Q), .DEPTH(C)) u_wmem (
    .clk, .we_i(w_we_i), .waddr_i(w_addr_i), .wdata_i(w_data_i),
    .raddr_i(waddr), .rdata_o(wword)
  );

  param_mem #(.W(K*Q), .DEPTH(G)) u_bmem (
    .clk, .we_i(b_we_i), .waddr_i(b_addr_i), .wdata_i(b_data_i),
    .raddr_i(pgrp), .rdata_o(bword)
  );

  // ---------------- input interface and PEs ----------------
  for (genvar p = 0; p < NPE; p++) begin : g_pe
    always_comb begin
      if (NPE > NI) begin
        pe_in[p] = din[p % NI];
      end else if (32'(cnt_in) * NPE + p < NI) begin
        pe_in[p] = din[32'(cnt_in) * NPE + p];
      end else begin
        pe_in[p] = '0;
      end
    end

    pe #(.Q(Q), .FRAC(FRAC), .DEPTH(1)) u_pe (
      .clk, .rst,
      .din(pe_in[p]), .weight_i(wword[p]),
      .init_sum_i(cnt_in == '0), .en_i(work), .addr_i(1'b0),
      .dout(pe_out[p])
    );
  end

  // ---------------- PE -> output interface register ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      pvalid <= 1'b0;
      pgrp   <= '0;
      preg   <= '0;
    end else if (!frozen) begin
      pvalid <= work && grp_done;
      if (work && grp_done) begin
        preg <= pe_out;
        pgrp <= grp;
      end
    end
  end

  // ---------------- output interface ----------------
  output_if #(.Q(Q), .K(K), .NSUM(NSUM), .ACT(ACT)) u_oif (
    .psum_i(preg[K*NSUM-1:0]), .bias_i(bword), .dout(dout)
  );

  assign valid_o = pvalid;

  a_out_hold : assert property (@(posedge clk) disable iff (rst)
                                valid_o && stall_next_i |=> valid_o && $stable(pgrp));

endmodule
