// linear_canceller: complex FIR that reconstructs the linear part of the
// self-interference,  y_lin(n) = sum_{l=0}^{L-1} h(l) x(n-l),
// and runs next to the neural network on the same transmit window.
//
// NPE complex PEs (cpe) share the L taps: in cycle c PE p multiplies tap
// l = c*NPE + p, so a sample takes C = ceil(L/NPE) cycles (7 with the defaults
// L = 13, NPE = 2, within the 9-cycle period of the network as in the source
// design). The PE sums are then added and saturated into the output register.
// The received sample y(n) travels with its window and leaves together with
// y_lin(n), so the combiner downstream gets both aligned.
//
// Coefficient memory: one word holds the NPE complex coefficients of a cycle,
// {Im, Re} per tap, tap c*NPE + p in lane p of word c; written externally.
// Timing: the window (held by the pipeline register ahead) is used in cycles
// 0 .. C-1; the result is valid in cycle C and held while stall_next_i is high
// (the whole block then freezes). stall_o is low only in the cycle the window
// is released. rst: synchronous, active high.
module linear_canceller #(
  parameter int unsigned Q    = sic_pkg::Q_DEF,
  parameter int unsigned FRAC = sic_pkg::FRAC_DEF,
  parameter int unsigned L    = sic_pkg::L_DEF,
  parameter int unsigned NPE  = sic_pkg::NPE_L_DEF,
  localparam int unsigned C   = (L + NPE - 1) / NPE,
  localparam int unsigned HAW = (C > 1) ? $clog2(C) : 1
) (
  input  logic                      clk,
  input  logic                      rst,
  // window x(n) .. x(n-L+1) and received sample y(n)
  input  logic [L-1:0][Q-1:0]       x_re_i,
  input  logic [L-1:0][Q-1:0]       x_im_i,
  input  logic [Q-1:0]              y_re_i,
  input  logic [Q-1:0]              y_im_i,
  input  logic                      valid_prev_i,
  output logic                      stall_o,
  // linear reconstruction and the matching received sample
  output logic [Q-1:0]              ylin_re_o,
  output logic [Q-1:0]              ylin_im_o,
  output logic [Q-1:0]              y_re_o,
  output logic [Q-1:0]              y_im_o,
  output logic                      valid_o,
  input  logic                      stall_next_i,
  // external access to the coefficient memory
  input  logic                      h_we_i,
  input  logic [HAW-1:0]            h_addr_i,
  input  logic [NPE-1:0][2*Q-1:0]   h_data_i
);

  localparam int unsigned SW = Q + $clog2(NPE + 1);
  localparam logic signed [Q-1:0] MAXV = {1'b0, {(Q-1){1'b1}}};
  localparam logic signed [Q-1:0] MINV = {1'b1, {(Q-1){1'b0}}};

  function automatic logic [Q-1:0] sat(input logic signed [SW-1:0] v);
    if (v > SW'(MAXV))      return MAXV;
    else if (v < SW'(MINV)) return MINV;
    else                    return v[Q-1:0];
  endfunction

  logic [HAW-1:0]          cnt;
  logic                    frozen, work, done;
  logic [NPE-1:0][2*Q-1:0] hword;
  logic [NPE-1:0][Q-1:0]   pre, pim;
  logic signed [SW-1:0]    sre, sim;

  assign frozen  = valid_o && stall_next_i;
  assign work    = valid_prev_i && !frozen;
  assign done    = (32'(cnt) == C - 1);
  assign stall_o = !(work && done);

  always_ff @(posedge clk) begin
    if (rst)       cnt <= '0;
    else if (work) cnt <= done ? '0 : cnt + 1'b1;
  end

  param_mem #(.W(NPE*2*Q), .DEPTH(C)) u_hmem (
    .clk, .we_i(h_we_i), .waddr_i(h_addr_i), .wdata_i(h_data_i),
    .raddr_i(cnt), .rdata_o(hword)
  );

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic [Q-1:0] xr, xi;
    always_comb begin
      if (32'(cnt) * NPE + p < L) begin
        xr = x_re_i[32'(cnt) * NPE + p];
        xi = x_im_i[32'(cnt) * NPE + p];
      end else begin
        xr = '0;
        xi = '0;
      end
    end

    cpe #(.Q(Q), .FRAC(FRAC)) u_cpe (
      .clk, .rst,
      .x_re(xr), .x_im(xi),
      .h_re(hword[p][Q-1:0]), .h_im(hword[p][2*Q-1:Q]),
      .init_sum_i(cnt == '0), .en_i(work),
      .dout_re(pre[p]), .dout_im(pim[p])
    );
  end

  always_comb begin
    sre = '0;
    sim = '0;
    for (int unsigned p = 0; p < NPE; p++) begin
      sre += SW'($signed(pre[p]));
      sim += SW'($signed(pim[p]));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_o   <= 1'b0;
      ylin_re_o <= '0;
      ylin_im_o <= '0;
      y_re_o    <= '0;
      y_im_o    <= '0;
    end else if (!frozen) begin
      valid_o <= work && done;
      if (work && done) begin
        ylin_re_o <= sat(sre);
        ylin_im_o <= sat(sim);
        y_re_o    <= y_re_i;
        y_im_o    <= y_im_i;
      end
    end
  end

endmodule
