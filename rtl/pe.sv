// pe: real-valued processing element shared by the neuron-by-neuron (NBN) and
// input-by-input (IBI) macro-pipeline stages.
//
// Structure (follows the PE drawing of the source design): a multiplier forms
// din * weight_i, an adder adds it to either 0 (init_sum_i = 1) or the partial
// sum read from the internal memory (init_sum_i = 0), and a second multiplexer
// passes the new sum (en_i = 1) or keeps the old partial sum (en_i = 0). The
// multiplexer output is dout and is also written back into the memory at the
// address addr_i on every rising clock edge.
//
// Memory: DEPTH words of Q bits. DEPTH = 1 is the single accumulator register
// of an NBN stage; an IBI stage uses ceil(N_n / N_PE) words. addr_i selects the
// word that is read and written in the same cycle.
//
// Arithmetic (own choices where the source is silent): two's complement with
// FRAC fractional bits; the full 2Q-bit product is shifted right by FRAC
// (truncation) and saturated to Q bits, then added to the partial sum and
// saturated again. Saturation on overflow follows the source design.
//
// Timing: dout is combinational from din/weight_i/addr_i and the memory; the
// memory updates at the clock edge. rst (synchronous, active high) clears it.
module pe #(
  parameter int unsigned Q     = sic_pkg::Q_DEF,
  parameter int unsigned FRAC  = sic_pkg::FRAC_DEF,
  parameter int unsigned DEPTH = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [Q-1:0] din,
  input  logic signed [Q-1:0] weight_i,
  input  logic                init_sum_i,
  input  logic                en_i,
  input  logic [AW-1:0]       addr_i,
  output logic signed [Q-1:0] dout
);

  localparam logic signed [Q-1:0] MAXV = {1'b0, {(Q-1){1'b1}}};
  localparam logic signed [Q-1:0] MINV = {1'b1, {(Q-1){1'b0}}};

  logic signed [Q-1:0]   mem [DEPTH];
  logic signed [2*Q-1:0] prod_full;
  logic signed [2*Q-1:0] prod_shift;
  logic signed [Q-1:0]   prod;
  logic signed [Q-1:0]   psum;
  logic signed [Q-1:0]   addend;
  logic signed [Q:0]     sum_full;
  logic signed [Q-1:0]   sum;

  always_comb begin
    prod_full  = din * weight_i;
    prod_shift = prod_full >>> FRAC;
    if (prod_shift > (2*Q)'(MAXV))
      prod = MAXV;
    else if (prod_shift < (2*Q)'(MINV))
      prod = MINV;
    else
      prod = prod_shift[Q-1:0];

    psum   = mem[addr_i];
    addend = init_sum_i ? '0 : psum;

    sum_full = (Q+1)'(prod) + (Q+1)'(addend);
    if (sum_full[Q] != sum_full[Q-1])
      sum = sum_full[Q] ? MINV : MAXV;
    else
      sum = sum_full[Q-1:0];

    dout = en_i ? sum : psum;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int unsigned i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      mem[addr_i] <= dout;
    end
  end

endmodule
