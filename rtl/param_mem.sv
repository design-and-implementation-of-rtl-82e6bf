// param_mem: weights, biases or coefficient memory of a macro-pipeline stage.
//
// One word holds all values a stage needs in one cycle (for example the
// N_PE weights of the hidden layer, N_PE * Q bits wide), so the whole PE array
// is fed in parallel. The memory is written from outside the canceller
// (external memory access) to load a newly trained network, and is read by
// the stage's control unit.
//
// Interface: write port (we_i, waddr_i, wdata_i) on the rising clock edge;
// read port (raddr_i -> rdata_o) asynchronous, as a LUT/register-file memory.
// The read is combinational so that a word reaches the PEs in the cycle its
// address is issued (own choice; the source only states the word widths).
// Contents are not reset: they must be written before the canceller is used.
module param_mem #(
  parameter int unsigned W     = 2 * sic_pkg::Q_DEF,
  parameter int unsigned DEPTH = 9,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  logic [W-1:0]  wdata_i,
  input  logic [AW-1:0] raddr_i,
  output logic [W-1:0]  rdata_o
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i && (32'(waddr_i) < DEPTH)) mem[waddr_i] <= wdata_i;
  end

  assign rdata_o = (32'(raddr_i) < DEPTH) ? mem[raddr_i] : '0;

endmodule
