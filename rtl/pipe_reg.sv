// pipe_reg: pipeline register between macro-pipeline stages (the registers on
// din in front of the hidden layer and between the hidden and the output
// layer in the canceller's pipeline).
//
// Handshake (own encoding of the source's valid/stall pipeline control): a
// word moves from producer to consumer in a cycle where valid is high and the
// consumer's stall is low. The register loads a new word whenever it is empty
// or its current word leaves in the same cycle, so stall_o = valid_o & stall_i
// and a full-rate stream passes without bubbles. A consumer that needs the
// word for several cycles (the NBN stage) keeps stall_i high until its last
// cycle. rst: synchronous, active high, empties the register.
module pipe_reg #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         valid_i,
  input  logic [W-1:0] data_i,
  output logic         stall_o,
  output logic         valid_o,
  output logic [W-1:0] data_o,
  input  logic         stall_i
);

  assign stall_o = valid_o && stall_i;

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_o <= 1'b0;
      data_o  <= '0;
    end else if (!stall_o) begin
      valid_o <= valid_i;
      if (valid_i) data_o <= data_i;
    end
  end

  // A word that is waiting must not change until it is taken.
  a_hold : assert property (@(posedge clk) disable iff (rst)
                            stall_o |=> valid_o && $stable(data_o));

endmodule
