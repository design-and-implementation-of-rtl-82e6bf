// denorm: denormalisation of the network output. The network is trained to
// produce a zero-mean, unit-variance version of the non-linear
// self-interference; the source design restricts the way back to a scaling
// by a power of two, so this is an arithmetic shift of each of the N values
// by the signed amount shift_i (positive: left, negative: right), with
// saturation to Q bits on a left shift (own choice). Combinational.
module denorm #(
  parameter int unsigned Q   = sic_pkg::Q_DEF,
  parameter int unsigned N   = 2,
  parameter int unsigned SHW = sic_pkg::SHW_DEF
) (
  input  logic [N-1:0][Q-1:0]  din,
  input  logic signed [SHW-1:0] shift_i,
  output logic [N-1:0][Q-1:0]  dout
);

  localparam int unsigned MAXSH = 1 << (SHW - 1);
  localparam int unsigned EW    = Q + MAXSH;
  localparam logic signed [Q-1:0] MAXV = {1'b0, {(Q-1){1'b1}}};
  localparam logic signed [Q-1:0] MINV = {1'b1, {(Q-1){1'b0}}};

  logic signed [EW-1:0] ext [N];
  logic [SHW-1:0]       mag;

  always_comb begin
    mag = shift_i[SHW-1] ? SHW'(-shift_i) : SHW'(shift_i);
    for (int unsigned i = 0; i < N; i++) begin
      if (shift_i[SHW-1]) begin
        ext[i]  = EW'($signed(din[i])) >>> mag;
        dout[i] = ext[i][Q-1:0];
      end else begin
        ext[i] = EW'($signed(din[i])) <<< mag;
        if (ext[i] > EW'(MAXV))      dout[i] = MAXV;
        else if (ext[i] < EW'(MINV)) dout[i] = MINV;
        else                         dout[i] = ext[i][Q-1:0];
      end
    end
  end

endmodule
