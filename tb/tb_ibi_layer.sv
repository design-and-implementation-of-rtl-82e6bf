// tb_ibi_layer: self-checking testbench of the input-by-input stage in two
// configurations: the output layer of the canceller (18 inputs, 2 neurons,
// 4 PEs, two inputs per beat, 9 beats per vector) and a layer with fewer PEs
// than neurons (5 inputs, 3 neurons, 2 PEs, each PE holding two partial sums,
// 10 cycles per vector).
module tb_ibi_layer;
  logic clk = 0, rst = 1;
  int c0, f0, c1, f1;
  logic d0, d1;

  ibi_check #(.NI(18), .NN(2), .NPE(4)) u_out   (.clk, .rst, .checks(c0), .failures(f0), .done(d0));
  ibi_check #(.NI(5),  .NN(3), .NPE(2)) u_multi (.clk, .rst, .checks(c1), .failures(f1), .done(d1));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
