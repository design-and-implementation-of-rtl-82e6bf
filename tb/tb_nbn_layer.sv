// tb_nbn_layer: self-checking testbench of the neuron-by-neuron stage in two
// configurations: the hidden layer of the canceller (26 inputs, 18 neurons,
// 52 PEs, two neurons per cycle, 9 cycles per vector) and a small layer with
// fewer PEs than inputs (6 inputs, 5 neurons, 4 PEs, two cycles per neuron,
// with a partly filled last input word).
module tb_nbn_layer;
  logic clk = 0, rst = 1;
  int c0, f0, c1, f1;
  logic d0, d1;

  nbn_check #(.NI(26), .NN(18), .NPE(52)) u_big   (.clk, .rst, .checks(c0), .failures(f0), .done(d0));
  nbn_check #(.NI(6),  .NN(5),  .NPE(4))  u_small (.clk, .rst, .checks(c1), .failures(f1), .done(d1));

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
