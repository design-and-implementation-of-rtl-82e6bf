// tb_param_mem: self-checking testbench of the parameter memory. Writes
// random words to random addresses while reading random addresses, and
// compares every read with a shadow copy (asynchronous read: a written word
// is visible right after the write edge).
module tb_param_mem;
  localparam int W = 40, DEPTH = 9, AW = 4;

  logic clk = 0;
  logic we;
  logic [AW-1:0] wa, ra;
  logic [W-1:0] wd, rd;
  logic [W-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  param_mem #(.W(W), .DEPTH(DEPTH)) dut (
    .clk, .we_i(we), .waddr_i(wa), .wdata_i(wd), .raddr_i(ra), .rdata_o(rd)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wa = 0; ra = 0; wd = 0;
    // fill every word
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; wa = AW'(a); wd = {$urandom, $urandom};
      shadow[a] = wd;
      @(posedge clk); #1;
    end
    for (int n = 0; n < 3000; n++) begin
      we = $urandom_range(0, 2) == 0;
      wa = AW'($urandom_range(0, DEPTH - 1));
      wd = {$urandom, $urandom};
      ra = AW'($urandom_range(0, DEPTH - 1));
      #1;
      checks++;
      if (rd != shadow[ra]) begin
        failures++;
        if (failures < 10) $display("mem mismatch addr %0d", ra);
      end
      @(posedge clk); #1;
      if (we) shadow[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
