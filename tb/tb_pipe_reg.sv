// tb_pipe_reg: self-checking testbench of the pipeline register. Random
// valid at the input and random stall at the output; every word accepted
// (valid_i & !stall_o) is queued in a scoreboard and must come out in order
// (valid_o & !stall_i). Also checks that a stream with no stall passes at
// one word per cycle.
module tb_pipe_reg;
  localparam int W = 24;

  logic clk = 0, rst = 1;
  logic vi, so, vo, si;
  logic [W-1:0] di, dq;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, sent = 0, got = 0, nstall = 0;

  pipe_reg #(.W(W)) dut (
    .clk, .rst, .valid_i(vi), .data_i(di), .stall_o(so), .valid_o(vo), .data_o(dq), .stall_i(si)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vi = 0; si = 0; di = 0;
    @(posedge clk); @(posedge clk); #1 rst = 0;
    for (int n = 0; n < 4000; n++) begin
      vi = (n >= 3000) ? 1'b1 : ($urandom_range(0, 2) != 0);
      si = (n >= 3000) ? 1'b0 : ($urandom_range(0, 2) == 0);
      di = W'($urandom);
      #1;
      if (vo && !si) begin
        checks++;
        if (q.size() == 0 || dq != q[0]) begin
          failures++;
          if (failures < 10) $display("pipe_reg mismatch at %0d", n);
        end
        if (q.size() != 0) void'(q.pop_front());
        got++;
      end
      if (vi && so) nstall++;
      if (vi && !so) begin
        q.push_back(di);
        sent++;
      end
      @(posedge clk); #1;
    end
    // last 1000 cycles: full rate, so about 1000 words out
    checks++;
    if (got < sent - 2 || nstall == 0) begin
      failures++;
      $display("sent %0d got %0d stalls %0d", sent, got, nstall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
