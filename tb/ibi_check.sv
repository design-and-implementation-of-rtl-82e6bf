// ibi_check: test harness for one ibi_layer configuration, used by
// tb_ibi_layer. It loads random weights and biases, streams input vectors as
// beats of K inputs (each beat held until the stage takes it, with random
// gaps), applies a random stall from the next stage, and compares all NN
// outputs of each vector with an integer model of the IBI schedule. With no
// gaps and no stall it then checks that the outputs of a vector appear
// NI*NN/NPE + 1 cycles after its first beat and one vector per
// NI*NN/NPE cycles.
module ibi_check #(
  parameter int NI = 18,
  parameter int NN = 2,
  parameter int NPE = 4,
  parameter int NVEC = 40
) (
  input  logic clk,
  input  logic rst,
  output int   checks,
  output int   failures,
  output logic done
);
  import sic_pkg::*;
  import sic_ref_pkg::*;

  localparam int Q = 17, FRAC = 12;
  localparam int K   = (NPE > NN) ? NPE / NN : 1;
  localparam int D   = (NPE > NN) ? 1 : (NN + NPE - 1) / NPE;
  localparam int NB  = (NI + K - 1) / K;
  localparam int C   = NB * D;
  localparam int WAW = (C > 1) ? $clog2(C) : 1;

  logic [K-1:0][Q-1:0]   din;
  logic                  vin, stall_o, vout, snext;
  logic [NN-1:0][Q-1:0]  dout;
  logic                  w_we, b_we;
  logic [WAW-1:0]        w_addr;
  logic [NPE-1:0][Q-1:0] w_data;
  logic [NN-1:0][Q-1:0]  b_data;

  ibi_layer #(.Q(Q), .FRAC(FRAC), .NI(NI), .NN(NN), .NPE(NPE), .ACT(ACT_NONE)) dut (
    .clk, .rst, .din, .valid_prev_i(vin), .stall_o, .dout, .valid_o(vout), .stall_next_i(snext),
    .w_we_i(w_we), .w_addr_i(w_addr), .w_data_i(w_data), .b_we_i(b_we), .b_data_i(b_data)
  );

  longint wm [C][NPE];
  longint bm [NN];
  longint exp_q[$];
  int nstall_in = 0, nstall_out = 0, cyc = 0, nvec_out = 0;
  int t_first_beat = -1, t_outs[$];
  bit random_phase = 1, drv_done = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic hold_until_taken();
    logic taken;
    do begin
      #2 taken = !stall_o;
      @(negedge clk);
    end while (!taken);
  endtask

  task automatic push_expected(input longint x[NI]);
    longint acc, s, xv;
    int p, d;
    for (int n = 0; n < NN; n++) begin
      s = bm[n];
      for (int l = 0; l < K; l++) begin
        p = (K > 1) ? l * NN + n : n % NPE;
        d = (K > 1) ? 0 : n / NPE;
        acc = 0;
        for (int b = 0; b < NB; b++) begin
          xv = (b * K + l < NI) ? x[b * K + l] : 0;
          acc = addq(acc, mulq(wm[b * D + d][p], xv, Q, FRAC), Q);
        end
        s += acc;
      end
      exp_q.push_back(satq(s, Q));
    end
  endtask

  task automatic send_vector(input longint x[NI], input bit gaps);
    for (int b = 0; b < NB; b++) begin
      while (gaps && $urandom_range(0, 3) == 0) @(negedge clk);
      for (int l = 0; l < K; l++) din[l] = (b * K + l < NI) ? Q'(x[b * K + l]) : '0;
      vin = 1;
      if (!random_phase && t_first_beat < 0) t_first_beat = cyc;
      hold_until_taken();
      if (gaps) vin = 0;
    end
  endtask

  always @(negedge clk) begin
    #2;
    if (!rst && vout && !snext) begin
      if (!random_phase) t_outs.push_back(cyc);
      nvec_out++;
      for (int n = 0; n < NN; n++) begin
        checks++;
        if (exp_q.size() == 0) failures++;
        else begin
          if (sx(64'(dout[n]), Q) != exp_q[0]) begin
            failures++;
            if (failures < 10) $display("ibi NN=%0d NPE=%0d: got %0d exp %0d", NN, NPE, sx(64'(dout[n]), Q), exp_q[0]);
          end
          void'(exp_q.pop_front());
        end
      end
    end
    if (!rst && vout && snext) nstall_out++;
    if (!rst && vin && stall_o) nstall_in++;
  end

  initial begin
    longint x[NI];
    checks = 0; failures = 0; done = 0;
    vin = 0; snext = 0; din = '0; w_we = 0; b_we = 0; w_addr = '0; w_data = '0; b_data = '0;
    @(negedge rst);
    @(negedge clk);
    for (int a = 0; a < C; a++) begin
      for (int p = 0; p < NPE; p++) begin
        wm[a][p] = rnd((a == 0 && p == 0) ? Q : 14);
        w_data[p] = Q'(wm[a][p]);
      end
      w_we = 1; w_addr = WAW'(a);
      @(negedge clk);
    end
    w_we = 0;
    for (int n = 0; n < NN; n++) begin
      bm[n] = rnd(14);
      b_data[n] = Q'(bm[n]);
    end
    b_we = 1;
    @(negedge clk);
    b_we = 0;
    fork
      begin
        for (int v = 0; v < NVEC; v++) begin
          for (int i = 0; i < NI; i++) x[i] = rnd((v % 5 == 0) ? Q : 15);
          push_expected(x);
          send_vector(x, 1'b1);
        end
        drv_done = 1;
      end
      begin
        while (!drv_done || exp_q.size() != 0) begin
          snext = ($urandom_range(0, 3) == 0);
          @(negedge clk);
        end
      end
    join
    snext = 0;
    random_phase = 0;
    repeat (3) @(negedge clk);
    for (int v = 0; v < 3; v++) begin
      for (int i = 0; i < NI; i++) x[i] = rnd(15);
      push_expected(x);
      send_vector(x, 1'b0);
    end
    vin = 0;
    wait (exp_q.size() == 0);
    repeat (2) @(negedge clk);
    checks++;
    if (t_outs.size() != 3 || t_outs[0] - t_first_beat + 1 != C + 1 ||
        t_outs[1] - t_outs[0] != C || t_outs[2] - t_outs[1] != C) begin
      failures++;
      $display("ibi timing: first beat %0d outputs %p, C=%0d", t_first_beat, t_outs, C);
    end
    checks++;
    if (nstall_in == 0 || nstall_out == 0) begin
      failures++;
      $display("ibi mechanisms: input hold %0d output stall %0d", nstall_in, nstall_out);
    end
    $display("ibi NI=%0d NN=%0d NPE=%0d: C=%0d, input hold %0d, output stall %0d", NI, NN, NPE, C, nstall_in, nstall_out);
    done = 1;
  end
endmodule
