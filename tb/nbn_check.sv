// nbn_check: test harness for one nbn_layer configuration, used by
// tb_nbn_layer. It loads random weights and biases through the external
// write ports, plays the pipeline register in front of the stage (a vector
// is held until stall_o is low), applies a random stall from the next stage
// and compares every output beat with an integer model of the NBN schedule.
// It then measures, with no stall and back-to-back vectors, the cycle of the
// first and last outputs and the output period against the formulas
// L_f = NI/NPE + 1 (rounded up), L = NN*NI/NPE + 1 and one vector every
// NN*NI/NPE cycles.
module nbn_check #(
  parameter int NI = 26,
  parameter int NN = 18,
  parameter int NPE = 52,
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
  localparam int K    = (NPE > NI) ? NPE / NI : 1;
  localparam int CIN  = (NPE > NI) ? 1 : (NI + NPE - 1) / NPE;
  localparam int G    = (NN + K - 1) / K;
  localparam int C    = G * CIN;
  localparam int WAW  = (C > 1) ? $clog2(C) : 1;
  localparam int BAW  = (G > 1) ? $clog2(G) : 1;

  logic [NI-1:0][Q-1:0]  din;
  logic                  vin, stall_o, vout, snext;
  logic [K-1:0][Q-1:0]   dout;
  logic                  w_we, b_we;
  logic [WAW-1:0]        w_addr;
  logic [BAW-1:0]        b_addr;
  logic [NPE-1:0][Q-1:0] w_data;
  logic [K-1:0][Q-1:0]   b_data;

  nbn_layer #(.Q(Q), .FRAC(FRAC), .NI(NI), .NN(NN), .NPE(NPE), .ACT(ACT_RELU)) dut (
    .clk, .rst, .din, .valid_prev_i(vin), .stall_o, .dout, .valid_o(vout), .stall_next_i(snext),
    .w_we_i(w_we), .w_addr_i(w_addr), .w_data_i(w_data),
    .b_we_i(b_we), .b_addr_i(b_addr), .b_data_i(b_data)
  );

  longint wm [C][NPE];
  longint bm [G][K];
  longint exp_q[$];
  int nstall_in = 0, nstall_out = 0, nrelu = 0, cyc = 0;
  bit random_phase = 1, drv_done = 0;
  int first_out = -1, last_out = -1, t_start = -1, nout_timed = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // Keep the vector until the stage releases it; returns at the next negedge.
  task automatic hold_until_taken();
    logic taken;
    do begin
      #2 taken = !stall_o;
      @(negedge clk);
    end while (!taken);
  endtask

  // Expected beats for one vector, pushed lane by lane.
  task automatic push_expected(input longint x[NI]);
    longint acc, s, xv;
    for (int g = 0; g < G; g++) begin
      for (int m = 0; m < K; m++) begin
        s = bm[g][m];
        if (K > 1) begin
          for (int i = 0; i < NI; i++) s += mulq(wm[g][m*NI+i], x[i], Q, FRAC);
        end else begin
          for (int p = 0; p < NPE; p++) begin
            acc = 0;
            for (int c = 0; c < CIN; c++) begin
              xv = (c*NPE + p < NI) ? x[c*NPE + p] : 0;
              acc = addq(acc, mulq(wm[g*CIN+c][p], xv, Q, FRAC), Q);
            end
            s += acc;
          end
        end
        if (s < 0) nrelu++;
        exp_q.push_back((s < 0) ? 0 : satq(s, Q));
      end
    end
  endtask

  // output monitor: samples in the second half of the cycle, before the edge
  // at which a transfer takes place
  always @(negedge clk) begin
    #2;
    if (!rst && vout && !snext) begin
      if (!random_phase) begin
        if (first_out < 0) first_out = cyc;
        last_out = cyc;
        nout_timed++;
      end
      for (int m = 0; m < K; m++) begin
        checks++;
        if (exp_q.size() == 0) failures++;
        else begin
          if (sx(64'(dout[m]), Q) != exp_q[0]) begin
            failures++;
            if (failures < 10) $display("nbn NI=%0d NPE=%0d: got %0d exp %0d", NI, NPE, sx(64'(dout[m]), Q), exp_q[0]);
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
    vin = 0; snext = 0; din = '0; w_we = 0; b_we = 0; w_addr = '0; b_addr = '0; w_data = '0; b_data = '0;
    @(negedge rst);
    @(negedge clk);
    for (int a = 0; a < C; a++) begin
      for (int p = 0; p < NPE; p++) begin
        wm[a][p] = rnd((a == 0 && p == 0) ? Q : 13);
        w_data[p] = Q'(wm[a][p]);
      end
      w_we = 1; w_addr = WAW'(a);
      @(negedge clk);
    end
    w_we = 0;
    for (int g = 0; g < G; g++) begin
      for (int m = 0; m < K; m++) begin
        bm[g][m] = rnd(13);
        b_data[m] = Q'(bm[g][m]);
      end
      b_we = 1; b_addr = BAW'(g);
      @(negedge clk);
    end
    b_we = 0;
    // random phase: random gaps and random stall from the next stage
    fork
      begin
        for (int v = 0; v < NVEC; v++) begin
          while ($urandom_range(0, 2) == 0) @(negedge clk);
          for (int i = 0; i < NI; i++) begin
            x[i] = rnd((v % 5 == 0) ? Q : 14);
            din[i] = Q'(x[i]);
          end
          push_expected(x);
          vin = 1;
          hold_until_taken();
          vin = 0;
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
    wait (exp_q.size() == 0);
    @(negedge clk);
    snext = 0;
    random_phase = 0;
    // timed phase: 4 vectors back to back, no stall
    repeat (3) @(negedge clk);
    t_start = cyc;
    for (int v = 0; v < 4; v++) begin
      for (int i = 0; i < NI; i++) begin
        x[i] = rnd(14);
        din[i] = Q'(x[i]);
      end
      push_expected(x);
      vin = 1;
      hold_until_taken();
    end
    vin = 0;
    wait (exp_q.size() == 0);
    repeat (2) @(negedge clk);
    // first vector presented in cycle t_start (count 1)
    checks++;
    if (first_out - t_start + 1 != CIN + 1) begin
      failures++;
      $display("nbn first output after %0d cycles, expected %0d", first_out - t_start + 1, CIN + 1);
    end
    checks++;
    if (last_out - t_start + 1 != 4 * C + 1) begin
      failures++;
      $display("nbn 4 vectors done after %0d cycles, expected %0d", last_out - t_start + 1, 4 * C + 1);
    end
    checks++;
    if (nstall_in == 0 || nstall_out == 0 || nrelu == 0) begin
      failures++;
      $display("nbn mechanisms: input hold %0d, output stall %0d, relu clips %0d", nstall_in, nstall_out, nrelu);
    end
    $display("nbn NI=%0d NN=%0d NPE=%0d: C=%0d, input hold %0d, output stall %0d, relu clips %0d",
             NI, NN, NPE, C, nstall_in, nstall_out, nrelu);
    done = 1;
  end
endmodule
