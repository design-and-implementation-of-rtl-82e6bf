// tb_linear_canceller: self-checking testbench of the complex FIR linear
// canceller at its default size (13 taps, 2 complex PEs, 7 cycles per
// sample). It loads random coefficients, sends random windows with y(n)
// (each held until taken, random gaps), applies a random output stall, and
// compares y_lin and the forwarded y with a model that accumulates
// (ac - bd) + j(ad + bc) per PE in the same tap order. With no stall it
// checks that back-to-back windows give one result per 7 cycles, the first
// 8 cycles after the window is presented.
module tb_linear_canceller;
  import sic_ref_pkg::*;

  localparam int Q = 17, FRAC = 12, L = 13, NPE = 2;
  localparam int C = (L + NPE - 1) / NPE;
  typedef struct { longint lr, li, yr, yi; } res_t;

  logic clk = 0, rst = 1;
  logic [L-1:0][Q-1:0] xr, xi;
  logic [Q-1:0] yr, yi, olr, oli, oyr, oyi;
  logic vin, so, vo, sn, hwe;
  logic [2:0] ha;
  logic [NPE-1:0][2*Q-1:0] hd;
  longint hre [L], him [L];
  res_t q[$];
  int checks = 0, failures = 0, cyc = 0, nstall_out = 0, nhold = 0, t0 = -1;
  int touts[$];
  bit timed = 0, drv_done = 0;

  linear_canceller #(.Q(Q), .FRAC(FRAC), .L(L), .NPE(NPE)) dut (
    .clk, .rst, .x_re_i(xr), .x_im_i(xi), .y_re_i(yr), .y_im_i(yi), .valid_prev_i(vin), .stall_o(so),
    .ylin_re_o(olr), .ylin_im_o(oli), .y_re_o(oyr), .y_im_o(oyi), .valid_o(vo), .stall_next_i(sn),
    .h_we_i(hwe), .h_addr_i(ha), .h_data_i(hd)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hold_until_taken();
    logic taken;
    do begin
      #2 taken = !so;
      @(negedge clk);
    end while (!taken);
  endtask

  task automatic send(input bit gaps);
    longint a, b, c, d, accr, acci, sr, si;
    res_t r;
    while (gaps && $urandom_range(0, 2) == 0) @(negedge clk);
    for (int l = 0; l < L; l++) begin
      xr[l] = Q'(rnd(gaps && l == 0 ? Q : 15));
      xi[l] = Q'(rnd(15));
    end
    yr = Q'(rnd(Q)); yi = Q'(rnd(Q));
    sr = 0; si = 0;
    for (int p = 0; p < NPE; p++) begin
      accr = 0; acci = 0;
      for (int t = p; t < L; t += NPE) begin
        a = sx(64'(xr[t]), Q); b = sx(64'(xi[t]), Q); c = hre[t]; d = him[t];
        accr = addq(accr, satq((a*c - b*d) >>> FRAC, Q), Q);
        acci = addq(acci, satq((a*d + b*c) >>> FRAC, Q), Q);
      end
      sr += accr; si += acci;
    end
    r.lr = satq(sr, Q); r.li = satq(si, Q); r.yr = sx(64'(yr), Q); r.yi = sx(64'(yi), Q);
    q.push_back(r);
    vin = 1;
    if (timed && t0 < 0) t0 = cyc;
    hold_until_taken();
    if (gaps) vin = 0;
  endtask

  always @(negedge clk) begin
    #2;
    if (!rst && vo && !sn) begin
      if (timed) touts.push_back(cyc);
      checks++;
      if (q.size() == 0) failures++;
      else begin
        if (sx(64'(olr), Q) != q[0].lr || sx(64'(oli), Q) != q[0].li ||
            sx(64'(oyr), Q) != q[0].yr || sx(64'(oyi), Q) != q[0].yi) begin
          failures++;
          if (failures < 10) $display("lin mismatch: got %0d,%0d exp %0d,%0d", sx(64'(olr), Q), sx(64'(oli), Q), q[0].lr, q[0].li);
        end
        void'(q.pop_front());
      end
    end
    if (!rst && vo && sn) nstall_out++;
    if (!rst && vin && so) nhold++;
  end

  initial begin
    vin = 0; sn = 0; hwe = 0; ha = 0; hd = '0; xr = '0; xi = '0; yr = 0; yi = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int w = 0; w < C; w++) begin
      for (int p = 0; p < NPE; p++) begin
        int t;
        longint cr, ci;
        t = w * NPE + p;
        cr = rnd(14);
        ci = rnd(14);
        if (t < L) begin hre[t] = cr; him[t] = ci; end
        hd[p] = {Q'(ci), Q'(cr)};
      end
      hwe = 1; ha = 3'(w);
      @(negedge clk);
    end
    hwe = 0;
    fork
      begin
        for (int n = 0; n < 300; n++) send(1'b1);
        drv_done = 1;
      end
      begin
        while (!drv_done || q.size() != 0) begin
          sn = $urandom_range(0, 3) == 0;
          @(negedge clk);
        end
      end
    join
    sn = 0;
    timed = 1;
    repeat (2) @(negedge clk);
    for (int n = 0; n < 3; n++) send(1'b0);
    vin = 0;
    wait (q.size() == 0);
    repeat (2) @(negedge clk);
    checks++;
    if (touts.size() != 3 || touts[0] - t0 != C || touts[1] - touts[0] != C || touts[2] - touts[1] != C) begin
      failures++;
      $display("lin timing: start %0d outs %p", t0, touts);
    end
    checks++;
    if (nstall_out == 0 || nhold == 0) failures++;
    $display("lin: output stalls %0d, input holds %0d", nstall_out, nhold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
