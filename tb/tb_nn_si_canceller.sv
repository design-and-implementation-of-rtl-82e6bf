// tb_nn_si_canceller: end-to-end testbench of the canceller at its default
// size (L = 13, 18 hidden neurons, Q = 17, 52 + 4 real PEs, 2 complex PEs).
//
// A random transmit stream x(n) is shifted into the window x(n) .. x(n-12)
// and presented with a random received sample y(n). Random network weights,
// biases and linear coefficients are loaded through the write port. Each
// output y_hat(n) and y_c(n) = y(n) - y_hat(n) is compared with a bit-true
// integer model of the whole chain (hidden ReLU layer, output layer in the
// IBI accumulation order, power-of-two denormalisation, complex FIR,
// saturating sums).
//
// Phases: (1) random input gaps and random output stall with a left
// denormalisation shift; (2) new parameters and a right shift, loaded while
// the pipeline is idle; (3) a continuous stream with no stall, where the
// latency (13 cycles from the accepting edge to y_c) and the period of
// one sample per 9 cycles are checked. Mechanisms counted, each of which
// must occur: input back-pressure, output stall, hidden/output layer
// overlap (seen as a latency below the sum of both layers' latencies), ReLU clipping, saturation of a result, both shift directions and
// a parameter reload.
module tb_nn_si_canceller;
  import sic_pkg::*;
  import sic_ref_pkg::*;

  localparam int Q = 17, FRAC = 12, L = 13, NH = 18, NI = 2 * L;
  localparam int NPE_H = 52, NPE_O = 4, NPE_L = 2;
  localparam int K = NPE_H / NI;            // 2 hidden neurons per cycle
  localparam int G = NH / K;                // 9 hidden words
  localparam int NB = NH / K;               // 9 output-layer beats
  localparam int CL = (L + NPE_L - 1) / NPE_L;
  localparam int CW = NPE_H * Q;
  localparam int PERIOD = 9;
  localparam int LATENCY = 13;

  typedef struct { longint hr, hi, cr, ci; } res_t;

  logic clk = 0, rst = 1;
  logic [L-1:0][Q-1:0] x_re, x_im;
  logic [Q-1:0] y_re, y_im, yc_re, yc_im, yh_re, yh_im;
  logic vin, stall_o, vout, snext, cfg_we;
  logic signed [3:0] shift;
  cfg_sel_e cfg_sel;
  logic [3:0] cfg_addr;  // address width of the top (deepest memory: 9 words)
  logic [CW-1:0] cfg_data;

  nn_si_canceller dut (
    .clk, .rst,
    .x_re_i(x_re), .x_im_i(x_im), .y_re_i(y_re), .y_im_i(y_im),
    .valid_prev_i(vin), .stall_o,
    .yc_re_o(yc_re), .yc_im_o(yc_im), .yhat_re_o(yh_re), .yhat_im_o(yh_im),
    .valid_o(vout), .stall_next_i(snext),
    .denorm_shift_i(shift),
    .cfg_we_i(cfg_we), .cfg_sel_i(cfg_sel), .cfg_addr_i(cfg_addr), .cfg_data_i(cfg_data)
  );

  // model parameters
  longint wh [NH][NI], bh [NH], wo [NB][NPE_O], bo [2], hr [L], hi [L];
  longint xs_re [L], xs_im [L];  // transmit history, index 0 = x(n)
  res_t q[$];
  int checks = 0, failures = 0, cyc = 0;
  int n_backpressure = 0, n_outstall = 0, n_overlap = 0, n_relu = 0, n_sat = 0;
  int n_left = 0, n_right = 0, n_reload = 0, n_out = 0;
  int t_acc[$], t_out[$];
  bit timed = 0, drv_done = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(input cfg_sel_e sel, input int addr, input logic [CW-1:0] data);
    cfg_sel = sel; cfg_addr = 4'(addr); cfg_data = data; cfg_we = 1;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_params(input int wbits);
    logic [CW-1:0] d;
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < NI; i++) wh[j][i] = rnd(wbits);
      bh[j] = rnd(wbits);
    end
    for (int b = 0; b < NB; b++) for (int p = 0; p < NPE_O; p++) wo[b][p] = rnd(wbits + 1);
    for (int n = 0; n < 2; n++) bo[n] = rnd(wbits);
    for (int t = 0; t < L; t++) begin hr[t] = rnd(wbits); hi[t] = rnd(wbits); end
    // hidden weights: word g, lane p -> neuron g*K + p/NI, input p%NI
    for (int g = 0; g < G; g++) begin
      d = '0;
      for (int p = 0; p < NPE_H; p++) d[p*Q +: Q] = Q'(wh[g*K + p/NI][p%NI]);
      cfg_write(CFG_HID_W, g, d);
      d = '0;
      for (int m = 0; m < K; m++) d[m*Q +: Q] = Q'(bh[g*K + m]);
      cfg_write(CFG_HID_B, g, d);
    end
    for (int b = 0; b < NB; b++) begin
      d = '0;
      for (int p = 0; p < NPE_O; p++) d[p*Q +: Q] = Q'(wo[b][p]);
      cfg_write(CFG_OUT_W, b, d);
    end
    d = '0;
    for (int n = 0; n < 2; n++) d[n*Q +: Q] = Q'(bo[n]);
    cfg_write(CFG_OUT_B, 0, d);
    for (int w = 0; w < CL; w++) begin
      d = '0;
      for (int p = 0; p < NPE_L; p++) begin
        if (w*NPE_L + p < L) begin
          d[(2*p)*Q +: Q]   = Q'(hr[w*NPE_L + p]);
          d[(2*p+1)*Q +: Q] = Q'(hi[w*NPE_L + p]);
        end
      end
      cfg_write(CFG_LIN_H, w, d);
    end
  endtask

  function automatic longint count_sat(longint v);
    if (v != satq(v, Q)) n_sat++;
    return satq(v, Q);
  endfunction

  // Bit-true model of one sample.
  function automatic res_t model(input longint yr, input longint yi);
    longint xin [NI], h [NH], s, acc, nn [2], den [2], lr, li, a, b, c, d, ar, ai, sr, si, hr2, hi2;
    res_t r;
    for (int l = 0; l < L; l++) begin xin[2*l] = xs_re[l]; xin[2*l+1] = xs_im[l]; end
    for (int j = 0; j < NH; j++) begin
      s = bh[j];
      for (int i = 0; i < NI; i++) s += mulq(wh[j][i], xin[i], Q, FRAC);
      if (s < 0) n_relu++;
      h[j] = (s < 0) ? 0 : count_sat(s);
    end
    for (int n = 0; n < 2; n++) begin
      s = bo[n];
      for (int l = 0; l < K; l++) begin
        acc = 0;
        for (int bt = 0; bt < NB; bt++) acc = addq(acc, mulq(wo[bt][l*2 + n], h[bt*K + l], Q, FRAC), Q);
        s += acc;
      end
      nn[n] = count_sat(s);
      if (shift >= 0) den[n] = count_sat(nn[n] * (longint'(1) <<< shift));
      else            den[n] = nn[n] >>> (-shift);
    end
    sr = 0; si = 0;
    for (int p = 0; p < NPE_L; p++) begin
      ar = 0; ai = 0;
      for (int t = p; t < L; t += NPE_L) begin
        a = xs_re[t]; b = xs_im[t]; c = hr[t]; d = hi[t];
        ar = addq(ar, satq((a*c - b*d) >>> FRAC, Q), Q);
        ai = addq(ai, satq((a*d + b*c) >>> FRAC, Q), Q);
      end
      sr += ar; si += ai;
    end
    lr = count_sat(sr); li = count_sat(si);
    hr2 = count_sat(lr + den[0]);
    hi2 = count_sat(li + den[1]);
    r.hr = hr2; r.hi = hi2;
    r.cr = count_sat(yr - hr2); r.ci = count_sat(yi - hi2);
    return r;
  endfunction

  // Present one new transmit sample; returns after the window is taken.
  task automatic send(input bit gaps, input int xbits);
    logic taken;
    longint yr, yi;
    while (gaps && $urandom_range(0, 2) == 0) @(negedge clk);
    for (int l = L - 1; l > 0; l--) begin xs_re[l] = xs_re[l-1]; xs_im[l] = xs_im[l-1]; end
    xs_re[0] = rnd(xbits); xs_im[0] = rnd(xbits);
    for (int l = 0; l < L; l++) begin x_re[l] = Q'(xs_re[l]); x_im[l] = Q'(xs_im[l]); end
    yr = rnd(($urandom_range(0, 9) == 0) ? Q : 15); yi = rnd(15);
    y_re = Q'(yr); y_im = Q'(yi);
    q.push_back(model(yr, yi));
    vin = 1;
    do begin
      #2 taken = !stall_o;
      if (taken && timed) t_acc.push_back(cyc);
      @(negedge clk);
    end while (!taken);
    if (gaps) vin = 0;
  endtask

  // output monitor and mechanism counters (sampled before the edge)
  always @(negedge clk) begin
    #2;
    if (!rst && vout && !snext) begin
      n_out++;
      if (timed) t_out.push_back(cyc);
      checks++;
      if (q.size() == 0) failures++;
      else begin
        if (sx(64'(yh_re), Q) != q[0].hr || sx(64'(yh_im), Q) != q[0].hi ||
            sx(64'(yc_re), Q) != q[0].cr || sx(64'(yc_im), Q) != q[0].ci) begin
          failures++;
          if (failures < 10)
            $display("sample %0d: y_hat %0d,%0d exp %0d,%0d  y_c %0d,%0d exp %0d,%0d", n_out,
                     sx(64'(yh_re), Q), sx(64'(yh_im), Q), q[0].hr, q[0].hi,
                     sx(64'(yc_re), Q), sx(64'(yc_im), Q), q[0].cr, q[0].ci);
        end
        void'(q.pop_front());
      end
      if (shift >= 0) n_left++; else n_right++;
    end
    if (!rst && vin && stall_o) n_backpressure++;
    if (!rst && vout && snext) n_outstall++;
  end

  task automatic stall_driver();
    while (!drv_done || q.size() != 0) begin
      snext = $urandom_range(0, 3) == 0;
      @(negedge clk);
    end
    snext = 0;
  endtask

  initial begin
    vin = 0; snext = 0; cfg_we = 0; cfg_sel = CFG_HID_W; cfg_addr = 0; cfg_data = '0;
    x_re = '0; x_im = '0; y_re = 0; y_im = 0; shift = 4'sd2;
    for (int l = 0; l < L; l++) begin xs_re[l] = 0; xs_im[l] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    // phase 1
    load_params(12);
    drv_done = 0;
    fork
      begin
        for (int n = 0; n < 150; n++) send(1'b1, (n % 10 == 0) ? Q : 13);
        drv_done = 1;
      end
      stall_driver();
    join
    wait (q.size() == 0);
    // phase 2: reload parameters, shift right
    repeat (5) @(negedge clk);
    load_params(13);
    n_reload++;
    shift = -4'sd1;
    drv_done = 0;
    fork
      begin
        for (int n = 0; n < 150; n++) send(1'b1, 14);
        drv_done = 1;
      end
      stall_driver();
    join
    wait (q.size() == 0);
    // phase 3: continuous stream, no stall
    repeat (5) @(negedge clk);
    shift = 4'sd0;
    timed = 1;
    for (int n = 0; n < 20; n++) send(1'b0, 13);
    vin = 0;
    wait (q.size() == 0);
    repeat (3) @(negedge clk);
    checks++;
    if (t_out.size() != 20 || t_acc.size() != 20) begin
      failures++;
      $display("timed phase: %0d accepted, %0d out", t_acc.size(), t_out.size());
    end else begin
      for (int n = 0; n < 20; n++) begin
        checks++;
        // Without overlap the two layers alone would take (9 + 1) + (9 + 1)
        // cycles; a shorter latency shows the output layer starting on the
        // first hidden neurons while the hidden layer is still busy.
        if (t_out[n] - t_acc[n] < 2 * (PERIOD + 1)) n_overlap++;
        if (t_out[n] - t_acc[n] != LATENCY) begin
          failures++;
          $display("sample %0d: out at %0d, window taken at %0d", n, t_out[n], t_acc[n]);
        end
        if (n > 0) begin
          checks++;
          if (t_out[n] - t_out[n-1] != PERIOD) begin
            failures++;
            $display("period %0d between outputs %0d and %0d", t_out[n] - t_out[n-1], n - 1, n);
          end
        end
      end
    end
    $display("mechanisms: back-pressure %0d, output stall %0d, layer overlap %0d, relu %0d, saturation %0d, left-shift outputs %0d, right-shift outputs %0d, reloads %0d",
             n_backpressure, n_outstall, n_overlap, n_relu, n_sat, n_left, n_right, n_reload);
    checks++; if (n_backpressure == 0) begin failures++; $display("no back-pressure"); end
    checks++; if (n_outstall == 0)     begin failures++; $display("no output stall"); end
    checks++; if (n_overlap == 0)      begin failures++; $display("no layer overlap"); end
    checks++; if (n_relu == 0)         begin failures++; $display("no ReLU clipping"); end
    checks++; if (n_sat == 0)          begin failures++; $display("no saturation"); end
    checks++; if (n_left == 0 || n_right == 0) begin failures++; $display("a shift direction unused"); end
    checks++; if (n_reload == 0)       begin failures++; $display("no reload"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
