// q_sweep_check: runs the full canceller at one datapath width Q (with
// FRAC = Q - 5 fractional bits, so every width has the same integer range
// and the extra bits add precision) and reports how well the fixed-point
// hardware cancels an interference signal that was computed in double
// precision from the same network.
//
// Random weights (|w| < 0.25), biases, linear coefficients (|h| < 0.5) and
// transmit samples (|x| < 0.5) are drawn as real numbers and rounded to the
// Q-bit grid. The received signal y(n) is the exact real-valued output of
// the same network plus FIR filter (denormalisation shift +1), rounded to Q
// bits. The residual y_c(n) of the hardware then only holds its own
// quantisation error. Every output is also checked bit for bit against an
// integer model of the datapath. The harness reports the cancellation
// 10 log10(sum |y|^2 / sum |y_c|^2) in hundredths of a dB.
//
// The output stall is driven at random, so samples also wait in the
// pipeline. `done` rises when all NS samples have been checked.
module q_sweep_check #(
  parameter int Q    = 17,
  parameter int FRAC = Q - 5,
  parameter int NS   = 200
) (
  input  logic clk,
  input  logic rst,
  output int   checks,
  output int   failures,
  output int   canc_cdb,
  output logic done
);
  import sic_pkg::*;
  import sic_ref_pkg::*;

  localparam int L = 13, NH = 18, NI = 2 * L;
  localparam int NPE_H = 52, NPE_O = 4, NPE_L = 2;
  localparam int K = NPE_H / NI;
  localparam int G = NH / K;
  localparam int NB = NH / K;
  localparam int CL = (L + NPE_L - 1) / NPE_L;
  localparam int CW = NPE_H * Q;
  localparam int AW = 4;  // address width of the top (deepest memory: 9 words)
  localparam int SHIFT = 1;
  localparam real ONE = real'(longint'(1) <<< FRAC);

  typedef struct { longint hr, hi, cr, ci; } res_t;

  logic [L-1:0][Q-1:0] x_re, x_im;
  logic [Q-1:0] y_re, y_im, yc_re, yc_im, yh_re, yh_im;
  logic vin, stall_o, vout, snext, cfg_we;
  cfg_sel_e cfg_sel;
  logic [AW-1:0] cfg_addr;
  logic [CW-1:0] cfg_data;

  nn_si_canceller #(.Q(Q), .FRAC(FRAC)) dut (
    .clk, .rst,
    .x_re_i(x_re), .x_im_i(x_im), .y_re_i(y_re), .y_im_i(y_im),
    .valid_prev_i(vin), .stall_o,
    .yc_re_o(yc_re), .yc_im_o(yc_im), .yhat_re_o(yh_re), .yhat_im_o(yh_im),
    .valid_o(vout), .stall_next_i(snext),
    .denorm_shift_i(4'(SHIFT)),
    .cfg_we_i(cfg_we), .cfg_sel_i(cfg_sel), .cfg_addr_i(cfg_addr), .cfg_data_i(cfg_data)
  );

  longint wh [NH][NI], bh [NH], wo [NB][NPE_O], bo [2], hr [L], hi [L];
  longint xs_re [L], xs_im [L];  // transmit history, index 0 = x(n)
  res_t q[$];
  real p_sig = 0.0, p_res = 0.0;
  int n_out = 0;
  bit drv_done = 0;

  // Uniform real value in (-a, a), rounded to the fixed-point grid.
  function automatic longint rq(real a);
    real u = (real'($urandom) / 4294967296.0) * 2.0 - 1.0;
    return longint'($rtoi(u * a * ONE + ((u >= 0) ? 0.5 : -0.5)));
  endfunction

  function automatic longint round_sat(real v);
    return satq(longint'($rtoi(v * ONE + ((v >= 0) ? 0.5 : -0.5))), Q);
  endfunction

  task automatic cfg_write(input cfg_sel_e sel, input int addr, input logic [CW-1:0] data);
    cfg_sel = sel; cfg_addr = AW'(addr); cfg_data = data; cfg_we = 1;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_params();
    logic [CW-1:0] d;
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < NI; i++) wh[j][i] = rq(0.25);
      bh[j] = rq(0.25);
    end
    for (int b = 0; b < NB; b++) for (int p = 0; p < NPE_O; p++) wo[b][p] = rq(0.25);
    for (int n = 0; n < 2; n++) bo[n] = rq(0.25);
    for (int t = 0; t < L; t++) begin hr[t] = rq(0.5); hi[t] = rq(0.5); end
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

  // Real-valued interference for the current window (no quantisation
  // beyond that of the parameters and the inputs themselves).
  task automatic real_model(output real yr, output real yi);
    real xin [NI], h [NH], s, nn [2];
    for (int l = 0; l < L; l++) begin
      xin[2*l] = real'(xs_re[l]) / ONE; xin[2*l+1] = real'(xs_im[l]) / ONE;
    end
    for (int j = 0; j < NH; j++) begin
      s = real'(bh[j]) / ONE;
      for (int i = 0; i < NI; i++) s += real'(wh[j][i]) / ONE * xin[i];
      h[j] = (s < 0.0) ? 0.0 : s;
    end
    for (int n = 0; n < 2; n++) begin
      s = real'(bo[n]) / ONE;
      for (int j = 0; j < NH; j++) s += real'(wo[j / K][(j % K) * 2 + n]) / ONE * h[j];
      nn[n] = s * real'(1 << SHIFT);
    end
    yr = nn[0]; yi = nn[1];
    for (int t = 0; t < L; t++) begin
      yr += (real'(xs_re[t]) * real'(hr[t]) - real'(xs_im[t]) * real'(hi[t])) / (ONE * ONE);
      yi += (real'(xs_re[t]) * real'(hi[t]) + real'(xs_im[t]) * real'(hr[t])) / (ONE * ONE);
    end
  endtask

  // Bit-true integer model of the datapath for one sample.
  function automatic res_t int_model(input longint yr, input longint yi);
    longint xin [NI], h [NH], s, acc, nn [2], den [2], ar, ai, sr, si, a, b, c, d, lr, li;
    res_t r;
    for (int l = 0; l < L; l++) begin xin[2*l] = xs_re[l]; xin[2*l+1] = xs_im[l]; end
    for (int j = 0; j < NH; j++) begin
      s = bh[j];
      for (int i = 0; i < NI; i++) s += mulq(wh[j][i], xin[i], Q, FRAC);
      h[j] = (s < 0) ? 0 : satq(s, Q);
    end
    for (int n = 0; n < 2; n++) begin
      s = bo[n];
      for (int l = 0; l < K; l++) begin
        acc = 0;
        for (int bt = 0; bt < NB; bt++) acc = addq(acc, mulq(wo[bt][l*2 + n], h[bt*K + l], Q, FRAC), Q);
        s += acc;
      end
      nn[n] = satq(s, Q);
      den[n] = satq(nn[n] * (longint'(1) <<< SHIFT), Q);
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
    lr = satq(sr, Q); li = satq(si, Q);
    r.hr = satq(lr + den[0], Q);
    r.hi = satq(li + den[1], Q);
    r.cr = satq(yr - r.hr, Q); r.ci = satq(yi - r.hi, Q);
    return r;
  endfunction

  task automatic send();
    logic taken;
    real fr, fi;
    longint yr, yi;
    for (int l = L - 1; l > 0; l--) begin xs_re[l] = xs_re[l-1]; xs_im[l] = xs_im[l-1]; end
    xs_re[0] = rq(0.5); xs_im[0] = rq(0.5);
    for (int l = 0; l < L; l++) begin x_re[l] = Q'(xs_re[l]); x_im[l] = Q'(xs_im[l]); end
    real_model(fr, fi);
    yr = round_sat(fr); yi = round_sat(fi);
    y_re = Q'(yr); y_im = Q'(yi);
    p_sig += fr * fr + fi * fi;
    q.push_back(int_model(yr, yi));
    vin = 1;
    do begin
      #2 taken = !stall_o;
      @(negedge clk);
    end while (!taken);
  endtask

  always @(negedge clk) begin
    #2;
    if (!rst && vout && !snext) begin
      n_out++;
      checks++;
      if (q.size() == 0) failures++;
      else begin
        if (sx(64'(yh_re), Q) != q[0].hr || sx(64'(yh_im), Q) != q[0].hi ||
            sx(64'(yc_re), Q) != q[0].cr || sx(64'(yc_im), Q) != q[0].ci) begin
          failures++;
          if (failures < 5)
            $display("Q=%0d sample %0d: y_c %0d,%0d expected %0d,%0d", Q, n_out,
                     sx(64'(yc_re), Q), sx(64'(yc_im), Q), q[0].cr, q[0].ci);
        end
        void'(q.pop_front());
      end
      // the first L outputs belong to the window fill and are not measured
      if (n_out > L)
        p_res += (real'(sx(64'(yc_re), Q)) / ONE) ** 2 + (real'(sx(64'(yc_im), Q)) / ONE) ** 2;
    end
  end

  initial begin
    checks = 0; failures = 0; canc_cdb = 0; done = 0;
    vin = 0; snext = 0; cfg_we = 0; cfg_sel = CFG_HID_W; cfg_addr = '0; cfg_data = '0;
    x_re = '0; x_im = '0; y_re = '0; y_im = '0;
    for (int l = 0; l < L; l++) begin xs_re[l] = 0; xs_im[l] = 0; end
    @(negedge rst);
    @(negedge clk);
    load_params();
    // fill the window before measuring
    for (int n = 0; n < L; n++) send();
    p_sig = 0.0;
    fork
      begin
        for (int n = 0; n < NS; n++) send();
        vin = 0;
        drv_done = 1;
      end
      while (!drv_done || q.size() != 0) begin
        snext = $urandom_range(0, 4) == 0;
        @(negedge clk);
      end
    join
    snext = 0;
    canc_cdb = $rtoi(1000.0 * $log10(p_sig / ((p_res > 0.0) ? p_res : 1.0e-30)));
    done = 1;
  end
endmodule
