// tb_si_combiner: self-checking testbench of the combiner. Two independent
// random producers (network branch and linear branch with y) and a random
// output stall; each produced item is queued and the n-th outputs must be
// y - sat(ylin + ynn) (saturated) for the n-th items of both streams.
module tb_si_combiner;
  import sic_ref_pkg::*;

  localparam int Q = 17;
  typedef struct { longint nr, ni; } nn_t;
  typedef struct { longint lr, li, yr, yi; } lin_t;

  logic clk = 0, rst = 1;
  logic [Q-1:0] nre, nim, lre, lim, yre, yim, hre, him, cre, cim;
  logic nv, ns, lv, ls, ov, os;
  logic ntk = 1, ltk = 1;
  nn_t  nq[$];
  lin_t lq[$];
  int checks = 0, failures = 0, outs = 0, nostall = 0;
  longint ehr, ehi;

  si_combiner #(.Q(Q)) dut (
    .clk, .rst,
    .ynn_re_i(nre), .ynn_im_i(nim), .nn_valid_i(nv), .nn_stall_o(ns),
    .ylin_re_i(lre), .ylin_im_i(lim), .y_re_i(yre), .y_im_i(yim), .lin_valid_i(lv), .lin_stall_o(ls),
    .yhat_re_o(hre), .yhat_im_o(him), .yc_re_o(cre), .yc_im_o(cim), .valid_o(ov), .stall_next_i(os)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nv = 0; lv = 0; os = 0;
    nre = 0; nim = 0; lre = 0; lim = 0; yre = 0; yim = 0;
    @(posedge clk); @(posedge clk); #1 rst = 0;
    for (int n = 0; n < 5000; n++) begin
      // producers keep an item until it is taken
      if (!nv || ntk) begin
        nv = $urandom_range(0, 1);
        nre = Q'(rnd((n % 4 == 0) ? Q : 15)); nim = Q'(rnd(15));
      end
      if (!lv || ltk) begin
        lv = $urandom_range(0, 1);
        lre = Q'(rnd((n % 4 == 0) ? Q : 15)); lim = Q'(rnd(15));
        yre = Q'(rnd(Q)); yim = Q'(rnd(15));
      end
      os = $urandom_range(0, 3) == 0;
      #1;
      if (ov && !os) begin
        checks++;
        outs++;
        if (nq.size() == 0 || lq.size() == 0) failures++;
        else begin
          ehr = satq(lq[0].lr + nq[0].nr, Q);
          ehi = satq(lq[0].li + nq[0].ni, Q);
          if (sx(hre, Q) != ehr || sx(him, Q) != ehi ||
              sx(cre, Q) != satq(lq[0].yr - ehr, Q) || sx(cim, Q) != satq(lq[0].yi - ehi, Q)) begin
            failures++;
            if (failures < 10) $display("combiner mismatch at output %0d", outs);
          end
          void'(nq.pop_front());
          void'(lq.pop_front());
        end
      end
      if (nv && !ns) nq.push_back('{sx(nre, Q), sx(nim, Q)});
      if (lv && !ls) lq.push_back('{sx(lre, Q), sx(lim, Q), sx(yre, Q), sx(yim, Q)});
      if ((nv && !ns) != (lv && !ls)) failures++;  // a branch taken alone
      ntk = nv && !ns;
      ltk = lv && !ls;
      @(posedge clk); #1;
    end
    checks++;
    if (outs < 500) failures++;
    $display("outputs %0d", outs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
