// tb_butterfly: checks the butterfly against c = a + b*w, d = a - b*w (mod q)
// computed with integer arithmetic, for both moduli, with and without a fault
// at each of the three modules.
module tb_butterfly;
  import ntt_pkg::*;
  int checks = 0, failures = 0;
  coef_t a, b, w, e, c7, d7, c3, d3;
  fi_pos_e pos;

  butterfly #(.Q(NWC_Q)) dut7 (.a, .b, .w, .fault_pos(pos), .fault_err(e), .c(c7), .d(d7));
  butterfly #(.Q(KY_Q))  dut3 (.a(a % 13'(KY_Q)), .b(b % 13'(KY_Q)), .w(w % 13'(KY_Q)),
                              .fault_pos(pos), .fault_err(e % 13'(KY_Q)), .c(c3), .d(d3));

  function automatic void expect_bf(int unsigned q, longint unsigned aa, bb, ww, ee,
                                    fi_pos_e p, coef_t gc, gd);
    longint unsigned t, ec, ed;
    t = (bb * ww) % q;
    if (p == FI_MUL) t = (t + ee) % q;
    ec = (aa + t) % q;
    ed = (aa + q - t) % q;
    if (p == FI_ADD) ec = (ec + ee) % q;
    if (p == FI_SUB) ed = (ed + ee) % q;
    checks++;
    if (gc != coef_t'(ec) || gd != coef_t'(ed)) begin
      failures++;
      if (failures < 10) $display("FAIL q=%0d a=%0d b=%0d w=%0d pos=%0d got %0d %0d exp %0d %0d",
                                  q, aa, bb, ww, p, gc, gd, ec, ed);
    end
  endfunction

  initial begin
    for (int i = 0; i < 4000; i++) begin
      a = coef_t'($urandom % NWC_Q);
      b = coef_t'($urandom % NWC_Q);
      w = coef_t'($urandom % NWC_Q);
      if (i < 4) begin a = coef_t'(NWC_Q - 1); b = coef_t'(NWC_Q - 1 - i); w = coef_t'(NWC_Q - 1); end
      e = coef_t'(1 + $urandom % (KY_Q - 1));
      pos = fi_pos_e'(i % 4);
      #1;
      expect_bf(NWC_Q, a, b, w, e, pos, c7, d7);
      expect_bf(KY_Q, a % KY_Q, b % KY_Q, w % KY_Q, e % KY_Q, pos, c3, d3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
