// tb_kyber_checker: streams 128 pairs of values whose total is
// 128*(f0+f1) mod 3329 (must pass) or differs from it (must be flagged), and
// checks that checked pulses after exactly 128 pairs.
module tb_kyber_checker;
  import ntt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, av, chk, err;
  coef_t f0, f1, a, b;
  longint unsigned s, target;
  int nchk;

  kyber_checker #(.NTOT(256), .Q(KY_Q)) dut (.clk, .rst_n, .clr, .f0, .f1, .acc_valid(av),
    .acc_a(a), .acc_b(b), .checked(chk), .err);

  always @(posedge clk) if (chk) nchk++;

  initial begin
    clr = 0; av = 0; a = 0; b = 0; f0 = 0; f1 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      f0 = coef_t'($urandom % KY_Q); f1 = coef_t'($urandom % KY_Q);
      target = (128 * (64'(f0) + 64'(f1))) % KY_Q;
      if (t % 2 == 1) target = (target + 1 + $urandom % (KY_Q - 1)) % KY_Q;
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      s = 0; nchk = 0;
      for (int i = 0; i < 128; i++) begin
        a = coef_t'($urandom % KY_Q);
        if (i < 127) b = coef_t'($urandom % KY_Q);
        else         b = coef_t'((target + 2 * KY_Q - (s + a) % KY_Q) % KY_Q);
        s = (s + a + b) % KY_Q;
        av = 1;
        @(negedge clk);
        if (i < 127 && nchk != 0) begin failures++; $display("FAIL early check"); end
      end
      av = 0;
      @(negedge clk);
      checks++;
      if (nchk != 1 || err != (t % 2 == 1)) begin failures++; $display("FAIL trial %0d err=%0d n=%0d", t, err, nchk); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
