// tb_nwc_checker: accumulates random pre-processed vectors, then presents
// h0 equal to (sum f)*(sum g) mod 7681 (must pass) or a corrupted value (must
// be flagged). Also checks that clr clears the flag.
module tb_nwc_checker;
  import ntt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, av, hv, chk, err;
  coef_t af, ag, h0;
  longint unsigned sf, sg;

  nwc_checker #(.Q(NWC_Q)) dut (.clk, .rst_n, .clr, .acc_valid(av), .acc_f(af), .acc_g(ag),
    .h0_valid(hv), .h0, .checked(chk), .err);

  initial begin
    clr = 0; av = 0; hv = 0; af = 0; ag = 0; h0 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      sf = 0; sg = 0;
      for (int i = 0; i < 256; i++) begin
        af = coef_t'($urandom % NWC_Q); ag = coef_t'($urandom % NWC_Q); av = 1;
        sf = (sf + af) % NWC_Q; sg = (sg + ag) % NWC_Q;
        @(negedge clk);
      end
      av = 0;
      hv = 1; h0 = coef_t'((sf * sg) % NWC_Q);
      if (t % 2 == 1) h0 = coef_t'((64'(h0) + 1 + $urandom % (NWC_Q - 1)) % NWC_Q);
      @(negedge clk); hv = 0;
      checks++;
      if (!chk || err != (t % 2 == 1)) begin failures++; $display("FAIL trial %0d err=%0d", t, err); end
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
