// tb_decoder34: for each output position k of a 128-point Kyber half, builds
// the encoded value Y = 2F + (F - 2 f0)/zeta_k (q = 3329, zeta_k =
// 17^(2*bitrev7(k)+1)) from random F and f0, and checks that the decoder
// returns F.
module tb_decoder34;
  import ntt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ov;
  logic [6:0] ik, ok;
  coef_t iy, fr, od;
  longint unsigned F, f0, zi, y;

  decoder34 #(.NH(128), .Q(KY_Q), .OMEGA(KY_OMEGA)) dut (.clk, .rst_n, .in_valid(iv),
    .in_k(ik), .in_y(iy), .f_ref(fr), .out_valid(ov), .out_k(ok), .out_data(od));

  initial begin
    iv = 0; ik = 0; iy = 0; fr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++)
      for (int k = 0; k < 128; k++) begin
        @(negedge clk);
        F = $urandom % KY_Q; f0 = $urandom % KY_Q;
        zi = inv_mod(pow_mod(KY_OMEGA, 2 * bitrev(k, 7) + 1, KY_Q), KY_Q);
        y = (2 * F + ((F + 2 * KY_Q - 2 * f0) % KY_Q) * zi) % KY_Q;
        iv = 1; ik = 7'(k); iy = coef_t'(y); fr = coef_t'(f0);
        @(posedge clk); #1;
        checks++;
        if (!ov || 64'(od) != F || ok != 7'(k)) begin
          failures++; if (failures < 10) $display("FAIL k=%0d got %0d exp %0d", k, od, F); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
