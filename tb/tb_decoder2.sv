// tb_decoder2: for every position p, feeds v = (2 + omega^-k)^2 * r with
// k = bitrev8(p) and a random r (q = 7681, omega = 3844), and checks that the
// decoder returns r, with out_idx = k.
module tb_decoder2;
  import ntt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ov;
  logic [7:0] ip, op, oi;
  coef_t id, od;
  longint unsigned r, s, winv;

  decoder2 #(.N(256), .Q(NWC_Q), .OMEGA(NWC_OMEGA)) dut (.clk, .rst_n, .in_valid(iv),
    .in_pos(ip), .in_data(id), .out_valid(ov), .out_pos(op), .out_idx(oi), .out_data(od));

  initial begin
    iv = 0; ip = 0; id = 0;
    winv = inv_mod(NWC_OMEGA, NWC_Q);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++)
      for (int p = 0; p < 256; p++) begin
        @(negedge clk);
        r = $urandom % NWC_Q;
        s = (2 + pow_mod(winv, bitrev(p, 8), NWC_Q)) % NWC_Q;
        iv = 1; ip = 8'(p); id = coef_t'((((s * s) % NWC_Q) * r) % NWC_Q);
        @(posedge clk); #1;
        checks++;
        if (!ov || 64'(od) != r || op != 8'(p) || 32'(oi) != bitrev(p, 8)) begin
          failures++; if (failures < 10) $display("FAIL p=%0d got %0d exp %0d", p, od, r); end
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
