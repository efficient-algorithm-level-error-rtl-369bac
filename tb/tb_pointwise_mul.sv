// tb_pointwise_mul: random pairs through the component-wise multiplier;
// checks a*b mod 7681 one cycle later, the position tag, and the fault input.
module tb_pointwise_mul;
  import ntt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ov, fen;
  logic [7:0] ip, op, fpos;
  coef_t a, b, od, ferr;
  longint unsigned exp_d;
  logic [7:0] exp_p;

  pointwise_mul #(.N(256), .Q(NWC_Q)) dut (.clk, .rst_n, .in_valid(iv), .in_pos(ip),
    .in_a(a), .in_b(b), .out_valid(ov), .out_pos(op), .out_data(od),
    .fi_en(fen), .fi_pos(fpos), .fi_err(ferr));

  initial begin
    iv = 0; ip = 0; a = 0; b = 0; fen = 0; fpos = 0; ferr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      iv = 1; ip = 8'(i); a = coef_t'($urandom % NWC_Q); b = coef_t'($urandom % NWC_Q);
      if (i == 7) begin a = coef_t'(NWC_Q - 1); b = coef_t'(NWC_Q - 1); end
      fen = (i >= 500); fpos = 8'(i + (i % 2));   // fault hits every other sample
      ferr = 13'd5;
      exp_d = (64'(a) * 64'(b)) % NWC_Q;
      if (fen && fpos == ip) exp_d = (exp_d + 5) % NWC_Q;
      exp_p = ip;
      @(posedge clk); #1;
      checks++;
      if (!ov || op != exp_p || 64'(od) != exp_d) begin
        failures++; if (failures < 10) $display("FAIL i=%0d got %0d exp %0d", i, od, exp_d); end
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
