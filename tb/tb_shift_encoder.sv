// tb_shift_encoder: feeds random streams (with idle gaps) into encoders with
// LAG = 1 (q = 7681) and LAG = 2 (q = 3329) and checks every output against
// 2*x[i] + x[(i+LAG) mod N] mod q, that each address appears exactly once,
// the head values and the done pulse.
module tb_shift_encoder;
  import ntt_pkg::*;
  localparam int unsigned N = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       st, iv;
  coef_t      id1, id2;
  logic       ov1, ov2, dn1, dn2;
  logic [7:0] oa1, oa2;
  coef_t      od1, od2;
  coef_t      h1 [1];
  coef_t      h2 [2];
  int unsigned x1 [N];
  int unsigned x2 [N];
  int seen1 [N];
  int seen2 [N];
  int ndone1, ndone2;

  shift_encoder #(.N(N), .Q(NWC_Q), .LAG(1)) dut1 (.clk, .rst_n, .start(st), .in_valid(iv),
    .in_data(id1), .out_valid(ov1), .out_addr(oa1), .out_data(od1), .done(dn1), .head(h1));
  shift_encoder #(.N(N), .Q(KY_Q), .LAG(2)) dut2 (.clk, .rst_n, .start(st), .in_valid(iv),
    .in_data(id2), .out_valid(ov2), .out_addr(oa2), .out_data(od2), .done(dn2), .head(h2));

  always @(posedge clk) if (rst_n) begin
    if (ov1) begin
      checks++; seen1[oa1]++;
      if (64'(od1) != (2 * 64'(x1[oa1]) + 64'(x1[(32'(oa1) + 1) % N])) % NWC_Q) begin
        failures++; $display("FAIL lag1 addr %0d", oa1); end
    end
    if (ov2) begin
      checks++; seen2[oa2]++;
      if (64'(od2) != (2 * 64'(x2[oa2]) + 64'(x2[(32'(oa2) + 2) % N])) % KY_Q) begin
        failures++; $display("FAIL lag2 addr %0d", oa2); end
    end
    if (dn1) ndone1++;
    if (dn2) ndone2++;
  end

  initial begin
    st = 0; iv = 0; id1 = 0; id2 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      for (int i = 0; i < N; i++) begin
        x1[i] = $urandom % NWC_Q; x2[i] = $urandom % KY_Q; seen1[i] = 0; seen2[i] = 0;
      end
      ndone1 = 0; ndone2 = 0;
      @(negedge clk); st = 1;
      @(negedge clk); st = 0;
      for (int i = 0; i < N; i++) begin
        while (($urandom % 4) == 0) begin iv = 0; @(negedge clk); end
        iv = 1; id1 = coef_t'(x1[i]); id2 = coef_t'(x2[i]);
        @(negedge clk);
      end
      iv = 0;
      repeat (5) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (seen1[i] != 1 || seen2[i] != 1) begin failures++; $display("FAIL addr %0d seen %0d/%0d", i, seen1[i], seen2[i]); end
      end
      checks++;
      if (ndone1 != 1 || ndone2 != 1) begin failures++; $display("FAIL done count"); end
      checks++;
      if (32'(h1[0]) != x1[0] || 32'(h2[0]) != x2[0] || 32'(h2[1]) != x2[1]) begin
        failures++; $display("FAIL head"); end
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
