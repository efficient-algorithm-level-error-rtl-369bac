// tb_ntt_core: checks ntt_core against a direct evaluation of the transform.
//   cyclic mode, n = 256, q = 7681, omega = 3844: out[p] = sum_j x[j]*omega^(k*j),
//     k = bitrev8(p);
//   Kyber mode, 128 points, q = 3329, omega = 17: out[k] = sum_j x[j]*zeta_k^j,
//     zeta_k = 17^(2*bitrev7(k)+1).
// Also checks the cycle count (log2(n)*n/2 butterflies, one per cycle, done one
// cycle after the last butterfly, so start-to-done is n/2*log2(n) + 1) and that
// an injected butterfly fault changes the output.
module tb_ntt_core;
  import ntt_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // cyclic core
  logic        we_c, st_c, busy_c, done_c;
  logic [7:0]  la_c, ra_c;
  coef_t       ld_c, rd_c;
  logic [15:0] bfc_c;
  fault_t      f_c;
  ntt_core #(.NPTS(256), .Q(NWC_Q), .OMEGA(NWC_OMEGA), .KYBER(1'b0)) dut_c (
    .clk, .rst_n, .load_we(we_c), .load_addr(la_c), .load_data(ld_c), .rd_addr(ra_c),
    .rd_data(rd_c), .start(st_c), .busy(busy_c), .done(done_c), .bf_count(bfc_c), .fault(f_c));

  // Kyber half core
  logic        we_k, st_k, busy_k, done_k;
  logic [6:0]  la_k, ra_k;
  coef_t       ld_k, rd_k;
  logic [15:0] bfc_k;
  fault_t      f_k;
  ntt_core #(.NPTS(128), .Q(KY_Q), .OMEGA(KY_OMEGA), .KYBER(1'b1)) dut_k (
    .clk, .rst_n, .load_we(we_k), .load_addr(la_k), .load_data(ld_k), .rd_addr(ra_k),
    .rd_data(rd_k), .start(st_k), .busy(busy_k), .done(done_k), .bf_count(bfc_k), .fault(f_k));

  int unsigned xc [256];
  int unsigned xk [128];
  longint unsigned ref_c [256];
  longint unsigned ref_k [128];

  task automatic run_cyclic(input bit faulty, output int nbad, output int cycles);
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we_c = 1; la_c = 8'(i); ld_c = coef_t'(xc[i]);
    end
    @(negedge clk); we_c = 0; st_c = 1;
    @(negedge clk); st_c = 0; cycles = 1;
    while (!done_c) begin @(negedge clk); cycles++; end
    nbad = 0;
    for (int p = 0; p < 256; p++) begin
      ra_c = 8'(p); #1;
      if (64'(rd_c) != ref_c[bitrev(p, 8)]) nbad++;
    end
  endtask

  task automatic run_kyber(output int nbad, output int cycles);
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); we_k = 1; la_k = 7'(i); ld_k = coef_t'(xk[i]);
    end
    @(negedge clk); we_k = 0; st_k = 1;
    @(negedge clk); st_k = 0; cycles = 1;
    while (!done_k) begin @(negedge clk); cycles++; end
    nbad = 0;
    for (int k = 0; k < 128; k++) begin
      ra_k = 7'(k); #1;
      if (64'(rd_k) != ref_k[k]) nbad++;
    end
  endtask

  initial begin
    int nbad, cyc;
    longint unsigned z, acc;
    we_c = 0; st_c = 0; la_c = 0; ld_c = 0; ra_c = 0; f_c = '0;
    we_k = 0; st_k = 0; la_k = 0; ld_k = 0; ra_k = 0; f_k = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      // ---- cyclic
      for (int i = 0; i < 256; i++) xc[i] = (trial == 0) ? ((i == 1) ? 1 : 0) : $urandom % NWC_Q;
      for (int k = 0; k < 256; k++) begin
        acc = 0;
        for (int j = 0; j < 256; j++)
          acc = (acc + 64'(xc[j]) * pow_mod(NWC_OMEGA, (k * j) % 256, NWC_Q)) % NWC_Q;
        ref_c[k] = acc;
      end
      run_cyclic(0, nbad, cyc);
      checks++; if (nbad != 0) begin failures++; $display("FAIL cyclic trial %0d: %0d wrong", trial, nbad); end
      checks++; if (cyc != 8 * 128 + 1 || bfc_c != 16'(8 * 128)) begin
        failures++; $display("FAIL cyclic cycles %0d bf %0d", cyc, bfc_c); end
      // ---- Kyber half
      for (int i = 0; i < 128; i++) xk[i] = $urandom % KY_Q;
      for (int k = 0; k < 128; k++) begin
        z = pow_mod(KY_OMEGA, 2 * bitrev(k, 7) + 1, KY_Q);
        acc = 0;
        for (int j = 0; j < 128; j++) acc = (acc + 64'(xk[j]) * pow_mod(z, j, KY_Q)) % KY_Q;
        ref_k[k] = acc;
      end
      run_kyber(nbad, cyc);
      checks++; if (nbad != 0) begin failures++; $display("FAIL kyber trial %0d: %0d wrong", trial, nbad); end
      checks++; if (cyc != 7 * 64 + 1 || bfc_k != 16'(448)) begin
        failures++; $display("FAIL kyber cycles %0d bf %0d", cyc, bfc_k); end
    end
    // ---- a fault in the first stage must corrupt outputs; a fault in the
    // last stage at the adder corrupts exactly one output
    f_c = '{en: 1'b1, burst: 1'b0, index: 16'd5, pos: FI_MUL, err: 13'd1};
    run_cyclic(1, nbad, cyc);
    checks++; if (nbad == 0) begin failures++; $display("FAIL fault at stage 0 not visible"); end
    f_c = '{en: 1'b1, burst: 1'b0, index: 16'(7 * 128 + 3), pos: FI_ADD, err: 13'd9};
    run_cyclic(1, nbad, cyc);
    checks++; if (nbad != 1) begin failures++; $display("FAIL last-stage adder fault hit %0d outputs", nbad); end
    f_c = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
