// tb_preprocessor: checks y[i] = x[i]*psi^i mod q (q = 7681, psi = 62) against
// integer arithmetic, the cycle count (2*N/LANES busy cycles), that err stays
// low without a fault, and that a permanent fault in any one multiplier lane
// is flagged by the shifted recomputation.
module tb_preprocessor;
  import ntt_pkg::*;
  localparam int unsigned N = 256, LANES = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       we, st, busy, done, err, fi_en;
  logic [7:0] la, ra;
  logic [1:0] fi_lane;
  coef_t      ld, rd, fi_err;
  int unsigned x [N];

  preprocessor #(.N(N), .Q(NWC_Q), .PSI(NWC_PSI), .LANES(LANES)) dut (
    .clk, .rst_n, .load_we(we), .load_addr(la), .load_data(ld), .start(st), .busy, .done,
    .err, .rd_addr(ra), .rd_data(rd), .fi_en, .fi_lane, .fi_err);

  task automatic run(output int nbad, output int cycles);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); we = 1; la = 8'(i); ld = coef_t'(x[i]);
    end
    @(negedge clk); we = 0; st = 1;
    @(negedge clk); st = 0; cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    nbad = 0;
    for (int i = 0; i < N; i++) begin
      ra = 8'(i); #1;
      if (64'(rd) != (64'(x[i]) * pow_mod(NWC_PSI, i, NWC_Q)) % NWC_Q) nbad++;
    end
  endtask

  initial begin
    int nbad, cyc;
    we = 0; st = 0; la = 0; ld = 0; ra = 0; fi_en = 0; fi_lane = 0; fi_err = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < N; i++) x[i] = (t == 0) ? NWC_Q - 1 : $urandom % NWC_Q;
      run(nbad, cyc);
      checks++; if (nbad != 0) begin failures++; $display("FAIL %0d wrong products", nbad); end
      checks++; if (err) begin failures++; $display("FAIL false alarm"); end
      checks++; if (cyc != 2 * N / LANES + 1) begin failures++; $display("FAIL cycles %0d", cyc); end
    end
    for (int l = 0; l < LANES; l++) begin
      fi_en = 1; fi_lane = 2'(l); fi_err = coef_t'(1 + $urandom % (NWC_Q - 1));
      run(nbad, cyc);
      checks++; if (!err) begin failures++; $display("FAIL lane %0d fault not detected", l); end
    end
    fi_en = 0;
    run(nbad, cyc);
    checks++; if (err || nbad != 0) begin failures++; $display("FAIL err not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
