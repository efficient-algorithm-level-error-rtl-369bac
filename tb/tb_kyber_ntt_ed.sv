// tb_kyber_ntt_ed: end-to-end test of the error-detected Kyber NTT
// (n = 256, q = 3329, omega = 17). The expected output is produced by a
// behavioural copy of the Kyber reference NTT loop (layers len = 128 .. 2,
// zeta = 17^bitrev7(k) with k counting from 1, plain modular arithmetic in
// place of Montgomery form). Checks every output, err, the latency, the
// butterfly count (896) and the error detection for faults in the last
// layer of either half, which always change the output sum.
module tb_kyber_ntt_ed;
  import ntt_pkg::*;
  localparam int unsigned N = 256;
  localparam int unsigned LAT = N + 7 * 64 + 135;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, iv, ir, ov, err;
  coef_t id, oe, oo;
  logic [6:0] ok;
  logic [15:0] bft;
  fault_t fe, fo;

  kyber_ntt_ed dut (.clk, .rst_n, .start, .busy, .done, .in_valid(iv), .in_ready(ir),
    .in_data(id), .out_valid(ov), .out_k(ok), .out_even(oe), .out_odd(oo), .err,
    .bf_total(bft), .fi_even(fe), .fi_odd(fo));

  int unsigned f [N];
  longint unsigned r [N];
  int nout, nbad, lat;

  always @(posedge clk) if (rst_n && ov) begin
    nout++;
    if (64'(oe) != r[2 * ok] || 64'(oo) != r[2 * ok + 1]) nbad++;
  end

  task automatic ref_ntt();
    int k, j, st;
    longint unsigned z, t;
    for (int i = 0; i < N; i++) r[i] = f[i];
    k = 1;
    for (int len = 128; len >= 2; len = len / 2) begin
      for (st = 0; st < 256; st = j + len) begin
        z = pow_mod(KY_OMEGA, bitrev(k, 7), KY_Q);
        k++;
        for (j = st; j < st + len; j++) begin
          t = (z * r[j + len]) % KY_Q;
          r[j + len] = (r[j] + KY_Q - t) % KY_Q;
          r[j] = (r[j] + t) % KY_Q;
        end
      end
    end
  endtask

  task automatic run();
    nout = 0; nbad = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; lat = 1;
    for (int i = 0; i < N; i++) begin
      iv = 1; id = coef_t'(f[i]);
      @(negedge clk); lat++;
    end
    iv = 0;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  initial begin
    start = 0; iv = 0; id = 0; fe = '0; fo = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < N; i++) f[i] = (t == 0) ? ((i == 0) ? 1 : 0) : $urandom % KY_Q;
      ref_ntt();
      run();
      checks++; if (nout != 128 || nbad != 0) begin failures++; $display("FAIL run %0d: %0d pairs, %0d wrong", t, nout, nbad); end
      checks++; if (err) begin failures++; $display("FAIL run %0d: false alarm", t); end
      checks++; if (lat != LAT) begin failures++; $display("FAIL latency %0d expected %0d", lat, LAT); end
      checks++; if (bft != 16'd896) begin failures++; $display("FAIL butterflies %0d", bft); end
    end
    fe = '{en: 1'b1, burst: 1'b0, index: 16'd400, pos: FI_ADD, err: 13'd12};
    run();
    checks++; if (!err || nbad == 0) begin failures++; $display("FAIL even-half fault not flagged"); end
    fe = '0;
    fo = '{en: 1'b1, burst: 1'b0, index: 16'd447, pos: FI_SUB, err: 13'd1000};
    run();
    checks++; if (!err || nbad == 0) begin failures++; $display("FAIL odd-half fault not flagged"); end
    fo = '0;
    run();
    checks++; if (err || nbad != 0) begin failures++; $display("FAIL flag not cleared"); end
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
