// tb_intt_postprocess: loads random h(k) in a scrambled order and checks
//   c[i] = n^-1 psi^-i sum_k h(k) omega^(-ik)  mod 7681
// computed directly, plus the latency (n/2*log2 n + n + 2) and that every index
// appears once.
module tb_intt_postprocess;
  import ntt_pkg::*;
  localparam int unsigned N = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, st, busy, done, ov;
  logic [7:0] ii, oi;
  coef_t id, od;
  int unsigned h [N];
  longint unsigned cref [N];
  int seen [N];
  int nbad, lat;

  intt_postprocess dut (.clk, .rst_n, .in_valid(iv), .in_idx(ii), .in_data(id), .start(st),
    .busy, .done, .out_valid(ov), .out_idx(oi), .out_data(od));

  always @(posedge clk) if (rst_n && ov) begin
    seen[oi]++;
    if (64'(od) != cref[oi]) nbad++;
  end

  initial begin
    longint unsigned winv, pinv, ninv, acc;
    iv = 0; ii = 0; id = 0; st = 0;
    winv = inv_mod(NWC_OMEGA, NWC_Q); pinv = inv_mod(NWC_PSI, NWC_Q); ninv = inv_mod(N, NWC_Q);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      for (int k = 0; k < N; k++) begin h[k] = $urandom % NWC_Q; seen[k] = 0; end
      for (int i = 0; i < N; i++) begin
        acc = 0;
        for (int k = 0; k < N; k++) acc = (acc + 64'(h[k]) * pow_mod(winv, (i * k) % N, NWC_Q)) % NWC_Q;
        cref[i] = (((acc * ninv) % NWC_Q) * pow_mod(pinv, i, NWC_Q)) % NWC_Q;
      end
      for (int k = 0; k < N; k++) begin
        @(negedge clk); iv = 1; ii = 8'((k * 37 + t) % N); id = coef_t'(h[(k * 37 + t) % N]);
      end
      @(negedge clk); iv = 0; st = 1; nbad = 0;
      @(negedge clk); st = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      @(negedge clk);   // the last coefficient is sampled at the next edge
      checks++; if (nbad != 0) begin failures++; $display("FAIL %0d wrong", nbad); end
      for (int i = 0; i < N; i++) begin
        checks++; if (seen[i] != 1) begin failures++; $display("FAIL index %0d seen %0d", i, seen[i]); end
      end
      checks++; if (lat != (N / 2) * 8 + N + 2) begin failures++; $display("FAIL latency %0d", lat); end
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
