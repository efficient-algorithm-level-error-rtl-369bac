// tb_nwc_ed_mult: end-to-end test of the error-detected NWC multiplication
// core at n = 256, q = 7681. The expected results are computed directly:
//   h(k) = (sum_j f[j] psi^(j(2k+1))) * (sum_j g[j] psi^(j(2k+1)))  mod q,
// i.e. the cyclic NTT of the pre-processed inputs, multiplied component-wise,
// and the product c = f*g mod (x^n + 1) by schoolbook multiplication.
// Checks every h and c value and index, the error flags, the latency, and
// that faults are flagged: an adder fault in a first-stage butterfly of either
// NTT, a permanent multiplier fault in a preprocessor, a fault on h(0) in the
// component-wise multiplier.
module tb_nwc_ed_mult;
  import ntt_pkg::*;
  localparam int unsigned N = 256, LANES = 4;
  localparam int unsigned LAT = 2 * N / LANES + N + 1 + (N / 2) * 8 + N + 7 + (N / 2) * 8 + N + 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load_we, load_sel, start, busy, done, hv, ov, err_pre, err_ntt, err;
  logic [7:0] load_addr, hidx, oidx;
  coef_t load_data, hd, od;
  fault_t fi_f, fi_g;
  logic fi_pf, fi_pg, fi_pw;
  logic [1:0] fi_lane;
  logic [7:0] fi_pos;
  coef_t fi_perr, fi_pwerr;

  nwc_ed_mult #(.N(N), .LANES(LANES)) dut (
    .clk, .rst_n, .load_we, .load_sel, .load_addr, .load_data, .start, .busy, .done,
    .h_valid(hv), .h_idx(hidx), .h_data(hd), .out_valid(ov), .out_idx(oidx), .out_data(od), .err_pre, .err_ntt, .err,
    .fi_ntt_f(fi_f), .fi_ntt_g(fi_g), .fi_pre_f_en(fi_pf), .fi_pre_g_en(fi_pg),
    .fi_pre_lane(fi_lane), .fi_pre_err(fi_perr), .fi_pw_en(fi_pw), .fi_pw_pos(fi_pos),
    .fi_pw_err(fi_pwerr));

  int unsigned f [N];
  int unsigned g [N];
  longint unsigned href [N];
  longint unsigned cref [N];
  int nout, nbad, ncout, ncbad, lat;

  always @(posedge clk) if (rst_n) begin
    if (hv) begin nout++; if (64'(hd) != href[hidx]) nbad++; end
    if (ov) begin ncout++; if (64'(od) != cref[oidx]) ncbad++; end
  end

  task automatic make_ref();
    longint unsigned z, pz, sf, sg;
    for (int k = 0; k < N; k++) begin
      z = pow_mod(NWC_PSI, 2 * k + 1, NWC_Q);
      pz = 1; sf = 0; sg = 0;
      for (int j = 0; j < N; j++) begin
        sf = (sf + 64'(f[j]) * pz) % NWC_Q;
        sg = (sg + 64'(g[j]) * pz) % NWC_Q;
        pz = (pz * z) % NWC_Q;
      end
      href[k] = (sf * sg) % NWC_Q;
    end
    for (int i = 0; i < N; i++) cref[i] = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        if (i + j < N) cref[i + j] = (cref[i + j] + 64'(f[i]) * g[j]) % NWC_Q;
        else cref[i + j - N] = (cref[i + j - N] + NWC_Q * NWC_Q - 64'(f[i]) * g[j]) % NWC_Q;
  endtask

  task automatic run();
    for (int i = 0; i < 2 * N; i++) begin
      @(negedge clk);
      load_we = 1; load_sel = (i >= N); load_addr = 8'(i % N);
      load_data = coef_t'((i < N) ? f[i] : g[i - N]);
    end
    @(negedge clk); load_we = 0;
    nout = 0; nbad = 0; ncout = 0; ncbad = 0;
    start = 1;
    @(negedge clk); start = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  task automatic expect_clean(string tag);
    checks++;
    if (nout != N || nbad != 0) begin failures++; $display("FAIL %s: %0d outputs, %0d wrong", tag, nout, nbad); end
    checks++;
    if (ncout != N || ncbad != 0) begin failures++; $display("FAIL %s: %0d product coefficients, %0d wrong", tag, ncout, ncbad); end
    checks++;
    if (err || err_pre || err_ntt) begin failures++; $display("FAIL %s: false alarm", tag); end
    checks++;
    if (lat != LAT) begin failures++; $display("FAIL %s: latency %0d expected %0d", tag, lat, LAT); end
  endtask

  initial begin
    load_we = 0; load_sel = 0; load_addr = 0; load_data = 0; start = 0;
    fi_f = '0; fi_g = '0; fi_pf = 0; fi_pg = 0; fi_pw = 0; fi_lane = 0; fi_pos = 0;
    fi_perr = 0; fi_pwerr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      for (int i = 0; i < N; i++) begin
        f[i] = (t == 0) ? ((i < 2) ? 1 : 0) : $urandom % NWC_Q;
        g[i] = (t == 0) ? NWC_Q - 1 : $urandom % NWC_Q;
      end
      make_ref();
      run();
      expect_clean($sformatf("clean run %0d", t));
    end
    // adder fault in a first-stage butterfly of the f transform
    fi_f = '{en: 1'b1, burst: 1'b0, index: 16'd17, pos: FI_ADD, err: 13'd100};
    run();
    checks++; if (!err_ntt || !err || err_pre) begin failures++; $display("FAIL NTT-f fault not flagged"); end
    checks++; if (nbad == 0) begin failures++; $display("FAIL NTT-f fault had no effect"); end
    fi_f = '0;
    // adder fault in the g transform (a subtractor fault in stage 0 only
    // reaches the odd frequencies, which the h(0) check does not see)
    fi_g = '{en: 1'b1, burst: 1'b0, index: 16'd90, pos: FI_ADD, err: 13'd3};
    run();
    checks++; if (!err_ntt) begin failures++; $display("FAIL NTT-g fault not flagged"); end
    fi_g = '0;
    // permanent multiplier fault in the g preprocessor
    fi_pg = 1; fi_lane = 2'd2; fi_perr = 13'd77;
    run();
    checks++; if (!err_pre || !err) begin failures++; $display("FAIL preprocessor fault not flagged"); end
    fi_pg = 0;
    // fault on h(0) in the component-wise multiplier
    fi_pw = 1; fi_pos = 8'd0; fi_pwerr = 13'd1;
    run();
    checks++; if (!err_ntt) begin failures++; $display("FAIL component-wise fault not flagged"); end
    fi_pw = 0;
    run();
    expect_clean("clean after faults");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
