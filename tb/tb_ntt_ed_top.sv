// tb_ntt_ed_top: end-to-end test of the whole design at its default sizes
// (n = 256 for both datapaths, q = 7681 and q = 3329). Both datapaths run
// concurrently. Expected values are computed directly in the testbench:
//   NWC:   h(k) = NTT(f psi^i)(k) * NTT(g psi^i)(k) by direct summation, and
//          the product f*g mod (x^256 + 1) by schoolbook multiplication,
//   Kyber: the reference layer loop of the Kyber NTT.
// Each mechanism of the error-detection schemes is made to happen and counted:
//   clean operation without false alarm (both datapaths),
//   NTT butterfly fault caught by the h(0) check,
//   NTT fault that never reaches h(0) and escapes (the blind spot of a
//     single-coefficient check, which is why its coverage is partial),
//   pre-processor multiplier fault caught by the shifted recomputation,
//   component-wise multiplication fault caught,
//   Kyber butterfly fault caught by the 256-output sum check,
//   Kyber burst fault caught,
//   the combined error indicator.
// A mechanism that never occurs counts as a failure.
module tb_ntt_ed_top;
  import ntt_pkg::*;
  localparam int unsigned N = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // NWC side
  logic       n_we, n_sel, n_start, n_busy, n_done, n_hv, n_ov, n_ep, n_en;
  logic [7:0] n_addr, n_hidx, n_idx, n_pwpos;
  coef_t      n_data, n_hd, n_od, n_perr, n_pwerr;
  fault_t     n_ff, n_fg;
  logic       n_pf, n_pg, n_pw;
  logic [1:0] n_lane;
  // Kyber side
  logic       k_start, k_busy, k_done, k_iv, k_ir, k_ov, k_err;
  coef_t      k_id, k_oe, k_oo;
  logic [6:0] k_k;
  logic [15:0] k_bf;
  fault_t     k_fe, k_fo;
  logic       err;

  ntt_ed_top dut (
    .clk, .rst_n,
    .nwc_load_we(n_we), .nwc_load_sel(n_sel), .nwc_load_addr(n_addr), .nwc_load_data(n_data),
    .nwc_start(n_start), .nwc_busy(n_busy), .nwc_done(n_done), .nwc_h_valid(n_hv), .nwc_h_idx(n_hidx), .nwc_h_data(n_hd), .nwc_out_valid(n_ov),
    .nwc_out_idx(n_idx), .nwc_out_data(n_od), .nwc_err_pre(n_ep), .nwc_err_ntt(n_en),
    .nwc_fi_ntt_f(n_ff), .nwc_fi_ntt_g(n_fg), .nwc_fi_pre_f_en(n_pf), .nwc_fi_pre_g_en(n_pg),
    .nwc_fi_pre_lane(n_lane), .nwc_fi_pre_err(n_perr), .nwc_fi_pw_en(n_pw),
    .nwc_fi_pw_pos(n_pwpos), .nwc_fi_pw_err(n_pwerr),
    .ky_start(k_start), .ky_busy(k_busy), .ky_done(k_done), .ky_in_valid(k_iv),
    .ky_in_ready(k_ir), .ky_in_data(k_id), .ky_out_valid(k_ov), .ky_out_k(k_k),
    .ky_out_even(k_oe), .ky_out_odd(k_oo), .ky_err(k_err), .ky_bf_total(k_bf),
    .ky_fi_even(k_fe), .ky_fi_odd(k_fo), .err);

  int unsigned f [N];
  int unsigned g [N];
  int unsigned kf [N];
  longint unsigned href [N];
  longint unsigned cref [N];
  longint unsigned kref [N];
  int n_nout, n_nbad, n_cout, n_cbad, k_nout, k_nbad;

  // mechanism counters
  int m_nwc_clean, m_nwc_ntt_caught, m_nwc_escape, m_nwc_pre_caught, m_nwc_pw_caught;
  int m_ky_clean, m_ky_caught, m_ky_burst_caught, m_combined;

  always @(posedge clk) if (rst_n) begin
    if (n_hv) begin n_nout++; if (64'(n_hd) != href[n_hidx]) n_nbad++; end
    if (n_ov) begin n_cout++; if (64'(n_od) != cref[n_idx]) n_cbad++; end
    if (k_ov) begin
      k_nout++;
      if (64'(k_oe) != kref[2 * k_k] || 64'(k_oo) != kref[2 * k_k + 1]) k_nbad++;
    end
  end

  task automatic nwc_ref();
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

  task automatic ky_ref();
    int k, j, st;
    longint unsigned z, t;
    for (int i = 0; i < N; i++) kref[i] = kf[i];
    k = 1;
    for (int len = 128; len >= 2; len = len / 2)
      for (st = 0; st < 256; st = j + len) begin
        z = pow_mod(KY_OMEGA, bitrev(k, 7), KY_Q);
        k++;
        for (j = st; j < st + len; j++) begin
          t = (z * kref[j + len]) % KY_Q;
          kref[j + len] = (kref[j] + KY_Q - t) % KY_Q;
          kref[j] = (kref[j] + t) % KY_Q;
        end
      end
  endtask

  task automatic nwc_run();
    for (int i = 0; i < 2 * N; i++) begin
      @(negedge clk);
      n_we = 1; n_sel = (i >= N); n_addr = 8'(i % N);
      n_data = coef_t'((i < N) ? f[i] : g[i - N]);
    end
    @(negedge clk); n_we = 0; n_nout = 0; n_nbad = 0; n_cout = 0; n_cbad = 0; n_start = 1;
    @(negedge clk); n_start = 0;
    while (!n_done) @(negedge clk);
  endtask

  task automatic ky_run();
    k_nout = 0; k_nbad = 0;
    @(negedge clk); k_start = 1;
    @(negedge clk); k_start = 0;
    for (int i = 0; i < N; i++) begin
      k_iv = 1; k_id = coef_t'(kf[i]);
      @(negedge clk);
      while (!k_ir && i < N - 1) @(negedge clk);
    end
    k_iv = 0;
    while (!k_done) @(negedge clk);
  endtask

  task automatic both_run();
    fork
      nwc_run();
      ky_run();
    join
  endtask

  function automatic bit nwc_ok();  return n_nout == N && n_nbad == 0 && n_cout == N && n_cbad == 0; endfunction
  function automatic bit ky_ok();   return k_nout == N / 2 && k_nbad == 0; endfunction

  initial begin
    n_we = 0; n_sel = 0; n_addr = 0; n_data = 0; n_start = 0; n_ff = '0; n_fg = '0;
    n_pf = 0; n_pg = 0; n_pw = 0; n_lane = 0; n_perr = 0; n_pwpos = 0; n_pwerr = 0;
    k_start = 0; k_iv = 0; k_id = 0; k_fe = '0; k_fo = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      f[i] = $urandom % NWC_Q; g[i] = $urandom % NWC_Q; kf[i] = $urandom % KY_Q;
    end
    nwc_ref();
    ky_ref();

    // 1. clean, both datapaths at once
    both_run();
    checks++; if (nwc_ok() && !n_ep && !n_en) m_nwc_clean++; else begin failures++; $display("FAIL NWC clean run"); end
    checks++; if (ky_ok() && !k_err && k_bf == 16'd896) m_ky_clean++; else begin failures++; $display("FAIL Kyber clean run"); end
    checks++; if (err) begin failures++; $display("FAIL combined indicator false alarm"); end

    // 2. faults in both datapaths at once
    n_ff = '{en: 1'b1, burst: 1'b0, index: 16'd3, pos: FI_ADD, err: 13'd4321};
    k_fo = '{en: 1'b1, burst: 1'b0, index: 16'd420, pos: FI_ADD, err: 13'd7};
    both_run();
    checks++; if (n_en && !nwc_ok()) m_nwc_ntt_caught++; else begin failures++; $display("FAIL NWC NTT fault"); end
    checks++; if (k_err && !ky_ok()) m_ky_caught++; else begin failures++; $display("FAIL Kyber fault"); end
    checks++; if (err) m_combined++; else begin failures++; $display("FAIL combined indicator"); end
    n_ff = '0; k_fo = '0;

    // 3. subtractor fault in a first-stage butterfly: it only reaches the odd
    //    frequencies, so h(0) is unchanged, the outputs are wrong and the
    //    single-coefficient check cannot see it
    n_fg = '{en: 1'b1, burst: 1'b0, index: 16'd64, pos: FI_SUB, err: 13'd55};
    k_fe = '{en: 1'b1, burst: 1'b1, index: 16'd440, pos: FI_MUL, err: 13'd99};
    both_run();
    checks++; if (!n_en && !nwc_ok()) m_nwc_escape++; else begin failures++; $display("FAIL NWC escape case"); end
    checks++; if (k_err && !ky_ok()) m_ky_burst_caught++; else begin failures++; $display("FAIL Kyber burst fault"); end
    n_fg = '0; k_fe = '0;

    // 4. pre-processor and component-wise multiplication faults
    //    (the Kyber datapath runs clean meanwhile: the combined indicator must
    //    still report the NWC error)
    n_pf = 1; n_lane = 2'd1; n_perr = 13'd1;
    both_run();
    checks++; if (n_ep && !n_en) m_nwc_pre_caught++; else begin failures++; $display("FAIL pre-processor fault"); end
    checks++; if (err && !k_err && ky_ok()) m_combined++; else begin failures++; $display("FAIL combined indicator, one error"); end
    n_pf = 0;
    n_pw = 1; n_pwpos = 8'd0; n_pwerr = 13'd2000;
    nwc_run();
    checks++; if (n_en && !n_ep) m_nwc_pw_caught++; else begin failures++; $display("FAIL component-wise fault"); end
    n_pw = 0;

    // 5. clean again: flags clear
    both_run();
    checks++; if (!nwc_ok() || !ky_ok() || err) begin failures++; $display("FAIL final clean run"); end

    $display("mechanisms: nwc_clean=%0d nwc_ntt_caught=%0d nwc_escape=%0d nwc_pre_caught=%0d nwc_pw_caught=%0d",
             m_nwc_clean, m_nwc_ntt_caught, m_nwc_escape, m_nwc_pre_caught, m_nwc_pw_caught);
    $display("mechanisms: ky_clean=%0d ky_caught=%0d ky_burst_caught=%0d combined=%0d",
             m_ky_clean, m_ky_caught, m_ky_burst_caught, m_combined);
    checks++; if (m_nwc_clean == 0 || m_nwc_ntt_caught == 0 || m_nwc_escape == 0 ||
                  m_nwc_pre_caught == 0 || m_nwc_pw_caught == 0 || m_ky_clean == 0 ||
                  m_ky_caught == 0 || m_ky_burst_caught == 0 || m_combined == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
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
