// tb_fault_campaign: fault-injection campaign on the two error-detected
// datapaths at their default sizes, measuring detection ratios in the manner of
// the coverage tables of the scheme (single / multiple faults, normal and burst
// injection).
//
// Fault model, as described for the scheme: a fault hits one of the three
// modules of a butterfly (multiplier, adder, subtractor, each with probability
// 1/3); no two faults fall in the same butterfly. In normal mode F faults are
// spread over distinct operations chosen uniformly among all butterflies of
// the protected transform(s): the 2 x 1024 of the two NWC forward NTTs plus
// the 256 component-wise multiplications, or the 896 of the Kyber NTT. In burst mode F consecutive butterflies of one Kyber
// half are faulty. The value added by a fault is uniform in 1..q-1 (the scheme
// does not state the fault value; this is this campaign's choice).
//
// The cores hold one fault request each; several faults per run are obtained
// by moving each core's request on to the next scheduled butterfly as soon as
// the previous one has been executed (the request is compared with the core's
// butterfly counter, which the testbench watches).
//
// For every sample the checked output (the component-wise product h of the
// NWC datapath, all 256 outputs of the Kyber NTT) is compared with a fault-free
// run on the same input. A sample is "detected" when the error indicator rises,
// "corrupted" when the output differs. Checks:
//   - the indicator never rises when the output is correct (no false alarm),
//   - the fault-free run raises no indicator and matches the reference,
//   - each configuration produces detections,
//   - the single-fault NWC campaign contains escapes: the check of the single
//     coefficient h(0) cannot see faults that never reach it,
//   - a permanent pre-processor multiplier fault is always detected (the two
//     steps use different multipliers for every element),
//   - with 1..16 transient faults in single pre-process multiplications,
//     every run whose output is corrupted is flagged (a fault that hits only
//     the recomputation is flagged too, with the output intact),
//   - detection does not fall as the number of faults grows from 1 to 16.
// Sample counts are far smaller than the million samples of the scheme's own
// simulations; the printed ratios carry the corresponding statistical spread.
module tb_fault_campaign;
  import ntt_pkg::*;
  localparam int unsigned N      = 256;
  localparam int unsigned NWC_S  = 80;    // samples per NWC configuration
  localparam int unsigned KY_S   = 100;   // samples per Kyber configuration
  localparam int unsigned PRE_S  = 24;    // permanent pre-processor fault samples
  localparam int unsigned PRT_S  = 40;    // transient pre-processor samples per fault count
  localparam int unsigned NWC_BF = 1024;  // butterflies per NWC forward NTT
  localparam int unsigned KY_BF  = 448;   // butterflies per Kyber half

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    #400ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ---------------- NWC datapath ----------------
  logic       n_we, n_sel, n_start, n_busy, n_done, n_hv, n_ov, n_ep, n_en, n_err;
  logic [7:0] n_addr, n_hidx, n_oidx;
  coef_t      n_data, n_hd, n_od, n_perr;
  logic       n_pf, n_pg;
  logic [1:0] n_lane;
  fault_t     flt [4];   // 0: NWC f, 1: NWC g, 2: Kyber even, 3: Kyber odd
  logic       pw_en;
  logic [7:0] pw_pos;
  coef_t      pw_err;

  nwc_ed_mult u_nwc (
    .clk, .rst_n, .load_we(n_we), .load_sel(n_sel), .load_addr(n_addr), .load_data(n_data),
    .start(n_start), .busy(n_busy), .done(n_done), .h_valid(n_hv), .h_idx(n_hidx), .h_data(n_hd),
    .out_valid(n_ov), .out_idx(n_oidx), .out_data(n_od), .err_pre(n_ep), .err_ntt(n_en), .err(n_err),
    .fi_ntt_f(flt[0]), .fi_ntt_g(flt[1]), .fi_pre_f_en(n_pf), .fi_pre_g_en(n_pg),
    .fi_pre_lane(n_lane), .fi_pre_err(n_perr), .fi_pw_en(pw_en), .fi_pw_pos(pw_pos), .fi_pw_err(pw_err));

  // ---------------- Kyber datapath ----------------
  logic        k_start, k_busy, k_done, k_iv, k_ir, k_ov, k_err;
  coef_t       k_id, k_oe, k_oo;
  logic [6:0]  k_k;
  logic [15:0] k_bf;

  kyber_ntt_ed u_ky (
    .clk, .rst_n, .start(k_start), .busy(k_busy), .done(k_done), .in_valid(k_iv),
    .in_ready(k_ir), .in_data(k_id), .out_valid(k_ov), .out_k(k_k), .out_even(k_oe),
    .out_odd(k_oo), .err(k_err), .bf_total(k_bf), .fi_even(flt[2]), .fi_odd(flt[3]));

  // ---------------- fault scheduler ----------------
  // sched[c] holds the faults of core c in increasing butterfly order.
  fault_t sched [4][$];
  int     ptr [4];
  logic        cbusy [4];
  logic [15:0] ccount [4];
  assign cbusy[0] = u_nwc.u_ntt_f.busy;   assign ccount[0] = u_nwc.u_ntt_f.bf_count;
  assign cbusy[1] = u_nwc.u_ntt_g.busy;   assign ccount[1] = u_nwc.u_ntt_g.bf_count;
  assign cbusy[2] = u_ky.u_ntt_even.busy; assign ccount[2] = u_ky.u_ntt_even.bf_count;
  assign cbusy[3] = u_ky.u_ntt_odd.busy;  assign ccount[3] = u_ky.u_ntt_odd.bf_count;

  // Pre-processor faults. Permanent: perm_* hold one multiplier faulty for a
  // whole run. Transient: pre_lane[s][c] (lane + 1, 0 for none) and pre_err
  // make one multiplication of step s, chunk c faulty; pre_sel chooses the
  // pre-processor (0: f, 1: g). The two pre-processors run in lockstep and
  // share the lane and value inputs, so at most one transient fault is
  // scheduled per (step, chunk).
  logic  perm_f, perm_g;
  logic [1:0] perm_lane;
  coef_t perm_err;
  int    pre_lane [2][64];
  coef_t pre_err  [2][64];
  bit    pre_sel  [2][64];

  always @(negedge clk) begin
    int s, c;
    s = int'(u_nwc.u_pre_f.step2);
    c = int'(u_nwc.u_pre_f.chunk);
    if (u_nwc.u_pre_f.busy && pre_lane[s][c] != 0) begin
      n_pf = !pre_sel[s][c]; n_pg = pre_sel[s][c];
      n_lane = 2'(pre_lane[s][c] - 1); n_perr = pre_err[s][c];
    end else begin
      n_pf = perm_f; n_pg = perm_g; n_lane = perm_lane; n_perr = perm_err;
    end
  end

  task automatic plan_pre(int nf);
    int s, c;
    for (s = 0; s < 2; s++) for (c = 0; c < 64; c++) pre_lane[s][c] = 0;
    for (int i = 0; i < nf; i++) begin
      do begin s = $urandom % 2; c = $urandom % 64; end while (pre_lane[s][c] != 0);
      pre_lane[s][c] = 1 + $urandom % 4;
      pre_err[s][c]  = coef_t'(1 + $urandom % (NWC_Q - 1));
      pre_sel[s][c]  = 1'($urandom % 2);
    end
  endtask

  always @(negedge clk) begin
    for (int c = 0; c < 4; c++) begin
      if (cbusy[c])
        while (ptr[c] < sched[c].size() && sched[c][ptr[c]].index < ccount[c]) ptr[c]++;
      flt[c] = (ptr[c] < sched[c].size()) ? sched[c][ptr[c]] : '0;
    end
  end

  function automatic fault_t rand_fault(int unsigned idx, int unsigned q);
    fault_t f;
    f.en = 1'b1;
    f.burst = 1'b0;
    f.index = 16'(idx);
    case ($urandom % 3)
      0:       f.pos = FI_MUL;
      1:       f.pos = FI_ADD;
      default: f.pos = FI_SUB;
    endcase
    f.err = coef_t'(1 + $urandom % (q - 1));
    return f;
  endfunction

  // F distinct butterflies among ncore cores of nbf butterflies each
  task automatic plan_normal(int c0, int ncore, int nbf, int nf, int unsigned q);
    bit hit [];
    int pick;
    hit = new[ncore * nbf];
    for (int i = 0; i < nf; i++) begin
      do pick = $urandom % (ncore * nbf); while (hit[pick]);
      hit[pick] = 1'b1;
    end
    for (int c = 0; c < ncore; c++) begin
      sched[c0 + c].delete(); ptr[c0 + c] = 0;
      for (int b = 0; b < nbf; b++)
        if (hit[c * nbf + b]) sched[c0 + c].push_back(rand_fault(b, q));
    end
  endtask

  // F consecutive butterflies of one Kyber half
  task automatic plan_burst(int nf);
    int c, s;
    sched[2].delete(); sched[3].delete(); ptr[2] = 0; ptr[3] = 0;
    c = 2 + $urandom % 2;
    s = $urandom % (KY_BF - nf + 1);
    for (int b = s; b < s + nf; b++) sched[c].push_back(rand_fault(b, KY_Q));
  endtask

  // Faults in the component-wise multiplier: pw_sched holds the faulty
  // positions; the request moves on once its position has been multiplied.
  int    pw_sched [$];
  coef_t pw_val [$];
  int    pw_ptr;

  always @(posedge clk)
    if (u_nwc.u_pw.in_valid && pw_ptr < pw_sched.size() && int'(u_nwc.u_pw.in_pos) == pw_sched[pw_ptr])
      pw_ptr++;
  always @(negedge clk) begin
    pw_en  = pw_ptr < pw_sched.size();
    pw_pos = pw_en ? 8'(pw_sched[pw_ptr]) : 8'd0;
    pw_err = pw_en ? pw_val[pw_ptr] : '0;
  end

  // NWC normal mode: F distinct faulty operations among the 2 x 1024
  // butterflies of the forward NTTs and the N component-wise multiplications,
  // the latter in the order the multiplier visits them (bit-reversed positions
  // 0, 1, 2, ...).
  task automatic plan_nwc(int nf);
    bit hit [];
    int pick;
    hit = new[2 * NWC_BF + N];
    for (int i = 0; i < nf; i++) begin
      do pick = $urandom % (2 * NWC_BF + N); while (hit[pick]);
      hit[pick] = 1'b1;
    end
    for (int c = 0; c < 2; c++) begin
      sched[c].delete(); ptr[c] = 0;
      for (int b = 0; b < NWC_BF; b++)
        if (hit[c * NWC_BF + b]) sched[c].push_back(rand_fault(b, NWC_Q));
    end
    pw_sched.delete(); pw_val.delete(); pw_ptr = 0;
    for (int p = 0; p < N; p++)
      if (hit[2 * NWC_BF + p]) begin
        pw_sched.push_back(p);
        pw_val.push_back(coef_t'(1 + $urandom % (NWC_Q - 1)));
      end
  endtask

  task automatic clear_nwc();
    sched[0].delete(); sched[1].delete(); ptr[0] = 0; ptr[1] = 0;
    pw_sched.delete(); pw_val.delete(); pw_ptr = 0;
  endtask
  task automatic clear_ky();  sched[2].delete(); sched[3].delete(); ptr[2] = 0; ptr[3] = 0; endtask

  // ---------------- stimulus and capture ----------------
  int unsigned f [N];
  int unsigned g [N];
  int unsigned kf [N];
  coef_t h_gold [N];
  coef_t k_gold [N];
  coef_t h_run [N];
  coef_t k_run [N];
  int    n_cnt, k_cnt;

  always @(posedge clk) if (rst_n) begin
    if (n_hv) begin h_run[n_hidx] <= n_hd; n_cnt <= n_cnt + 1; end
    if (k_ov) begin
      k_run[2 * k_k] <= k_oe; k_run[2 * k_k + 1] <= k_oo; k_cnt <= k_cnt + 1;
    end
  end

  task automatic nwc_run();
    for (int i = 0; i < 2 * N; i++) begin
      @(negedge clk);
      n_we = 1; n_sel = (i >= N); n_addr = 8'(i % N);
      n_data = coef_t'((i < N) ? f[i] : g[i - N]);
    end
    @(negedge clk); n_we = 0; n_cnt = 0; n_start = 1;
    @(negedge clk); n_start = 0;
    while (!n_done) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic ky_run();
    k_cnt = 0;
    @(negedge clk); k_start = 1;
    @(negedge clk); k_start = 0;
    for (int i = 0; i < N; i++) begin
      k_iv = 1; k_id = coef_t'(kf[i]);
      @(negedge clk);
      while (!k_ir && i < N - 1) @(negedge clk);
    end
    k_iv = 0;
    while (!k_done) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic bit h_differs();
    for (int i = 0; i < N; i++) if (h_run[i] != h_gold[i]) return 1'b1;
    return 1'b0;
  endfunction
  function automatic bit k_differs();
    for (int i = 0; i < N; i++) if (k_run[i] != k_gold[i]) return 1'b1;
    return 1'b0;
  endfunction

  // reference values for the fault-free runs
  function automatic bit nwc_gold_ok();
    longint unsigned z, pz, sf, sg;
    for (int k = 0; k < N; k++) begin
      z = pow_mod(NWC_PSI, 2 * k + 1, NWC_Q);
      pz = 1; sf = 0; sg = 0;
      for (int j = 0; j < N; j++) begin
        sf = (sf + 64'(f[j]) * pz) % NWC_Q;
        sg = (sg + 64'(g[j]) * pz) % NWC_Q;
        pz = (pz * z) % NWC_Q;
      end
      if (64'(h_gold[k]) != (sf * sg) % NWC_Q) return 1'b0;
    end
    return 1'b1;
  endfunction
  function automatic bit ky_gold_ok();
    // F(2i) = sum_j f(2j) zeta_i^j, F(2i+1) = sum_j f(2j+1) zeta_i^j, zeta_i = 17^(2 br7(i) + 1)
    longint unsigned z, pz, se, so;
    for (int i = 0; i < N / 2; i++) begin
      z = pow_mod(KY_OMEGA, 2 * bitrev(i, 7) + 1, KY_Q);
      pz = 1; se = 0; so = 0;
      for (int j = 0; j < N / 2; j++) begin
        se = (se + 64'(kf[2 * j]) * pz) % KY_Q;
        so = (so + 64'(kf[2 * j + 1]) * pz) % KY_Q;
        pz = (pz * z) % KY_Q;
      end
      if (64'(k_gold[2 * i]) != se || 64'(k_gold[2 * i + 1]) != so) return 1'b0;
    end
    return 1'b1;
  endfunction

  // ---------------- campaign results ----------------
  localparam int NCFG = 5;
  int nf_list [NCFG] = '{1, 2, 4, 8, 16};
  int bf_list [NCFG] = '{2, 3, 4, 5, 6};
  int r_nwc_det [NCFG], r_nwc_cor [NCFG];
  int r_ky_det [NCFG], r_ky_cor [NCFG];
  int r_kb_det [NCFG], r_kb_cor [NCFG];
  int r_pre_det, r_pre_cor;
  int r_prt_det [NCFG], r_prt_cor [NCFG];
  int false_alarms;

  task automatic nwc_campaign();
    bit cor;
    // pre-processor: permanent fault in one multiplier of one pre-processor
    for (int s = 0; s < PRE_S; s++) begin
      clear_nwc();
      perm_f = (s % 2 == 0); perm_g = (s % 2 == 1);
      perm_lane = 2'($urandom % 4); perm_err = coef_t'(1 + $urandom % (NWC_Q - 1));
      nwc_run();
      cor = h_differs();
      r_pre_det += n_ep; r_pre_cor += cor;
      if (n_err && !cor) false_alarms++;
    end
    perm_f = 0; perm_g = 0;
    // pre-processor: F transient faults in single multiplications. A fault
    // that only hits the recomputation step is detected with the output still
    // correct, so no false-alarm check applies here.
    for (int c = 0; c < NCFG; c++) begin
      for (int s = 0; s < PRT_S; s++) begin
        plan_pre(nf_list[c]);
        nwc_run();
        cor = h_differs();
        r_prt_det[c] += n_ep; r_prt_cor[c] += cor;
        if (n_en && !cor) false_alarms++;
      end
    end
    plan_pre(0);
    // NTT butterflies, normal mode
    for (int c = 0; c < NCFG; c++)
      for (int s = 0; s < NWC_S; s++) begin
        plan_nwc(nf_list[c]);
        nwc_run();
        cor = h_differs();
        r_nwc_det[c] += n_en; r_nwc_cor[c] += cor;
        if (n_err && !cor) false_alarms++;
      end
    clear_nwc();
  endtask

  task automatic ky_campaign();
    bit cor;
    for (int c = 0; c < NCFG; c++)
      for (int s = 0; s < KY_S; s++) begin
        plan_normal(2, 2, KY_BF, nf_list[c], KY_Q);
        ky_run();
        cor = k_differs();
        r_ky_det[c] += k_err; r_ky_cor[c] += cor;
        if (k_err && !cor) false_alarms++;
      end
    for (int c = 0; c < NCFG; c++)
      for (int s = 0; s < KY_S; s++) begin
        plan_burst(bf_list[c]);
        ky_run();
        cor = k_differs();
        r_kb_det[c] += k_err; r_kb_cor[c] += cor;
        if (k_err && !cor) false_alarms++;
      end
    clear_ky();
  endtask

  initial begin
    n_we = 0; n_sel = 0; n_addr = 0; n_data = 0; n_start = 0;
    perm_f = 0; perm_g = 0; perm_lane = 0; perm_err = 0; plan_pre(0);
    clear_nwc();
    k_start = 0; k_iv = 0; k_id = 0;
    for (int c = 0; c < 4; c++) begin sched[c].delete(); ptr[c] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      f[i] = $urandom % NWC_Q; g[i] = $urandom % NWC_Q; kf[i] = $urandom % KY_Q;
    end

    // fault-free runs give the comparison values
    fork nwc_run(); ky_run(); join
    h_gold = h_run; k_gold = k_run;
    checks++; if (n_err || n_cnt != N || !nwc_gold_ok()) begin failures++; $display("FAIL NWC fault-free run"); end
    checks++; if (k_err || k_cnt != N / 2 || !ky_gold_ok()) begin failures++; $display("FAIL Kyber fault-free run"); end

    // the component-wise fault schedule reaches the multiplier: a fault at
    // position 0 is caught, one at another position corrupts h unseen
    clear_nwc(); pw_sched.push_back(0); pw_val.push_back(13'd77);
    nwc_run();
    checks++; if (!(n_en && h_differs())) begin failures++; $display("FAIL component-wise fault at position 0"); end
    clear_nwc(); pw_sched.push_back(5); pw_val.push_back(13'd77);
    nwc_run();
    checks++; if (!(!n_en && h_differs())) begin failures++; $display("FAIL component-wise fault at position 5"); end
    clear_nwc();

    fork nwc_campaign(); ky_campaign(); join

    $display("NWC pre-process, permanent multiplier fault: detected %0d/%0d (corrupted %0d)", r_pre_det, PRE_S, r_pre_cor);
    for (int c = 0; c < NCFG; c++)
      $display("NWC pre-process, %2d transient faults: detected %0d/%0d = %0d%% (corrupted %0d)",
               nf_list[c], r_prt_det[c], PRT_S, 100 * r_prt_det[c] / PRT_S, r_prt_cor[c]);
    for (int c = 0; c < NCFG; c++)
      $display("NWC NTT multiplication, %2d faults normal: detected %0d/%0d = %0d%% (corrupted %0d)",
               nf_list[c], r_nwc_det[c], NWC_S, 100 * r_nwc_det[c] / NWC_S, r_nwc_cor[c]);
    for (int c = 0; c < NCFG; c++)
      $display("Kyber NTT, %2d faults normal: detected %0d/%0d = %0d%% (corrupted %0d)",
               nf_list[c], r_ky_det[c], KY_S, 100 * r_ky_det[c] / KY_S, r_ky_cor[c]);
    for (int c = 0; c < NCFG; c++)
      $display("Kyber NTT, burst of %0d: detected %0d/%0d = %0d%% (corrupted %0d)",
               bf_list[c], r_kb_det[c], KY_S, 100 * r_kb_det[c] / KY_S, r_kb_cor[c]);

    checks++; if (false_alarms != 0) begin failures++; $display("FAIL %0d false alarms", false_alarms); end
    checks++; if (r_pre_det != PRE_S) begin failures++; $display("FAIL pre-processor fault missed"); end
    for (int c = 0; c < NCFG; c++) begin
      // a corrupted pre-process output always differs from its recomputation
      checks++; if (r_prt_det[c] < r_prt_cor[c]) begin failures++; $display("FAIL corrupted pre-process output not flagged"); end
    end
    checks++; if (r_nwc_cor[0] - r_nwc_det[0] <= 0) begin failures++; $display("FAIL no NWC escape observed"); end
    for (int c = 0; c < NCFG; c++) begin
      checks++; if (r_nwc_det[c] == 0) begin failures++; $display("FAIL NWC config %0d: no detection", c); end
      checks++; if (r_ky_det[c] == 0)  begin failures++; $display("FAIL Kyber config %0d: no detection", c); end
      checks++; if (r_kb_det[c] == 0)  begin failures++; $display("FAIL Kyber burst config %0d: no detection", c); end
    end
    checks++; if (r_nwc_det[NCFG-1] < r_nwc_det[0]) begin failures++; $display("FAIL NWC detection falls with more faults"); end
    checks++; if (r_ky_det[NCFG-1] < r_ky_det[0])   begin failures++; $display("FAIL Kyber detection falls with more faults"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
