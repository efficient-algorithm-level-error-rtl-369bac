// nwc_ed_mult: polynomial multiplication c = f*g mod (x^n + 1) by negative
// wrapped convolution, with the paper's error detection on the pre-process
// step and on the component-wise NTT multiplication h = NTT(pre(f)) o NTT(pre(g)).
//
// Datapath, in order of operation:
//   1. PRE  Two preprocessors compute f~[i] = f[i]*psi^i and g~[i] = g[i]*psi^i,
//           each with its shifted recomputation check (err_pre).
//   2. ENC  The pre-processed values are streamed out once; shift encoders form
//           2f~(j) + f~(j+1) and 2g~(j) + g~(j+1) and write them into two NTT
//           cores, while the checker adds up sum f~ and sum g~.
//   3. NTT  Both cores transform their encoded input in parallel. Output p of
//           a core is (2 + omega^-k) * NTT(f~)(k) with k = bitrev(p).
//   4. PW   Position by position, the two transforms are multiplied and the
//           product is multiplied by 1/(2 + omega^-k)^2 (decoder2), giving
//           h(k) = NTT(f~)(k) * NTT(g~)(k), streamed on h_valid/h_idx/h_data.
//           The checker compares h(0) with sum f~ * sum g~ (err_ntt).
//   5. INTT The inverse NTT and post-process turn h into the coefficients
//           c[i], streamed on out_valid/out_idx/out_data. This step is not
//           covered by the error detection.
// err = err_pre | err_ntt is the error indicator.
//
// Interface. While idle, load_we/load_sel/load_addr/load_data load f
// (load_sel = 0) or g (load_sel = 1) in natural order. start runs one
// multiplication. h and c leave one value per cycle, each in bit-reversed
// order of its natural index (h_idx, out_idx). done pulses one cycle after the
// last coefficient of c; the error flags are valid from the last h value until
// the next start. Latency from start to done is
// 2*N/LANES + N + 1 + (N/2)*log2(N) + N + 7 + (N/2)*log2(N) + N + 2 cycles
// (2960 for the defaults).
// The fault inputs reach the two NTT cores, the two preprocessors and the
// component-wise multiplier; tie them to zero in normal use.
//
// The structure (pre-process with recomputation, encoded NTTs, component-wise
// multiplication, Decoder_2, comparator on h(0), inverse NTT, post-process)
// follows the paper. The sequential schedule, the buffers and all timing are
// this design's choices.
module nwc_ed_mult
  import ntt_pkg::*;
#(
  parameter int unsigned N     = NWC_N,
  parameter int unsigned Q     = NWC_Q,
  parameter int unsigned OMEGA = NWC_OMEGA,
  parameter int unsigned PSI   = NWC_PSI,
  parameter int unsigned LANES = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // coefficient load
  input  logic                  load_we,
  input  logic                  load_sel,
  input  logic [$clog2(N)-1:0]  load_addr,
  input  coef_t                 load_data,
  // control
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  // component-wise product stream (output of the checked sub-block)
  output logic                  h_valid,
  output logic [$clog2(N)-1:0]  h_idx,
  output coef_t                 h_data,
  // product polynomial stream
  output logic                  out_valid,
  output logic [$clog2(N)-1:0]  out_idx,
  output coef_t                 out_data,
  // error indicator
  output logic                  err_pre,
  output logic                  err_ntt,
  output logic                  err,
  // fault injection
  input  fault_t                fi_ntt_f,
  input  fault_t                fi_ntt_g,
  input  logic                  fi_pre_f_en,
  input  logic                  fi_pre_g_en,
  input  logic [$clog2(LANES > 1 ? LANES : 2)-1:0] fi_pre_lane,
  input  coef_t                 fi_pre_err,
  input  logic                  fi_pw_en,
  input  logic [$clog2(N)-1:0]  fi_pw_pos,
  input  coef_t                 fi_pw_err
);
  localparam int unsigned LOGN = $clog2(N);
  typedef logic [LOGN-1:0] addr_t;

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_ENC_GO, S_ENC, S_NTT, S_PW, S_DRAIN, S_INTT} state_e;
  state_e state;

  logic [LOGN:0] cnt;

  // ---- preprocessors
  logic  pre_start, pre_busy_f, pre_busy_g, pre_done_f, pre_done_g, pre_err_f, pre_err_g;
  addr_t pre_rd_addr;
  coef_t pre_f, pre_g;

  preprocessor #(.N(N), .Q(Q), .PSI(PSI), .LANES(LANES)) u_pre_f (
    .clk, .rst_n,
    .load_we(load_we && !load_sel && state == S_IDLE), .load_addr, .load_data,
    .start(pre_start), .busy(pre_busy_f), .done(pre_done_f), .err(pre_err_f),
    .rd_addr(pre_rd_addr), .rd_data(pre_f),
    .fi_en(fi_pre_f_en), .fi_lane(fi_pre_lane), .fi_err(fi_pre_err)
  );
  preprocessor #(.N(N), .Q(Q), .PSI(PSI), .LANES(LANES)) u_pre_g (
    .clk, .rst_n,
    .load_we(load_we && load_sel && state == S_IDLE), .load_addr, .load_data,
    .start(pre_start), .busy(pre_busy_g), .done(pre_done_g), .err(pre_err_g),
    .rd_addr(pre_rd_addr), .rd_data(pre_g),
    .fi_en(fi_pre_g_en), .fi_lane(fi_pre_lane), .fi_err(fi_pre_err)
  );

  // ---- encoders
  logic  enc_start, enc_in_valid;
  logic  enc_v_f, enc_v_g, enc_done_f, enc_done_g;
  addr_t enc_a_f, enc_a_g;
  coef_t enc_d_f, enc_d_g;
  coef_t head_f [1];
  coef_t head_g [1];

  shift_encoder #(.N(N), .Q(Q), .LAG(1)) u_enc_f (
    .clk, .rst_n, .start(enc_start), .in_valid(enc_in_valid), .in_data(pre_f),
    .out_valid(enc_v_f), .out_addr(enc_a_f), .out_data(enc_d_f), .done(enc_done_f),
    .head(head_f)
  );
  shift_encoder #(.N(N), .Q(Q), .LAG(1)) u_enc_g (
    .clk, .rst_n, .start(enc_start), .in_valid(enc_in_valid), .in_data(pre_g),
    .out_valid(enc_v_g), .out_addr(enc_a_g), .out_data(enc_d_g), .done(enc_done_g),
    .head(head_g)
  );

  // ---- NTT cores
  logic        ntt_start, ntt_busy_f, ntt_busy_g, ntt_done_f, ntt_done_g;
  addr_t       ntt_rd;
  coef_t       nf, ng;
  logic [15:0] bfc_f, bfc_g;

  ntt_core #(.NPTS(N), .Q(Q), .OMEGA(OMEGA), .KYBER(1'b0)) u_ntt_f (
    .clk, .rst_n, .load_we(enc_v_f), .load_addr(enc_a_f), .load_data(enc_d_f),
    .rd_addr(ntt_rd), .rd_data(nf), .start(ntt_start), .busy(ntt_busy_f),
    .done(ntt_done_f), .bf_count(bfc_f), .fault(fi_ntt_f)
  );
  ntt_core #(.NPTS(N), .Q(Q), .OMEGA(OMEGA), .KYBER(1'b0)) u_ntt_g (
    .clk, .rst_n, .load_we(enc_v_g), .load_addr(enc_a_g), .load_data(enc_d_g),
    .rd_addr(ntt_rd), .rd_data(ng), .start(ntt_start), .busy(ntt_busy_g),
    .done(ntt_done_g), .bf_count(bfc_g), .fault(fi_ntt_g)
  );

  // ---- component-wise multiplication and Decoder_2
  logic  pw_in_valid, pw_v, d2_v;
  addr_t pw_pos, d2_pos;
  coef_t pw_d;

  pointwise_mul #(.N(N), .Q(Q)) u_pw (
    .clk, .rst_n, .in_valid(pw_in_valid), .in_pos(ntt_rd), .in_a(nf), .in_b(ng),
    .out_valid(pw_v), .out_pos(pw_pos), .out_data(pw_d),
    .fi_en(fi_pw_en), .fi_pos(fi_pw_pos), .fi_err(fi_pw_err)
  );
  decoder2 #(.N(N), .Q(Q), .OMEGA(OMEGA)) u_dec2 (
    .clk, .rst_n, .in_valid(pw_v), .in_pos(pw_pos), .in_data(pw_d),
    .out_valid(d2_v), .out_pos(d2_pos), .out_idx(h_idx), .out_data(h_data)
  );
  assign h_valid = d2_v;

  // ---- inverse NTT and post-process
  logic intt_start, intt_busy, intt_done;
  intt_postprocess #(.N(N), .Q(Q), .OMEGA(OMEGA), .PSI(PSI)) u_intt (
    .clk, .rst_n, .in_valid(d2_v), .in_idx(h_idx), .in_data(h_data),
    .start(intt_start), .busy(intt_busy), .done(intt_done),
    .out_valid, .out_idx, .out_data
  );

  // ---- checker
  logic chk_clr, chk_checked;
  nwc_checker #(.Q(Q)) u_chk (
    .clk, .rst_n, .clr(chk_clr), .acc_valid(enc_in_valid), .acc_f(pre_f), .acc_g(pre_g),
    .h0_valid(d2_v && d2_pos == '0), .h0(h_data), .checked(chk_checked), .err(err_ntt)
  );

  assign err_pre = pre_err_f | pre_err_g;
  assign err     = err_pre | err_ntt;

  // ---- sequencing
  always_comb begin
    pre_start    = (state == S_IDLE) && start;
    chk_clr      = (state == S_IDLE) && start;
    enc_start    = (state == S_ENC_GO);
    enc_in_valid = (state == S_ENC) && (32'(cnt) < N);
    pre_rd_addr  = addr_t'(cnt);
    ntt_start    = (state == S_ENC) && enc_done_f;
    pw_in_valid  = (state == S_PW);
    ntt_rd       = addr_t'(cnt);
    intt_start   = (state == S_DRAIN) && d2_v && (d2_pos == addr_t'(N - 1));
    busy         = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:   if (start) state <= S_PRE;
        S_PRE:    if (pre_done_f) state <= S_ENC_GO;
        S_ENC_GO: begin state <= S_ENC; cnt <= '0; end
        S_ENC: begin
          if (32'(cnt) < N) cnt <= cnt + 1'b1;
          if (enc_done_f) state <= S_NTT;
        end
        S_NTT: if (ntt_done_f) begin state <= S_PW; cnt <= '0; end
        S_PW: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == N - 1) state <= S_DRAIN;
        end
        S_DRAIN: if (intt_start) state <= S_INTT;
        S_INTT: if (intt_done) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the two halves run in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (pre_done_f == pre_done_g) && (enc_done_f == enc_done_g) && (ntt_done_f == ntt_done_g));
  a_no_load_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !start);

endmodule
