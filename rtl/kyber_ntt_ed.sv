// kyber_ntt_ed: error-detected forward NTT of Kyber round 3 (n = 256,
// q = 3329, omega = 17).
//
// Kyber's NTT stops one layer short of a full transform, so it splits into two
// independent 128-point negacyclic-style transforms, one over the even and one
// over the odd coefficients (NTT_Kyber, twice). Each half is encoded with its
// own one-element rotation: the even core receives alpha*f(2j) + beta*f(2j+2),
// the odd core alpha*f(2j+1) + beta*f(2j+3), wrapping at the end of the half.
// Decoder_3 (even) and Decoder_4 (odd) recover the true NTT outputs from the
// encoded ones using f(0) and f(1), and the checker compares the sum of all 256
// decoded outputs with 128*(f(0) + f(1)) mod q.
//
// Interface. start (idle only) begins an operation. The 256 input
// coefficients then arrive in natural order on in_valid/in_data while in_ready
// is high (any rate). The cores start on their own after the last sample is
// encoded. The results leave two per cycle on out_valid/out_k/out_even/out_odd:
// out_even = NTT(f)(2k) and out_odd = NTT(f)(2k+1), the positions of the Kyber
// reference output. done pulses one cycle after the last pair, with err valid
// until the next start. With one sample per cycle the latency from start to
// done is N + 7*64 + 135 = 839 cycles (load 256, encoder flush 2, NTT 448 + 1,
// read-out 128, decoder, checker and done 1 each, plus state changes).
// fi_even/fi_odd inject butterfly faults into the two cores; the two cores
// perform 2 * 448 = 896 butterflies, the butterfly count of the reference NTT.
//
// The scheme follows the paper. Two parallel cores follow its block diagram;
// the streaming input, the handshake and the timing are this design's choices.
module kyber_ntt_ed
  import ntt_pkg::*;
#(
  parameter int unsigned N     = KY_N,
  parameter int unsigned Q     = KY_Q,
  parameter int unsigned OMEGA = KY_OMEGA
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  coef_t                   in_data,
  output logic                    out_valid,
  output logic [$clog2(N/2)-1:0]  out_k,
  output coef_t                   out_even,
  output coef_t                   out_odd,
  output logic                    err,
  output logic [15:0]             bf_total,
  input  fault_t                  fi_even,
  input  fault_t                  fi_odd
);
  localparam int unsigned NH   = N / 2;
  localparam int unsigned LOGH = $clog2(NH);
  typedef logic [LOGH-1:0] kaddr_t;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_NTT, S_DEC, S_DRAIN} state_e;
  state_e state;
  logic [LOGH:0] cnt;
  logic [$clog2(N):0] n_in;

  // ---- encoder (LAG 2 keeps the even and odd halves apart)
  logic                enc_v, enc_done;
  logic [$clog2(N)-1:0] enc_a;
  coef_t               enc_d;
  coef_t               head [2];

  assign in_ready = (state == S_LOAD) && (32'(n_in) < N);

  shift_encoder #(.N(N), .Q(Q), .LAG(2)) u_enc (
    .clk, .rst_n, .start(state == S_IDLE && start), .in_valid(in_valid && in_ready),
    .in_data, .out_valid(enc_v), .out_addr(enc_a), .out_data(enc_d), .done(enc_done),
    .head(head)
  );

  // ---- NTT_Kyber, even and odd halves
  logic        ntt_start, busy_e, busy_o, done_e, done_o;
  kaddr_t      rd_k;
  coef_t       y_e, y_o;
  logic [15:0] bfc_e, bfc_o;

  assign ntt_start = (state == S_LOAD) && enc_done;

  ntt_core #(.NPTS(NH), .Q(Q), .OMEGA(OMEGA), .KYBER(1'b1)) u_ntt_even (
    .clk, .rst_n, .load_we(enc_v && !enc_a[0]), .load_addr(kaddr_t'(enc_a >> 1)),
    .load_data(enc_d), .rd_addr(rd_k), .rd_data(y_e), .start(ntt_start),
    .busy(busy_e), .done(done_e), .bf_count(bfc_e), .fault(fi_even)
  );
  ntt_core #(.NPTS(NH), .Q(Q), .OMEGA(OMEGA), .KYBER(1'b1)) u_ntt_odd (
    .clk, .rst_n, .load_we(enc_v && enc_a[0]), .load_addr(kaddr_t'(enc_a >> 1)),
    .load_data(enc_d), .rd_addr(rd_k), .rd_data(y_o), .start(ntt_start),
    .busy(busy_o), .done(done_o), .bf_count(bfc_o), .fault(fi_odd)
  );
  assign bf_total = bfc_e + bfc_o;

  // ---- Decoder_3 (even) and Decoder_4 (odd)
  logic   dec_in_v, dec_v_e, dec_v_o;
  kaddr_t dec_k_o;

  assign dec_in_v = (state == S_DEC);
  assign rd_k     = kaddr_t'(cnt);

  decoder34 #(.NH(NH), .Q(Q), .OMEGA(OMEGA)) u_dec3 (
    .clk, .rst_n, .in_valid(dec_in_v), .in_k(rd_k), .in_y(y_e), .f_ref(head[0]),
    .out_valid(dec_v_e), .out_k(out_k), .out_data(out_even)
  );
  decoder34 #(.NH(NH), .Q(Q), .OMEGA(OMEGA)) u_dec4 (
    .clk, .rst_n, .in_valid(dec_in_v), .in_k(rd_k), .in_y(y_o), .f_ref(head[1]),
    .out_valid(dec_v_o), .out_k(dec_k_o), .out_data(out_odd)
  );
  assign out_valid = dec_v_e;

  // ---- multiply by 128, 256-input adder, comparator
  logic chk_checked;
  kyber_checker #(.NTOT(N), .Q(Q)) u_chk (
    .clk, .rst_n, .clr(state == S_IDLE && start), .f0(head[0]), .f1(head[1]),
    .acc_valid(dec_v_e), .acc_a(out_even), .acc_b(out_odd),
    .checked(chk_checked), .err(err)
  );

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      n_in  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin state <= S_LOAD; n_in <= '0; end
        S_LOAD: begin
          if (in_valid && in_ready) n_in <= n_in + 1'b1;
          if (enc_done) state <= S_NTT;
        end
        S_NTT: if (done_e) begin state <= S_DEC; cnt <= '0; end
        S_DEC: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == NH - 1) state <= S_DRAIN;
        end
        S_DRAIN: if (chk_checked) begin state <= S_IDLE; done <= 1'b1; end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (done_e == done_o) && (dec_v_e == dec_v_o) && (!dec_v_e || out_k == dec_k_o));
  a_total_bf: assert property (@(posedge clk) disable iff (!rst_n)
    done_e |-> (32'(bf_total) == 2 * (NH / 2) * LOGH));

endmodule
