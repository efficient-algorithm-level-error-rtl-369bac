// decoder34: Decoder_3 / Decoder_4 of the Kyber scheme. For output position k
// of one 128-point half of the encoded Kyber NTT it recovers the true value
//     F(k) = (Y(k) + C1[k]*f_ref) * C2[k]  (mod Q)
// with zeta_k = omega^(2*bitrev7(k)+1), C1[k] = 2*BETA/zeta_k and
// C2[k] = 1/(ALPHA + BETA/zeta_k). f_ref is f(0) for the even half (Decoder_3)
// and f(1) for the odd half (Decoder_4): rotating the half-length input by one
// element wraps its first coefficient around with a factor zeta^128 = -1, and
// the C1 term undoes that. Both constants are ROMs computed at elaboration, so
// the decoder is two multiplications and one addition, as the paper describes.
// One value per cycle, one cycle of latency; in_k travels with the data.
module decoder34
  import ntt_pkg::*;
#(
  parameter int unsigned NH    = KY_N / 2,
  parameter int unsigned Q     = KY_Q,
  parameter int unsigned OMEGA = KY_OMEGA,
  parameter int unsigned ALPHA = ED_ALPHA,
  parameter int unsigned BETA  = ED_BETA
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [$clog2(NH)-1:0]  in_k,
  input  coef_t                  in_y,
  input  coef_t                  f_ref,
  output logic                   out_valid,
  output logic [$clog2(NH)-1:0]  out_k,
  output coef_t                  out_data
);
  localparam int unsigned LOGH = $clog2(NH);

  function automatic logic [NH-1:0][W-1:0] gen_c(bit second);
    logic [NH-1:0][W-1:0] t;
    longint unsigned zinv;
    for (int k = 0; k < NH; k++) begin
      zinv = inv_mod(pow_mod(64'(OMEGA), 64'(2 * bitrev(k, LOGH) + 1), 64'(Q)), 64'(Q));
      if (!second) t[k] = W'((64'(2 * BETA) * zinv) % 64'(Q));
      else         t[k] = W'(inv_mod((64'(ALPHA) + 64'(BETA) * zinv) % 64'(Q), 64'(Q)));
    end
    return t;
  endfunction

  localparam logic [NH-1:0][W-1:0] C1 = gen_c(1'b0);
  localparam logic [NH-1:0][W-1:0] C2 = gen_c(1'b1);

  coef_t m1, s, m2;
  mod_mul #(.Q(Q), .W(W)) u_m1 (.a(f_ref), .b(C1[in_k]), .p(m1));
  assign s = add_mod(in_y, m1, Q);
  mod_mul #(.Q(Q), .W(W)) u_m2 (.a(s), .b(C2[in_k]), .p(m2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_k     <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_k     <= in_k;
      out_data  <= m2;
    end
  end
endmodule
