// decoder2: the Decoder_2 stage of the negative-wrapped-convolution scheme.
// The encoded transforms carry a factor (ALPHA + BETA*omega^-k) each, so their
// component-wise product carries its square; this block multiplies the product
// at output position p by D[p] = 1/(ALPHA + BETA*omega^-k)^2 (mod Q), where
// k = bitrev(p) is the natural frequency index held at bit-reversed position p.
// D is a ROM precomputed at elaboration, as the paper suggests (store the
// decoder constants in memory). One value per cycle, one cycle of latency;
// out_idx gives the natural index k of the result.
module decoder2
  import ntt_pkg::*;
#(
  parameter int unsigned N     = NWC_N,
  parameter int unsigned Q     = NWC_Q,
  parameter int unsigned OMEGA = NWC_OMEGA,
  parameter int unsigned ALPHA = ED_ALPHA,
  parameter int unsigned BETA  = ED_BETA
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [$clog2(N)-1:0]  in_pos,
  input  coef_t                 in_data,
  output logic                  out_valid,
  output logic [$clog2(N)-1:0]  out_pos,
  output logic [$clog2(N)-1:0]  out_idx,
  output coef_t                 out_data
);
  localparam int unsigned LOGN = $clog2(N);

  function automatic logic [N-1:0][W-1:0] gen_d();
    logic [N-1:0][W-1:0] t;
    longint unsigned winv, s, q;
    q = 64'(Q);
    winv = inv_mod(64'(OMEGA), q);
    for (int p = 0; p < N; p++) begin
      s = (64'(ALPHA) + 64'(BETA) * pow_mod(winv, 64'(bitrev(p, LOGN)), q)) % q;
      t[p] = W'(inv_mod((s * s) % q, q));
    end
    return t;
  endfunction

  localparam logic [N-1:0][W-1:0] D = gen_d();

  coef_t p;
  mod_mul #(.Q(Q), .W(W)) u_mul (.a(in_data), .b(D[in_pos]), .p(p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pos   <= '0;
      out_idx   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_pos   <= in_pos;
      out_idx   <= LOGN'(bitrev(32'(in_pos), LOGN));
      out_data  <= p;
    end
  end
endmodule
