// pointwise_mul: component-wise multiplication of two transforms,
// h[p] = F[p] * G[p] (mod Q), one pair per cycle with one cycle of latency.
// in_pos travels with the data. fi_en/fi_pos/fi_err add fi_err (mod Q) to the
// product at position fi_pos, to model a fault in this module; tie fi_en low
// for normal use. The paper gives the function; the streaming form is this
// design's.
module pointwise_mul
  import ntt_pkg::*;
#(
  parameter int unsigned N = NWC_N,
  parameter int unsigned Q = NWC_Q
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [$clog2(N)-1:0]  in_pos,
  input  coef_t                 in_a,
  input  coef_t                 in_b,
  output logic                  out_valid,
  output logic [$clog2(N)-1:0]  out_pos,
  output coef_t                 out_data,
  input  logic                  fi_en,
  input  logic [$clog2(N)-1:0]  fi_pos,
  input  coef_t                 fi_err
);
  coef_t p;
  mod_mul #(.Q(Q), .W(W)) u_mul (.a(in_a), .b(in_b), .p(p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pos   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_pos   <= in_pos;
      out_data  <= (fi_en && in_pos == fi_pos) ? add_mod(p, fi_err, Q) : p;
    end
  end
endmodule
