// kyber_checker: comparator and error indicator of the Kyber scheme. Summed
// over all 256 outputs, the Kyber NTT satisfies
//     sum_j F(j) = 128*(f(0) + f(1))  (mod Q)
// because, for each half, the sum over k of zeta_k^j vanishes except at j = 0.
// The block is the "multiply by 128" path, the 256-input adder (here an
// accumulator taking two decoded outputs per cycle) and the comparator.
//
// clr (one cycle) clears the accumulator. f0/f1 are the first two input
// coefficients and must be stable while outputs are accumulated. Each cycle
// with acc_valid adds acc_a and acc_b. After NTOT/2 such cycles checked pulses
// and err is set if the sums differ (sticky until clr).
module kyber_checker
  import ntt_pkg::*;
#(
  parameter int unsigned NTOT = KY_N,
  parameter int unsigned Q    = KY_Q
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  coef_t f0,
  input  coef_t f1,
  input  logic  acc_valid,
  input  coef_t acc_a,
  input  coef_t acc_b,
  output logic  checked,
  output logic  err
);
  localparam int unsigned NPAIR = NTOT / 2;
  localparam int unsigned CW    = $clog2(NPAIR) + 1;

  coef_t         sum, sum_next, ref_sum;
  logic [CW-1:0] cnt;

  always_comb begin
    ref_sum  = mulc_mod(add_mod(f0, f1, Q), NPAIR, Q);
    sum_next = add_mod(sum, add_mod(acc_a, acc_b, Q), Q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum     <= '0;
      cnt     <= '0;
      checked <= 1'b0;
      err     <= 1'b0;
    end else begin
      checked <= 1'b0;
      if (clr) begin
        sum <= '0;
        cnt <= '0;
        err <= 1'b0;
      end else if (acc_valid) begin
        sum <= sum_next;
        cnt <= cnt + 1'b1;
        if (32'(cnt) == NPAIR - 1) begin
          checked <= 1'b1;
          if (sum_next != ref_sum) err <= 1'b1;
        end
      end
    end
  end
endmodule
