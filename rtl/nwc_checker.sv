// nwc_checker: comparator and error indicator of the negative-wrapped-
// convolution scheme. The zero-frequency term of an NTT is the plain sum of its
// input, so the decoded product h(0) must equal (sum f~(j)) * (sum g~(j)) mod Q,
// where f~ and g~ are the pre-processed inputs.
//
// clr (one cycle) clears the sums and the flags. While acc_valid is high the
// pre-processed coefficients acc_f and acc_g are added into the two sums. When
// h0_valid is high, h0 is compared with the product of the sums: checked pulses
// one cycle later and err is set (sticky until clr) on a mismatch.
module nwc_checker
  import ntt_pkg::*;
#(
  parameter int unsigned Q = NWC_Q
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  acc_valid,
  input  coef_t acc_f,
  input  coef_t acc_g,
  input  logic  h0_valid,
  input  coef_t h0,
  output logic  checked,
  output logic  err
);
  coef_t sum_f, sum_g, ref_h0;

  mod_mul #(.Q(Q), .W(W)) u_mul (.a(sum_f), .b(sum_g), .p(ref_h0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_f   <= '0;
      sum_g   <= '0;
      checked <= 1'b0;
      err     <= 1'b0;
    end else begin
      checked <= 1'b0;
      if (clr) begin
        sum_f <= '0;
        sum_g <= '0;
        err   <= 1'b0;
      end else begin
        if (acc_valid) begin
          sum_f <= add_mod(sum_f, acc_f, Q);
          sum_g <= add_mod(sum_g, acc_g, Q);
        end
        if (h0_valid) begin
          checked <= 1'b1;
          if (h0 != ref_h0) err <= 1'b1;
        end
      end
    end
  end
endmodule
