// ntt_ed_top: the two error-detected NTT datapaths side by side.
//
//   nwc_*  negative-wrapped-convolution polynomial multiplier (q = 7681):
//          pre-process with shifted recomputation, encoded NTTs, component-
//          wise multiplication, Decoder_2 and the h(0) check, then inverse
//          NTT and post-process. See nwc_ed_mult.
//   ky_*   Kyber round-3 forward NTT (q = 3329) with the encoded two-half
//          transform, Decoder_3/Decoder_4 and the sum check. See kyber_ntt_ed.
//
// The two datapaths work over different primes and share no arithmetic; they
// share only the clock and reset and run independently. err is the OR of both
// error indicators. The fault-injection ports of both are brought out; tie them
// to zero in normal use. All ports and timing are those of the two blocks.
module ntt_ed_top
  import ntt_pkg::*;
#(
  parameter int unsigned NWC_LANES = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // ---- negative wrapped convolution
  input  logic                      nwc_load_we,
  input  logic                      nwc_load_sel,
  input  logic [$clog2(NWC_N)-1:0]  nwc_load_addr,
  input  coef_t                     nwc_load_data,
  input  logic                      nwc_start,
  output logic                      nwc_busy,
  output logic                      nwc_done,
  output logic                      nwc_h_valid,
  output logic [$clog2(NWC_N)-1:0]  nwc_h_idx,
  output coef_t                     nwc_h_data,
  output logic                      nwc_out_valid,
  output logic [$clog2(NWC_N)-1:0]  nwc_out_idx,
  output coef_t                     nwc_out_data,
  output logic                      nwc_err_pre,
  output logic                      nwc_err_ntt,
  input  fault_t                    nwc_fi_ntt_f,
  input  fault_t                    nwc_fi_ntt_g,
  input  logic                      nwc_fi_pre_f_en,
  input  logic                      nwc_fi_pre_g_en,
  input  logic [$clog2(NWC_LANES > 1 ? NWC_LANES : 2)-1:0] nwc_fi_pre_lane,
  input  coef_t                     nwc_fi_pre_err,
  input  logic                      nwc_fi_pw_en,
  input  logic [$clog2(NWC_N)-1:0]  nwc_fi_pw_pos,
  input  coef_t                     nwc_fi_pw_err,
  // ---- Kyber NTT
  input  logic                      ky_start,
  output logic                      ky_busy,
  output logic                      ky_done,
  input  logic                      ky_in_valid,
  output logic                      ky_in_ready,
  input  coef_t                     ky_in_data,
  output logic                      ky_out_valid,
  output logic [$clog2(KY_N/2)-1:0] ky_out_k,
  output coef_t                     ky_out_even,
  output coef_t                     ky_out_odd,
  output logic                      ky_err,
  output logic [15:0]               ky_bf_total,
  input  fault_t                    ky_fi_even,
  input  fault_t                    ky_fi_odd,
  // ---- combined error indicator
  output logic                      err
);
  logic nwc_err;

  nwc_ed_mult #(.N(NWC_N), .Q(NWC_Q), .OMEGA(NWC_OMEGA), .PSI(NWC_PSI), .LANES(NWC_LANES)) u_nwc (
    .clk, .rst_n,
    .load_we(nwc_load_we), .load_sel(nwc_load_sel), .load_addr(nwc_load_addr),
    .load_data(nwc_load_data), .start(nwc_start), .busy(nwc_busy), .done(nwc_done),
    .h_valid(nwc_h_valid), .h_idx(nwc_h_idx), .h_data(nwc_h_data),
    .out_valid(nwc_out_valid), .out_idx(nwc_out_idx), .out_data(nwc_out_data),
    .err_pre(nwc_err_pre), .err_ntt(nwc_err_ntt), .err(nwc_err),
    .fi_ntt_f(nwc_fi_ntt_f), .fi_ntt_g(nwc_fi_ntt_g),
    .fi_pre_f_en(nwc_fi_pre_f_en), .fi_pre_g_en(nwc_fi_pre_g_en),
    .fi_pre_lane(nwc_fi_pre_lane), .fi_pre_err(nwc_fi_pre_err),
    .fi_pw_en(nwc_fi_pw_en), .fi_pw_pos(nwc_fi_pw_pos), .fi_pw_err(nwc_fi_pw_err)
  );

  kyber_ntt_ed #(.N(KY_N), .Q(KY_Q), .OMEGA(KY_OMEGA)) u_kyber (
    .clk, .rst_n, .start(ky_start), .busy(ky_busy), .done(ky_done),
    .in_valid(ky_in_valid), .in_ready(ky_in_ready), .in_data(ky_in_data),
    .out_valid(ky_out_valid), .out_k(ky_out_k), .out_even(ky_out_even),
    .out_odd(ky_out_odd), .err(ky_err), .bf_total(ky_bf_total),
    .fi_even(ky_fi_even), .fi_odd(ky_fi_odd)
  );

  assign err = nwc_err | ky_err;
endmodule
