// intt_postprocess: inverse NTT followed by the post-process step of the
// negative wrapped convolution, turning the component-wise product h(k) back
// into the coefficients of f*g mod (x^n + 1):
//     c[i] = n^-1 * psi^-i * sum_k h(k) * omega^(-i*k)  (mod Q).
//
// The inverse transform reuses ntt_core in cyclic mode with omega^-1. h is
// written at its natural index k, so the core sees natural-order input and
// leaves sum_k h(k) omega^(-i k) at bit-reversed position p, i = bitrev(p).
// The read-out multiplies each value by a ROM constant S[i] = n^-1 psi^-i,
// which merges the 1/n scaling of the inverse NTT with the post-process
// (the pre-process with psi replaced by psi^-1).
//
// Interface. in_valid/in_idx/in_data load h (while idle, any order). start
// runs the transform (n/2*log2 n + 1 cycles) and then streams c[i] on
// out_valid/out_idx/out_data, one per cycle in bit-reversed order of out_idx;
// done pulses with the last coefficient. Latency start to done:
// n/2*log2(n) + n + 2 cycles.
//
// The paper gives the formulas; the structure is this design's choice. No
// error detection covers this block (the paper's schemes protect the
// pre-process and the NTT/component-wise multiplication).
module intt_postprocess
  import ntt_pkg::*;
#(
  parameter int unsigned N     = NWC_N,
  parameter int unsigned Q     = NWC_Q,
  parameter int unsigned OMEGA = NWC_OMEGA,
  parameter int unsigned PSI   = NWC_PSI
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [$clog2(N)-1:0]  in_idx,
  input  coef_t                 in_data,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  out_valid,
  output logic [$clog2(N)-1:0]  out_idx,
  output coef_t                 out_data
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned OMEGA_INV = int'(inv_mod(64'(OMEGA), 64'(Q)));
  typedef logic [LOGN-1:0] addr_t;

  function automatic logic [N-1:0][W-1:0] gen_s();
    logic [N-1:0][W-1:0] t;
    longint unsigned ninv, pinv, p;
    ninv = inv_mod(64'(N), 64'(Q));
    pinv = inv_mod(64'(PSI), 64'(Q));
    p = ninv;
    for (int i = 0; i < N; i++) begin
      t[i] = W'(p);
      p = (p * pinv) % 64'(Q);
    end
    return t;
  endfunction

  localparam logic [N-1:0][W-1:0] S = gen_s();

  logic        core_busy, core_done, reading;
  addr_t       rd_p, rd_i;
  coef_t       y, c;
  logic [15:0] bfc;

  ntt_core #(.NPTS(N), .Q(Q), .OMEGA(OMEGA_INV), .KYBER(1'b0)) u_core (
    .clk, .rst_n, .load_we(in_valid && !busy), .load_addr(in_idx), .load_data(in_data),
    .rd_addr(rd_p), .rd_data(y), .start(start && !busy), .busy(core_busy), .done(core_done),
    .bf_count(bfc), .fault('0)
  );

  assign rd_i = addr_t'(bitrev(32'(rd_p), LOGN));
  mod_mul #(.Q(Q), .W(W)) u_mul (.a(y), .b(S[rd_i]), .p(c));

  assign busy = core_busy || reading || core_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reading   <= 1'b0;
      rd_p      <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (core_done) begin
        reading <= 1'b1;
        rd_p    <= '0;
      end else if (reading) begin
        out_valid <= 1'b1;
        out_idx   <= rd_i;
        out_data  <= c;
        rd_p      <= rd_p + 1'b1;
        if (&rd_p) begin
          reading <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end
endmodule
