// shift_encoder: the encoding module of the error-detection schemes. From a
// stream x[0..N-1] it produces e[i] = ALPHA*x[i] + BETA*x[(i+LAG) mod N] (mod Q),
// the NTT input of the encoded transform.
//   LAG = 1: negative wrapped convolution, inputs 2f(j) + f(j+1).
//   LAG = 2: Kyber, where the even and the odd coefficients are each shifted by
//            one within their own half: alpha*f(i) + beta*f(i+2), wrapping so
//            that f(254) pairs with f(0) and f(255) with f(1).
// With ALPHA = 2, BETA = 1 the encoder is one shift and one modular addition.
//
// Timing. start (one cycle) clears the encoder. It then takes exactly N samples
// on in_valid/in_data, in index order, at any rate. Output e[i] appears one
// cycle after sample i+LAG arrives, on out_valid/out_addr/out_data. After the
// N-th sample the encoder emits the last LAG outputs by itself on the next LAG
// cycles (it pairs them with the saved first LAG samples) and pulses done with
// the last one. head[] holds the first LAG samples (x[0], x[1], ...), which the
// Kyber decoders and checker need.
//
// The paper gives the encoding formula; the streaming form is this design's.
module shift_encoder
  import ntt_pkg::*;
#(
  parameter int unsigned N     = NWC_N,
  parameter int unsigned Q     = NWC_Q,
  parameter int unsigned LAG   = 1,
  parameter int unsigned ALPHA = ED_ALPHA,
  parameter int unsigned BETA  = ED_BETA
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  in_valid,
  input  coef_t                 in_data,
  output logic                  out_valid,
  output logic [$clog2(N)-1:0]  out_addr,
  output coef_t                 out_data,
  output logic                  done,
  output coef_t                 head [LAG]
);
  localparam int unsigned CNTW = $clog2(N) + 1;
  localparam int unsigned HW   = $clog2(LAG > 1 ? LAG : 2);

  logic [CNTW-1:0]  cnt;      // samples received
  logic [CNTW-1:0]  flush;    // flush outputs emitted
  coef_t            dly [LAG]; // dly[0] newest sample

  function automatic coef_t enc(coef_t xa, coef_t xb);
    return add_mod(mulc_mod(xa, ALPHA, Q), mulc_mod(xb, BETA, Q), Q);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      flush     <= CNTW'(LAG);
      out_valid <= 1'b0;
      out_addr  <= '0;
      out_data  <= '0;
      done      <= 1'b0;
      for (int i = 0; i < LAG; i++) begin
        dly[i]  <= '0;
        head[i] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (start) begin
        cnt   <= '0;
        flush <= '0;
      end else if (32'(cnt) < N) begin
        if (in_valid) begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) < LAG) head[HW'(cnt)] <= in_data;
          dly[0] <= in_data;
          for (int i = 1; i < LAG; i++) dly[i] <= dly[i-1];
          if (32'(cnt) >= LAG) begin
            out_valid <= 1'b1;
            out_addr  <= $bits(out_addr)'(32'(cnt) - LAG);
            out_data  <= enc(dly[LAG-1], in_data);
          end
        end
      end else if (32'(flush) < LAG) begin
        // wrap-around: pair x[N-LAG+flush] with x[flush]
        flush     <= flush + 1'b1;
        for (int i = 1; i < LAG; i++) dly[i] <= dly[i-1];
        out_valid <= 1'b1;
        out_addr  <= $bits(out_addr)'(N - LAG + 32'(flush));
        out_data  <= enc(dly[LAG-1], head[HW'(flush)]);
        done      <= (32'(flush) == LAG - 1);
      end
    end
  end
endmodule
