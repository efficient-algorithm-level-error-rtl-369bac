// mod_mul: combinational modular multiplier p = a*b mod Q using Barrett reduction.
//
// a and b must be reduced (< Q). The 2W-bit product x is reduced with the
// precomputed constant M = floor(2^(2W) / Q): t = (x*M) >> 2W underestimates
// floor(x/Q) by at most 2, so r = x - t*Q lies in [0, 3Q) and two conditional
// subtractions finish the reduction. This is the multiplier (module 1) of the
// butterfly and the multiplier of the pre-processor, the component-wise
// multiplication and the decoders.
//
// The paper names Montgomery multiplication for the Kyber software reference but
// gives no hardware multiplier; Barrett reduction is this design's choice, and
// it works directly in the normal (non-Montgomery) domain.
module mod_mul #(
  parameter int unsigned Q = 7681,
  parameter int unsigned W = 13
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] p
);
  localparam int unsigned K2 = 2 * W;
  localparam longint unsigned M = (64'd1 << K2) / 64'(Q);
  localparam int unsigned MW = K2 + 1;

  logic [K2-1:0]      x;
  logic [K2+MW-1:0]   xm;
  logic [K2-1:0]      t;
  logic [K2-1:0]      r0, r1, r2;

  always_comb begin
    x  = K2'(a) * K2'(b);
    xm = (K2+MW)'(x) * (K2+MW)'(M);
    t  = K2'(xm >> K2);
    r0 = x - K2'(t * K2'(Q));
    r1 = (r0 >= K2'(Q)) ? r0 - K2'(Q) : r0;
    r2 = (r1 >= K2'(Q)) ? r1 - K2'(Q) : r1;
    p  = r2[W-1:0];
  end
endmodule
