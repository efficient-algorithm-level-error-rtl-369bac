// butterfly: the Cooley-Tukey butterfly of the NTT, c = a + b*w and
// d = a - b*w (mod Q), with a fault-injection input for the fault model.
//
// Inputs a, b and the twiddle factor w are reduced coefficients; the outputs are
// reduced. The block is purely combinational. Its three arithmetic modules are
// numbered as in the fault model: 1 the twiddle multiplier, 2 the adder that
// produces c, 3 the subtractor that produces d. When fault_pos selects one of
// them, fault_err is added (mod Q) to that module's output; a fault at the
// multiplier therefore corrupts both c and d, a fault at the adder or
// subtractor only its own output. fault_pos = FI_NONE is normal operation.
// The additive fault (rather than a bit flip) is this design's choice: it keeps
// every value reduced, so a fault cannot push the datapath out of range.
module butterfly
  import ntt_pkg::*;
#(
  parameter int unsigned Q = NWC_Q
) (
  input  coef_t   a,
  input  coef_t   b,
  input  coef_t   w,
  input  fi_pos_e fault_pos,
  input  coef_t   fault_err,
  output coef_t   c,
  output coef_t   d
);
  coef_t t, t_f, c_n, d_n;

  mod_mul #(.Q(Q), .W(W)) u_mul (.a(b), .b(w), .p(t));

  always_comb begin
    t_f = (fault_pos == FI_MUL) ? add_mod(t, fault_err, Q) : t;
    c_n = add_mod(a, t_f, Q);
    d_n = sub_mod(a, t_f, Q);
    c   = (fault_pos == FI_ADD) ? add_mod(c_n, fault_err, Q) : c_n;
    d   = (fault_pos == FI_SUB) ? add_mod(d_n, fault_err, Q) : d_n;
  end
endmodule
