// ntt_pkg: constants, types and small modular-arithmetic helpers shared by the
// error-detected NTT datapaths.
//
// Two parameter sets are carried here. The negative-wrapped-convolution (NWC)
// datapath uses the Kyber round-1 field of the evaluation table for that scheme:
// n = 256, q = 7681, omega = 3844. Its 2n-th root psi = 62 is not printed with the
// table; it is the square root of 3844 that satisfies psi^256 = -1 (62^2 = 3844).
// The Kyber round-3 datapath uses n = 256, q = 3329, omega = 17.
// The encoder scalars alpha = 2 and beta = 1 are the ones printed on the encoded
// inputs "2f(j) + f(j+1)" of the NWC diagrams; the Kyber scheme leaves them
// symbolic and this design uses the same pair.
//
// Coefficients are W = 13 bits wide, enough for both moduli, and are always kept
// fully reduced (0 <= x < q). The helper functions below assume reduced inputs.
package ntt_pkg;

  parameter int unsigned W = 13;
  typedef logic [W-1:0] coef_t;

  // Negative wrapped convolution field
  parameter int unsigned NWC_N     = 256;
  parameter int unsigned NWC_Q     = 7681;
  parameter int unsigned NWC_OMEGA = 3844;
  parameter int unsigned NWC_PSI   = 62;

  // Kyber round-3 field
  parameter int unsigned KY_N     = 256;
  parameter int unsigned KY_Q     = 3329;
  parameter int unsigned KY_OMEGA = 17;

  // Encoder scalars: x'[j] = ALPHA*x[j] + BETA*x[j+1]
  parameter int unsigned ED_ALPHA = 2;
  parameter int unsigned ED_BETA  = 1;

  // Fault model of the butterfly: the three numbered modules of the butterfly.
  typedef enum logic [1:0] {
    FI_NONE = 2'd0,
    FI_MUL  = 2'd1,   // module 1: twiddle multiplier
    FI_ADD  = 2'd2,   // module 2: adder producing c
    FI_SUB  = 2'd3    // module 3: subtractor producing d
  } fi_pos_e;

  // Fault injection request for one NTT core. The fault adds err (mod q) to the
  // output of module pos of butterfly number index (counted over the whole
  // transform). With burst set, every butterfly from index on is faulty.
  typedef struct packed {
    logic        en;
    logic        burst;
    logic [15:0] index;
    fi_pos_e     pos;
    coef_t       err;
  } fault_t;

  // ---------------- elaboration-time helpers (constant functions) -------------
  function automatic longint unsigned pow_mod(longint unsigned b, longint unsigned e,
                                              longint unsigned m);
    longint unsigned r = 1;
    longint unsigned x = b % m;
    for (int i = 0; i < 32; i++) begin
      if (e[i]) r = (r * x) % m;
      x = (x * x) % m;
    end
    return r;
  endfunction

  // inverse modulo a prime m (Fermat)
  function automatic longint unsigned inv_mod(longint unsigned a, longint unsigned m);
    return pow_mod(a, m - 2, m);
  endfunction

  function automatic int unsigned bitrev(int unsigned x, int unsigned bits);
    int unsigned r = 0;
    for (int i = 0; i < 32; i++)
      if (i < bits) r[bits-1-i] = x[i];
    return r;
  endfunction

  // ---------------- synthesizable helpers -------------------------------------
  function automatic coef_t add_mod(coef_t a, coef_t b, int unsigned q);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= (W+1)'(q)) s = s - (W+1)'(q);
    return s[W-1:0];
  endfunction

  function automatic coef_t sub_mod(coef_t a, coef_t b, int unsigned q);
    logic [W:0] s;
    s = {1'b0, a} - {1'b0, b};
    if (a < b) s = s + (W+1)'(q);
    return s[W-1:0];
  endfunction

  // multiply by a small constant c (c < 256) by double-and-add; for c = 2 this
  // is one shift and one conditional subtraction
  function automatic coef_t mulc_mod(coef_t x, int unsigned c, int unsigned q);
    coef_t acc = '0;
    coef_t pw  = x;
    for (int i = 0; i < 8; i++) begin
      if (c[i]) acc = add_mod(acc, pw, q);
      pw = add_mod(pw, pw, q);
    end
    return acc;
  endfunction

endpackage
