// ntt_core: iterative in-place number-theoretic transform with one butterfly
// per clock cycle. Coefficients are loaded in natural order and the transform
// is left in bit-reversed order, as in the iterative NTT (cyclic mode) and the
// Kyber NTT (Kyber mode) of the reference algorithms.
//
// Schedule. NPTS = 2^LOGN points, LOGN stages s = 0 .. LOGN-1. In stage s the
// butterfly distance is len = NPTS >> (s+1) and there are 2^s blocks; the flat
// butterfly counter bf = 0 .. NPTS/2-1 splits into block b = bf >> log2(len) and
// offset j, giving the pair i0 = b*2*len + j, i1 = i0 + len.
//   cyclic mode (KYBER = 0): twiddle omega^(bitrev_{s}(b) * len), which equals
//     omega^(bitrev_{LOGN-1}(b)) - the schedule of the iterative NTT, where
//     block k of stage m uses omega^(bitrev(k) * m/2).
//   Kyber mode (KYBER = 1): twiddle zeta = omega^(bitrev_{LOGN}(2^s + b)); the
//     running twiddle counter of the Kyber NTT starts at 1. One 128-point core
//     in this mode computes either the even or the odd half of the 256-point
//     Kyber NTT (NPTS = 128, omega = 17); NTT_Kyber is two such cores.
// The twiddle factors are a ROM of omega^e, e = 0 .. NPTS-1, computed at
// elaboration.
//
// Interface. load_we/load_addr/load_data write the coefficient memory while
// the core is idle. start (one cycle, while idle) runs the transform: busy is
// high for LOGN*NPTS/2 cycles, then done pulses for one cycle. rd_addr/rd_data
// is an asynchronous read port of the memory. bf_count counts the butterflies
// of the current/last transform.
//
// Fault injection (the butterfly fault model): if fault.en, butterfly number
// fault.index of the transform (or every butterfly from it on, with
// fault.burst) gets fault.err added at module fault.pos. Tie fault to '0 for
// normal use.
//
// The paper gives the algorithm; the single-butterfly, register-file
// architecture is this design's choice (the paper's FPGA implementation was
// produced by high-level synthesis and its micro-architecture is not given).
module ntt_core
  import ntt_pkg::*;
#(
  parameter int unsigned NPTS  = NWC_N,
  parameter int unsigned Q     = NWC_Q,
  parameter int unsigned OMEGA = NWC_OMEGA,
  parameter bit          KYBER = 1'b0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load_we,
  input  logic [$clog2(NPTS)-1:0]  load_addr,
  input  coef_t                    load_data,
  input  logic [$clog2(NPTS)-1:0]  rd_addr,
  output coef_t                    rd_data,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic [15:0]              bf_count,
  input  fault_t                   fault
);
  localparam int unsigned LOGN = $clog2(NPTS);
  localparam int unsigned NBF  = LOGN * NPTS / 2;

  typedef logic [LOGN-1:0] addr_t;

  function automatic logic [NPTS-1:0][W-1:0] gen_tw();
    logic [NPTS-1:0][W-1:0] t;
    longint unsigned p = 1;
    for (int e = 0; e < NPTS; e++) begin
      t[e] = W'(p);
      p = (p * 64'(OMEGA)) % 64'(Q);
    end
    return t;
  endfunction

  localparam logic [NPTS-1:0][W-1:0] TW = gen_tw();

  coef_t mem [NPTS];

  logic [$clog2(LOGN)-1:0] stage;
  logic [LOGN-2:0]         bf;
  logic [LOGN-1:0]         shamt;   // log2(len) = LOGN-1-stage
  addr_t                   blk, ofs, i0, i1, tw_exp;
  coef_t                   a, b, w, c, d;
  fi_pos_e                 fpos;

  function automatic addr_t rev(addr_t x, int unsigned bits);
    addr_t r = '0;
    for (int i = 0; i < LOGN; i++)
      if (i < bits) r[bits-1-i] = x[i];
    return r;
  endfunction

  always_comb begin
    shamt  = addr_t'(LOGN - 1) - addr_t'(stage);
    blk    = addr_t'(bf) >> shamt;
    ofs    = addr_t'(bf) & ((addr_t'(1) << shamt) - addr_t'(1));
    i0     = (blk << (shamt + addr_t'(1))) | ofs;
    i1     = i0 | (addr_t'(1) << shamt);
    if (KYBER) tw_exp = rev((addr_t'(1) << stage) | blk, LOGN);
    else       tw_exp = rev(blk, LOGN - 1);
    a = mem[i0];
    b = mem[i1];
    w = TW[tw_exp];
    fpos = FI_NONE;
    if (busy && fault.en &&
        ((bf_count == fault.index) || (fault.burst && bf_count > fault.index)))
      fpos = fault.pos;
  end

  butterfly #(.Q(Q)) u_bf (
    .a(a), .b(b), .w(w), .fault_pos(fpos), .fault_err(fault.err), .c(c), .d(d)
  );

  assign rd_data = mem[rd_addr];

  always_ff @(posedge clk) begin
    if (busy) begin
      mem[i0] <= c;
      mem[i1] <= d;
    end else if (load_we) begin
      mem[load_addr] <= load_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      stage    <= '0;
      bf       <= '0;
      bf_count <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          stage    <= '0;
          bf       <= '0;
          bf_count <= '0;
        end
      end else begin
        bf_count <= bf_count + 16'd1;
        bf       <= bf + 1'b1;
        if (&bf) begin
          if (32'(stage) == LOGN - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            stage <= stage + 1'b1;
          end
        end
      end
    end
  end

  // the transform takes exactly NBF butterflies
  property p_bf_count;
    @(posedge clk) disable iff (!rst_n) done |-> (32'(bf_count) == NBF);
  endproperty
  a_bf_count: assert property (p_bf_count);

endmodule
