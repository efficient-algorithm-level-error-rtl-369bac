// preprocessor: the pre-process step of the negative wrapped convolution,
// y[i] = x[i] * psi^i (mod Q), protected by recomputation with shifted operands.
//
// LANES modular multipliers work in parallel on consecutive elements.
//   Step 1 (N/LANES cycles): lane l of chunk c computes element e = c*LANES + l
//     and the result is stored in the result buffer y.
//   Step 2 (N/LANES cycles): the operands are rotated by one position, so lane l
//     of chunk c computes element e = (c*LANES + l + 1) mod N; the lane outputs
//     are shifted back by one position (wiring only, the "shift to right"
//     decoder) and compared with y. Any mismatch sets err.
// Every element is thus computed twice by two different multipliers, so a
// permanent fault in one multiplier, as well as a transient fault in either
// pass, makes the two results differ.
//
// Interface. load_we/load_addr/load_data fill the input buffer x (idle only).
// start runs both steps: busy for 2*N/LANES cycles, then done pulses and err
// holds the comparison result until the next start. rd_addr/rd_data read y
// asynchronously. fi_en/fi_lane/fi_err add fi_err (mod Q) to every product of
// multiplier fi_lane during the run (a permanent multiplier fault); tie fi_en
// low for normal use.
//
// The paper gives the function and the shifted recomputation; the number of
// lanes, the buffers and the timing are this design's choices.
module preprocessor
  import ntt_pkg::*;
#(
  parameter int unsigned N     = NWC_N,
  parameter int unsigned Q     = NWC_Q,
  parameter int unsigned PSI   = NWC_PSI,
  parameter int unsigned LANES = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load_we,
  input  logic [$clog2(N)-1:0]  load_addr,
  input  coef_t                 load_data,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  err,
  input  logic [$clog2(N)-1:0]  rd_addr,
  output coef_t                 rd_data,
  input  logic                  fi_en,
  input  logic [$clog2(LANES > 1 ? LANES : 2)-1:0] fi_lane,
  input  coef_t                 fi_err
);
  localparam int unsigned LOGN   = $clog2(N);
  localparam int unsigned NCHUNK = N / LANES;
  localparam int unsigned CW     = $clog2(NCHUNK > 1 ? NCHUNK : 2);

  typedef logic [LOGN-1:0] addr_t;

  function automatic logic [N-1:0][W-1:0] gen_psi();
    logic [N-1:0][W-1:0] t;
    longint unsigned p = 1;
    for (int e = 0; e < N; e++) begin
      t[e] = W'(p);
      p = (p * PSI) % longint'(Q);
    end
    return t;
  endfunction

  localparam logic [N-1:0][W-1:0] PSI_POW = gen_psi();

  coef_t x [N];
  coef_t y [N];

  logic          step2;
  logic [CW-1:0] chunk;
  addr_t         idx  [LANES];
  coef_t         prod [LANES];
  coef_t         prod_f [LANES];
  logic          mism;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_comb begin
      // step 2 rotates the operands by one element (index wraps mod N)
      idx[l] = addr_t'(32'(chunk) * LANES + l + (step2 ? 1 : 0));
    end
    mod_mul #(.Q(Q), .W(W)) u_mul (.a(x[idx[l]]), .b(PSI_POW[idx[l]]), .p(prod[l]));
    assign prod_f[l] = (fi_en && 32'(fi_lane) == l) ? add_mod(prod[l], fi_err, Q) : prod[l];
  end

  always_comb begin
    mism = 1'b0;
    for (int l = 0; l < LANES; l++)
      if (prod_f[l] != y[idx[l]]) mism = 1'b1;
  end

  assign rd_data = y[rd_addr];

  always_ff @(posedge clk) begin
    if (load_we && !busy) x[load_addr] <= load_data;
    if (busy && !step2)
      for (int l = 0; l < LANES; l++) y[idx[l]] <= prod_f[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      err   <= 1'b0;
      step2 <= 1'b0;
      chunk <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          err   <= 1'b0;
          step2 <= 1'b0;
          chunk <= '0;
        end
      end else begin
        if (step2 && mism) err <= 1'b1;
        chunk <= chunk + 1'b1;
        if (32'(chunk) == NCHUNK - 1) begin
          chunk <= '0;
          if (step2) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
          step2 <= 1'b1;
        end
      end
    end
  end
endmodule
