// bconvu: basis-conversion unit (BConvU) of one cluster.
//
// Converts a polynomial held in RNS limbs over primes q_0..q_{A-1} into limbs
// over other primes p_0..p_{B-1}, lane by lane over VL = 256 coefficients:
//   step 1 (element-wise):  y_i = a_i * [qhat_i^-1]_{q_i}  mod q_i
//   step 2 (matrix-vector): b_j = sum_i y_i * [qhat_i]_{p_j}  mod p_j
// Step 2 runs on MAXOUT MAC units per lane, one per output limb, so a
// conversion streams its A input limbs once (one limb per cycle) and then
// emits its B <= MAXOUT output limbs, one per cycle. All constants are
// tables written through cfg_*, so the same unit performs every conversion
// of the KLSS key switch: Q -> T in gadget decomposition (alpha -> alpha'),
// T -> PQ in Recover-Limbs (alpha' -> alpha), and the fused T -> Q
// conversion of the last group that replaces the T -> P -> Q pair before
// ModDown (only the table differs). The number of limbs per digit (alpha)
// is chosen per level by the compiler, so A and B are run-time values:
// A by the in_first/in_last marks, B by n_out (sampled with in_last).
//
// Timing: y is registered one cycle after the input, accumulators one cycle
// later; the output limbs appear on the 2 cycles after in_last and continue
// for n_out cycles, from a result register, so the next conversion may
// start immediately. A new in_last while results are still being emitted is
// an overrun (assertion). MAXOUT = MAXIN = 8 (enough for alpha = 7 at
// dnum = 6, L = 38) and the table interface are this design's choices.
//
// Lint note: rst_n is reported as used both asynchronously and synchronously.
// The synchronous use is only the "disable iff (!rst_n)" of the assertions,
// which generate no logic; every flip-flop has the asynchronous reset.
module bconvu
  import taiyi_pkg::*;
#(
  parameter int unsigned VL     = 256,
  parameter int unsigned MAXIN  = 8,
  parameter int unsigned MAXOUT = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration: sel 0 q_i, 1 qhat_i^-1, 2 p_j, 3 [qhat_i]_{p_j} at (i, j)
  input  logic                          cfg_we,
  input  logic [1:0]                    cfg_sel,
  input  logic [$clog2(MAXIN)-1:0]      cfg_i,
  input  logic [$clog2(MAXOUT)-1:0]     cfg_j,
  input  word_t                         cfg_data,
  input  logic [$clog2(MAXOUT):0]       n_out,
  input  logic                          in_valid,
  input  logic                          in_first,
  input  logic                          in_last,
  input  logic [$clog2(MAXIN)-1:0]      in_idx,
  input  word_t                         in_data [VL],
  output logic                          out_valid,
  output logic [$clog2(MAXOUT)-1:0]     out_idx,
  output word_t                         out_data [VL]
);
  localparam int unsigned JW = $clog2(MAXOUT);

  word_t qin  [MAXIN];
  word_t qinv [MAXIN];
  word_t pout [MAXOUT];
  word_t cmat [MAXIN][MAXOUT];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      unique case (cfg_sel)
        2'd0: qin[cfg_i]         <= cfg_data;
        2'd1: qinv[cfg_i]        <= cfg_data;
        2'd2: pout[cfg_j]        <= cfg_data;
        2'd3: cmat[cfg_i][cfg_j] <= cfg_data;
      endcase
    end
  end

  // step 1: element-wise multiplication by qhat_i^-1
  word_t                    y [VL];
  logic                     y_valid, y_first, y_last;
  logic [$clog2(MAXIN)-1:0] y_idx;
  logic [$clog2(MAXOUT):0]  y_nout;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int e = 0; e < VL; e++) y[e] <= mod_mul(in_data[e], qinv[in_idx], qin[in_idx]);
      y_first <= in_first;
      y_last  <= in_last;
      y_idx   <= in_idx;
      y_nout  <= n_out;
    end
  end

  // step 2: MAC per output limb and lane
  word_t acc [MAXOUT][VL];
  word_t res [MAXOUT][VL];
  word_t nacc[MAXOUT][VL];
  logic            draining;
  logic [JW:0]     cnt, nres;

  always_comb begin
    for (int j = 0; j < MAXOUT; j++)
      for (int e = 0; e < VL; e++)
        nacc[j][e] = mod_add(y_first ? word_t'(0) : acc[j][e],
                             mod_mul(y[e], cmat[y_idx][j], pout[j]), pout[j]);
  end

  always_ff @(posedge clk) begin
    if (y_valid) begin
      acc <= nacc;
      if (y_last) res <= nacc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid  <= 1'b0;
      draining <= 1'b0;
      cnt      <= '0;
      nres     <= '0;
    end else begin
      y_valid <= in_valid;
      if (y_valid && y_last) begin
        draining <= (y_nout != 0);
        cnt      <= '0;
        nres     <= y_nout;
      end else if (draining) begin
        cnt <= cnt + 1'b1;
        if (cnt + 1'b1 == nres) draining <= 1'b0;
      end
    end
  end

  assign out_valid = draining;
  assign out_idx   = cnt[JW-1:0];
  always_comb out_data = res[cnt[JW-1:0]];

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (y_valid && y_last) |-> (!draining || cnt + 1'b1 == nres))
    else $error("bconvu: conversion finished while the previous results were still draining");
  a_nout: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> 32'(n_out) <= MAXOUT);
endmodule
