// ntt_lane: one lane of the NTT unit, an R-point cyclic NTT that is fully
// pipelined (one new vector of R elements every cycle).
//
// For R = 16 the lane has 4 butterfly layers of 8 butterfly units, as the
// NTT unit organisation prescribes. Each butterfly always uses the same
// twiddle factor w^j (w a primitive R-th root of unity mod q), so a lane needs
// only the R/2 powers tw[0..R/2-1] of the current limb, loaded once per limb.
// The butterflies are Cooley-Tukey (decimation in time): the input is
// re-ordered by bit reversal in the wiring, layer s combines pairs at
// distance 2^(s-1) with twiddle tw[j*R/2^s], and the output comes out in
// natural order: out[k] = sum_n in[n] * w^(n*k) mod q. The butterfly form and
// the bit-reversed wiring are this design's choices.
//
// Timing: one register after each layer, so out_valid/out_data follow
// in_valid/in_data by log2(R) cycles. q and tw must be stable while a limb
// is in flight. Reset clears the valid pipeline only.
module ntt_lane
  import taiyi_pkg::*;
#(
  parameter int unsigned R = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t q,
  input  word_t tw [R/2],
  input  logic  in_valid,
  input  word_t in_data [R],
  output logic  out_valid,
  output word_t out_data [R]
);
  localparam int unsigned LOGR = $clog2(R);

  function automatic int unsigned bitrev(int unsigned x);
    int unsigned r;
    r = 0;
    for (int b = 0; b < LOGR; b++) r |= ((x >> b) & 1) << (LOGR - 1 - b);
    return r;
  endfunction

  word_t stage [LOGR+1][R];
  logic  vld   [LOGR+1];

  always_comb begin
    for (int i = 0; i < R; i++) stage[0][i] = in_data[bitrev(i)];
    vld[0] = in_valid;
  end

  for (genvar s = 1; s <= LOGR; s++) begin : g_layer
    localparam int unsigned M    = 1 << s;
    localparam int unsigned HALF = M / 2;
    word_t nxt [R];
    always_comb begin
      for (int b = 0; b < R / 2; b++) begin
        int unsigned j;
        logic [LOGR-1:0] i0, i1;
        word_t t;
        j  = b % HALF;
        i0 = LOGR'((b / HALF) * M + j);
        i1 = i0 + LOGR'(HALF);
        t  = mod_mul(tw[j * (R / M)], stage[s-1][i1], q);
        nxt[i0] = mod_add(stage[s-1][i0], t, q);
        nxt[i1] = mod_sub(stage[s-1][i0], t, q);
      end
    end
    always_ff @(posedge clk) begin
      if (vld[s-1]) stage[s] <= nxt;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vld[s] <= 1'b0;
      else        vld[s] <= vld[s-1];
    end
  end

  assign out_valid = vld[LOGR];
  assign out_data  = stage[LOGR];
endmodule
