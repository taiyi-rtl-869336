// nttu: the multi-step (I)NTT unit of one cluster. It transforms one limb of
// N = P*P coefficients (P = R*R; N = 2^16 with R = 16) at P elements per
// cycle, fully pipelined.
//
// Forward transform (negacyclic, X[k] = sum_n x[n] * psi^(n*(2k+1))):
//   1. pre-twist      x[n] * psi^n                        (of_twist)
//   2. N1 half        P-point NTT per vector: N11-NTT, N1 intra-transpose,
//                     N12-NTT                              (ntt_vec)
//   3. twist          times w^(n2*k1), w = psi^2           (of_twist)
//   4. transpose with buffer                               (transpose_buffer)
//   5. N2 half        N21-NTT, N2 intra-transpose, N22-NTT (ntt_vec)
//   6. post-twist     unity in the forward direction       (of_twist)
// Input vector n2 (n2 = 0..P-1) carries x[n1*P + n2] at element n1, the
// strided data map of the unit; output vector k1 carries X[k1 + P*k2] at
// element k2. Each butterfly uses one fixed twiddle for a whole limb, so no
// twiddles change during a limb.
//
// The inverse transform runs on the same datapath with the inverse tables:
// inverse roots, a unity pre-twist and a post-twist of N^-1 * psi^-k. The
// forward output order is exactly the inverse's input order, so a limb can
// go NTT -> INTT without re-ordering.
//
// All factors are per-limb configuration written through cfg_*:
//   sel 0 lane twiddles (R/2)   rho^(R*j), rho = w^P
//   sel 1 intra twist (P)       rho^(b*ka) at index b*R + ka
//   sel 2/3 pre-twist base/step (P)   sel 4 twist step at the buffer (P)
//   sel 5/6 post-twist base/step (P)
// Applying psi^n as a separate pre-twist (rather than folding it into the
// first-stage twiddles) and the table loading are this design's choices.
//
// Timing: the first output vector of a limb appears P + 2*(2*log2(R)+1) + 4
// cycles after its first input vector; one limb is accepted every P cycles.
//
// Lint note: rst_n is reported as used both asynchronously and synchronously.
// The synchronous use is only the "disable iff (!rst_n)" of the assertions,
// which generate no logic; every flip-flop has the asynchronous reset.
module nttu
  import taiyi_pkg::*;
#(
  parameter int unsigned R = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [2:0]  cfg_sel,
  input  logic [7:0]  cfg_addr,
  input  word_t       cfg_data,
  input  word_t       q,
  input  logic        in_valid,
  input  word_t       in_data [R*R],
  output logic        out_valid,
  output word_t       out_data [R*R]
);
  localparam int unsigned P = R * R;

  word_t tw        [R/2];
  word_t twist     [P];
  word_t pre_base  [P];
  word_t pre_step  [P];
  word_t mid_base  [P];
  word_t mid_step  [P];
  word_t post_base [P];
  word_t post_step [P];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      unique case (cfg_sel)
        3'd0:    tw[cfg_addr[$clog2(R/2)-1:0]] <= cfg_data;
        3'd1:    twist[cfg_addr]               <= cfg_data;
        3'd2:    pre_base[cfg_addr]            <= cfg_data;
        3'd3:    pre_step[cfg_addr]            <= cfg_data;
        3'd4:    mid_step[cfg_addr]            <= cfg_data;
        3'd5:    post_base[cfg_addr]           <= cfg_data;
        3'd6:    post_step[cfg_addr]           <= cfg_data;
        default: ;
      endcase
    end
  end

  always_comb begin
    for (int e = 0; e < P; e++) mid_base[e] = word_t'(1);
  end

  logic  v1, v2, v3, v4, v5;
  word_t d1 [P];
  word_t d2 [P];
  word_t d3 [P];
  word_t d4 [P];
  word_t d5 [P];

  of_twist #(.VL(P), .PERIOD(P)) u_pre (
    .clk, .rst_n, .clear(1'b0), .q, .base(pre_base), .step(pre_step),
    .in_valid, .in_data, .out_valid(v1), .out_data(d1));

  ntt_vec #(.R(R)) u_n1 (
    .clk, .rst_n, .q, .tw, .twist,
    .in_valid(v1), .in_data(d1), .out_valid(v2), .out_data(d2));

  of_twist #(.VL(P), .PERIOD(P)) u_mid (
    .clk, .rst_n, .clear(1'b0), .q, .base(mid_base), .step(mid_step),
    .in_valid(v2), .in_data(d2), .out_valid(v3), .out_data(d3));

  transpose_buffer #(.DIM(P)) u_tb (
    .clk, .rst_n, .in_valid(v3), .in_data(d3), .out_valid(v4), .out_data(d4));

  ntt_vec #(.R(R)) u_n2 (
    .clk, .rst_n, .q, .tw, .twist,
    .in_valid(v4), .in_data(d4), .out_valid(v5), .out_data(d5));

  of_twist #(.VL(P), .PERIOD(P)) u_post (
    .clk, .rst_n, .clear(1'b0), .q, .base(post_base), .step(post_step),
    .in_valid(v5), .in_data(d5), .out_valid, .out_data);
endmodule
