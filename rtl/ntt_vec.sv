// ntt_vec: a P-point cyclic NTT of one vector per cycle, P = R*R, built as a
// four-step transform from R-point lanes (one half of the NTT unit: the
// N11-NTT, N1 intra-transpose and N12-NTT stages, or N21 / N2 / N22).
//
// With rho a primitive P-th root of unity and input index n = a*R + b:
//   stage 1: lane b computes the R-point NTT over a (root rho^R);
//   intra-transpose: element (b, ka) times rho^(b*ka), then transpose;
//   stage 2: lane ka computes the R-point NTT over b (root rho^R);
// which yields X[ka + R*kb]. The output wiring puts X[k] at out_data[k], so
// out_data[k] = sum_n in_data[n] * rho^(n*k) mod q, in natural order.
// Every butterfly keeps one fixed twiddle per limb (tw = rho^(R*j),
// j < R/2), and all lanes share the same table.
//
// Timing: fully pipelined, latency 2*log2(R) + 1 cycles.
module ntt_vec
  import taiyi_pkg::*;
#(
  parameter int unsigned R = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t q,
  input  word_t tw [R/2],
  input  word_t twist [R*R],
  input  logic  in_valid,
  input  word_t in_data [R*R],
  output logic  out_valid,
  output word_t out_data [R*R]
);
  localparam int unsigned P = R * R;

  word_t s1_in  [R][R];
  word_t s1_out [R][R];
  word_t s1_flat[P];
  word_t it_out [P];
  word_t s2_in  [R][R];
  word_t s2_out [R][R];
  logic  s1_v [R];
  logic  it_v;
  logic  s2_v [R];

  always_comb begin
    for (int b = 0; b < R; b++)
      for (int a = 0; a < R; a++) s1_in[b][a] = in_data[a*R + b];
  end

  for (genvar l = 0; l < R; l++) begin : g_n1
    ntt_lane #(.R(R)) u_lane (
      .clk, .rst_n, .q, .tw,
      .in_valid(in_valid), .in_data(s1_in[l]),
      .out_valid(s1_v[l]), .out_data(s1_out[l]));
  end

  always_comb begin
    for (int b = 0; b < R; b++)
      for (int k = 0; k < R; k++) s1_flat[b*R + k] = s1_out[b][k];
  end

  intra_transpose #(.R1(R), .R2(R)) u_it (
    .clk, .rst_n, .q, .twist,
    .in_valid(s1_v[0]), .in_data(s1_flat),
    .out_valid(it_v), .out_data(it_out));

  always_comb begin
    for (int k = 0; k < R; k++)
      for (int b = 0; b < R; b++) s2_in[k][b] = it_out[k*R + b];
  end

  for (genvar l = 0; l < R; l++) begin : g_n2
    ntt_lane #(.R(R)) u_lane (
      .clk, .rst_n, .q, .tw,
      .in_valid(it_v), .in_data(s2_in[l]),
      .out_valid(s2_v[l]), .out_data(s2_out[l]));
  end

  always_comb begin
    for (int ka = 0; ka < R; ka++)
      for (int kb = 0; kb < R; kb++) out_data[ka + R*kb] = s2_out[ka][kb];
  end
  assign out_valid = s2_v[0];
endmodule
