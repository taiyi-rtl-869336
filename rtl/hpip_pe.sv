// hpip_pe: one processing element of the HP-IP inner-product array.
//
// A PE holds MACS (6) multiply-accumulate units that all see the same
// ciphertext element ct and work modulo the same prime q; MAC i multiplies
// ct by its own evaluation-key element key[i] and adds the 72-bit product to
// its 128-bit accumulator (the POLY-ACC-REG). The array is output
// stationary: over the beta input digits n of the KLSS inner product,
// accumulator i collects sum_n ct_n * evk_i,n, and only at the end is the sum
// reduced modulo q. A 128-bit accumulator holds 2^56 unreduced 72-bit
// products, far more than any digit count.
//
// Control: clear with mac_en starts a new sum with the current product;
// drain reduces every accumulator (acc mod q) into out_data, valid one cycle
// later. q, ct and key are sampled on the mac_en cycle. The count of 6 MACs
// and the 128-bit accumulator follow the reference design; the single-cycle
// final reduction is this design's choice.
module hpip_pe
  import taiyi_pkg::*;
#(
  parameter int unsigned MACS = 6,
  parameter int unsigned ACCW = 128
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t q,
  input  logic  clear,
  input  logic  mac_en,
  input  word_t ct,
  input  word_t key [MACS],
  input  logic  drain,
  output logic  out_valid,
  output word_t out_data [MACS]
);
  logic [ACCW-1:0] acc [MACS];

  always_ff @(posedge clk) begin
    for (int i = 0; i < MACS; i++) begin
      if (mac_en)
        acc[i] <= (clear ? '0 : acc[i]) + ACCW'(dword_t'(ct) * dword_t'(key[i]));
      else if (clear)
        acc[i] <= '0;
      if (drain)
        out_data[i] <= word_t'(acc[i] % ACCW'(q));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= drain;
  end
endmodule
