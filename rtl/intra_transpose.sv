// intra_transpose: the step between the two butterfly stages of a vector NTT
// (the N1 / N2 intra-transpose of the NTT unit).
//
// A vector of R1*R2 elements arrives lane-major from R2 lanes of R1 elements
// each: element (b, ka) at index b*R1 + ka, where b is the lane and ka the
// frequency index produced by that lane's first-stage NTT. Every element is
// multiplied by its twist factor twist[b*R1+ka] (= rho^(b*ka) for the
// vector's root rho, the Hadamard product of the four-step method), and the
// R2 x R1 block is transposed so that lane ka of the next stage receives
// element (b, ka) at index ka*R2 + b.
//
// The transpose is done in one cycle by wiring because the whole block is
// present at once; the quadrant-swap units of the reference organisation
// (which transpose over time) are therefore not needed here. That, and taking
// the twist factors from a table input, are this design's choices.
//
// Timing: one register, out follows in by 1 cycle. q and twist must be
// stable while a limb is in flight.
module intra_transpose
  import taiyi_pkg::*;
#(
  parameter int unsigned R1 = 16,
  parameter int unsigned R2 = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  word_t q,
  input  word_t twist [R1*R2],
  input  logic  in_valid,
  input  word_t in_data [R1*R2],
  output logic  out_valid,
  output word_t out_data [R1*R2]
);
  word_t nxt [R1*R2];

  always_comb begin
    for (int b = 0; b < R2; b++)
      for (int k = 0; k < R1; k++)
        nxt[k*R2 + b] = mod_mul(in_data[b*R1 + k], twist[b*R1 + k], q);
  end

  always_ff @(posedge clk) begin
    if (in_valid) out_data <= nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
