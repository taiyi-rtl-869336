// autou: automorphism unit for one limb in the evaluation (NTT) domain.
//
// The CKKS rotation applies X -> X^g (g odd) to a polynomial. On the
// negacyclic NTT values X[k] = a(psi^(2k+1)) this is a pure permutation:
//   out[k] = in[((2k+1)*g mod 2N - 1) / 2].
// The unit stores one limb (N elements) written VL per cycle, then reads
// it VL per cycle with every element taken from its permuted address.
// Writes accept either plain row order (element e of row r at r*VL + e) or
// the order the NTT unit produces (vector k1, element k2 at k1 + (N/VL)*k2),
// so it can sit directly behind the NTT unit on the BSGS path
// NTT -> AUTOU -> HP-IP.
//
// The reference design uses a multi-stage MUX permutation network; this
// unit instead buffers the limb and reads it through VL arbitrary-address
// ports, which gives the same result but not the same structure. Reading a
// limb requires that all of it was written (no overlap is tracked).
//
// Timing: read data is registered, out follows rd_en by 1 cycle.
//
// Lint note: rst_n is reported as used both asynchronously and synchronously.
// The synchronous use is only the "disable iff (!rst_n)" of the assertions,
// which generate no logic; every flip-flop has the asynchronous reset.
module autou
  import taiyi_pkg::*;
#(
  parameter int unsigned N  = 65536,
  parameter int unsigned VL = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [$clog2(2*N)-1:0]        gal,
  input  logic                          wr_strided,
  input  logic                          in_valid,
  input  logic [$clog2(N/VL)-1:0]       in_row,
  input  word_t                         in_data [VL],
  input  logic                          rd_en,
  input  logic [$clog2(N/VL)-1:0]       rd_row,
  output logic                          out_valid,
  output word_t                         out_data [VL]
);
  localparam int unsigned LN   = $clog2(N);
  localparam int unsigned ROWS = N / VL;

  word_t mem [N];

  function automatic logic [LN-1:0] src_index(logic [LN-1:0] k, logic [LN:0] g);
    logic [LN:0] t;            // (2k+1)g mod 2N
    t = (LN+1)'((2 * (LN+1)'(k) + 1) * g);
    return LN'(t >> 1);     // ((2k+1)g mod 2N - 1)/2, (2k+1)g is odd
  endfunction

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int e = 0; e < VL; e++) begin
        if (wr_strided) mem[LN'(in_row) + LN'(ROWS * e)] <= in_data[e];
        else            mem[LN'(in_row) * LN'(VL) + LN'(e)] <= in_data[e];
      end
    if (rd_en)
      for (int e = 0; e < VL; e++)
        out_data[e] <= mem[src_index(LN'(rd_row) * LN'(VL) + LN'(e), gal)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= rd_en;
  end

  a_gal_odd: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> gal[0])
    else $error("autou: Galois element must be odd");
endmodule
