// of_twist: Hadamard product with twist factors generated on the fly.
//
// The multi-step NTT needs, for the r-th vector of a limb, the factors
// F_r[e] = base[e] * step[e]^r (for example psi^(n1*N2 + n2) for the
// negacyclic pre-twist, or w^(n2*k1) at the transpose buffer). Instead of a
// table of all V*PERIOD factors, the unit keeps the current factor vector F
// in registers and multiplies it by step after every vector, so only the two
// V-entry vectors base and step are stored per limb. The sequence restarts
// from base every PERIOD vectors (one limb) and on clear.
//
// Interface: base/step are stable configuration; in_valid/in_data is the
// vector stream. Timing: out follows in by 1 cycle; one extra multiplier per
// element updates F. The generator follows the on-the-fly twist idea of the
// reference design; PERIOD-based restart is this design's choice.
module of_twist
  import taiyi_pkg::*;
#(
  parameter int unsigned VL     = 256,
  parameter int unsigned PERIOD = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  word_t q,
  input  word_t base [VL],
  input  word_t step [VL],
  input  logic  in_valid,
  input  word_t in_data [VL],
  output logic  out_valid,
  output word_t out_data [VL]
);
  localparam int unsigned CW = (PERIOD > 1) ? $clog2(PERIOD) : 1;

  word_t               fac [VL];
  logic [CW-1:0]       cnt;
  word_t               cur [VL];

  always_comb begin
    for (int e = 0; e < VL; e++) cur[e] = (cnt == '0) ? base[e] : fac[e];
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int e = 0; e < VL; e++) begin
        out_data[e] <= mod_mul(in_data[e], cur[e], q);
        fac[e]      <= mod_mul(cur[e], step[e], q);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (clear)         cnt <= '0;
      else if (in_valid) cnt <= (cnt == CW'(PERIOD - 1)) ? '0 : cnt + 1'b1;
    end
  end
endmodule
