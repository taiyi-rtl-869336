// ewe: element-wise engine. Applies one modular operation to VL = 256 lanes
// per cycle: ADD (a+b), SUB (a-b), MUL (a*b, the Hadamard product used for
// twisting and for the first step of basis conversion) or MAC (a*b+c), all
// mod q. Operands must be reduced (< q).
//
// Timing: one register stage; out follows in by 1 cycle. The operation set
// beyond add and multiply (SUB, MAC) is this design's choice.
module ewe
  import taiyi_pkg::*;
#(
  parameter int unsigned VL = 256
) (
  input  logic    clk,
  input  logic    rst_n,
  input  ewe_op_e op,
  input  word_t   q,
  input  logic    in_valid,
  input  word_t   a [VL],
  input  word_t   b [VL],
  input  word_t   c [VL],
  output logic    out_valid,
  output word_t   out_data [VL]
);
  always_ff @(posedge clk) begin
    if (in_valid)
      for (int e = 0; e < VL; e++) begin
        unique case (op)
          EWE_ADD: out_data[e] <= mod_add(a[e], b[e], q);
          EWE_SUB: out_data[e] <= mod_sub(a[e], b[e], q);
          EWE_MUL: out_data[e] <= mod_mul(a[e], b[e], q);
          EWE_MAC: out_data[e] <= mod_add(mod_mul(a[e], b[e], q), c[e], q);
        endcase
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
