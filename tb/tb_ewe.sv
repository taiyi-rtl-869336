// tb_ewe: every EWE operation (ADD, SUB, MUL, MAC) on random reduced
// operands over 16 lanes, checked against mod-q arithmetic one cycle later.
module tb_ewe;
  import taiyi_pkg::*;
  localparam int unsigned VL = 16;
  localparam longint unsigned Q = 64'd68711350273;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ewe_op_e op;
  word_t q = word_t'(Q);
  logic in_valid = 0, out_valid;
  word_t a [VL], b [VL], c [VL], out_data [VL];
  ewe #(.VL(VL)) dut (.*);
  int checks = 0, failures = 0;
  function automatic word_t ref_op(ewe_op_e o, word_t x, word_t y, word_t z);
    logic [72:0] t;
    unique case (o)
      EWE_ADD: t = (73'(x) + 73'(y)) % 73'(Q);
      EWE_SUB: t = (73'(x) + 73'(Q) - 73'(y)) % 73'(Q);
      EWE_MUL: t = (73'(x) * 73'(y)) % 73'(Q);
      default: t = ((73'(x) * 73'(y)) % 73'(Q) + 73'(z)) % 73'(Q);
    endcase
    return word_t'(t);
  endfunction
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      op = ewe_op_e'(t % 4); in_valid = 1;
      for (int e = 0; e < VL; e++) begin
        a[e] = word_t'({$urandom, $urandom} % Q);
        b[e] = (t % 8 == 1) ? a[e] : word_t'({$urandom, $urandom} % Q);
        c[e] = word_t'({$urandom, $urandom} % Q);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int e = 0; e < VL; e++) begin
        checks++;
        if (out_data[e] !== ref_op(op, a[e], b[e], c[e])) begin
          failures++;
          if (failures < 5) $display("op %0d e %0d got %0d", op, e, out_data[e]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
