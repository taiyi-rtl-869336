// tb_of_twist: streams 2 periods of vectors (VL = 8, PERIOD = 5) of all-ones
// and random data through the on-the-fly twist unit and checks
// out[e] = in[e] * base[e] * step[e]^r mod q, r the vector index within the
// period, so the restart of the factor sequence is checked too.
module tb_of_twist;
  import taiyi_pkg::*;
  localparam int unsigned VL = 8, PERIOD = 5;
  localparam longint unsigned Q = 64'd68718428161;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0;
  word_t q = word_t'(Q);
  word_t base [VL], step [VL];
  logic in_valid = 0, out_valid;
  word_t in_data [VL], out_data [VL];
  of_twist #(.VL(VL), .PERIOD(PERIOD)) dut (.*);
  int checks = 0, failures = 0;
  function automatic word_t mm(word_t a, word_t b);
    logic [71:0] p; p = 72'(a) * 72'(b); return word_t'(p % 72'(Q));
  endfunction
  function automatic word_t mpow(word_t a, int e);
    word_t r; r = 1;
    for (int i = 0; i < e; i++) r = mm(r, a);
    return r;
  endfunction
  word_t hold [VL];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int e = 0; e < VL; e++) begin
      base[e] = word_t'({$urandom, $urandom} % Q);
      step[e] = word_t'({$urandom, $urandom} % Q);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int v = 0; v < 2*PERIOD; v++) begin
      @(negedge clk);
      in_valid = 1;
      for (int e = 0; e < VL; e++) in_data[e] = (v % 2) ? word_t'({$urandom, $urandom} % Q) : word_t'(1);
      hold = in_data;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int e = 0; e < VL; e++) begin
        checks++;
        if (out_data[e] !== mm(hold[e], mm(base[e], mpow(step[e], v % PERIOD)))) begin
          failures++;
          if (failures < 4) $display("v%0d e%0d got %0d", v, e, out_data[e]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
