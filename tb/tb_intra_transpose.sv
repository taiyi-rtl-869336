// tb_intra_transpose: random vectors and twist factors through the
// intra-transpose (R1 = R2 = 16); each output element (ka*R2 + b) must equal
// in[b*R1 + ka] * twist[b*R1 + ka] mod q one cycle later.
module tb_intra_transpose;
  import taiyi_pkg::*;
  localparam int unsigned R1 = 16, R2 = 16;
  localparam longint unsigned Q = 64'd68718428161;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t q = word_t'(Q);
  word_t twist [R1*R2];
  logic in_valid = 0, out_valid;
  word_t in_data [R1*R2];
  word_t out_data [R1*R2];
  intra_transpose #(.R1(R1), .R2(R2)) dut (.*);
  int checks = 0, failures = 0;
  word_t hold [R1*R2];

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < R1*R2; i++) twist[i] = word_t'({$urandom, $urandom} % Q);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < R1*R2; i++) in_data[i] = word_t'({$urandom, $urandom} % Q);
      hold = in_data;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int b = 0; b < R2; b++)
        for (int k = 0; k < R1; k++) begin
          logic [71:0] p;
          p = 72'(hold[b*R1+k]) * 72'(twist[b*R1+k]);
          checks++;
          if (out_data[k*R2+b] !== word_t'(p % 72'(Q))) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
