// tb_ekey_buffer: fills a reduced E-Key Buffer (24 banks x 16 batches of
// 8 words) with distinct random batches, then reads every address and checks
// that all 24 banks return their batch one cycle after the read.
module tb_ekey_buffer;
  import taiyi_pkg::*;
  localparam int unsigned BANKS = 24, DEPTH = 16, VL = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [4:0] wr_bank;
  logic [3:0] wr_addr, rd_addr;
  word_t wr_data [VL], rd_data [BANKS][VL];
  ekey_buffer #(.BANKS(BANKS), .DEPTH(DEPTH), .VL(VL)) dut (.*);
  int checks = 0, failures = 0;
  word_t m [BANKS][DEPTH][VL];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int b = 0; b < BANKS; b++) for (int a = 0; a < DEPTH; a++) for (int e = 0; e < VL; e++)
      m[b][a][e] = word_t'({$urandom, $urandom});
    for (int a = 0; a < DEPTH; a++)
      for (int b = 0; b < BANKS; b++) begin
        @(negedge clk); we = 1; wr_bank = 5'(b); wr_addr = 4'(a); wr_data = m[b][a];
      end
    @(negedge clk) we = 0;
    for (int a = DEPTH - 1; a >= 0; a--) begin
      @(negedge clk); re = 1; rd_addr = 4'(a);
      @(negedge clk); re = 0;
      for (int b = 0; b < BANKS; b++) for (int e = 0; e < VL; e++) begin
        checks++;
        if (rd_data[b][e] !== m[b][a][e]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
