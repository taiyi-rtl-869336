// tb_coeff_buffer: writes random rows at scattered addresses of a reduced
// C-Buffer (64 rows x 8 words), reads them back in another order and checks
// data and the 1-cycle read latency, including a read and a write of the
// same row in one cycle (the read returns the old row).
module tb_coeff_buffer;
  import taiyi_pkg::*;
  localparam int unsigned ROWS = 64, VL = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0, rvalid;
  logic [5:0] waddr, raddr;
  word_t wdata [VL], rdata [VL];
  coeff_buffer #(.ROWS(ROWS), .VL(VL)) dut (.*);
  int checks = 0, failures = 0;
  word_t m [ROWS][VL];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < ROWS; r++) for (int e = 0; e < VL; e++) m[r][e] = word_t'({$urandom, $urandom});
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); we = 1; waddr = 6'((r * 37) % ROWS); wdata = m[(r * 37) % ROWS];
    end
    @(negedge clk) we = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); re = 1; raddr = 6'(ROWS - 1 - r);
      if (r == 5) begin we = 1; waddr = raddr; for (int e = 0; e < VL; e++) wdata[e] = ~m[ROWS-1-r][e]; end
      @(negedge clk); re = 0; we = 0;
      checks++;
      if (!rvalid) failures++;
      for (int e = 0; e < VL; e++) begin
        checks++;
        if (rdata[e] !== m[ROWS-1-r][e]) failures++;
      end
      if (r == 5) for (int e = 0; e < VL; e++) m[ROWS-1-r][e] = ~m[ROWS-1-r][e];
    end
    @(negedge clk); re = 1; raddr = 6'(ROWS - 1 - 5);
    @(negedge clk); re = 0;
    for (int e = 0; e < VL; e++) begin
      checks++;
      if (rdata[e] !== m[ROWS-1-5][e]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
