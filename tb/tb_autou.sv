// tb_autou: automorphism of a reduced limb (N = 64, VL = 8). The limb is
// written once in plain row order and once in the NTT unit's strided order;
// for Galois elements 5, 25, 2N-1 (conjugation) and 1 every output element
// k must equal X[((2k+1)*g mod 2N - 1)/2], one cycle after the read.
module tb_autou;
  import taiyi_pkg::*;
  localparam int unsigned N = 64, VL = 8, ROWS = N / VL;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [6:0] gal;
  logic wr_strided = 0, in_valid = 0, rd_en = 0, out_valid;
  logic [2:0] in_row, rd_row;
  word_t in_data [VL], out_data [VL];
  autou #(.N(N), .VL(VL)) dut (.*);
  int checks = 0, failures = 0;
  word_t x [N];
  int gs [4] = '{5, 25, 2*N - 1, 1};
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < N; i++) x[i] = word_t'({$urandom, $urandom});
    repeat (2) @(negedge clk); rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        in_valid = 1; wr_strided = mode[0]; in_row = 3'(r);
        for (int e = 0; e < VL; e++) in_data[e] = mode ? x[r + ROWS*e] : x[r*VL + e];
      end
      @(negedge clk) in_valid = 0;
      for (int gi = 0; gi < 4; gi++)
        for (int r = 0; r < ROWS; r++) begin
          @(negedge clk); rd_en = 1; rd_row = 3'(r); gal = 7'(gs[gi]);
          @(negedge clk); rd_en = 0;
          checks++;
          if (!out_valid) failures++;
          for (int e = 0; e < VL; e++) begin
            int k, s;
            k = r*VL + e;
            s = (((2*k + 1) * gs[gi]) % (2*N) - 1) / 2;
            checks++;
            if (out_data[e] !== x[s]) begin
              failures++;
              if (failures < 5) $display("g %0d k %0d got %0h want %0h", gs[gi], k, out_data[e], x[s]);
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
