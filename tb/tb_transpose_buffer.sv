// tb_transpose_buffer: writes three 8 x 8 limbs back to back (both banks
// used, the third limb waits for a bank to drain) and checks that every
// limb comes out column by column, out[r] of column c = row r element c,
// with the first column 2 cycles after the last row.
module tb_transpose_buffer;
  import taiyi_pkg::*;
  localparam int unsigned DIM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  word_t in_data [DIM], out_data [DIM];
  transpose_buffer #(.DIM(DIM)) dut (.*);
  int checks = 0, failures = 0, cyc = 0, nout = 0, last_in [3], first_out [3];
  always @(posedge clk) cyc <= cyc + 1;
  word_t m [3][DIM][DIM];
  always @(posedge clk) if (out_valid) begin
    int l, c;
    l = nout / DIM; c = nout % DIM;
    if (c == 0) first_out[l] = cyc;
    for (int r = 0; r < DIM; r++) begin
      checks++;
      if (out_data[r] !== m[l][r][c]) failures++;
    end
    nout++;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int l = 0; l < 3; l++) for (int r = 0; r < DIM; r++) for (int c = 0; c < DIM; c++)
      m[l][r][c] = word_t'({$urandom, $urandom});
    repeat (2) @(negedge clk); rst_n = 1;
    for (int l = 0; l < 3; l++) begin
      if (l == 2) repeat (DIM) @(negedge clk);   // let the first bank drain
      for (int r = 0; r < DIM; r++) begin
        @(negedge clk);
        in_valid = 1; in_data = m[l][r]; last_in[l] = cyc;
      end
      @(negedge clk) in_valid = 0;
    end
    repeat (4*DIM) @(negedge clk);
    checks++;
    if (nout != 3*DIM) failures++;
    checks++;
    if (first_out[0] - last_in[0] != 2) begin failures++; $display("latency %0d", first_out[0] - last_in[0]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
