// transpose_buffer: the "transpose with buffer" stage of the NTT unit.
//
// A limb arrives as ROWS row vectors of DIM elements (row n2 holds the
// N1-point results k1 = 0..DIM-1). When all ROWS rows of a limb are stored,
// the buffer is read column-wise: output vector k1 holds element k1 of every
// row, n2 = 0..ROWS-1, which is the input the second half of the NTT needs.
// Two banks (ping-pong) let the next limb be written while the previous one
// is read, so the stage keeps the unit fully pipelined; the two-bank
// arrangement is this design's choice. The buffer is square (ROWS = DIM), as
// for N = 2^16 = 256 x 256.
//
// Timing: a limb's first column appears 2 cycles after its last row is
// written, then one column per cycle for DIM cycles. Writing a third limb
// while both banks are full is an overflow, flagged by an assertion.
//
// Lint note: rst_n is reported as used both asynchronously and synchronously.
// The synchronous use is only the "disable iff (!rst_n)" of the assertions,
// which generate no logic; every flip-flop has the asynchronous reset.
module transpose_buffer
  import taiyi_pkg::*;
#(
  parameter int unsigned DIM = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t in_data [DIM],
  output logic  out_valid,
  output word_t out_data [DIM]
);
  localparam int unsigned AW = $clog2(DIM);

  word_t         mem [2][DIM][DIM];
  logic          wr_bank, rd_bank;
  logic [AW-1:0] wr_row, rd_col;
  logic [1:0]    full;

  always_ff @(posedge clk) begin
    if (in_valid) mem[wr_bank][wr_row] <= in_data;
    if (full[rd_bank])
      for (int r = 0; r < DIM; r++) out_data[r] <= mem[rd_bank][r][rd_col];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_bank   <= 1'b0;
      rd_bank   <= 1'b0;
      wr_row    <= '0;
      rd_col    <= '0;
      full      <= '0;
      out_valid <= 1'b0;
    end else begin
      logic [1:0] f;
      f         = full;
      out_valid <= full[rd_bank];
      if (full[rd_bank]) begin
        rd_col <= rd_col + 1'b1;
        if (rd_col == AW'(DIM - 1)) begin
          f[rd_bank] = 1'b0;
          rd_bank    <= ~rd_bank;
        end
      end
      if (in_valid) begin
        wr_row <= wr_row + 1'b1;
        if (wr_row == AW'(DIM - 1)) begin
          f[wr_bank] = 1'b1;
          wr_bank    <= ~wr_bank;
        end
      end
      full <= f;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(in_valid && full[wr_bank]))
    else $error("transpose_buffer: write into a bank that is still being read");
endmodule
