// coeff_buffer: the coefficient buffer (C-Buffer) of one cluster, the
// scratchpad that holds ciphertext limbs between operations.
//
// It stores ROWS rows of VL = 256 words (one batch each) with one write and
// one read port. 23040 rows x 256 x 36 bits is 25.3 MiB per cluster: the
// reference's 128.25 MB total on-chip memory less four 6.75 MiB E-Key
// Buffers, split over four clusters. The split, the port count and the
// 1-cycle read latency are this design's choices; a chip would build the
// array from SRAM macros.
//
// Lint note: rst_n is reported as used both asynchronously and synchronously.
// The synchronous use is only the "disable iff (!rst_n)" of the assertions,
// which generate no logic; every flip-flop has the asynchronous reset.
module coeff_buffer
  import taiyi_pkg::*;
#(
  parameter int unsigned ROWS = 23040,
  parameter int unsigned VL   = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(ROWS)-1:0]   waddr,
  input  word_t                     wdata [VL],
  input  logic                      re,
  input  logic [$clog2(ROWS)-1:0]   raddr,
  output logic                      rvalid,
  output word_t                     rdata [VL]
);
  word_t mem [ROWS][VL];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= re;
  end

  a_waddr: assert property (@(posedge clk) disable iff (!rst_n) we |-> 32'(waddr) < ROWS);
  a_raddr: assert property (@(posedge clk) disable iff (!rst_n) re |-> 32'(raddr) < ROWS);
endmodule
