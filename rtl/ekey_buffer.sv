// ekey_buffer: the E-Key Buffer that feeds HP-IP with evaluation keys.
//
// HP-IP consumes 24 key batches per cycle (4 input limbs x 6 keys), each a
// batch of V = 256 elements, one per VEC-PE. The buffer is therefore
// organised as BANKS = 24 banks of DEPTH = 256 batches: a read returns the
// batch at rd_addr from every bank at once. 24 x 256 = 6144 batches of
// 256 x 36 bits make 6.75 MiB per cluster, the capacity of the reference
// design, enough for 256 consecutive HP-IP steps so that key refill overlaps
// computation. Keys arrive one batch per cycle through the write port (from
// the key generator or off-chip memory).
//
// Timing: synchronous read, rd_data valid the cycle after re. Banking, the
// single write port and the read latency are this design's choices; a real
// chip would build this from SRAM macros.
module ekey_buffer
  import taiyi_pkg::*;
#(
  parameter int unsigned BANKS = 24,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned VL    = 256
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(BANKS)-1:0]   wr_bank,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  word_t                      wr_data [VL],
  input  logic                       re,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output word_t                      rd_data [BANKS][VL]
);
  word_t mem [BANKS][DEPTH][VL];

  always_ff @(posedge clk) begin
    if (we) mem[wr_bank][wr_addr] <= wr_data;
    if (re)
      for (int b = 0; b < BANKS; b++) rd_data[b] <= mem[b][rd_addr];
  end
endmodule
