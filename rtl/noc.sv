// noc: the interconnect between the accelerator's clusters.
//
// Every cluster may send one batch (VL words plus a destination row address)
// per cycle to any cluster, itself included. Each destination port grants
// one request per cycle, the lowest-numbered requesting source winning;
// src_ready tells a source whether its request was taken this cycle (a
// refused source keeps its request up). Delivered batches are registered:
// dst_valid/dst_* follow the grant by 1 cycle.
//
// The all-to-all links match the cluster drawing of the reference design,
// which gives no further detail; the single-stage crossbar and the fixed
// priority are this design's choices.
module noc
  import taiyi_pkg::*;
#(
  parameter int unsigned C  = 4,
  parameter int unsigned VL = 256,
  parameter int unsigned AW = 15
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  src_valid [C],
  input  logic [$clog2(C)-1:0]  src_dst   [C],
  input  logic [AW-1:0]         src_addr  [C],
  input  word_t                 src_data  [C][VL],
  output logic                  src_ready [C],
  output logic                  dst_valid [C],
  output logic [$clog2(C)-1:0]  dst_src   [C],
  output logic [AW-1:0]         dst_addr  [C],
  output word_t                 dst_data  [C][VL]
);
  localparam int unsigned CW = $clog2(C);

  logic          gnt_v [C];
  logic [CW-1:0] gnt_s [C];

  always_comb begin
    for (int s = 0; s < C; s++) src_ready[s] = 1'b0;
    for (int d = 0; d < C; d++) begin
      gnt_v[d] = 1'b0;
      gnt_s[d] = '0;
      for (int s = C - 1; s >= 0; s--)
        if (src_valid[s] && src_dst[s] == CW'(d)) begin
          gnt_v[d] = 1'b1;
          gnt_s[d] = CW'(s);
        end
      if (gnt_v[d]) src_ready[gnt_s[d]] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    for (int d = 0; d < C; d++)
      if (gnt_v[d]) begin
        dst_src[d]  <= gnt_s[d];
        dst_addr[d] <= src_addr[gnt_s[d]];
        dst_data[d] <= src_data[gnt_s[d]];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int d = 0; d < C; d++) dst_valid[d] <= 1'b0;
    else        for (int d = 0; d < C; d++) dst_valid[d] <= gnt_v[d];
  end
endmodule
