// taiyi_top: the CKKS key-switching accelerator, four compute clusters
// joined by an all-to-all NoC.
//
// Each cluster (ksu) processes 256 coefficients per cycle, 1024 lanes in
// all. A cluster holds its own Coefficient Buffer and E-Key Buffer and
// executes the KLSS key switch (gadget decomposition with BConvU and NTTU,
// the inner product on HP-IP, Recover-Limbs with NTTU and BConvU) under
// per-cycle commands cmd[c] from a scheduler outside this module.
//
// Outside connections, all plain ports:
//   cfg_*   moduli, NTT and BConv tables, written to every cluster whose
//           cfg_mask bit is set;
//   key_*   evaluation-key batches into cluster key_cluster's E-Key Buffer
//           (from the evaluation-key generator or off-chip memory, neither
//           built here);
//   hbm_*   batches written into a cluster's C-Buffer (off-chip memory
//           side); cb_rvalid/cb_rdata show each cluster's C-Buffer reads,
//           which is also how results leave the chip;
//   noc_*   a cluster's C-Buffer read batch is sent to cluster noc_dst[c],
//           row noc_addr[c], when noc_send[c] is set; noc_ready[c] reports
//           whether it was taken. Deliveries are written into the
//           destination C-Buffer one cycle later; an off-chip write to the
//           same cluster in that cycle wins and the collision is asserted
//           against.
// The double-prime scaling unit of the reference design is not built.
//
// Lint note: rst_n is reported as used both asynchronously and synchronously.
// The synchronous use is only the "disable iff (!rst_n)" of the assertions,
// which generate no logic; every flip-flop has the asynchronous reset.
// The NoC's sender-id output is left open on purpose: a delivered row
// already carries its destination address, so the sender is not needed.
module taiyi_top
  import taiyi_pkg::*;
#(
  parameter int unsigned C      = 4,
  parameter int unsigned VL     = 256,
  parameter int unsigned R      = 16,
  parameter int unsigned CBROWS = 23040,
  parameter int unsigned KDEP   = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  ksu_cmd_t                 cmd [C],
  input  logic                     cfg_we,
  input  logic [C-1:0]             cfg_mask,
  input  logic [1:0]               cfg_unit,
  input  logic [2:0]               cfg_sel,
  input  logic [7:0]               cfg_addr,
  input  logic [2:0]               cfg_j,
  input  word_t                    cfg_data,
  input  logic                     key_we,
  input  logic [$clog2(C)-1:0]     key_cluster,
  input  logic [4:0]               key_bank,
  input  logic [$clog2(KDEP)-1:0]  key_waddr,
  input  word_t                    key_wdata [VL],
  input  logic                     hbm_we,
  input  logic [$clog2(C)-1:0]     hbm_cluster,
  input  logic [CB_AW-1:0]         hbm_waddr,
  input  word_t                    hbm_wdata [VL],
  input  logic                     noc_send [C],
  input  logic [$clog2(C)-1:0]     noc_dst  [C],
  input  logic [CB_AW-1:0]         noc_addr [C],
  output logic                     noc_ready [C],
  output logic                     cb_rvalid [C],
  output word_t                    cb_rdata  [C][VL],
  output logic                     ntt_valid [C],
  output logic                     bc_valid  [C],
  output logic [2:0]               bc_idx    [C],
  output logic                     hp_valid  [C],
  output logic                     ewe_valid [C],
  output logic                     au_valid  [C]
);
  logic             d_valid [C];
  logic [CB_AW-1:0] d_addr  [C];
  word_t            d_data  [C][VL];
  logic             s_valid [C];

  always_comb
    for (int c = 0; c < C; c++) s_valid[c] = noc_send[c] && cb_rvalid[c];

  noc #(.C(C), .VL(VL), .AW(CB_AW)) u_noc (
    .clk, .rst_n, .src_valid(s_valid), .src_dst(noc_dst), .src_addr(noc_addr),
    .src_data(cb_rdata), .src_ready(noc_ready),
    .dst_valid(d_valid), .dst_src(), .dst_addr(d_addr), .dst_data(d_data));

  for (genvar c = 0; c < C; c++) begin : g_cluster
    logic             ext_we;
    logic [CB_AW-1:0] ext_waddr;
    word_t            ext_wdata [VL];
    logic             hbm_here;

    assign hbm_here  = hbm_we && hbm_cluster == ($clog2(C))'(c);
    assign ext_we    = hbm_here || d_valid[c];
    assign ext_waddr = hbm_here ? hbm_waddr : d_addr[c];
    always_comb ext_wdata = hbm_here ? hbm_wdata : d_data[c];

    ksu #(.VL(VL), .R(R), .CBROWS(CBROWS), .KDEP(KDEP)) u_ksu (
      .clk, .rst_n, .cmd(cmd[c]),
      .cfg_we(cfg_we && cfg_mask[c]), .cfg_unit, .cfg_sel, .cfg_addr, .cfg_j, .cfg_data,
      .key_we(key_we && key_cluster == ($clog2(C))'(c)), .key_bank, .key_waddr, .key_wdata,
      .ext_we, .ext_waddr, .ext_wdata,
      .cb_rvalid(cb_rvalid[c]), .cb_rdata(cb_rdata[c]),
      .ntt_valid(ntt_valid[c]), .bc_valid(bc_valid[c]), .bc_idx(bc_idx[c]),
      .hp_valid(hp_valid[c]), .ewe_valid(ewe_valid[c]), .au_valid(au_valid[c]));

    a_noc_vs_hbm: assert property (@(posedge clk) disable iff (!rst_n) !(hbm_here && d_valid[c]))
      else $error("taiyi_top: NoC delivery and off-chip write to the same cluster");
  end
endmodule
