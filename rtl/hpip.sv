// hpip: HP-IP, the high-parallelism inner-product unit for the KLSS key
// switch.
//
// The KLSS inner product computes, for every output (j, m),
//   c~[j][m] = sum_{n < beta} c^_n * evk[j][m][n]          (all mod t_h)
// limb by limb in the T basis. HP-IP is an array of V = 256 VEC-PEs (one per
// element position of a batch), each with H = 4 PEs; PE row h works on
// T-limb h with prime q[h], and its 6 MACs accumulate 6 different outputs
// (j, m) that share the same input digit. One cycle therefore advances
// 24 batches: 4 input limbs x 6 keys. A sequence is
//   start + in_valid (digit 0), in_valid (digit 1) ... (digit beta-1), drain
// with key_addr naming, for each digit, the E-Key Buffer slot that holds the
// 24 matching key batches (bank h*6+i holds key i of limb h). The input
// ciphertext is re-read for the next 6 outputs.
//
// Timing: the key read takes one cycle, so the ciphertext and control are
// delayed by one register; results are valid 2 cycles after drain. Mapping
// limb h to PE row h (alpha' = H = 4) is this design's reading of the
// reference; spreading extra beta~ groups over idle PEs when beta < 4 is not
// built.
//
// Lint note: rst_n is reported as used both asynchronously and synchronously.
// The synchronous use is only the "disable iff (!rst_n)" of the assertions,
// which generate no logic; every flip-flop has the asynchronous reset.
module hpip
  import taiyi_pkg::*;
#(
  parameter int unsigned VL   = 256,
  parameter int unsigned H    = 4,
  parameter int unsigned MACS = 6,
  parameter int unsigned KDEP = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  word_t                     q [H],
  input  logic                      start,
  input  logic                      in_valid,
  input  word_t                     in_data [H][VL],
  input  logic [$clog2(KDEP)-1:0]   key_addr,
  input  logic                      drain,
  input  logic                      key_we,
  input  logic [$clog2(H*MACS)-1:0] key_bank,
  input  logic [$clog2(KDEP)-1:0]   key_waddr,
  input  word_t                     key_wdata [VL],
  output logic                      out_valid,
  output word_t                     out_data [H][MACS][VL]
);
  word_t keys [H*MACS][VL];
  logic  start_d, valid_d, drain_d;
  word_t ct_d [H][VL];

  ekey_buffer #(.BANKS(H*MACS), .DEPTH(KDEP), .VL(VL)) u_keys (
    .clk, .we(key_we), .wr_bank(key_bank), .wr_addr(key_waddr), .wr_data(key_wdata),
    .re(in_valid), .rd_addr(key_addr), .rd_data(keys));

  always_ff @(posedge clk) begin
    if (in_valid) ct_d <= in_data;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_d <= 1'b0;
      valid_d <= 1'b0;
      drain_d <= 1'b0;
    end else begin
      start_d <= start;
      valid_d <= in_valid;
      drain_d <= drain;
    end
  end

  logic pe_valid [H][VL];

  for (genvar h = 0; h < H; h++) begin : g_row
    for (genvar v = 0; v < VL; v++) begin : g_vec
      word_t k [MACS];
      word_t o [MACS];
      always_comb
        for (int i = 0; i < MACS; i++) k[i] = keys[h*MACS + i][v];
      hpip_pe #(.MACS(MACS)) u_pe (
        .clk, .rst_n, .q(q[h]), .clear(start_d), .mac_en(valid_d),
        .ct(ct_d[h][v]), .key(k), .drain(drain_d),
        .out_valid(pe_valid[h][v]), .out_data(o));
      always_comb
        for (int i = 0; i < MACS; i++) out_data[h][i][v] = o[i];
    end
  end

  assign out_valid = pe_valid[0][0];

  a_start_with_data: assert property (@(posedge clk) disable iff (!rst_n) start |-> in_valid)
    else $error("hpip: start must come with the first digit");
endmodule
