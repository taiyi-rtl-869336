// ksu: the KeySwitch Unit, the compute cluster of the accelerator.
//
// One cluster joins a Coefficient Buffer, an element-wise engine (EWE), a
// basis-conversion unit (BConvU), the multi-step (I)NTT unit (NTTU), an
// automorphism unit (AUTOU) and the inner-product unit HP-IP with its
// E-Key Buffer. Every unit moves 256-element batches. Each unit's input is
// picked from one stream source (src_e) by the per-cycle command, which
// gives the paths of the KLSS key switch:
//   gadget decomposition  C-Buffer -> BConvU (Q->T) -> NTTU -> HP-IP
//   BSGS rotation          C-Buffer -> BConvU -> NTTU -> AUTOU -> HP-IP
//   Recover-Limbs          HP-IP -> NTTU (inverse) -> BConvU (T->PQ / T->Q)
//   element-wise work      C-Buffer -> EWE -> C-Buffer, EWE -> BConvU
// and every result can be written back into the C-Buffer. A unit takes a
// batch when its enable is set in the command and the selected source
// presents a valid batch; the scheduler, which issues the commands, keeps
// the units' fixed latencies in view (there is no back-pressure).
//
// HP-IP consumes four limbs (one per PE row) at once; hp_load copies the
// selected source into staging row hp_row and hp_fire sends the four staged
// batches into the array. Its 24 result batches stay in the PEs until the
// next drain and are read out one at a time as source SRC_HPIP
// (hp_sel_h, hp_sel_i).
//
// Moduli are kept in a 16-entry table (cfg_unit 2); the NTTU (cfg_unit 0)
// and BConvU (cfg_unit 1) tables are written through the same port.
// ext_we/ext_* writes into the C-Buffer from outside (off-chip memory or the
// NoC) and takes priority over a command write in the same cycle (asserted
// never to collide). cb_rvalid/cb_rdata is the C-Buffer read stream seen
// from outside.
//
// Routing by command and the staging registers are this design's choices;
// the set of units and the paths between them follow the reference design.
//
// Lint note: rst_n is reported as used both asynchronously and synchronously.
// The synchronous use is only the "disable iff (!rst_n)" of the assertions,
// which generate no logic; every flip-flop has the asynchronous reset.
module ksu
  import taiyi_pkg::*;
#(
  parameter int unsigned VL     = 256,
  parameter int unsigned R      = 16,
  parameter int unsigned CBROWS = 23040,
  parameter int unsigned KDEP   = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  ksu_cmd_t                  cmd,
  // configuration
  input  logic                      cfg_we,
  input  logic [1:0]                cfg_unit,
  input  logic [2:0]                cfg_sel,
  input  logic [7:0]                cfg_addr,
  input  logic [2:0]                cfg_j,
  input  word_t                     cfg_data,
  // evaluation keys
  input  logic                      key_we,
  input  logic [4:0]                key_bank,
  input  logic [$clog2(KDEP)-1:0]   key_waddr,
  input  word_t                     key_wdata [VL],
  // external C-Buffer access
  input  logic                      ext_we,
  input  logic [CB_AW-1:0]          ext_waddr,
  input  word_t                     ext_wdata [VL],
  output logic                      cb_rvalid,
  output word_t                     cb_rdata [VL],
  // status
  output logic                      ntt_valid,
  output logic                      bc_valid,
  output logic [2:0]                bc_idx,
  output logic                      hp_valid,
  output logic                      ewe_valid,
  output logic                      au_valid
);
  localparam int unsigned H = 4, MACS = 6;

  // ---------------- moduli table ----------------
  word_t qtab [16];
  always_ff @(posedge clk)
    if (cfg_we && cfg_unit == 2'd2) qtab[cfg_addr[3:0]] <= cfg_data;

  // ---------------- stream sources ----------------
  word_t ewe_out [VL];
  word_t bc_out  [VL];
  word_t ntt_out [VL];
  word_t au_out  [VL];
  word_t hp_out  [H][MACS][VL];

  function automatic logic src_valid(src_e s, logic v_cb, logic v_ewe, logic v_bc,
                                     logic v_ntt, logic v_au);
    unique case (s)
      SRC_CBUF:  return v_cb;
      SRC_EWE:   return v_ewe;
      SRC_BCONV: return v_bc;
      SRC_NTT:   return v_ntt;
      SRC_AUTO:  return v_au;
      SRC_HPIP:  return 1'b1;
      default:   return 1'b0;
    endcase
  endfunction

  word_t mux_ewe [VL], mux_bc [VL], mux_ntt [VL], mux_au [VL], mux_hp [VL], mux_cb [VL];

  task automatic pick(input src_e s, output word_t o [VL]);
    for (int e = 0; e < VL; e++)
      unique case (s)
        SRC_CBUF:  o[e] = cb_rdata[e];
        SRC_EWE:   o[e] = ewe_out[e];
        SRC_BCONV: o[e] = bc_out[e];
        SRC_NTT:   o[e] = ntt_out[e];
        SRC_AUTO:  o[e] = au_out[e];
        SRC_HPIP:  o[e] = hp_out[cmd.hp_sel_h][cmd.hp_sel_i][e];
        default:   o[e] = '0;
      endcase
  endtask

  always_comb begin
    pick(cmd.ewe_src, mux_ewe);
    pick(cmd.bc_src,  mux_bc);
    pick(cmd.ntt_src, mux_ntt);
    pick(cmd.au_src,  mux_au);
    pick(cmd.hp_src,  mux_hp);
    pick(cmd.cb_wsrc, mux_cb);
  end

  logic go_ewe, go_bc, go_ntt, go_au, go_hpl, go_cbw;
  always_comb begin
    go_ewe = cmd.ewe_en  && src_valid(cmd.ewe_src, cb_rvalid, ewe_valid, bc_valid, ntt_valid, au_valid);
    go_bc  = cmd.bc_en   && src_valid(cmd.bc_src,  cb_rvalid, ewe_valid, bc_valid, ntt_valid, au_valid);
    go_ntt = cmd.ntt_en  && src_valid(cmd.ntt_src, cb_rvalid, ewe_valid, bc_valid, ntt_valid, au_valid);
    go_au  = cmd.au_en   && src_valid(cmd.au_src,  cb_rvalid, ewe_valid, bc_valid, ntt_valid, au_valid);
    go_hpl = cmd.hp_load && src_valid(cmd.hp_src,  cb_rvalid, ewe_valid, bc_valid, ntt_valid, au_valid);
    go_cbw = cmd.cb_we   && src_valid(cmd.cb_wsrc, cb_rvalid, ewe_valid, bc_valid, ntt_valid, au_valid);
  end

  // ---------------- Coefficient Buffer ----------------
  logic             cb_we;
  logic [CB_AW-1:0] cb_waddr;
  word_t            cb_wdata [VL];
  always_comb begin
    cb_we    = ext_we || go_cbw;
    cb_waddr = ext_we ? ext_waddr : cmd.cb_waddr;
    cb_wdata = ext_we ? ext_wdata : mux_cb;
  end

  coeff_buffer #(.ROWS(CBROWS), .VL(VL)) u_cbuf (
    .clk, .rst_n, .we(cb_we), .waddr(cb_waddr[$clog2(CBROWS)-1:0]), .wdata(cb_wdata),
    .re(cmd.cb_re), .raddr(cmd.cb_raddr[$clog2(CBROWS)-1:0]), .rvalid(cb_rvalid), .rdata(cb_rdata));

  // ---------------- EWE ----------------
  word_t ewe_b [VL], ewe_c [VL];
  always_ff @(posedge clk) begin
    if (cmd.ewe_lat_b && cb_rvalid) ewe_b <= cb_rdata;
    if (cmd.ewe_lat_c && cb_rvalid) ewe_c <= cb_rdata;
  end

  ewe #(.VL(VL)) u_ewe (
    .clk, .rst_n, .op(cmd.ewe_op), .q(qtab[cmd.ewe_qi]), .in_valid(go_ewe),
    .a(mux_ewe), .b(ewe_b), .c(ewe_c), .out_valid(ewe_valid), .out_data(ewe_out));

  // ---------------- BConvU ----------------
  bconvu #(.VL(VL)) u_bconv (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_unit == 2'd1), .cfg_sel(cfg_sel[1:0]), .cfg_i(cfg_addr[2:0]),
    .cfg_j, .cfg_data, .n_out(cmd.bc_nout),
    .in_valid(go_bc), .in_first(cmd.bc_first), .in_last(cmd.bc_last), .in_idx(cmd.bc_idx),
    .in_data(mux_bc), .out_valid(bc_valid), .out_idx(bc_idx), .out_data(bc_out));

  // ---------------- NTTU ----------------
  word_t ntt_q;
  always_ff @(posedge clk) if (go_ntt) ntt_q <= qtab[cmd.ntt_qi];

  nttu #(.R(R)) u_ntt (
    .clk, .rst_n, .cfg_we(cfg_we && cfg_unit == 2'd0), .cfg_sel, .cfg_addr, .cfg_data,
    .q(go_ntt ? qtab[cmd.ntt_qi] : ntt_q),
    .in_valid(go_ntt), .in_data(mux_ntt), .out_valid(ntt_valid), .out_data(ntt_out));

  // ---------------- AUTOU ----------------
  autou #(.N(VL*VL), .VL(VL)) u_auto (
    .clk, .rst_n, .gal(cmd.au_gal[$clog2(2*VL*VL)-1:0]), .wr_strided(cmd.au_strided),
    .in_valid(go_au), .in_row(cmd.au_row[$clog2(VL)-1:0]), .in_data(mux_au),
    .rd_en(cmd.au_rd), .rd_row(cmd.au_rd_row[$clog2(VL)-1:0]),
    .out_valid(au_valid), .out_data(au_out));

  // ---------------- HP-IP ----------------
  // The primes of the four PE rows are picked at hp_start and held for the
  // whole inner product (they are used at drain).
  word_t hp_stage [H][VL];
  word_t hp_q [H];
  always_ff @(posedge clk) begin
    if (go_hpl) hp_stage[cmd.hp_row] <= mux_hp;
    if (cmd.hp_start)
      for (int h = 0; h < H; h++) hp_q[h] <= qtab[cmd.hp_qbase + 4'(h)];
  end

  hpip #(.VL(VL), .H(H), .MACS(MACS), .KDEP(KDEP)) u_hpip (
    .clk, .rst_n, .q(hp_q), .start(cmd.hp_start), .in_valid(cmd.hp_fire),
    .in_data(hp_stage), .key_addr(cmd.hp_key_addr), .drain(cmd.hp_drain),
    .key_we, .key_bank, .key_waddr, .key_wdata,
    .out_valid(hp_valid), .out_data(hp_out));

  a_ext_collision: assert property (@(posedge clk) disable iff (!rst_n) !(ext_we && go_cbw))
    else $error("ksu: external write collides with a command write");
endmodule
