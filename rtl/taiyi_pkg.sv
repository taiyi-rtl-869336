// taiyi_pkg: word type and modular arithmetic shared by every unit of the
// accelerator.
//
// All datapaths carry residues of one RNS limb: 36-bit words modulo a prime
// q < 2^36. The three functions below are the arithmetic every unit is built
// from. Modular multiplication is written as the exact 72-bit product reduced
// with the % operator; a Barrett or Montgomery reducer could replace it
// without changing any interface (the reduction circuit is this design's own
// choice, not something the accelerator description fixes). Inputs to
// mod_add/mod_sub must already be reduced (< q).
package taiyi_pkg;
  localparam int unsigned W     = 36;       // word length of one residue

  typedef logic [W-1:0]   word_t;
  typedef logic [2*W-1:0] dword_t;

  function automatic word_t mod_add(word_t a, word_t b, word_t q);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[W-1:0];
  endfunction

  function automatic word_t mod_sub(word_t a, word_t b, word_t q);
    logic [W:0] s;
    s = {1'b0, a} - {1'b0, b};
    if (a < b) s = s + {1'b0, q};
    return s[W-1:0];
  endfunction

  function automatic word_t mod_mul(word_t a, word_t b, word_t q);
    dword_t p;
    p = dword_t'(a) * dword_t'(b);
    return word_t'(p % dword_t'(q));
  endfunction

  // Element-wise engine operations.
  typedef enum logic [1:0] {EWE_ADD = 2'd0, EWE_SUB = 2'd1, EWE_MUL = 2'd2, EWE_MAC = 2'd3} ewe_op_e;

  // Stream sources inside a cluster (KeySwitch Unit).
  typedef enum logic [2:0] {
    SRC_NONE = 3'd0, SRC_CBUF = 3'd1, SRC_EWE = 3'd2, SRC_BCONV = 3'd3,
    SRC_NTT  = 3'd4, SRC_AUTO = 3'd5, SRC_HPIP = 3'd6
  } src_e;

  localparam int unsigned CB_AW = 15;   // C-Buffer row address width

  // Per-cycle command to one cluster, issued by the scheduler.
  typedef struct packed {
    // coefficient buffer
    logic             cb_re;
    logic [CB_AW-1:0] cb_raddr;
    logic             cb_we;
    logic [CB_AW-1:0] cb_waddr;
    src_e             cb_wsrc;
    // element-wise engine: a from a source, b/c latched from the C-Buffer
    logic             ewe_en;
    src_e             ewe_src;
    ewe_op_e          ewe_op;
    logic [3:0]       ewe_qi;
    logic             ewe_lat_b;
    logic             ewe_lat_c;
    // basis conversion
    logic             bc_en;
    src_e             bc_src;
    logic             bc_first;
    logic             bc_last;
    logic [2:0]       bc_idx;
    logic [3:0]       bc_nout;
    // (I)NTT
    logic             ntt_en;
    src_e             ntt_src;
    logic [3:0]       ntt_qi;
    // automorphism
    logic             au_en;
    src_e             au_src;
    logic             au_strided;
    logic [7:0]       au_row;
    logic             au_rd;
    logic [7:0]       au_rd_row;
    logic [16:0]      au_gal;
    // HP-IP: stage one input limb per row, then fire
    logic             hp_load;
    src_e             hp_src;
    logic [1:0]       hp_row;
    logic             hp_fire;
    logic             hp_start;
    logic [7:0]       hp_key_addr;
    logic             hp_drain;
    logic [3:0]       hp_qbase;
    logic [1:0]       hp_sel_h;
    logic [2:0]       hp_sel_i;
  } ksu_cmd_t;
endpackage
