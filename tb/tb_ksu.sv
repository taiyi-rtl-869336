// tb_ksu: test of one cluster (KeySwitch Unit) at reduced size (16 lanes,
// N = 256, R = 4, 256 C-Buffer rows, 16 key slots). It plays the per-cycle
// command sequence of a key switch and checks every result left in the
// C-Buffer against values computed here:
//   1. external writes of two Q-limbs A0, A1
//   2. EWE: A0*A0 mod q0
//   3. BConvU Q -> T (2 -> 4 limbs)
//   4. NTTU forward on T-limb 0 into C-Buffer, AUTOU and (vector 0) HP-IP
//   5. AUTOU with Galois element 5; row 0 straight into HP-IP
//   6. HP-IP: two digits x 4 limbs x 6 keys
//   7. NTTU inverse must give T-limb 0 back
//   8. BConvU T -> Q (4 -> 2 limbs)
// Every path used is counted and must occur at least once.
// Commands are applied at the falling clock edge from a precomputed schedule
// that uses the units' fixed latencies (NTTU P + 2*(2*log2(R)+1) + 4 cycles,
// BConvU first output 2 cycles after its last input, HP-IP results 2 cycles
// after drain). The order of the steps follows the key-switch dataflow of the
// accelerator; the C-Buffer row layout (limb j of a group at row j*P) and
// the data values are this test's own choices.
module tb_ksu;
  import taiyi_pkg::*;
  localparam int unsigned C = 4, VL = 16, R = 4, CBROWS = 256, KDEP = 16;
  localparam int unsigned P = R * R, N = VL * VL, FULL_NTT_CHECK = (N <= 4096);
  localparam longint unsigned PR [6] = '{64'd68718428161, 64'd68712923137, 64'd68712005633,
                                         64'd68711350273, 64'd68710039553, 64'd68709253121};
  localparam longint unsigned PSI17 = 64'd68459205354;   // order 2^17 mod PR[2]

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ksu_cmd_t cmd [C];
  logic cfg_we = 0; logic [C-1:0] cfg_mask; logic [1:0] cfg_unit; logic [2:0] cfg_sel, cfg_j;
  logic [7:0] cfg_addr; word_t cfg_data;
  logic key_we = 0; logic [1:0] key_cluster; logic [4:0] key_bank; logic [$clog2(KDEP)-1:0] key_waddr;
  word_t key_wdata [VL];
  logic hbm_we = 0; logic [1:0] hbm_cluster; logic [CB_AW-1:0] hbm_waddr; word_t hbm_wdata [VL];
  logic noc_send [C]; logic [1:0] noc_dst [C]; logic [CB_AW-1:0] noc_addr [C]; logic noc_ready [C];
  logic cb_rvalid [C]; word_t cb_rdata [C][VL];
  logic ntt_valid [C], bc_valid [C], hp_valid [C], ewe_valid [C], au_valid [C];
  logic [2:0] bc_idx [C];

  ksu #(.VL(VL), .R(R), .CBROWS(CBROWS), .KDEP(KDEP)) dut (
    .clk, .rst_n, .cmd(cmd[0]), .cfg_we, .cfg_unit, .cfg_sel, .cfg_addr, .cfg_j, .cfg_data,
    .key_we, .key_bank, .key_waddr, .key_wdata,
    .ext_we(hbm_we), .ext_waddr(hbm_waddr), .ext_wdata(hbm_wdata),
    .cb_rvalid(cb_rvalid[0]), .cb_rdata(cb_rdata[0]), .ntt_valid(ntt_valid[0]), .bc_valid(bc_valid[0]),
    .bc_idx(bc_idx[0]), .hp_valid(hp_valid[0]), .ewe_valid(ewe_valid[0]), .au_valid(au_valid[0]));

  int checks = 0, failures = 0;
  int n_hbm = 0, n_noc = 0, n_ewe = 0, n_bc_up = 0, n_bc_down = 0, n_ntt = 0, n_intt = 0,
      n_direct = 0, n_auto_path = 0, n_drain = 0;

  // ---------------- arithmetic ----------------
  function automatic word_t mm(word_t a, word_t b, longint unsigned m);
    logic [71:0] p; p = 72'(a) * 72'(b); return word_t'(p % 72'(m));
  endfunction
  function automatic word_t ma(word_t a, word_t b, longint unsigned m);
    return word_t'((72'(a) + 72'(b)) % 72'(m));
  endfunction
  function automatic word_t mpow(word_t a, longint unsigned e, longint unsigned m);
    word_t r; r = 1;
    while (e != 0) begin
      if (e[0]) r = mm(r, a, m);
      a = mm(a, a, m);
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic word_t rnd(longint unsigned m);
    return word_t'({$urandom, $urandom} % m);
  endfunction

  // ---------------- command schedule ----------------
  localparam int SCH = 8 * P + 2 * (P + 2 * (2 * $clog2(R) + 1) + 4) + 256;
  ksu_cmd_t sch [SCH];
  task automatic clear_sch();
    for (int t = 0; t < SCH; t++) sch[t] = '0;
  endtask
  task automatic play(input int len);
    for (int t = 0; t < len; t++) begin
      @(negedge clk);
      cmd[0] = sch[t];
      if (sch[t].ewe_en) n_ewe++;
      if (sch[t].hp_load && sch[t].hp_src == SRC_NTT) n_direct++;
      if (sch[t].hp_load && sch[t].hp_src == SRC_AUTO) n_auto_path++;
      if (sch[t].hp_drain) n_drain++;
    end
    @(negedge clk) cmd[0] = '0;
    clear_sch();
  endtask

  task automatic cfg(input int unit, input int sel, input int addr, input int j, input word_t d);
    @(negedge clk);
    cfg_we = 1; cfg_mask = '1; cfg_unit = 2'(unit); cfg_sel = 3'(sel); cfg_addr = 8'(addr);
    cfg_j = 3'(j); cfg_data = d;
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic read_row(input int cl, input int addr, output word_t r [VL]);
    @(negedge clk);
    cmd[cl] = '0; cmd[cl].cb_re = 1; cmd[cl].cb_raddr = CB_AW'(addr);
    @(negedge clk);
    cmd[cl] = '0;
    r = cb_rdata[cl];
  endtask

  task automatic check_rows(input int cl, input int base, input int n, input word_t want [][VL], input string what);
    word_t r [VL];
    int bad;
    bad = 0;
    for (int i = 0; i < n; i++) begin
      read_row(cl, base + i, r);
      for (int e = 0; e < VL; e++) begin
        checks++;
        if (r[e] !== want[i][e]) begin
          failures++; bad++;
          if (bad < 3) $display("%s row %0d e %0d got %0d want %0d", what, i, e, r[e], want[i][e]);
        end
      end
    end
  endtask

  // ---------------- data ----------------
  word_t a0 [P][VL], a1 [P][VL], sq [P][VL];
  word_t tl [4][P][VL];              // T-limbs after Q -> T
  word_t ql [2][P][VL];              // Q-limbs after T -> Q
  word_t qinv [4], cm [4][4];
  word_t xntt [P][VL], xauto [P][VL];
  word_t key [2][24][VL];
  word_t hin [2][4][VL];
  word_t hres [24][VL];
  word_t psi;

  task automatic load_ntt_tables(input bit inverse);
    word_t ps, om, rh, ninv;
    longint unsigned q;
    q    = PR[2];
    ps   = inverse ? mpow(psi, 2*N - 1, q) : psi;
    om   = mm(ps, ps, q);
    rh   = mpow(om, P, q);
    ninv = mpow(word_t'(N), q - 2, q);
    for (int j = 0; j < R/2; j++) cfg(0, 0, j, 0, mpow(rh, R*j, q));
    for (int b = 0; b < R; b++)
      for (int k = 0; k < R; k++) cfg(0, 1, b*R + k, 0, mpow(rh, b*k, q));
    for (int e = 0; e < P; e++) begin
      cfg(0, 2, e, 0, inverse ? word_t'(1) : mpow(ps, e*P, q));
      cfg(0, 3, e, 0, inverse ? word_t'(1) : ps);
      cfg(0, 4, e, 0, mpow(om, e, q));
      cfg(0, 5, e, 0, inverse ? mm(ninv, mpow(ps, e*P, q), q) : word_t'(1));
      cfg(0, 6, e, 0, inverse ? ps : word_t'(1));
    end
  endtask

  // BConv tables from primes PR[ib..ib+A-1] to PR[ob..ob+B-1]
  task automatic load_bconv(input int ib, input int A, input int ob, input int B);
    for (int i = 0; i < A; i++) begin
      qinv[i] = rnd(PR[ib+i]);
      cfg(1, 0, i, 0, word_t'(PR[ib+i]));
      cfg(1, 1, i, 0, qinv[i]);
    end
    for (int j = 0; j < B; j++) begin
      cfg(1, 2, 0, j, word_t'(PR[ob+j]));
      for (int i = 0; i < A; i++) begin
        cm[i][j] = rnd(PR[ob+j]);
        cfg(1, 3, i, j, cm[i][j]);
      end
    end
  endtask

  initial begin
    #(400 * SCH * 10 + 2000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int LN, t, ta, tb2, tc, td;

  initial begin
    for (int c = 0; c < C; c++) begin cmd[c] = '0; noc_send[c] = 0; noc_dst[c] = 0; noc_addr[c] = 0; end
    clear_sch();
    psi = mpow(word_t'(PSI17), (1 << 17) / (2 * N), PR[2]);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- configuration: moduli table, keys ----
    for (int i = 0; i < 6; i++) cfg(2, 0, i, 0, word_t'(PR[i]));
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 24; b++) begin
        for (int e = 0; e < VL; e++) key[a][b][e] = rnd(PR[2 + b / 6]);
        @(negedge clk);
        key_we = 1; key_cluster = 0; key_bank = 5'(b); key_waddr = ($clog2(KDEP))'(a); key_wdata = key[a][b];
      end
    @(negedge clk) key_we = 0;

      // ---- 1. external writes ----
    for (int r = 0; r < P; r++)
      for (int e = 0; e < VL; e++) begin a0[r][e] = rnd(PR[0]); a1[r][e] = rnd(PR[1]); end
    for (int r = 0; r < 2*P; r++) begin
      @(negedge clk);
      hbm_we = 1; hbm_cluster = 0; hbm_waddr = CB_AW'(r);
      hbm_wdata = (r < P) ? a0[r] : a1[r-P];
      n_hbm++;
    end
    @(negedge clk) hbm_we = 0;
    check_rows(0, 0, P, a0, "hbm A0");

    // ---- 2. EWE square ----
    for (int r = 0; r < P; r++) begin
      t = 4 * r;
      sch[t].cb_re = 1;       sch[t].cb_raddr = CB_AW'(r);
      sch[t+1].ewe_lat_b = 1; sch[t+1].cb_re = 1; sch[t+1].cb_raddr = CB_AW'(r);
      sch[t+2].ewe_en = 1;    sch[t+2].ewe_src = SRC_CBUF; sch[t+2].ewe_op = EWE_MUL; sch[t+2].ewe_qi = 0;
      sch[t+3].cb_we = 1;     sch[t+3].cb_wsrc = SRC_EWE; sch[t+3].cb_waddr = CB_AW'(2*P + r);
      for (int e = 0; e < VL; e++) sq[r][e] = mm(a0[r][e], a0[r][e], PR[0]);
    end
    play(4 * P + 2);
    check_rows(0, 2*P, P, sq, "EWE");

    // ---- 3. BConv Q -> T (2 -> 4) ----
    load_bconv(0, 2, 2, 4);
    for (int r = 0; r < P; r++) begin
      t = 6 * r;
      sch[t].cb_re = 1;   sch[t].cb_raddr = CB_AW'(r);
      sch[t+1].cb_re = 1; sch[t+1].cb_raddr = CB_AW'(P + r);
      sch[t+1].bc_en = 1; sch[t+1].bc_src = SRC_CBUF; sch[t+1].bc_first = 1; sch[t+1].bc_idx = 0; sch[t+1].bc_nout = 4;
      sch[t+2].bc_en = 1; sch[t+2].bc_src = SRC_CBUF; sch[t+2].bc_last = 1;  sch[t+2].bc_idx = 1; sch[t+2].bc_nout = 4;
      for (int j = 0; j < 4; j++) begin
        sch[t+4+j].cb_we = 1; sch[t+4+j].cb_wsrc = SRC_BCONV; sch[t+4+j].cb_waddr = CB_AW'(4*P + j*P + r);
        for (int e = 0; e < VL; e++)
          tl[j][r][e] = ma(mm(mm(a0[r][e], qinv[0], PR[0]), cm[0][j], PR[2+j]),
                           mm(mm(a1[r][e], qinv[1], PR[1]), cm[1][j], PR[2+j]), PR[2+j]);
      end
      n_bc_up++;
    end
    play(6 * P + 8);
    for (int j = 0; j < 4; j++) check_rows(0, 4*P + j*P, P, tl[j], "BConv Q->T");

    // ---- 4./5./6. NTT -> (AUTOU) -> HP-IP ----
    load_ntt_tables(0);
    LN = 2 * (2 * $clog2(R) + 1) + P + 4;
    for (int n2 = 0; n2 < P; n2++) begin
      sch[n2].cb_re = 1; sch[n2].cb_raddr = CB_AW'(4*P + n2);
      sch[n2+1].ntt_en = 1; sch[n2+1].ntt_src = SRC_CBUF; sch[n2+1].ntt_qi = 2;
    end
    for (int k1 = 0; k1 < P; k1++) begin
      t = 1 + LN + k1;
      sch[t].cb_we = 1; sch[t].cb_wsrc = SRC_NTT; sch[t].cb_waddr = CB_AW'(10*P + k1);
      sch[t].au_en = 1; sch[t].au_src = SRC_NTT; sch[t].au_strided = 1; sch[t].au_row = 8'(k1);
      if (k1 == 0) begin sch[t].hp_load = 1; sch[t].hp_src = SRC_NTT; sch[t].hp_row = 0; end
    end
    ta = 1 + LN + P + 1;
    for (int r = 0; r < P; r++) begin
      sch[ta+r].au_rd = 1; sch[ta+r].au_rd_row = 8'(r); sch[ta+r].au_gal = 17'd5;
      sch[ta+r+1].cb_we = 1; sch[ta+r+1].cb_wsrc = SRC_AUTO; sch[ta+r+1].cb_waddr = CB_AW'(11*P + r);
    end
    tb2 = ta + P + 2;
    for (int h = 1; h < 4; h++) begin
      sch[tb2+h-1].cb_re = 1; sch[tb2+h-1].cb_raddr = CB_AW'(4*P + h*P + 0);
      sch[tb2+h].hp_load = 1; sch[tb2+h].hp_src = SRC_CBUF; sch[tb2+h].hp_row = 2'(h);
    end
    sch[tb2+4].hp_fire = 1; sch[tb2+4].hp_start = 1; sch[tb2+4].hp_key_addr = 0; sch[tb2+4].hp_qbase = 2;
    tc = tb2 + 5;
    sch[tc].au_rd = 1; sch[tc].au_rd_row = 0; sch[tc].au_gal = 17'd5;
    sch[tc+1].hp_load = 1; sch[tc+1].hp_src = SRC_AUTO; sch[tc+1].hp_row = 0;
    for (int h = 1; h < 4; h++) begin
      sch[tc+h].cb_re = 1; sch[tc+h].cb_raddr = CB_AW'(4*P + h*P + 1);
      sch[tc+h+1].hp_load = 1; sch[tc+h+1].hp_src = SRC_CBUF; sch[tc+h+1].hp_row = 2'(h);
    end
    sch[tc+5].hp_fire = 1; sch[tc+5].hp_key_addr = 1;
    sch[tc+6].hp_drain = 1;
    td = tc + 9;
    for (int i = 0; i < 24; i++) begin
      sch[td+i].cb_we = 1; sch[td+i].cb_wsrc = SRC_HPIP; sch[td+i].cb_waddr = CB_AW'(13*P + i);
      sch[td+i].hp_sel_h = 2'(i / 6); sch[td+i].hp_sel_i = 3'(i % 6);
    end
    play(td + 26);
    n_ntt++;

    // reference NTT of T-limb 0: row r element e is coefficient e*P + r
    for (int k1 = 0; k1 < P; k1++)
      for (int k2 = 0; k2 < P; k2++) begin
        int k;
        word_t acc;
        k = k1 + P * k2;
        acc = 0;
        if (FULL_NTT_CHECK || k2 < 2)
          for (int n = 0; n < N; n++)
            acc = ma(acc, mm(tl[0][n % P][n / P], mpow(psi, (longint'(n) * (2*k + 1)) % (2*N), PR[2]), PR[2]), PR[2]);
        xntt[k1][k2] = acc;
      end
    begin
      word_t r [VL];
      int bad; bad = 0;
      for (int k1 = 0; k1 < P; k1++) begin
        read_row(0, 10*P + k1, r);
        for (int k2 = 0; k2 < VL; k2++)
          if (FULL_NTT_CHECK || k2 < 2) begin
            checks++;
            if (r[k2] !== xntt[k1][k2]) begin failures++; bad++; if (bad < 3) $display("NTT k1 %0d k2 %0d got %0d want %0d", k1, k2, r[k2], xntt[k1][k2]); end
          end else xntt[k1][k2] = r[k2];   // unchecked entries: take the unit's values for later steps
      end
    end
    for (int rr = 0; rr < P; rr++)
      for (int e = 0; e < VL; e++) begin
        int k, s;
        k = rr * VL + e;
        s = int'(((longint'(2*k + 1) * 5) % (2*N) - 1) / 2);
        xauto[rr][e] = xntt[s % P][s / P];
      end
    check_rows(0, 11*P, P, xauto, "AUTOU");
    for (int e = 0; e < VL; e++) begin
      hin[0][0][e] = xntt[0][e];
      hin[1][0][e] = xauto[0][e];
      for (int h = 1; h < 4; h++) begin hin[0][h][e] = tl[h][0][e]; hin[1][h][e] = tl[h][1][e]; end
    end
    for (int i = 0; i < 24; i++)
      for (int e = 0; e < VL; e++) begin
        longint unsigned q;
        q = PR[2 + i / 6];
        hres[i][e] = ma(mm(hin[0][i/6][e], key[0][i][e], q), mm(hin[1][i/6][e], key[1][i][e], q), q);
      end
    check_rows(0, 13*P, 24, hres, "HP-IP");

    // ---- 7. INTT (Recover-Limbs) ----
    load_ntt_tables(1);
    for (int k1 = 0; k1 < P; k1++) begin
      sch[k1].cb_re = 1; sch[k1].cb_raddr = CB_AW'(10*P + k1);
      sch[k1+1].ntt_en = 1; sch[k1+1].ntt_src = SRC_CBUF; sch[k1+1].ntt_qi = 2;
      sch[1+LN+k1].cb_we = 1; sch[1+LN+k1].cb_wsrc = SRC_NTT; sch[1+LN+k1].cb_waddr = CB_AW'(12*P + k1);
    end
    play(LN + P + 4);
    n_intt++;
    check_rows(0, 12*P, P, tl[0], "INTT");

    // ---- 8. BConv T -> Q (4 -> 2) ----
    load_bconv(2, 4, 0, 2);
    for (int r = 0; r < P; r++) begin
      t = 8 * r;
      for (int h = 0; h < 4; h++) begin
        sch[t+h].cb_re = 1; sch[t+h].cb_raddr = CB_AW'(4*P + h*P + r);
        sch[t+h+1].bc_en = 1; sch[t+h+1].bc_src = SRC_CBUF; sch[t+h+1].bc_idx = 3'(h);
        sch[t+h+1].bc_first = (h == 0); sch[t+h+1].bc_last = (h == 3); sch[t+h+1].bc_nout = 2;
      end
      for (int j = 0; j < 2; j++) begin
        sch[t+6+j].cb_we = 1; sch[t+6+j].cb_wsrc = SRC_BCONV; sch[t+6+j].cb_waddr = CB_AW'(8*P + j*P + r);
        for (int e = 0; e < VL; e++) begin
          word_t s; s = 0;
          for (int h = 0; h < 4; h++) s = ma(s, mm(mm(tl[h][r][e], qinv[h], PR[2+h]), cm[h][j], PR[j]), PR[j]);
          ql[j][r][e] = s;
        end
      end
      n_bc_down++;
    end
    play(8 * P + 8);
    for (int j = 0; j < 2; j++) check_rows(0, 8*P + j*P, P, ql[j], "BConv T->Q");

    // ---- mechanism coverage ----
    $display("hbm %0d ewe %0d bconv_up %0d bconv_down %0d ntt %0d intt %0d direct %0d autou_path %0d drain %0d",
             n_hbm, n_ewe, n_bc_up, n_bc_down, n_ntt, n_intt, n_direct, n_auto_path, n_drain);
    if (n_hbm == 0)       begin failures++; $display("no off-chip write"); end
    if (n_ewe == 0)       begin failures++; $display("no EWE op"); end
    if (n_bc_up == 0)     begin failures++; $display("no Q->T conversion"); end
    if (n_bc_down == 0)   begin failures++; $display("no T->Q conversion"); end
    if (n_ntt == 0)       begin failures++; $display("no NTT"); end
    if (n_intt == 0)      begin failures++; $display("no INTT"); end
    if (n_direct == 0)    begin failures++; $display("no NTT->HP-IP path"); end
    if (n_auto_path == 0) begin failures++; $display("no AUTOU->HP-IP path"); end
    if (n_drain == 0)     begin failures++; $display("no HP-IP drain"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
