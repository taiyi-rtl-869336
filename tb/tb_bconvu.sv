// tb_bconvu: checks the basis-conversion unit (VL = 4 lanes) on a 3 -> 4
// limb conversion (gadget decomposition, alpha -> alpha') followed at once by
// a 4 -> 7 limb conversion (Recover-Limbs, alpha' -> alpha), against
// b_j = sum_i [a_i * qinv_i]_{q_i} * c_ij mod p_j computed here, and checks
// that the first output limb appears 2 cycles after the last input limb.
module tb_bconvu;
  import taiyi_pkg::*;
  localparam int unsigned VL = 4;
  localparam longint unsigned PR [12] = '{64'd68718428161, 64'd68712923137, 64'd68712005633,
    64'd68711350273, 64'd68710039553, 64'd68709253121, 64'd68707680257, 64'd68706631681,
    64'd68705320961, 64'd68703748097, 64'd68702568449, 64'd68701126657};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  logic [1:0] cfg_sel;
  logic [2:0] cfg_i, cfg_j, in_idx, out_idx;
  word_t cfg_data;
  logic [3:0] n_out;
  logic in_valid = 0, in_first = 0, in_last = 0, out_valid;
  word_t in_data [VL];
  word_t out_data [VL];

  bconvu #(.VL(VL)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic word_t mm(word_t a, word_t b, longint unsigned m);
    logic [71:0] p;
    p = 72'(a) * 72'(b);
    return word_t'(p % 72'(m));
  endfunction

  longint unsigned qi [8], pj [8];
  word_t qinv [8], cm [8][8], a [8][VL], want [8][VL];
  int nexp = 0, ngot = 0, last_cyc;
  int exp_first [2];
  int conv_no = 0;
  word_t wq [2][8][VL];
  int    wn [2];

  always @(posedge clk) begin
    if (out_valid) begin
      int c;
      c = (ngot < wn[0]) ? 0 : 1;
      if (ngot == 0 || ngot == wn[0]) begin
        checks++;
        if (cyc != exp_first[c]) begin failures++; $display("first output at %0d want %0d", cyc, exp_first[c]); end
      end
      for (int e = 0; e < VL; e++) begin
        checks++;
        if (out_data[e] !== wq[c][out_idx][e]) begin
          failures++;
          if (failures < 5) $display("conv %0d j %0d e %0d got %0d want %0d", c, out_idx, e, out_data[e], wq[c][out_idx][e]);
        end
      end
      ngot++;
    end
  end

  task automatic cfg(input int s, input int i, input int j, input word_t d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = 2'(s); cfg_i = 3'(i); cfg_j = 3'(j); cfg_data = d;
    @(negedge clk) cfg_we = 0;
  endtask

  // set tables for a conversion from primes PR[ib..] (A) to PR[ob..] (B)
  task automatic setup(input int ib, input int A, input int ob, input int B, input int c);
    for (int i = 0; i < A; i++) begin
      qi[i] = PR[ib+i]; qinv[i] = word_t'({$urandom, $urandom} % qi[i]);
      cfg(0, i, 0, word_t'(qi[i])); cfg(1, i, 0, qinv[i]);
    end
    for (int j = 0; j < B; j++) begin
      pj[j] = PR[ob+j]; cfg(2, 0, j, word_t'(pj[j]));
      for (int i = 0; i < A; i++) begin
        cm[i][j] = word_t'({$urandom, $urandom} % pj[j]); cfg(3, i, j, cm[i][j]);
      end
    end
    for (int i = 0; i < A; i++)
      for (int e = 0; e < VL; e++) a[i][e] = word_t'({$urandom, $urandom} % qi[i]);
    for (int j = 0; j < B; j++)
      for (int e = 0; e < VL; e++) begin
        word_t s; s = 0;
        for (int i = 0; i < A; i++)
          s = word_t'((72'(s) + 72'(mm(mm(a[i][e], qinv[i], qi[i]), cm[i][j], pj[j]))) % 72'(pj[j]));
        wq[c][j][e] = s;
      end
    wn[c] = B;
  endtask

  task automatic stream(input int A, input int B, input int c);
    for (int i = 0; i < A; i++) begin
      @(negedge clk);
      in_valid = 1; in_first = (i == 0); in_last = (i == A - 1); in_idx = 3'(i); in_data = a[i];
      n_out = 4'(B);
      if (i == A - 1) exp_first[c] = cyc + 2;
    end
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    setup(0, 3, 3, 4, 0);
    stream(3, 4, 0);
    repeat (8) @(negedge clk);
    setup(3, 4, 4, 7, 1);
    stream(4, 7, 1);
    repeat (12) @(negedge clk);
    checks++;
    if (ngot != 11) begin failures++; $display("got %0d output limbs", ngot); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
