// tb_hpip: end-to-end test of HP-IP (VL = 8 VEC-PEs, H = 4, 6 MACs).
// Loads random evaluation keys into the E-Key Buffer, runs two inner
// products of beta = 3 and beta = 5 digits (one PE row per T-limb prime), and
// compares all 4 x 6 x VL results with sum_n c_n * evk_n mod t_h computed
// here. Also checks the 2-cycle drain-to-result latency.
module tb_hpip;
  import taiyi_pkg::*;
  localparam int unsigned VL = 8, H = 4, MACS = 6, KDEP = 16;
  localparam longint unsigned QS [4] = '{64'd68718428161, 64'd68712923137, 64'd68712005633, 64'd68711350273};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t q [H];
  logic start = 0, in_valid = 0, drain = 0, key_we = 0, out_valid;
  word_t in_data [H][VL];
  logic [3:0] key_addr, key_waddr;
  logic [4:0] key_bank;
  word_t key_wdata [VL];
  word_t out_data [H][MACS][VL];

  hpip #(.VL(VL), .H(H), .MACS(MACS), .KDEP(KDEP)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, drain_cyc, out_cyc;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (out_valid) out_cyc = cyc;

  word_t key [KDEP][H*MACS][VL];
  word_t ct [8][H][VL];

  function automatic word_t mm(word_t a, word_t b, longint unsigned m);
    logic [71:0] p;
    p = 72'(a) * 72'(b);
    return word_t'(p % 72'(m));
  endfunction

  task automatic run(input int beta, input int kbase);
    for (int n = 0; n < beta; n++)
      for (int h = 0; h < H; h++)
        for (int v = 0; v < VL; v++) ct[n][h][v] = word_t'({$urandom, $urandom} % QS[h]);
    for (int n = 0; n < beta; n++) begin
      @(negedge clk);
      start = (n == 0); in_valid = 1; key_addr = 4'(kbase + n); in_data = ct[n];
    end
    @(negedge clk);
    start = 0; in_valid = 0; drain = 1; drain_cyc = cyc;
    @(negedge clk) drain = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (out_cyc - drain_cyc != 2) begin failures++; $display("latency %0d", out_cyc - drain_cyc); end
    for (int h = 0; h < H; h++)
      for (int i = 0; i < MACS; i++)
        for (int v = 0; v < VL; v++) begin
          word_t acc; acc = 0;
          for (int n = 0; n < beta; n++)
            acc = word_t'((72'(acc) + 72'(mm(ct[n][h][v], key[kbase+n][h*MACS+i][v], QS[h]))) % 72'(QS[h]));
          checks++;
          if (acc !== out_data[h][i][v]) begin
            failures++;
            if (failures < 5) $display("h%0d i%0d v%0d got %0d want %0d", h, i, v, out_data[h][i][v], acc);
          end
        end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int h = 0; h < H; h++) q[h] = word_t'(QS[h]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < KDEP; a++)
      for (int b = 0; b < H*MACS; b++) begin
        for (int v = 0; v < VL; v++) key[a][b][v] = word_t'({$urandom, $urandom} % QS[b / MACS]);
        @(negedge clk);
        key_we = 1; key_waddr = 4'(a); key_bank = 5'(b); key_wdata = key[a][b];
      end
    @(negedge clk) key_we = 0;
    run(3, 0);
    run(5, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
