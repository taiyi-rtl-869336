// tb_noc: random traffic on the 4-cluster crossbar (VL = 4). Each cycle every
// source requests a random destination with probability 1/2 and keeps a
// refused request up. Checks that each destination grants the lowest
// requesting source, that each granted batch arrives one cycle later with
// its address and source, and that every batch is delivered exactly once.
module tb_noc;
  import taiyi_pkg::*;
  localparam int unsigned C = 4, VL = 4, AW = 15;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic src_valid [C], src_ready [C], dst_valid [C];
  logic [1:0] src_dst [C], dst_src [C];
  logic [AW-1:0] src_addr [C], dst_addr [C];
  word_t src_data [C][VL], dst_data [C][VL];
  noc #(.C(C), .VL(VL), .AW(AW)) dut (.*);
  int checks = 0, failures = 0, sent = 0, recv = 0, contested = 0;
  logic exp_v [C];
  logic [1:0] exp_s [C];
  logic [AW-1:0] exp_a [C];
  word_t exp_d [C][VL];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int s = 0; s < C; s++) src_valid[s] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      // check deliveries of the previous grant
      for (int d = 0; d < C; d++) begin
        checks++;
        if (dst_valid[d] !== exp_v[d]) failures++;
        if (exp_v[d]) begin
          recv++;
          checks++;
          if (dst_src[d] !== exp_s[d] || dst_addr[d] !== exp_a[d] || dst_data[d] !== exp_d[d]) failures++;
        end
      end
      // new requests (a refused one stays)
      for (int s = 0; s < C; s++)
        if (!src_valid[s] || src_ready[s]) begin
          src_valid[s] = ($urandom % 2) == 1 && t < 280;
          src_dst[s] = 2'($urandom);
          src_addr[s] = AW'($urandom);
          for (int e = 0; e < VL; e++) src_data[s][e] = word_t'({$urandom, $urandom});
        end
      #1;
      for (int d = 0; d < C; d++) begin
        int win, n;
        win = -1; n = 0;
        for (int s = C - 1; s >= 0; s--) if (src_valid[s] && src_dst[s] == 2'(d)) begin win = s; n++; end
        if (n > 1) contested++;
        exp_v[d] = (win >= 0);
        if (win >= 0) begin
          checks++;
          if (!src_ready[win]) failures++;
          sent++;
          exp_s[d] = 2'(win); exp_a[d] = src_addr[win]; exp_d[d] = src_data[win];
        end
      end
    end
    @(negedge clk);
    for (int d = 0; d < C; d++) if (dst_valid[d]) recv++;
    checks++;
    if (sent != recv || contested == 0) failures++;
    $display("sent %0d received %0d contested %0d", sent, recv, contested);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
