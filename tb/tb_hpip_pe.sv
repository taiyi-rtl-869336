// tb_hpip_pe: one PE with 6 MACs. Runs inner products of 1 to 6 digits with
// random ciphertext and key elements, checks each MAC's result
// sum_n ct_n * key_n,i mod q (reduced only at drain) and that it appears one
// cycle after drain.
module tb_hpip_pe;
  import taiyi_pkg::*;
  localparam int unsigned MACS = 6;
  localparam longint unsigned Q = 64'd68712923137;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t q = word_t'(Q);
  logic clear = 0, mac_en = 0, drain = 0, out_valid;
  word_t ct, key [MACS], out_data [MACS];
  hpip_pe #(.MACS(MACS)) dut (.*);
  int checks = 0, failures = 0;
  word_t want [MACS];
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int beta = 1; beta <= 6; beta++) begin
      for (int i = 0; i < MACS; i++) want[i] = 0;
      for (int n = 0; n < beta; n++) begin
        @(negedge clk);
        clear = (n == 0); mac_en = 1;
        ct = word_t'({$urandom, $urandom} % Q);
        for (int i = 0; i < MACS; i++) begin
          logic [71:0] p;
          key[i] = word_t'({$urandom, $urandom} % Q);
          p = 72'(ct) * 72'(key[i]);
          want[i] = word_t'((72'(want[i]) + p % 72'(Q)) % 72'(Q));
        end
      end
      @(negedge clk);
      clear = 0; mac_en = 0; drain = 1;
      @(negedge clk);
      drain = 0;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < MACS; i++) begin
        checks++;
        if (out_data[i] !== want[i]) begin failures++; $display("beta %0d mac %0d got %0d want %0d", beta, i, out_data[i], want[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
