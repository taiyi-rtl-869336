// tb_ntt_lane: checks one NTT lane (R = 16, 4 layers of 8 butterflies)
// against a direct 16-point DFT mod q for random vectors streamed one per
// cycle, and checks the 4-cycle pipeline latency.
module tb_ntt_lane;
  import taiyi_pkg::*;
  localparam int unsigned R = 16;
  localparam longint unsigned Q     = 64'd68718428161;
  localparam longint unsigned PSI17 = 64'd50499502518;
  localparam int NV = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  word_t q = word_t'(Q);
  word_t tw [R/2];
  logic in_valid = 0, out_valid;
  word_t in_data [R];
  word_t out_data [R];

  ntt_lane #(.R(R)) dut (.*);

  int checks = 0, failures = 0;
  function automatic word_t mm(word_t a, word_t b);
    logic [71:0] p;
    p = 72'(a) * 72'(b);
    return word_t'(p % 72'(Q));
  endfunction
  function automatic word_t mpow(word_t a, longint unsigned e);
    word_t r = 1;
    while (e != 0) begin
      if (e[0]) r = mm(r, a);
      a = mm(a, a);
      e = e >> 1;
    end
    return r;
  endfunction

  word_t vec [NV][R];
  word_t w;
  int cyc = 0, in_cyc [NV], nout = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (out_valid && nout < NV) begin
      checks++;
      if (cyc - in_cyc[nout] != 4) begin
        failures++;
        $display("latency %0d", cyc - in_cyc[nout]);
      end
      for (int k = 0; k < R; k++) begin
        word_t acc; acc = 0;
        for (int n = 0; n < R; n++)
          acc = word_t'((72'(acc) + 72'(mm(vec[nout][n], mpow(w, (n*k) % R)))) % 72'(Q));
        checks++;
        if (acc !== out_data[k]) begin
          failures++;
          if (failures < 5) $display("vec %0d k %0d got %0d want %0d", nout, k, out_data[k], acc);
        end
      end
      nout++;
    end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w = mpow(word_t'(PSI17), (1 << 17) / R);
    for (int j = 0; j < R/2; j++) tw[j] = mpow(w, j);
    for (int v = 0; v < NV; v++)
      for (int i = 0; i < R; i++) vec[v][i] = word_t'({$urandom, $urandom} % Q);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      in_valid = (v % 7 != 3) || 1'b1;
      in_data = vec[v];
      in_cyc[v] = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (nout != NV) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
