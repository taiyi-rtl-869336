// tb_nttu: self-checking test of the multi-step (I)NTT unit.
//
// Runs at R = 4 (N = 256, 16 elements per cycle) so that every output can be
// compared with a direct O(N^2) negacyclic NTT computed here. Two limbs are
// fed back to back to exercise both banks of the transpose buffer, the
// first-output latency is checked against 2*(2*log2(R)+1) + P + 4 cycles,
// and the first limb's result is then sent through the inverse transform
// and must give back the original coefficients.
module tb_nttu;
  import taiyi_pkg::*;
  localparam int unsigned R = 4;
  localparam int unsigned P = R * R;
  localparam int unsigned N = P * P;
  localparam longint unsigned Q    = 64'd68718428161;      // 36-bit, 2^17 | q-1
  localparam longint unsigned PSI17 = 64'd50499502518;     // order 2^17

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       cfg_we = 0;
  logic [2:0] cfg_sel;
  logic [7:0] cfg_addr;
  word_t      cfg_data;
  word_t      q = word_t'(Q);
  logic       in_valid = 0;
  word_t      in_data [P];
  logic       out_valid;
  word_t      out_data [P];

  nttu #(.R(R)) dut (.*);

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

  word_t x   [2][N];
  word_t got [2][N];
  word_t back[N];
  word_t psi, omg, rho;
  int    cyc = 0, first_out = -1, first_in = -1;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic cfg(input int s, input int a, input word_t d);
    @(negedge clk);
    cfg_we = 1; cfg_sel = 3'(s); cfg_addr = 8'(a); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_tables(input bit inverse);
    word_t ps, om, rh, ninv;
    ps   = inverse ? mpow(psi, 2*N - 1) : psi;
    om   = mm(ps, ps);
    rh   = mpow(om, P);
    ninv = mpow(word_t'(N), Q - 2);
    for (int j = 0; j < R/2; j++) cfg(0, j, mpow(rh, R*j));
    for (int b = 0; b < R; b++)
      for (int k = 0; k < R; k++) cfg(1, b*R + k, mpow(rh, b*k));
    for (int e = 0; e < P; e++) begin
      cfg(2, e, inverse ? word_t'(1) : mpow(ps, e*P));
      cfg(3, e, inverse ? word_t'(1) : ps);
      cfg(4, e, mpow(om, e));
      cfg(5, e, inverse ? mm(ninv, mpow(ps, e*P)) : word_t'(1));
      cfg(6, e, inverse ? ps : word_t'(1));
    end
  endtask

  // Output collection: vector k1 holds X[k1 + P*k2] at element k2.
  int ovec = 0;
  bit inv_phase = 0;
  always @(posedge clk) begin
    if (out_valid) begin
      if (first_out < 0) first_out = cyc;
      for (int e = 0; e < P; e++) begin
        if (!inv_phase) got[ovec / P][(ovec % P) + P*e] = out_data[e];
        else            back[(ovec % P) + P*e] = out_data[e];
      end
      ovec++;
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    psi = mpow(word_t'(PSI17), (1 << 17) / (2 * N));
    for (int l = 0; l < 2; l++)
      for (int i = 0; i < N; i++) x[l][i] = word_t'({$urandom, $urandom} % Q);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_tables(0);
    // Two limbs back to back; vector n2 carries x[n1*P + n2] at element n1.
    for (int l = 0; l < 2; l++)
      for (int n2 = 0; n2 < P; n2++) begin
        @(negedge clk);
        if (first_in < 0) first_in = cyc;
        in_valid = 1;
        for (int n1 = 0; n1 < P; n1++) in_data[n1] = x[l][n1*P + n2];
      end
    @(negedge clk) in_valid = 0;
    wait (ovec == 2*P);
    checks++;
    if (first_out - first_in != 2*(2*$clog2(R)+1) + P + 4) begin
      failures++;
      $display("latency %0d", first_out - first_in);
    end
    for (int l = 0; l < 2; l++)
      for (int k = 0; k < N; k++) begin
        word_t acc; acc = 0;
        for (int n = 0; n < N; n++)
          acc = word_t'((72'(acc) + 72'(mm(x[l][n], mpow(psi, (n * (2*k + 1)) % (2*N))))) % 72'(Q));
        checks++;
        if (acc !== got[l][k]) begin
          failures++;
          if (failures < 5) $display("limb %0d X[%0d] got %0d want %0d", l, k, got[l][k], acc);
        end
      end
    // Inverse: feed limb 0's output vectors in the order they came out.
    load_tables(1);
    inv_phase = 1; ovec = 0;
    for (int k1 = 0; k1 < P; k1++) begin
      @(negedge clk);
      in_valid = 1;
      for (int k2 = 0; k2 < P; k2++) in_data[k2] = got[0][k1 + P*k2];
    end
    @(negedge clk) in_valid = 0;
    wait (ovec == P);
    for (int n = 0; n < N; n++) begin
      checks++;
      if (back[n] !== x[0][n]) begin
        failures++;
        if (failures < 10) $display("INTT x[%0d] got %0d want %0d", n, back[n], x[0][n]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
