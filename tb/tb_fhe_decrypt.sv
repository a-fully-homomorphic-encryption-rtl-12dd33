// tb_fhe_decrypt: at the default sizes, encrypts random messages with the
// reference model (random key, A s = e small, random R) and streams the
// cipher rows into the block with random gaps. Checks the recovered message
// and that the input is stalled for ELL cycles after each of rows 0..ELL-1.
module tb_fhe_decrypt;
  import fhe_pkg::*;
  import tb_fhe_ref_pkg::*;
  localparam int L = ELL, N = N_LWE, M = M_LWE, NR = L * (N + 1);

  logic clk = 0, rst_n = 0;
  logic [N-1:0][L-1:0] t_vec;
  logic in_valid = 0, in_ready, mu_valid;
  logic [N:0][L-1:0] in_row = '0;
  logic [L-1:0] mu;
  int checks = 0, failures = 0;

  fhe_decrypt dut (.*);
  always #5 clk = ~clk;

  cipher_t amod, c;
  word_t t [MAXC];
  word_t rbits [MAXR];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < MAXC; j++) t[j] = 0;
    for (int j = 0; j < N; j++) begin t[j] = {$urandom, $urandom}; t_vec[j] = t[j]; end
    for (int r = 0; r < M; r++) begin
      word_t b;
      b = word_t'(longint'($urandom % 15) - 7);
      for (int j = 1; j <= N; j++) begin
        amod[r][j] = {$urandom, $urandom};
        b = b + amod[r][j] * t[j-1];
      end
      amod[r][0] = b;
    end
    @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      word_t m;
      int stall;
      m = (trial == 0) ? 64'd0 : (trial == 1) ? 64'hFFFF_FFFF_FFFF_FFFF : {$urandom, $urandom};
      for (int i = 0; i < NR; i++) rbits[i] = $urandom;
      ref_encrypt(c, m, amod, rbits, L, N, M);
      for (int i = 0; i < NR; i++) begin
        in_valid = (trial % 2 == 0) || ($urandom % 2 == 0);
        while (!in_valid) begin @(negedge clk); in_valid = ($urandom % 2 == 0); end
        for (int j = 0; j <= N; j++) in_row[j] = c[i][j];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
        if (i < L) begin
          stall = 0;
          while (!in_ready) begin @(negedge clk); stall++; end
          chk(stall == L, $sformatf("row %0d stall %0d", i, stall));
        end
      end
      while (!mu_valid) @(negedge clk);
      chk(mu == m, $sformatf("mu %h exp %h", mu, m));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
