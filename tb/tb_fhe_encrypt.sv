// tb_fhe_encrypt: at the default sizes, encrypts random messages with a
// random public key A whose rows satisfy A s = e, under random back-pressure.
// Each row is checked against (mu G + R A)^l with the R bits the block drew,
// and the whole cipher is decrypted by the reference model. Also checks one
// row per cycle when the sink is always ready.
module tb_fhe_encrypt;
  import fhe_pkg::*;
  import tb_fhe_ref_pkg::*;
  localparam int L = ELL, N = N_LWE, M = M_LWE, NR = L * (N + 1);

  logic clk = 0, rst_n = 0, start = 0;
  logic [L-1:0] mu = '0;
  logic [M-1:0][N:0][L-1:0] a_mat;
  logic [63:0] rnd = '0;
  logic rnd_next, busy, done, out_valid, out_ready = 0;
  logic [N:0][L-1:0] out_row;
  int checks = 0, failures = 0;

  fhe_encrypt dut (.*);
  always #5 clk = ~clk;

  cipher_t amod, c;
  word_t t [MAXC];
  word_t rq [$];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // record random words taken by the block; new word every cycle
  always @(posedge clk) begin
    if (rnd_next) rq.push_back(rnd);
    rnd <= {$urandom, $urandom};
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // key with A s = e small
    for (int j = 0; j < N; j++) t[j] = {$urandom, $urandom};
    for (int r = 0; r < M; r++) begin
      word_t b;
      b = word_t'(longint'($urandom % 15) - 7);
      for (int j = 1; j <= N; j++) begin
        amod[r][j] = {$urandom, $urandom};
        b = b + amod[r][j] * t[j-1];
      end
      amod[r][0] = b;
    end
    for (int r = 0; r < M; r++) for (int j = 0; j <= N; j++) a_mat[r][j] = amod[r][j];
    @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      int row, cycles;
      mu = (trial == 0) ? 64'd5 : {$urandom, $urandom};
      rq.delete();
      start = 1; @(negedge clk); start = 0;
      row = 0; cycles = 0;
      while (row < NR) begin
        out_ready = (trial == 2) ? 1'b1 : ($urandom % 3 != 0);
        @(posedge clk);
        cycles++;
        if (out_valid && out_ready) begin
          automatic word_t rb = rq[row];
          for (int j = 0; j <= N; j++) begin
            automatic word_t exp = (j == row / L) ? (mu << (row % L)) : 0;
            for (int r = 0; r < M; r++) if (rb[r]) exp = exp + amod[r][j];
            c[row][j] = out_row[j];
            chk(out_row[j] == exp, $sformatf("row %0d col %0d got %h exp %h rq %0d rb %h", row, j, out_row[j], exp, rq.size(), rb));
          end
          row++;
        end
        @(negedge clk);
      end
      out_ready = 0;
      @(posedge clk); #1;
      chk(!busy, "idle after last row");
      chk(ref_decrypt(c, t, L, N) == mu, "reference decryption");
      if (trial == 2) chk(cycles == NR + 1, $sformatf("one row per cycle (%0d)", cycles));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
