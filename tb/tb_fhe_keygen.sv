// tb_fhe_keygen: runs key generation at the default sizes (l = 64, n = 7,
// m = 7) and checks that A s = b - B t is the small error e for every row
// (|e| < 2^(E_BITS-1)), that t, B, e come from the random stream in order,
// and the cycle count n + m*n + m + m*n*l.
module tb_fhe_keygen;
  import fhe_pkg::*;
  import tb_fhe_ref_pkg::*;
  localparam int L = ELL, N = N_LWE, M = M_LWE;

  logic clk = 0, rst_n = 0, start = 0;
  logic [63:0] rnd;
  logic rnd_next, busy, done;
  logic [M-1:0][N:0][L-1:0] a_mat;
  logic [N-1:0][L-1:0] t_vec;
  int checks = 0, failures = 0;

  fhe_keygen dut (.*);
  fhe_prng u_prng (.clk, .rst_n, .seed_load(1'b0), .seed('0), .next(rnd_next), .rnd);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t stream [$];
    word_t x;
    int cycles, nonzero_e;
    @(negedge clk); rst_n = 1;
    // software copy of the random stream
    x = 64'h9E37_79B9_7F4A_7C15;
    for (int i = 0; i < N + M * N + M; i++) begin
      stream.push_back(x);
      x = x ^ (x << 13); x = x ^ (x >> 7); x = x ^ (x << 17);
    end
    start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    chk(cycles == 1 + N + M * N + M + M * N * L, $sformatf("cycle count %0d", cycles));
    for (int j = 0; j < N; j++) chk(t_vec[j] == stream[j], "t from stream");
    nonzero_e = 0;
    for (int r = 0; r < M; r++) begin
      word_t e;
      longint es;
      for (int j = 0; j < N; j++) chk(a_mat[r][j+1] == stream[N + r * N + j], "B from stream");
      e = a_mat[r][0];
      for (int j = 0; j < N; j++) e = e - a_mat[r][j+1] * t_vec[j];
      es = longint'(e);
      chk(es >= -(1 <<< (E_BITS - 1)) && es < (1 <<< (E_BITS - 1)), $sformatf("A s small, row %0d: %0d", r, es));
      // e must equal the sign-extended low bits of its random word
      chk(es == longint'({{60{stream[N + M * N + r][3]}}, stream[N + M * N + r][3:0]}), "e from stream");
      if (es != 0) nonzero_e++;
    end
    chk(nonzero_e > 0, "some error non-zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
