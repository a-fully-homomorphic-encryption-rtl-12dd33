// tb_fhe_controller: the controller at reduced sizes (ELL = 16, n = 1,
// 2 states, 1 input, 1 output). Random gain and signal ciphers are sent
// with random gaps; the returned E(x+), E(u+) are compared word for word
// with the reference model of x+ = W v, u+ = (K W) v on reduced ciphers.
// The uplink is throttled at random. Two control steps.
module tb_fhe_controller;
  import fhe_pkg::*;
  import tb_fhe_ref_pkg::*;
  localparam int L = 16, N = 1, NR = L * (N + 1), W = (N + 1) * L;
  localparam int R = 2, G = 1, U = 1, NV = R + G + U, NG = (R + G) * NV;

  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 0, gains_loaded, step_done;
  logic [W-1:0] rx_row = '0, tx_row;
  logic [31:0] n_mul, n_add;
  int checks = 0, failures = 0;

  fhe_controller #(.P_ELL(L), .P_N(N), .P_RHO(R), .P_GAMMA(G), .P_NU(U)) dut (.*);
  always #5 clk = ~clk;

  cipher_t gain [NG];
  cipher_t vec [NV];
  cipher_t xp [R];
  cipher_t up [G];
  cipher_t tmp;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic rand_cipher(ref cipher_t c);
    for (int i = 0; i < NR; i++) for (int j = 0; j <= N; j++) c[i][j] = $urandom % (1 << L);
  endtask

  task automatic send(input cipher_t c);
    for (int i = 0; i < NR; i++) begin
      while ($urandom % 4 == 0) @(negedge clk);
      rx_valid = 1;
      for (int j = 0; j <= N; j++) rx_row[j*L +: L] = c[i][j][L-1:0];
      @(posedge clk);
      while (!rx_ready) @(posedge clk);
      @(negedge clk); rx_valid = 0;
    end
  endtask

  task automatic recv_check(input cipher_t c, input string what);
    automatic int bad = 0;
    for (int i = 0; i < NR; i++) begin
      tx_ready = ($urandom % 2 == 0);
      @(posedge clk);
      while (!(tx_valid && tx_ready)) begin
        @(negedge clk); tx_ready = ($urandom % 2 == 0); @(posedge clk);
      end
      for (int j = 0; j <= N; j++) if (word_t'(tx_row[j*L +: L]) != c[i][j]) bad++;
      @(negedge clk); tx_ready = 0;
    end
    chk(bad == 0, $sformatf("%s: %0d wrong words", what, bad));
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < NG; k++) begin rand_cipher(gain[k]); send(gain[k]); end
    chk(gains_loaded, "gains loaded");
    for (int step = 0; step < 2; step++) begin
      for (int t = 0; t < NV; t++) begin rand_cipher(vec[t]); send(vec[t]); end
      for (int i = 0; i < R; i++) begin
        ref_mul(xp[i], gain[i * NV], vec[0], L, N);
        for (int t = 1; t < NV; t++) begin
          ref_mul(tmp, gain[i * NV + t], vec[t], L, N);
          ref_add(xp[i], xp[i], tmp, L, N);
        end
      end
      for (int g = 0; g < G; g++) begin
        ref_mul(up[g], gain[(R + g) * NV], vec[0], L, N);
        for (int t = 1; t < NV; t++) begin
          ref_mul(tmp, gain[(R + g) * NV + t], vec[t], L, N);
          ref_add(up[g], up[g], tmp, L, N);
        end
      end
      for (int i = 0; i < R; i++) recv_check(xp[i], $sformatf("step %0d x+[%0d]", step, i));
      for (int g = 0; g < G; g++) recv_check(up[g], $sformatf("step %0d u+[%0d]", step, g));
      @(negedge clk);
      chk(!tx_valid, "nothing more sent");
    end
    chk(n_mul == 2 * (R + G) * NV, "n_mul");
    chk(n_add == 2 * (R + G) * (NV - 1), "n_add");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
