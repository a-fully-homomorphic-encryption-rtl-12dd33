// tb_fhe_adapter: the adapter alone at reduced sizes (ELL = 32, n = 1,
// m = 2). The testbench plays the remote controller with the reference
// model: it stores the gain and signal ciphers the adapter sends, computes
// E(x+) = W E(v) and E(u+) = (K W) E(v) on them, and sends these back with
// random gaps. The decrypted, shifted outputs must equal a plaintext model
// of the controller. Also checks the number of ciphers each way.
module tb_fhe_adapter;
  import fhe_pkg::*;
  import tb_fhe_ref_pkg::*;
  localparam int L = 32, N = 1, M = 2, EB = 3, MQv = 8, NQv = 4;
  localparam int R = 2, G = 1, U = 1, STEPS = 3;
  localparam int NV = R + G + U, NG = (R + G) * NV, QW = MQv + NQv, NR = L * (N + 1), W = (N + 1) * L;

  logic clk = 0, rst_n = 0, gain_we = 0, start = 0, sample = 0;
  logic [63:0] seed = 64'h0FED_CBA9_8765_4321;
  logic [$clog2(NG)-1:0] gain_addr = '0;
  logic [L-1:0] gain_wdata = '0;
  logic [U-1:0][QW-1:0] y_in = '0;
  logic ready_for_sample, u_valid, keys_ready;
  logic [G-1:0][QW-1:0] u_out;
  logic [R-1:0][L-1:0] xhat_out;
  logic tx_valid, tx_ready = 0, rx_valid = 0, rx_ready;
  logic [W-1:0] tx_row, rx_row = '0;
  logic [31:0] n_enc, n_dec;
  int checks = 0, failures = 0;

  fhe_adapter #(.P_ELL(L), .P_N(N), .P_M(M), .P_E_BITS(EB), .P_MQ(MQv), .P_NQ(NQv),
                .P_RHO(R), .P_GAMMA(G), .P_NU(U)) dut (.*);
  always #5 clk = ~clk;

  cipher_t gain [NG];
  cipher_t vec [NV];
  cipher_t xp [R];
  cipher_t up [G];
  cipher_t tmp;
  word_t wg [NG];
  word_t x [R];
  word_t u [G];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic take(output cipher_t c);
    for (int i = 0; i < NR; i++) begin
      tx_ready = ($urandom % 4 != 0);
      @(posedge clk);
      while (!(tx_valid && tx_ready)) begin
        @(negedge clk); tx_ready = ($urandom % 4 != 0); @(posedge clk);
      end
      for (int j = 0; j <= N; j++) c[i][j] = word_t'(tx_row[j*L +: L]);
      @(negedge clk); tx_ready = 0;
    end
  endtask

  task automatic give(input cipher_t c);
    for (int i = 0; i < NR; i++) begin
      while ($urandom % 3 == 0) @(negedge clk);
      rx_valid = 1;
      for (int j = 0; j <= N; j++) rx_row[j*L +: L] = c[i][j][L-1:0];
      @(posedge clk);
      while (!rx_ready) @(posedge clk);
      @(negedge clk); rx_valid = 0;
    end
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NG; k++) begin
      automatic int lim = (k < R * NV) ? (1 << (NQv - 2)) : (1 << NQv);
      automatic int v = int'($urandom % (2 * lim + 1)) - lim;
      wg[k] = msk(word_t'(longint'(v)), L);
    end
    for (int i = 0; i < R; i++) x[i] = 0;
    for (int g = 0; g < G; g++) u[g] = 0;
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < NG; k++) begin
      gain_we = 1; gain_addr = k[$clog2(NG)-1:0]; gain_wdata = wg[k][L-1:0];
      @(negedge clk);
    end
    gain_we = 0;
    start = 1; @(negedge clk); start = 0;
    for (int k = 0; k < NG; k++) take(gain[k]);
    @(negedge clk);
    chk(keys_ready && ready_for_sample, "boot finished");
    for (int step = 0; step < STEPS; step++) begin
      word_t v [NV];
      word_t xpv [R];
      word_t upv [G];
      for (int k = 0; k < U; k++) y_in[k] = QW'($urandom);
      for (int i = 0; i < R; i++) v[i] = x[i];
      for (int g = 0; g < G; g++) v[R + g] = u[g];
      for (int k = 0; k < U; k++) v[R + G + k] = msk(word_t'(longint'($signed(y_in[k]))), L);
      for (int i = 0; i < R; i++) begin
        xpv[i] = 0;
        for (int t = 0; t < NV; t++) xpv[i] = msk(xpv[i] + wg[i * NV + t] * v[t], L);
      end
      for (int g = 0; g < G; g++) begin
        upv[g] = 0;
        for (int t = 0; t < NV; t++) upv[g] = msk(upv[g] + wg[(R + g) * NV + t] * v[t], L);
      end
      for (int i = 0; i < R; i++) x[i] = ref_sra(xpv[i], NQv, L);
      for (int g = 0; g < G; g++) u[g] = ref_sra(upv[g], NQv, L);
      sample = 1; @(negedge clk); sample = 0;
      for (int t = 0; t < NV; t++) take(vec[t]);
      // act as the controller
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
      for (int i = 0; i < R; i++) give(xp[i]);
      for (int g = 0; g < G; g++) give(up[g]);
      while (!u_valid) @(negedge clk);
      for (int g = 0; g < G; g++)
        chk(u_out[g] == u[g][QW-1:0], $sformatf("step %0d u = %h exp %h", step, u_out[g], u[g][QW-1:0]));
      for (int i = 0; i < R; i++)
        chk(word_t'(xhat_out[i]) == x[i], $sformatf("step %0d x[%0d] = %h exp %h", step, i, xhat_out[i], x[i]));
      @(negedge clk);
      chk(ready_for_sample, "ready again");
    end
    chk(n_enc == NG + STEPS * NV, "encryption count");
    chk(n_dec == STEPS * (R + G), "decryption count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
