// tb_fhe_control_system_full: one complete control step of the encrypted
// loop with every parameter at its default (ELL = 64, n = 7, m = 7, Q10.22,
// 5 states, 1 input, 2 outputs): key generation, encryption and transfer of
// the 48 gain ciphers, one step of 8 signal ciphers out, 48 homomorphic
// products and 42 sums, and 6 ciphers back for decryption. The checks are
// those of tb_fhe_control_system: plant input and state estimate against a
// plaintext model in the same modulo-2^64 arithmetic, and every mechanism
// seen. Plant outputs are kept within +-4 (Q10.22), a range like that of
// the pendulum's angles.
module tb_fhe_control_system_full;
  import fhe_pkg::*;
  import tb_fhe_ref_pkg::*;
  localparam int L = ELL, N = N_LWE, M = M_LWE, EB = E_BITS, MQv = MQ, NQv = NQ;
  localparam int R = RHO, G = GAMMA, U = NU, STEPS = 1;
  localparam int NV = R + G + U, NG = (R + G) * NV, QW = MQv + NQv;

  logic clk = 0, rst_n = 0, gain_we = 0, start = 0, sample = 0;
  logic [63:0] seed = 64'h1234_5678_9ABC_DEF1;
  logic [$clog2(NG)-1:0] gain_addr = '0;
  logic [L-1:0] gain_wdata = '0;
  logic [U-1:0][QW-1:0] y_in = '0;
  logic ready_for_sample, u_valid, keys_ready, gains_loaded, step_done;
  logic [G-1:0][QW-1:0] u_out;
  logic [R-1:0][L-1:0] xhat_out;
  logic [31:0] n_enc, n_dec, n_mul, n_add;
  logic down_valid, down_ready, up_valid, up_ready;
  int checks = 0, failures = 0;

  fhe_control_system dut (.*);
  always #5 clk = ~clk;

  int up_stalls = 0, down_xfers = 0, up_xfers = 0, steps_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (up_valid && !up_ready) up_stalls++;
    if (down_valid && down_ready) down_xfers++;
    if (up_valid && up_ready) up_xfers++;
    if (step_done) steps_done++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  task automatic seen(int n, string what);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  word_t wg [NG];
  word_t x [R];
  word_t u [G];

  initial begin
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    // gains: small signed Q-format numbers (|g| <= 0.25 for W, <= 1 for K)
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
    cyc = 0;
    while (!ready_for_sample) begin @(negedge clk); cyc++; end
    chk(keys_ready && gains_loaded, "keys and gains ready");
    chk(n_enc == NG, "gain ciphers encrypted");
    $display("boot (key generation and gain transfer): %0d cycles", cyc);
    for (int step = 0; step < STEPS; step++) begin
      word_t v [NV];
      word_t xp [R];
      word_t upv [G];
      for (int k = 0; k < U; k++) y_in[k] = QW'(int'($urandom % (1 << 25)) - (1 << 24));
      // plaintext model
      for (int i = 0; i < R; i++) v[i] = x[i];
      for (int g = 0; g < G; g++) v[R + g] = u[g];
      for (int k = 0; k < U; k++) v[R + G + k] = msk(word_t'(longint'($signed(y_in[k]))), L);
      for (int i = 0; i < R; i++) begin
        xp[i] = 0;
        for (int t = 0; t < NV; t++) xp[i] = msk(xp[i] + wg[i * NV + t] * v[t], L);
      end
      for (int g = 0; g < G; g++) begin
        upv[g] = 0;
        for (int t = 0; t < NV; t++) upv[g] = msk(upv[g] + wg[(R + g) * NV + t] * v[t], L);
      end
      for (int i = 0; i < R; i++) x[i] = ref_sra(xp[i], NQv, L);
      for (int g = 0; g < G; g++) u[g] = ref_sra(upv[g], NQv, L);
      // encrypted loop
      sample = 1; @(negedge clk); sample = 0;
      cyc = 0;
      while (!u_valid) begin @(negedge clk); cyc++; end
      $display("step %0d: %0d cycles, u = %0d", step, cyc, $signed(u_out[0]));
      for (int g = 0; g < G; g++)
        chk(u_out[g] == u[g][QW-1:0], $sformatf("step %0d u[%0d] = %h exp %h", step, g, u_out[g], u[g][QW-1:0]));
      for (int i = 0; i < R; i++)
        chk(word_t'(xhat_out[i]) == x[i], $sformatf("step %0d x[%0d] = %h exp %h", step, i, xhat_out[i], x[i]));
      @(negedge clk);
      chk(ready_for_sample, "ready for next sample");
    end
    seen(keys_ready, "key generation");
    seen(gains_loaded, "encrypted gain transfer");
    seen(steps_done, "control steps");
    seen(n_mul, "homomorphic products");
    seen(n_add, "homomorphic sums");
    seen(n_enc, "encryptions");
    seen(n_dec, "decryptions");
    seen(up_stalls, "uplink stalled by decryptor");
    chk(n_mul == STEPS * NG, "product count");
    chk(n_dec == STEPS * (R + G), "decryption count");
    chk(down_xfers == (NG + STEPS * NV) * L * (N + 1), "downlink rows");
    chk(up_xfers == STEPS * (R + G) * L * (N + 1), "uplink rows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
