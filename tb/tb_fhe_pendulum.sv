// tb_fhe_pendulum: the encrypted loop closed around the inverted double
// pendulum with a motor.
//
// The testbench models the plant from its link masses, lengths, centres of
// mass, inertias, damping, motor gain and time constant, starting at
// theta = [0.0289, 0.1156], dtheta = [0.0669, 0.0049], T = 0. The equations
// M(theta) ddtheta + C(theta, dtheta) dtheta + G(theta) = [T, 0] and
// T + tau dT/dt = k_m u are linearised about theta = dtheta = 0 and
// discretised exactly at h = 10 ms (100 Hz): Ad = exp(A h) and
// Bd = int_0^h exp(A s) ds B, both by power series. The motor torque is
// taken to act on the first joint, which the equations leave open. The
// plant is simulated with this linear model: with the gains below, the
// nonlinear pendulum swings past 1 rad during the observer's transient and
// falls, so only the linear loop is a meaningful test here. The state feedback gain is K = [-12.6 -1.8 -9.8 -0.95 0.015].
// The equations fix no sign for the motor torque. With the torque acting on
// the first joint as +T, this K stabilises the linear model as u = -K x
// (closed-loop pole radii 0.65 to 0.91), so the testbench encrypts -K.
// The observer gain L places the observer poles at 0.7, 0.5, 0.8, 0.6 and
// 0.85. It is found with Ackermann's formula from the output
// CA theta_1 + CB theta_2 (theta_2 alone by default), so L has the form
// l [CA, CB]. This is a choice of this testbench: with two outputs the
// placement has many solutions, and theta_1 alone needs gains beyond the
// Q10.22 range.
//
// The gain table W = [Ad - L Cd | Bd | L], K W is rounded to Q10.22 and
// written to the design. Each 10 ms the plant output is sampled into
// Q10.22; the encrypted loop returns u(k+1), which the motor receives at
// the next sample and holds for 10 ms. Checks, every step:
//  * u and the state estimate equal a plaintext model of the same
//    fixed-point controller, bit for bit;
// and at the end:
//  * both angles are back within 0.01 rad of upright;
//  * the estimate tracks the true state.
// The LWE dimension is reduced to n = 1 to keep the run short. The word
// width l = 64, m = 7 and the Q10.22 format are the defaults.
module tb_fhe_pendulum;
  import fhe_pkg::*;
  import tb_fhe_ref_pkg::*;
  localparam int L = ELL, N = 1, QW = MQ + NQ;
  localparam int R = RHO, G = GAMMA, U = NU, NV = R + G + U, NG = (R + G) * NV;
  localparam int STEPS = 120;
  localparam int CA = 0, CB = 1;   // observer output CA theta_1 + CB theta_2
  localparam real H = 0.01, QS = real'(1 << NQ);

  // plant parameters
  localparam real M1 = 0.125, M2 = 0.05, L1 = 0.1, C1 = -0.04, C2 = 0.06;
  localparam real I1 = 0.074, I2 = 0.00012, B1 = 4.8, B2 = 0.0002;
  localparam real KM = 50.0, TAU = 0.03, GR = 9.81;
  localparam real P1 = M1 * C1 * C1 + M2 * L1 * L1 + I1, P2 = M2 * C2 * C2 + I2;
  localparam real P3 = M2 * L1 * C2, G1 = (M1 * C1 + M2 * L1) * GR, G2 = M2 * C2 * GR;

  typedef real mat_t [R][R];
  typedef real vec_t [R];

  logic clk = 0, rst_n = 0, gain_we = 0, start = 0, sample = 0;
  logic [63:0] seed = 64'h0DD5_EED0_2468_ACE1;
  logic [$clog2(NG)-1:0] gain_addr = '0;
  logic [L-1:0] gain_wdata = '0;
  logic [U-1:0][QW-1:0] y_in = '0;
  logic ready_for_sample, u_valid, keys_ready, gains_loaded, step_done;
  logic [G-1:0][QW-1:0] u_out;
  logic [R-1:0][L-1:0] xhat_out;
  logic [31:0] n_enc, n_dec, n_mul, n_add;
  logic down_valid, down_ready, up_valid, up_ready;
  int checks = 0, failures = 0;

  fhe_control_system #(.P_N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  function automatic void mat_mul(output mat_t c, input mat_t a, input mat_t b);
    for (int i = 0; i < R; i++)
      for (int j = 0; j < R; j++) begin
        c[i][j] = 0.0;
        for (int k = 0; k < R; k++) c[i][j] += a[i][k] * b[k][j];
      end
  endfunction

  function automatic void mat_inv(output mat_t inv, input mat_t a);
    mat_t w = a;
    for (int i = 0; i < R; i++) for (int j = 0; j < R; j++) inv[i][j] = (i == j) ? 1.0 : 0.0;
    for (int c = 0; c < R; c++) begin
      int p = c;
      real f;
      for (int r = c + 1; r < R; r++) if ((w[r][c] < 0 ? -w[r][c] : w[r][c]) > (w[p][c] < 0 ? -w[p][c] : w[p][c])) p = r;
      for (int j = 0; j < R; j++) begin
        real s = w[c][j]; w[c][j] = w[p][j]; w[p][j] = s;
        s = inv[c][j]; inv[c][j] = inv[p][j]; inv[p][j] = s;
      end
      f = w[c][c];
      for (int j = 0; j < R; j++) begin w[c][j] /= f; inv[c][j] /= f; end
      for (int r = 0; r < R; r++) if (r != c) begin
        f = w[r][c];
        for (int j = 0; j < R; j++) begin w[r][j] -= f * w[c][j]; inv[r][j] -= f * inv[c][j]; end
      end
    end
  endfunction

  function automatic word_t q_of(real v);
    return msk(word_t'(longint'($rtoi(v * QS + (v < 0 ? -0.5 : 0.5)))), L);
  endfunction

  function automatic real real_of(word_t w);
    return real'(longint'(w)) / QS;
  endfunction

  mat_t ac, ad, tmp, term, obs, obs_inv, phi;
  vec_t bc, bd, lvec, kvec, st, nst;
  real wr [R + G][NV];
  word_t wg [NG];
  word_t x [R];
  word_t u [G];

  initial begin
    repeat (150_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real det0, mi11, mi12, mi22, k1, k2, k3, k4, u_real, u_hold, est_err;
    // continuous linear model about the upright position
    det0 = (P1 + P2 + 2.0 * P3) * P2 - (P2 + P3) * (P2 + P3);
    mi11 = P2 / det0; mi12 = -(P2 + P3) / det0; mi22 = (P1 + P2 + 2.0 * P3) / det0;
    // linearised gravity: G(theta) ~ -[[G1+G2, G2],[G2, G2]] theta
    k1 = G1 + G2; k2 = G2; k3 = G2; k4 = G2;
    for (int i = 0; i < R; i++) begin bc[i] = 0.0; for (int j = 0; j < R; j++) ac[i][j] = 0.0; end
    ac[0][1] = 1.0; ac[2][3] = 1.0;
    ac[1][0] = mi11 * k1 + mi12 * k3; ac[1][2] = mi11 * k2 + mi12 * k4;
    ac[1][1] = -mi11 * B1;            ac[1][3] = -mi12 * B2;  ac[1][4] = mi11;
    ac[3][0] = mi12 * k1 + mi22 * k3; ac[3][2] = mi12 * k2 + mi22 * k4;
    ac[3][1] = -mi12 * B1;            ac[3][3] = -mi22 * B2;  ac[3][4] = mi12;
    ac[4][4] = -1.0 / TAU;            bc[4] = KM / TAU;
    // Ad = sum (A h)^k / k!,  Bd = h sum (A h)^k / (k+1)! B
    for (int i = 0; i < R; i++) for (int j = 0; j < R; j++) begin
      term[i][j] = (i == j) ? 1.0 : 0.0; ad[i][j] = term[i][j]; tmp[i][j] = H * term[i][j];
    end
    for (int k = 1; k < 40; k++) begin
      mat_t ah, nt;
      for (int i = 0; i < R; i++) for (int j = 0; j < R; j++) ah[i][j] = ac[i][j] * H / real'(k);
      mat_mul(nt, term, ah);
      term = nt;
      for (int i = 0; i < R; i++) for (int j = 0; j < R; j++) begin
        ad[i][j] += term[i][j];
        tmp[i][j] += H * term[i][j] / real'(k + 1);
      end
    end
    for (int i = 0; i < R; i++) begin
      bd[i] = 0.0;
      for (int j = 0; j < R; j++) bd[i] += tmp[i][j] * bc[j];
    end
    // observer gain by Ackermann from theta_1: L = phi(Ad) O^-1 e_5
    for (int j = 0; j < R; j++) obs[0][j] = (j == 0) ? real'(CA) : (j == 2) ? real'(CB) : 0.0;
    for (int k = 1; k < R; k++)
      for (int j = 0; j < R; j++) begin
        obs[k][j] = 0.0;
        for (int i = 0; i < R; i++) obs[k][j] += obs[k-1][i] * ad[i][j];
      end
    mat_inv(obs_inv, obs);
    for (int i = 0; i < R; i++) for (int j = 0; j < R; j++) phi[i][j] = (i == j) ? 1.0 : 0.0;
    foreach (lvec[p]) begin
      automatic real poles [R] = '{0.7, 0.5, 0.8, 0.6, 0.85};
      mat_t shifted, nphi;
      for (int i = 0; i < R; i++) for (int j = 0; j < R; j++) shifted[i][j] = ad[i][j] - ((i == j) ? poles[p] : 0.0);
      mat_mul(nphi, phi, shifted);
      phi = nphi;
    end
    for (int i = 0; i < R; i++) begin
      lvec[i] = 0.0;
      for (int j = 0; j < R; j++) lvec[i] += phi[i][j] * obs_inv[j][R-1];
    end
    // u = -K x: see the sign note at the top
    kvec = '{12.6, 1.8, 9.8, 0.95, -0.015};
    // W = [Ad - L Cd | Bd | L] with Cd picking theta_1, theta_2, then K W
    for (int i = 0; i < R; i++) begin
      for (int j = 0; j < R; j++)
        wr[i][j] = ad[i][j] - ((j == 0) ? lvec[i] * real'(CA) : (j == 2) ? lvec[i] * real'(CB) : 0.0);
      wr[i][R] = bd[i];
      wr[i][R+1] = lvec[i] * real'(CA);
      wr[i][R+2] = lvec[i] * real'(CB);
    end
    for (int t = 0; t < NV; t++) begin
      wr[R][t] = 0.0;
      for (int i = 0; i < R; i++) wr[R][t] += kvec[i] * wr[i][t];
    end
    for (int o = 0; o < R + G; o++) begin
      $display("gain row %0d: %f %f %f %f %f %f %f %f", o, wr[o][0], wr[o][1], wr[o][2], wr[o][3],
               wr[o][4], wr[o][5], wr[o][6], wr[o][7]);
      for (int t = 0; t < NV; t++) begin
        chk(wr[o][t] < 511.0 && wr[o][t] > -511.0, "gain in Q10.22 range");
        wg[o * NV + t] = q_of(wr[o][t]);
      end
    end

    // boot
    for (int i = 0; i < R; i++) x[i] = 0;
    for (int g = 0; g < G; g++) u[g] = 0;
    st = '{0.0289, 0.0669, 0.1156, 0.0049, 0.0};
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < NG; k++) begin
      gain_we = 1; gain_addr = k[$clog2(NG)-1:0]; gain_wdata = wg[k][L-1:0];
      @(negedge clk);
    end
    gain_we = 0;
    start = 1; @(negedge clk); start = 0;
    while (!ready_for_sample) @(negedge clk);
    chk(keys_ready && gains_loaded, "keys and gains ready");
    u_real = 0.0;
    u_hold = 0.0;

    for (int step = 0; step < STEPS; step++) begin
      word_t v [NV];
      word_t xp [R];
      word_t upv [G];
      y_in[0] = QW'(q_of(st[0]));
      y_in[1] = QW'(q_of(st[2]));
      // plaintext fixed-point controller
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
      for (int i = 0; i < R; i++) x[i] = ref_sra(xp[i], NQ, L);
      for (int g = 0; g < G; g++) u[g] = ref_sra(upv[g], NQ, L);
      // encrypted loop
      sample = 1; @(negedge clk); sample = 0;
      while (!u_valid) @(negedge clk);
      chk(u_out[0] == u[0][QW-1:0], $sformatf("step %0d u = %h exp %h", step, u_out[0], u[0][QW-1:0]));
      for (int i = 0; i < R; i++)
        chk(word_t'(xhat_out[i]) == x[i], $sformatf("step %0d x[%0d] = %h exp %h", step, i, xhat_out[i], x[i]));
      u_real = real'($signed(u_out[0])) / QS;
      // plant runs for one period with u(k) held; the new u(k+1) takes
      // over at the next sample, as the observer model assumes
      for (int i = 0; i < R; i++) begin
        nst[i] = bd[i] * u_hold;
        for (int j = 0; j < R; j++) nst[i] += ad[i][j] * st[j];
      end
      st = nst;
      u_hold = u_real;
      if (step % 10 == 0 || step == STEPS - 1)
        $display("t = %0.2f s: theta1 = %8.5f theta2 = %8.5f u = %8.4f  est theta1 = %8.5f",
                 real'(step + 1) * H, st[0], st[2], u_real, real_of(x[0]));
      @(negedge clk);
    end
    est_err = 0.0;
    for (int i = 0; i < R; i += 2) begin
      real e = real_of(x[i]) - st[i];
      est_err += (e < 0) ? -e : e;
    end
    chk((st[0] < 0.01 && st[0] > -0.01) && (st[2] < 0.01 && st[2] > -0.01), "pendulum brought upright");
    chk(est_err < 0.02, $sformatf("state estimate tracks the angles (error %f)", est_err));
    chk(n_mul == STEPS * NG, "product count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
