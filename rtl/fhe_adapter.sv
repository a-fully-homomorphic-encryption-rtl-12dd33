// fhe_adapter: the plant-side unit (FPGA 1 of the setup).
//
// It holds the keys and is the only place where plaintext exists.
//  1. On `start` it seeds its random sources, generates a key pair
//     (fhe_keygen) and sends the NG encrypted controller gains, read from a
//     plaintext gain table written beforehand through the `gain_*` port.
//  2. Each control step, on `sample` it captures the plant output y, and
//     sends E(x), E(u), E(y) (slot order of fhe_ctrl_seq).
//  3. It then receives E(x+) and E(u+), decrypts them (fhe_decrypt) and
//     applies the right shift that returns the products to Q format:
//     x = Dec(x+) >>> NQ, u = Dec(u+) >>> NQ. The shifted values are kept
//     as the next step's x and u; the low MQ+NQ bits of u go to the plant
//     with a one-cycle `u_valid`.
// The sequence and the shifts are the paper's. Because the controller
// evaluates u+ with the folded gains K W (see fhe_ctrl_seq), u+ has the same
// 2 NQ fractional bits as x+ and both take the same shift. The gain table
// holds W = [Ad - L Cd | Bd | L] and then K W; computing them is left to
// whoever writes the table. The two's-complement sign
// extension of y, x and u to ELL bits, the gain table port and the link
// order are this design's choices. The initial state is x = 0, u = 0, as
// in the paper.
//
// Interface: `ready_for_sample` is high while a new `sample` is accepted.
// Ciphers travel on the two ready/valid row streams (see fhe_controller).
module fhe_adapter
  import fhe_pkg::*;
#(
  parameter int unsigned P_ELL    = ELL,
  parameter int unsigned P_N      = N_LWE,
  parameter int unsigned P_M      = M_LWE,
  parameter int unsigned P_E_BITS = E_BITS,
  parameter int unsigned P_MQ     = MQ,
  parameter int unsigned P_NQ     = NQ,
  parameter int unsigned P_RHO    = RHO,
  parameter int unsigned P_GAMMA  = GAMMA,
  parameter int unsigned P_NU     = NU,
  localparam int unsigned W       = (P_N + 1) * P_ELL,
  localparam int unsigned NV      = P_RHO + P_GAMMA + P_NU,
  localparam int unsigned NG      = (P_RHO + P_GAMMA) * NV,
  localparam int unsigned QW      = P_MQ + P_NQ
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [63:0]                     seed,
  // plaintext gain table: W = [Ad - L Cd | Bd | L] then K W, row-major, Q format
  input  logic                            gain_we,
  input  logic [$clog2(NG)-1:0]           gain_addr,
  input  logic [P_ELL-1:0]                gain_wdata,
  input  logic                            start,
  // plant side
  input  logic                            sample,
  input  logic [P_NU-1:0][QW-1:0]         y_in,
  output logic                            ready_for_sample,
  output logic [P_GAMMA-1:0][QW-1:0]      u_out,
  output logic                            u_valid,
  output logic [P_RHO-1:0][P_ELL-1:0]     xhat_out,
  // downlink to the controller
  output logic                            tx_valid,
  input  logic                            tx_ready,
  output logic [W-1:0]                    tx_row,
  // uplink from the controller
  input  logic                            rx_valid,
  output logic                            rx_ready,
  input  logic [W-1:0]                    rx_row,
  // status
  output logic                            keys_ready,
  output logic [31:0]                     n_enc,
  output logic [31:0]                     n_dec
);

  typedef enum logic [2:0] {S_IDLE, S_KEYGEN, S_KG_WAIT, S_ENC, S_ENC_WAIT,
                            S_SAMPLE_WAIT, S_RECV} state_e;
  state_e state_q;

  logic [P_ELL-1:0]                  gain_mem [NG];
  logic [$clog2(NG+1)-1:0]           idx_q;
  logic                              gains_phase_q;  // encrypting gains (1) or signals (0)
  logic [P_NU-1:0][QW-1:0]           y_q;
  logic [P_GAMMA-1:0][P_ELL-1:0]     u_q;
  logic [P_ELL-1:0]                  enc_mu;

  logic [63:0] rnd_kg, rnd_enc;
  logic        kg_next, enc_next;
  logic        kg_start, kg_busy, kg_done;
  logic [P_M-1:0][P_N:0][P_ELL-1:0] a_mat;
  logic [P_N-1:0][P_ELL-1:0]        t_vec;
  logic        enc_start, enc_busy, enc_done;
  logic        dec_valid, dec_ready, mu_valid;
  logic [P_ELL-1:0] mu;

  always_ff @(posedge clk) begin
    if (gain_we) gain_mem[gain_addr] <= gain_wdata;
  end

  // Message of cipher number idx_q.
  always_comb begin
    if (gains_phase_q)
      enc_mu = gain_mem[idx_q];
    else if (idx_q < P_RHO)
      enc_mu = xhat_out[idx_q];
    else if (idx_q < P_RHO + P_GAMMA)
      enc_mu = u_q[idx_q - P_RHO];
    else
      enc_mu = P_ELL'(signed'(y_q[idx_q - P_RHO - P_GAMMA]));
  end

  assign kg_start         = (state_q == S_KEYGEN);
  assign enc_start        = (state_q == S_ENC);
  assign ready_for_sample = (state_q == S_SAMPLE_WAIT);
  assign dec_valid        = rx_valid && (state_q == S_RECV);
  assign rx_ready         = dec_ready && (state_q == S_RECV);

  always_comb begin
    for (int g = 0; g < P_GAMMA; g++) u_out[g] = u_q[g][QW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      idx_q         <= '0;
      gains_phase_q <= 1'b1;
      y_q           <= '0;
      u_q           <= '0;
      xhat_out      <= '0;
      u_valid       <= 1'b0;
      keys_ready    <= 1'b0;
      n_enc         <= '0;
      n_dec         <= '0;
    end else begin
      u_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) state_q <= S_KEYGEN;
        S_KEYGEN: state_q <= S_KG_WAIT;
        S_KG_WAIT: if (kg_done) begin
          keys_ready    <= 1'b1;
          gains_phase_q <= 1'b1;
          idx_q         <= '0;
          state_q       <= S_ENC;
        end
        S_ENC: begin
          n_enc   <= n_enc + 1;
          state_q <= S_ENC_WAIT;
        end
        S_ENC_WAIT: if (enc_done) begin
          if (idx_q == (gains_phase_q ? NG - 1 : NV - 1)) begin
            idx_q   <= '0;
            state_q <= gains_phase_q ? S_SAMPLE_WAIT : S_RECV;
          end else begin
            idx_q   <= idx_q + 1'b1;
            state_q <= S_ENC;
          end
        end
        S_SAMPLE_WAIT: if (sample) begin
          y_q           <= y_in;
          gains_phase_q <= 1'b0;
          idx_q         <= '0;
          state_q       <= S_ENC;
        end
        S_RECV: if (mu_valid) begin
          n_dec <= n_dec + 1;
          if (idx_q < P_RHO) xhat_out[idx_q] <= P_ELL'($signed(mu) >>> P_NQ);
          else               u_q[idx_q - P_RHO] <= P_ELL'($signed(mu) >>> P_NQ);
          if (idx_q == P_RHO + P_GAMMA - 1) begin
            idx_q   <= '0;
            u_valid <= 1'b1;
            state_q <= S_SAMPLE_WAIT;
          end else begin
            idx_q <= idx_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  fhe_prng u_prng_kg (
    .clk (clk), .rst_n (rst_n), .seed_load (start && state_q == S_IDLE),
    .seed (seed), .next (kg_next), .rnd (rnd_kg)
  );

  fhe_prng #(.SEED_DEFAULT(64'hD1B5_4A32_D192_ED03)) u_prng_enc (
    .clk (clk), .rst_n (rst_n), .seed_load (start && state_q == S_IDLE),
    .seed (seed ^ 64'hA076_1D64_78BD_642F), .next (enc_next), .rnd (rnd_enc)
  );

  fhe_keygen #(.P_ELL(P_ELL), .P_N(P_N), .P_M(P_M), .P_E_BITS(P_E_BITS)) u_keygen (
    .clk (clk), .rst_n (rst_n), .start (kg_start), .rnd (rnd_kg), .rnd_next (kg_next),
    .busy (kg_busy), .done (kg_done), .a_mat (a_mat), .t_vec (t_vec)
  );

  fhe_encrypt #(.P_ELL(P_ELL), .P_N(P_N), .P_M(P_M)) u_encrypt (
    .clk (clk), .rst_n (rst_n), .start (enc_start), .mu (enc_mu), .a_mat (a_mat),
    .rnd (rnd_enc), .rnd_next (enc_next), .busy (enc_busy), .done (enc_done),
    .out_valid (tx_valid), .out_ready (tx_ready), .out_row (tx_row)
  );

  fhe_decrypt #(.P_ELL(P_ELL), .P_N(P_N)) u_decrypt (
    .clk (clk), .rst_n (rst_n), .t_vec (t_vec),
    .in_valid (dec_valid), .in_ready (dec_ready), .in_row (rx_row),
    .mu_valid (mu_valid), .mu (mu)
  );

endmodule
