// fhe_keygen: LWE key-pair generation of the GSW scheme.
//
// Following the scheme's key generation: the secret t (N_LWE words), the
// matrix B (M_LWE x N_LWE words) and the error e (M_LWE small words) are
// sampled, and b = B t^T + e is formed modulo 2^ELL. The public key is
// A = [b, B] (column 0 holds b) and the private key is s = [1, -t].
//
// How: one random word is drawn per cycle, first t, then B (row-major),
// then e. The product B t^T is then built without a multiplier, as the rest
// of the design is: for every bit k of B[r][j] that is set, t[j] << k is
// added to b[r]. This takes M_LWE*N_LWE*ELL cycles. Uniform sampling on
// [0, 2^ELL) follows the paper; the error distribution chi is not specified
// beyond a reference, so e is drawn uniformly on [-2^(E_BITS-1), 2^(E_BITS-1)),
// which is this design's choice.
//
// Interface: pulse `start`; `busy` is high until `done` pulses for one cycle.
// `a_mat` and `t_vec` are valid from `done` until the next `start`.
// `rnd`/`rnd_next` connect to a fhe_prng.
module fhe_keygen
  import fhe_pkg::*;
#(
  parameter int unsigned P_ELL    = ELL,
  parameter int unsigned P_N      = N_LWE,
  parameter int unsigned P_M      = M_LWE,
  parameter int unsigned P_E_BITS = E_BITS
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  logic [63:0]                      rnd,
  output logic                             rnd_next,
  output logic                             busy,
  output logic                             done,
  output logic [P_M-1:0][P_N:0][P_ELL-1:0] a_mat,   // A = [b, B]
  output logic [P_N-1:0][P_ELL-1:0]        t_vec    // s = [1, -t]
);

  typedef enum logic [1:0] {S_IDLE, S_SAMPLE, S_MAC} state_e;
  state_e state_q;

  localparam int unsigned NSAMP = P_N + P_M * P_N + P_M;

  logic [$clog2(NSAMP+1)-1:0] samp_q;
  logic [$clog2(P_M+1)-1:0]   r_q;
  logic [$clog2(P_N+1)-1:0]   j_q;
  logic [$clog2(P_ELL+1)-1:0] k_q;

  logic [P_ELL-1:0] e_word;
  assign e_word = P_ELL'({{(64 - P_E_BITS){rnd[P_E_BITS-1]}}, rnd[P_E_BITS-1:0]});

  assign rnd_next = (state_q == S_SAMPLE);
  assign busy     = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      samp_q  <= '0;
      r_q     <= '0;
      j_q     <= '0;
      k_q     <= '0;
      done    <= 1'b0;
      a_mat   <= '0;
      t_vec   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_SAMPLE;
          samp_q  <= '0;
        end
        S_SAMPLE: begin
          if (samp_q < P_N) begin
            t_vec[samp_q] <= rnd[P_ELL-1:0];
          end else if (samp_q < P_N + P_M * P_N) begin
            a_mat[(samp_q - P_N) / P_N][(samp_q - P_N) % P_N + 1] <= rnd[P_ELL-1:0];
          end else begin
            a_mat[samp_q - P_N - P_M * P_N][0] <= e_word;   // b starts as e
          end
          if (samp_q == NSAMP - 1) begin
            state_q <= S_MAC;
            r_q <= '0;
            j_q <= '0;
            k_q <= '0;
          end else begin
            samp_q <= samp_q + 1'b1;
          end
        end
        S_MAC: begin
          if (a_mat[r_q][j_q + 1][k_q])
            a_mat[r_q][0] <= a_mat[r_q][0] + (t_vec[j_q] << k_q);
          if (k_q == P_ELL - 1) begin
            k_q <= '0;
            if (j_q == P_N - 1) begin
              j_q <= '0;
              if (r_q == P_M - 1) begin
                state_q <= S_IDLE;
                done    <= 1'b1;
              end else begin
                r_q <= r_q + 1'b1;
              end
            end else begin
              j_q <= j_q + 1'b1;
            end
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
