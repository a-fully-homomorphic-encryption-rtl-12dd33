// fhe_decrypt: decryption of a reduced cipher received as a row stream.
//
// Decryption is mu = MPDec((C PowersOf2(s))^l), with C the bit decomposition
// of the reduced cipher C~ and s = [1, -t] the private key. Only the first
// ELL entries of C PowersOf2(s) are used, so only rows 0..ELL-1 of the cipher
// are processed; later rows are accepted and dropped.
//
// How: PowersOf2(s) has entry s_j << k at position j*ELL + k, and C[i][j*ELL+k]
// is bit k of C~[i][j]. So v_i = sum over k and j of bit k of C~[i][j] times
// s_j << k: again only bit selection and additions. Each kept row takes ELL
// cycles, one bit position k per cycle over all N_LWE+1 columns at once. The
// input stream is stalled (`in_ready` low) meanwhile. After row N-1 the ELL
// values go to fhe_mpdec.
//
// Interface: `t_vec` is the secret t (from fhe_keygen). Rows arrive on a
// ready/valid stream. `mu_valid` pulses with `mu` once per cipher.
module fhe_decrypt
  import fhe_pkg::*;
#(
  parameter int unsigned P_ELL = ELL,
  parameter int unsigned P_N   = N_LWE
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [P_N-1:0][P_ELL-1:0] t_vec,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [P_N:0][P_ELL-1:0]   in_row,
  output logic                      mu_valid,
  output logic [P_ELL-1:0]          mu
);

  localparam int unsigned NROWS = P_ELL * (P_N + 1);

  typedef enum logic [1:0] {S_RX, S_DOT, S_DEC, S_WAIT} state_e;
  state_e state_q;

  logic [$clog2(NROWS+1)-1:0] row_q;
  logic [$clog2(P_ELL+1)-1:0] k_q;
  logic [P_N:0][P_ELL-1:0]    row_buf;
  logic [P_ELL-1:0]           acc_q;
  logic [P_ELL-1:0][P_ELL-1:0] v_q;
  logic [P_N:0][P_ELL-1:0]    s_vec;      // s = [1, -t]
  logic [P_ELL-1:0]           acc_add;
  logic                       dec_start, dec_busy, dec_done;

  always_comb begin
    s_vec[0] = P_ELL'(1);
    for (int j = 0; j < P_N; j++) s_vec[j+1] = -t_vec[j];
  end

  // Sum over columns j of bit k of the row, times s_j << k.
  always_comb begin
    acc_add = '0;
    for (int j = 0; j <= P_N; j++)
      if (row_buf[j][k_q]) acc_add = acc_add + (s_vec[j] << k_q);
  end

  assign in_ready  = (state_q == S_RX);
  assign dec_start = (state_q == S_DEC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_RX;
      row_q    <= '0;
      k_q      <= '0;
      row_buf  <= '0;
      acc_q    <= '0;
      v_q      <= '0;
    end else begin
      unique case (state_q)
        S_RX: if (in_valid) begin
          if (row_q < P_ELL) begin
            row_buf <= in_row;
            acc_q   <= '0;
            k_q     <= '0;
            state_q <= S_DOT;
          end else if (row_q == NROWS - 1) begin
            state_q <= S_DEC;
          end else begin
            row_q <= row_q + 1'b1;
          end
        end
        S_DOT: begin
          acc_q <= acc_q + acc_add;
          if (k_q == P_ELL - 1) begin
            v_q[row_q] <= acc_q + acc_add;
            row_q      <= row_q + 1'b1;
            state_q    <= S_RX;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        S_DEC: state_q <= S_WAIT;        // fhe_mpdec started this cycle
        S_WAIT: if (dec_done) begin
          row_q   <= '0;
          state_q <= S_RX;
        end
        default: state_q <= S_RX;
      endcase
    end
  end

  fhe_mpdec #(.P_ELL(P_ELL)) u_mpdec (
    .clk   (clk),
    .rst_n (rst_n),
    .start (dec_start),
    .v     (v_q),
    .busy  (dec_busy),
    .done  (dec_done),
    .mu    (mu)
  );

  assign mu_valid = dec_done;

endmodule
