// fhe_encrypt: encryption of one message into a reduced cipher.
//
// The reduced cipher of mu is C~ = (mu G_{n+1} + R A)^l, an N x (N_LWE+1)
// matrix of ELL-bit words with N = ELL*(N_LWE+1) (the scheme's Corollary 2:
// encryption is a scalar sum on the cipher R A). R is an N x M_LWE matrix of
// random bits and G_{n+1} = I_{n+1} (x) [1, 2, ..., 2^(l-1)]^T.
//
// How: row i takes M_LWE fresh random bits R[i][*] from the low bits of the
// PRNG word, adds the selected rows of A column by column, and adds
// mu << (i mod ELL) into column i / ELL. One row is produced per cycle; no
// multiplier is used. Rows are sent in order 0..N-1.
//
// Interface: pulse `start` with `mu` stable (mu is captured). Rows leave on a
// ready/valid stream (`out_valid`, `out_ready`, `out_row`); a row is held
// until accepted. `done` pulses when the last row has been accepted.
module fhe_encrypt
  import fhe_pkg::*;
#(
  parameter int unsigned P_ELL = ELL,
  parameter int unsigned P_N   = N_LWE,
  parameter int unsigned P_M   = M_LWE
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  logic [P_ELL-1:0]                 mu,
  input  logic [P_M-1:0][P_N:0][P_ELL-1:0] a_mat,
  input  logic [63:0]                      rnd,
  output logic                             rnd_next,
  output logic                             busy,
  output logic                             done,
  output logic                             out_valid,
  input  logic                             out_ready,
  output logic [P_N:0][P_ELL-1:0]          out_row
);

  localparam int unsigned NROWS = P_ELL * (P_N + 1);

  logic                       active_q;   // rows remain to be produced
  logic [$clog2(NROWS+1)-1:0] row_q;      // next row to produce
  logic [P_ELL-1:0]           mu_q;
  logic                       load;
  logic [P_N:0][P_ELL-1:0]    row_val;

  // Row value for row index row_q with random bits rnd[P_M-1:0].
  always_comb begin
    row_val = '0;
    for (int r = 0; r < P_M; r++) begin
      if (rnd[r]) begin
        for (int c = 0; c <= P_N; c++) row_val[c] = row_val[c] + a_mat[r][c];
      end
    end
    row_val[row_q / P_ELL] = row_val[row_q / P_ELL] + (mu_q << (row_q % P_ELL));
  end

  assign load     = active_q && (!out_valid || out_ready);
  assign rnd_next = load;
  assign busy     = active_q || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q  <= 1'b0;
      row_q     <= '0;
      mu_q      <= '0;
      out_valid <= 1'b0;
      out_row   <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        active_q <= 1'b1;
        row_q    <= '0;
        mu_q     <= mu;
      end else if (load) begin
        out_row   <= row_val;
        out_valid <= 1'b1;
        row_q     <= row_q + 1'b1;
        if (row_q == NROWS - 1) active_q <= 1'b0;
      end else if (out_valid && out_ready) begin
        out_valid <= 1'b0;
        done      <= 1'b1;    // last row accepted
      end
    end
  end

endmodule
