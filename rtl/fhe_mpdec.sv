// fhe_mpdec: message recovery from the first ELL decryption values.
//
// Decryption of a GSW cipher gives, for k = 0..ELL-1, the noisy values
// v_k = mu * 2^k + e_k (mod 2^ELL). The scheme recovers mu from these with the
// Micciancio-Peikert decoder (MPDec), which it cites but does not spell out;
// this block is the usual bit-by-bit form of it for a power-of-two modulus.
// Bits are found from the least significant one up: with the low i bits of mu
// known, r = v_{ELL-1-i} - (mu_low << (ELL-1-i)) equals mu[i]*2^(ELL-1) plus
// noise, so mu[i] is 1 when r is nearer to 2^(ELL-1) than to 0, i.e.
// mu[i] = r[ELL-1] ^ r[ELL-2]. Decoding is exact while |e_k| < 2^(ELL-2).
//
// Interface: pulse `start` with `v` stable until `done`. One bit is found
// per cycle; `done` pulses ELL cycles after `start` with `mu` valid, and `mu`
// holds until the next `start`.
module fhe_mpdec
  import fhe_pkg::*;
#(
  parameter int unsigned P_ELL = ELL
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [P_ELL-1:0][P_ELL-1:0] v,
  output logic                        busy,
  output logic                        done,
  output logic [P_ELL-1:0]            mu
);

  logic [$clog2(P_ELL+1)-1:0] i_q;
  logic [P_ELL-1:0]           resid;

  assign resid = v[P_ELL - 1 - i_q] - (mu << (P_ELL - 1 - i_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      i_q  <= '0;
      mu   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        i_q  <= '0;
        mu   <= '0;
      end else if (busy) begin
        mu[i_q] <= resid[P_ELL-1] ^ resid[P_ELL-2];
        if (i_q == P_ELL - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          i_q <= i_q + 1'b1;
        end
      end
    end
  end

endmodule
