// fhe_pkg: sizes and types shared by the encrypted-control design.
//
// The scheme is the Gentry-Sahai-Waters (GSW) lattice scheme written with
// "reduced ciphers": a cipher of message mu is the matrix C~ = C G_{n+1} with
// N = ELL*(N_LWE+1) rows and N_LWE+1 columns of ELL-bit words. All arithmetic
// on words is modulo 2^ELL, which is the operator (x)^l of the scheme.
//
// Defaults follow the paper's parameter table: n = 7, l = 64, m = 7,
// Q format with m_q = 10 integer and n_q = 22 fractional bits, and the
// double-pendulum controller with 5 states, 1 input and 2 outputs.
// E_BITS (width of the key-generation error) is this design's choice.
package fhe_pkg;

  localparam int unsigned ELL    = 64;  // l: bits per cipher word, modulus 2^l
  localparam int unsigned N_LWE  = 7;   // n: LWE dimension
  localparam int unsigned M_LWE  = 7;   // m: rows of the public key
  localparam int unsigned E_BITS = 4;   // error e sampled uniformly in [-2^(E_BITS-1), 2^(E_BITS-1))
  localparam int unsigned MQ     = 10;  // Q format integer bits (m_q)
  localparam int unsigned NQ     = 22;  // Q format fractional bits (n_q)
  localparam int unsigned RHO    = 5;   // controller states
  localparam int unsigned GAMMA  = 1;   // plant inputs
  localparam int unsigned NU     = 2;   // plant outputs

  // Homomorphic operations of the reduced-cipher ALU (Theorem 1).
  typedef enum logic [1:0] {
    OP_ADD  = 2'd0,   // C3 = (C1 + C2)^l
    OP_MUL  = 2'd1,   // C4 = (C1 * C2~)^l, C1 = bit decomposition of C1~
    OP_SADD = 2'd2,   // C6 = (alpha G + C1)^l
    OP_SMUL = 2'd3    // C5 = ([alpha G]^l C1)^l
  } hom_op_e;

endpackage
