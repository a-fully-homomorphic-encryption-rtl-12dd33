// fhe_ctrl_seq: operation sequencer of the encrypted observer/state feedback.
//
// Evaluates, on encrypted data, the observer-based controller
//   x+ = Ad x + Bd u + L (y - Cd x),   u+ = K x+
// by issuing homomorphic products and sums to fhe_hom_alu. The controller
// equations are the paper's. Both are evaluated as one product depth on
// v = [x ; u ; y]:
//   x+ = W v  with W  = [Ad - L Cd | Bd | L]
//   u+ = Wu v with Wu = K W
// This folding is this design's choice. With Q(m_q.n_q) numbers, every
// result then carries 2 n_q fractional bits (44 at the defaults), which fits
// the l = 64 bit word. Evaluating K E(x+) directly would stack two products,
// giving 3 n_q = 66 fractional bits, and its integer part would wrap.
// Folding also removes the need for a homomorphic subtraction.
//
// Cipher slot map (slot = N rows of fhe_cipher_ram), NV = RHO+GAMMA+NU:
//   0 .. NG-1              G = [W ; Wu], row-major (G[o][t] at o*NV+t)
//   NG .. NG+NV-1          v = [x ; u ; y]
//   NG+NV .. +RHO-1        x+
//   NG+NV+RHO .. +GAMMA-1  u+
//   NG+NV+RHO+GAMMA        scratch product T
// where NG = (RHO+GAMMA)*NV. The gain cipher is always the left (bit
// decomposed) operand of a product, the signal cipher the right one; this
// keeps the noise growth proportional to the signal values.
//
// Order: for each output o = 0..RHO+GAMMA-1 (x+ first, then u+),
// out_o = G[o][0]*v_0, then for t = 1..NV-1, T = G[o][t]*v_t and
// out_o = out_o + T. That is (RHO+GAMMA)*NV products and
// (RHO+GAMMA)*(NV-1) sums per step.
//
// Interface: pulse `start`; `done` pulses after the last ALU operation.
// `n_mul` and `n_add` count issued operations since reset.
module fhe_ctrl_seq
  import fhe_pkg::*;
#(
  parameter int unsigned P_RHO   = RHO,
  parameter int unsigned P_GAMMA = GAMMA,
  parameter int unsigned P_NU    = NU,
  localparam int unsigned NV     = P_RHO + P_GAMMA + P_NU,
  localparam int unsigned NG     = (P_RHO + P_GAMMA) * NV,
  localparam int unsigned NSLOTS = NG + NV + P_RHO + P_GAMMA + 1,
  localparam int unsigned SW     = $clog2(NSLOTS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          alu_start,
  output hom_op_e       alu_op,
  output logic [SW-1:0] alu_dst,
  output logic [SW-1:0] alu_a,
  output logic [SW-1:0] alu_b,
  input  logic          alu_done,
  output logic [31:0]   n_mul,
  output logic [31:0]   n_add
);

  localparam int unsigned V_BASE  = NG;
  localparam int unsigned XP_BASE = NG + NV;
  localparam int unsigned T_SLOT  = NG + NV + P_RHO + P_GAMMA;

  typedef enum logic [2:0] {S_IDLE, S_MUL, S_MUL_WAIT, S_ADD, S_ADD_WAIT, S_NEXT} state_e;
  state_e state_q;

  localparam int unsigned NO = P_RHO + P_GAMMA;     // outputs: x+ then u+
  localparam int unsigned OW = $clog2(NO + NV + 1);

  logic [OW-1:0]   i_q;         // output index o
  logic [OW-1:0]   t_q;         // term index
  logic [SW-1:0]   gain_slot, vec_slot, out_slot;

  // u+ follows x+ directly in the slot map, so one output index covers both.
  assign gain_slot = SW'(i_q * NV + t_q);
  assign vec_slot  = SW'(V_BASE + t_q);
  assign out_slot  = SW'(XP_BASE + i_q);

  always_comb begin
    alu_start = (state_q == S_MUL) || (state_q == S_ADD);
    if (state_q == S_ADD) begin
      alu_op  = OP_ADD;
      alu_dst = out_slot;
      alu_a   = out_slot;
      alu_b   = SW'(T_SLOT);
    end else begin
      alu_op  = OP_MUL;
      alu_dst = (t_q == 0) ? out_slot : SW'(T_SLOT);
      alu_a   = gain_slot;
      alu_b   = vec_slot;
    end
  end

  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      i_q       <= '0;
      t_q       <= '0;
      done      <= 1'b0;
      n_mul     <= '0;
      n_add     <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          i_q       <= '0;
          t_q       <= '0;
          state_q   <= S_MUL;
        end
        S_MUL: begin
          n_mul   <= n_mul + 1;
          state_q <= S_MUL_WAIT;
        end
        S_MUL_WAIT: if (alu_done) state_q <= (t_q == 0) ? S_NEXT : S_ADD;
        S_ADD: begin
          n_add   <= n_add + 1;
          state_q <= S_ADD_WAIT;
        end
        S_ADD_WAIT: if (alu_done) state_q <= S_NEXT;
        S_NEXT: begin
          state_q <= S_MUL;
          if (t_q == OW'(NV - 1)) begin
            t_q <= '0;
            if (i_q == OW'(NO - 1)) begin
              i_q     <= '0;
              state_q <= S_IDLE;
              done    <= 1'b1;
            end else begin
              i_q <= i_q + 1'b1;
            end
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
