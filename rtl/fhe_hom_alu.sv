// fhe_hom_alu: homomorphic operations on reduced ciphers.
//
// Implements the four operations of the reduced-cipher formulation, all
// modulo 2^ELL, on ciphers held in fhe_cipher_ram (cipher `x` occupies rows
// x*N .. x*N+N-1, N = ELL*(N_LWE+1)):
//   OP_ADD   dst = (a~ + b~)^l
//   OP_MUL   dst = (A * b~)^l, where A is the N x N bit matrix whose row i is
//            the bit decomposition of row i of a~ (bit j*ELL+k = bit k of
//            a~[i][j]). Row i of the result is the sum of the rows of b~
//            selected by the bits of row i of a~: no multiplier is needed.
//   OP_SADD  dst = (alpha G + a~)^l: alpha << (i mod ELL) is added to
//            column i / ELL of row i.
//   OP_SMUL  dst = ([alpha G]^l a~)^l: row i of [alpha G]^l is non-zero only
//            in columns j*ELL .. j*ELL+ELL-1 (j = i / ELL), where it holds the
//            bits of alpha << (i mod ELL), so only those ELL rows of a~ are
//            read (the structural zeros are skipped).
// The formulas are the paper's; the sequencing is this design's.
//
// How: the result is built one row at a time in an accumulator of N_LWE+1
// words (one adder per column). For OP_MUL, row i of a~ is read first and kept
// as N select bits. Then the operand rows are read one per cycle and added
// when their select bit is set; then the row is written to dst. Cycles per
// operation: ADD 6N, SADD 5N, SMUL (ELL+4)N, MUL (N+5)N, plus one
// (N = 512 by default, so a product takes 264,705 cycles).
// OP_MUL and OP_SMUL need dst different from their source ciphers.
//
// Interface: pulse `start` with the operation; `busy` stays high until the
// one-cycle `done`. Memory ports follow fhe_cipher_ram (read latency 1).
module fhe_hom_alu
  import fhe_pkg::*;
#(
  parameter int unsigned P_ELL   = ELL,
  parameter int unsigned P_N     = N_LWE,
  parameter int unsigned P_SLOTS = 63,
  localparam int unsigned NROWS  = P_ELL * (P_N + 1),
  localparam int unsigned AW     = $clog2(P_SLOTS * NROWS),
  localparam int unsigned SW     = $clog2(P_SLOTS)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  hom_op_e                      op,
  input  logic [SW-1:0]                dst,
  input  logic [SW-1:0]                src_a,
  input  logic [SW-1:0]                src_b,
  input  logic [P_ELL-1:0]             alpha,
  output logic                         busy,
  output logic                         done,
  output logic                         rd_en,
  output logic [AW-1:0]                rd_addr,
  input  logic [(P_N+1)*P_ELL-1:0]     rd_data,
  output logic                         wr_en,
  output logic [AW-1:0]                wr_addr,
  output logic [(P_N+1)*P_ELL-1:0]     wr_data
);

  typedef logic [P_N:0][P_ELL-1:0] row_t;

  typedef enum logic [2:0] {S_IDLE, S_ROW, S_LEFT, S_STREAM, S_WRITE} state_e;
  state_e state_q;

  hom_op_e                    op_q;
  logic [SW-1:0]              dst_q, a_q, b_q;
  logic [P_ELL-1:0]           alpha_q;
  logic [$clog2(NROWS+1)-1:0] row_q;     // output row i
  logic [$clog2(NROWS+1)-1:0] cnt_q;     // operand reads issued for this row
  logic [$clog2(NROWS+1)-1:0] len;       // operand reads needed per row
  logic [NROWS-1:0]           left_q;    // bit row of a~ (OP_MUL)
  row_t                       acc_q;
  row_t                       rd_row;
  logic                       pend_q;    // a read is returning this cycle
  logic                       sel_q;     // ... and is to be added
  logic                       sel;
  logic [AW-1:0]              addr;
  logic [P_ELL-1:0]           alpha_sh;  // alpha << (i mod ELL)
  row_t                       wr_row;

  assign rd_row   = row_t'(rd_data);
  assign alpha_sh = alpha_q << (row_q % P_ELL);

  // Number of operand rows per output row.
  always_comb begin
    unique case (op_q)
      OP_ADD:  len = 2;
      OP_SADD: len = 1;
      OP_SMUL: len = P_ELL;
      default: len = NROWS;
    endcase
  end

  // Address and select bit of operand read number cnt_q.
  always_comb begin
    unique case (op_q)
      OP_ADD: begin
        addr = (cnt_q == 0) ? AW'(a_q * NROWS + row_q) : AW'(b_q * NROWS + row_q);
        sel  = 1'b1;
      end
      OP_SADD: begin
        addr = AW'(a_q * NROWS + row_q);
        sel  = 1'b1;
      end
      OP_SMUL: begin
        addr = AW'(a_q * NROWS + (row_q / P_ELL) * P_ELL + cnt_q);
        sel  = alpha_sh[cnt_q];
      end
      default: begin   // OP_MUL
        addr = AW'(b_q * NROWS + cnt_q);
        sel  = left_q[cnt_q];
      end
    endcase
  end

  // Row to write back: the accumulator, plus alpha G for OP_SADD.
  always_comb begin
    wr_row = acc_q;
    if (op_q == OP_SADD)
      wr_row[row_q / P_ELL] = acc_q[row_q / P_ELL] + alpha_sh;
  end

  assign busy = (state_q != S_IDLE);

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = addr;
    if (state_q == S_ROW && op_q == OP_MUL) begin
      rd_en   = 1'b1;
      rd_addr = AW'(a_q * NROWS + row_q);
    end else if (state_q == S_STREAM && cnt_q < len) begin
      rd_en = 1'b1;
    end
  end

  assign wr_en   = (state_q == S_WRITE);
  assign wr_addr = AW'(dst_q * NROWS + row_q);
  assign wr_data = wr_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      op_q    <= OP_ADD;
      dst_q   <= '0;
      a_q     <= '0;
      b_q     <= '0;
      alpha_q <= '0;
      row_q   <= '0;
      cnt_q   <= '0;
      left_q  <= '0;
      acc_q   <= '0;
      pend_q  <= 1'b0;
      sel_q   <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          op_q    <= op;
          dst_q   <= dst;
          a_q     <= src_a;
          b_q     <= src_b;
          alpha_q <= alpha;
          row_q   <= '0;
          state_q <= S_ROW;
        end
        S_ROW: begin
          acc_q   <= '0;
          cnt_q   <= '0;
          pend_q  <= 1'b0;
          state_q <= (op_q == OP_MUL) ? S_LEFT : S_STREAM;
        end
        S_LEFT: begin
          left_q  <= rd_data;
          state_q <= S_STREAM;
        end
        S_STREAM: begin
          if (cnt_q < len) begin
            cnt_q  <= cnt_q + 1'b1;
            pend_q <= 1'b1;
            sel_q  <= sel;
          end else begin
            pend_q <= 1'b0;
          end
          if (pend_q && sel_q) begin
            for (int c = 0; c <= P_N; c++) acc_q[c] <= acc_q[c] + rd_row[c];
          end
          if (cnt_q == len && !pend_q) state_q <= S_WRITE;
        end
        S_WRITE: begin
          if (row_q == NROWS - 1) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            row_q   <= row_q + 1'b1;
            state_q <= S_ROW;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Products read all rows of a source while writing dst: they may not alias.
  property p_no_alias;
    @(posedge clk) disable iff (!rst_n)
      (start && !busy && (op == OP_MUL)) |-> (dst != src_a && dst != src_b);
  endproperty
  a_no_alias: assert property (p_no_alias);
  a_smul_no_alias: assert property (@(posedge clk) disable iff (!rst_n)
      (start && !busy && (op == OP_SMUL)) |-> (dst != src_a));

endmodule
