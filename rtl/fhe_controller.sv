// fhe_controller: the remote encrypted controller (FPGA 2 of the setup).
//
// It never sees a key or a plaintext. After reset it receives the NG
// encrypted gain ciphers (W = [Ad - L Cd | Bd | L] and K W) once. Then, each
// control step, it receives the NV ciphers v = [E(x), E(u), E(y)], evaluates
// E(x+) = W E(v) and E(u+) = (K W) E(v) with fhe_ctrl_seq and fhe_hom_alu on
// reduced ciphers, and sends back E(x+) then E(u+).
// Which ciphers go in which order over the links is this design's choice
// (the paper only shows which ciphers travel in each direction).
//
// Interface: ciphers travel as N rows of (N_LWE+1)*ELL bits on ready/valid
// streams, row 0 first, in slot order (see fhe_ctrl_seq). Received rows are
// written straight into fhe_cipher_ram (one per cycle). Transmission reads
// one row per three cycles. `step_done` pulses after the last row of E(u+).
// `n_mul`/`n_add` count homomorphic operations.
module fhe_controller
  import fhe_pkg::*;
#(
  parameter int unsigned P_ELL   = ELL,
  parameter int unsigned P_N     = N_LWE,
  parameter int unsigned P_RHO   = RHO,
  parameter int unsigned P_GAMMA = GAMMA,
  parameter int unsigned P_NU    = NU,
  localparam int unsigned NROWS  = P_ELL * (P_N + 1),
  localparam int unsigned W      = (P_N + 1) * P_ELL
) (
  input  logic          clk,
  input  logic          rst_n,
  // downlink: ciphers from the adapter
  input  logic          rx_valid,
  output logic          rx_ready,
  input  logic [W-1:0]  rx_row,
  // uplink: ciphers to the adapter
  output logic          tx_valid,
  input  logic          tx_ready,
  output logic [W-1:0]  tx_row,
  // status
  output logic          gains_loaded,
  output logic          step_done,
  output logic [31:0]   n_mul,
  output logic [31:0]   n_add
);

  localparam int unsigned NV      = P_RHO + P_GAMMA + P_NU;
  localparam int unsigned NG      = (P_RHO + P_GAMMA) * NV;
  localparam int unsigned NSLOTS  = NG + NV + P_RHO + P_GAMMA + 1;
  localparam int unsigned SW      = $clog2(NSLOTS);
  localparam int unsigned DEPTH   = NSLOTS * NROWS;
  localparam int unsigned AW      = $clog2(DEPTH);
  localparam int unsigned XP_BASE = NG + NV;
  localparam int unsigned TX_END  = (NG + NV + P_RHO + P_GAMMA) * NROWS;  // one past last row sent

  typedef enum logic [2:0] {S_RX_GAINS, S_RX_VEC, S_RUN, S_RUN_WAIT, S_TX_RD, S_TX_WAIT, S_TX_HOLD} state_e;
  state_e state_q;

  logic [AW:0]   addr_q;    // receive / transmit row address
  logic          ram_we, ram_re;
  logic [AW-1:0] ram_waddr, ram_raddr;
  logic [W-1:0]  ram_wdata, ram_rdata;

  logic          seq_start, seq_busy, seq_done;
  logic          alu_start, alu_busy, alu_done;
  hom_op_e       alu_op;
  logic [SW-1:0] alu_dst, alu_a, alu_b;
  logic          alu_re, alu_we;
  logic [AW-1:0] alu_raddr, alu_waddr;
  logic [W-1:0]  alu_wdata;

  logic rx_fire;
  assign rx_ready = (state_q == S_RX_GAINS) || (state_q == S_RX_VEC);
  assign rx_fire  = rx_valid && rx_ready;

  // Memory port sharing: the receiver and the ALU never write at the same
  // time, nor do the transmitter and the ALU read at the same time.
  always_comb begin
    ram_we    = rx_fire ? 1'b1 : alu_we;
    ram_waddr = rx_fire ? addr_q[AW-1:0] : alu_waddr;
    ram_wdata = rx_fire ? rx_row : alu_wdata;
    ram_re    = (state_q == S_TX_RD) ? 1'b1 : alu_re;
    ram_raddr = (state_q == S_TX_RD) ? addr_q[AW-1:0] : alu_raddr;
  end

  assign seq_start = (state_q == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_RX_GAINS;
      addr_q       <= '0;
      tx_valid     <= 1'b0;
      tx_row       <= '0;
      gains_loaded <= 1'b0;
      step_done    <= 1'b0;
    end else begin
      step_done <= 1'b0;
      unique case (state_q)
        S_RX_GAINS: if (rx_fire) begin
          addr_q <= addr_q + 1'b1;
          if (addr_q == (AW+1)'(NG * NROWS - 1)) begin
            gains_loaded <= 1'b1;
            state_q      <= S_RX_VEC;
          end
        end
        S_RX_VEC: if (rx_fire) begin
          addr_q <= addr_q + 1'b1;
          if (addr_q == (AW+1)'((NG + NV) * NROWS - 1)) state_q <= S_RUN;
        end
        S_RUN: state_q <= S_RUN_WAIT;
        S_RUN_WAIT: if (seq_done) begin
          addr_q  <= (AW+1)'(XP_BASE * NROWS);
          state_q <= S_TX_RD;
        end
        S_TX_RD: state_q <= S_TX_WAIT;
        S_TX_WAIT: begin
          tx_row   <= ram_rdata;
          tx_valid <= 1'b1;
          state_q  <= S_TX_HOLD;
        end
        S_TX_HOLD: if (tx_ready) begin
          tx_valid <= 1'b0;
          addr_q   <= addr_q + 1'b1;
          if (addr_q == (AW+1)'(TX_END - 1)) begin
            addr_q    <= (AW+1)'(NG * NROWS);
            step_done <= 1'b1;
            state_q   <= S_RX_VEC;
          end else begin
            state_q <= S_TX_RD;
          end
        end
        default: state_q <= S_RX_GAINS;
      endcase
    end
  end

  fhe_cipher_ram #(.WIDTH(W), .DEPTH(DEPTH)) u_ram (
    .clk     (clk),
    .wr_en   (ram_we),
    .wr_addr (ram_waddr),
    .wr_data (ram_wdata),
    .rd_en   (ram_re),
    .rd_addr (ram_raddr),
    .rd_data (ram_rdata)
  );

  fhe_ctrl_seq #(.P_RHO(P_RHO), .P_GAMMA(P_GAMMA), .P_NU(P_NU)) u_seq (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (seq_start),
    .busy      (seq_busy),
    .done      (seq_done),
    .alu_start (alu_start),
    .alu_op    (alu_op),
    .alu_dst   (alu_dst),
    .alu_a     (alu_a),
    .alu_b     (alu_b),
    .alu_done  (alu_done),
    .n_mul     (n_mul),
    .n_add     (n_add)
  );

  fhe_hom_alu #(.P_ELL(P_ELL), .P_N(P_N), .P_SLOTS(NSLOTS)) u_alu (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (alu_start),
    .op      (alu_op),
    .dst     (alu_dst),
    .src_a   (alu_a),
    .src_b   (alu_b),
    .alpha   ('0),
    .busy    (alu_busy),
    .done    (alu_done),
    .rd_en   (alu_re),
    .rd_addr (alu_raddr),
    .rd_data (ram_rdata),
    .wr_en   (alu_we),
    .wr_addr (alu_waddr),
    .wr_data (alu_wdata)
  );

  // The sequencer only runs while no cipher is moving over the links.
  a_alu_quiet: assert property (@(posedge clk) disable iff (!rst_n)
      alu_busy |-> !(rx_fire || state_q == S_TX_RD));

endmodule
