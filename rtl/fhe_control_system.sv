// fhe_control_system: encrypted control loop, adapter and remote controller.
//
// The plant-side adapter (fhe_adapter) generates the keys, encrypts the
// controller gains once and the signals every step; the remote controller
// (fhe_controller) evaluates the observer and state feedback on the
// ciphers and returns E(x+), E(u+); the adapter decrypts, shifts and drives
// the plant input. Two cipher_link_if instances stand for the link between
// the two boards (downlink adapter -> controller, uplink back).
// The plant itself is outside: its output y and input u are ports.
//
// Timing at the default sizes (ELL = 64, n = 7, so N = 512 rows of 512
// bits per cipher): key generation about 3.2k cycles; each cipher sent takes
// N cycles; the controller's 48 products take about N*(N+5) cycles each,
// roughly 12.9M cycles per control step in all.
module fhe_control_system
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
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [63:0]                 seed,
  input  logic                        gain_we,
  input  logic [$clog2(NG)-1:0]       gain_addr,
  input  logic [P_ELL-1:0]            gain_wdata,
  input  logic                        start,
  input  logic                        sample,
  input  logic [P_NU-1:0][QW-1:0]     y_in,
  output logic                        ready_for_sample,
  output logic [P_GAMMA-1:0][QW-1:0]  u_out,
  output logic                        u_valid,
  output logic [P_RHO-1:0][P_ELL-1:0] xhat_out,
  output logic                        keys_ready,
  output logic                        gains_loaded,
  output logic                        step_done,
  output logic [31:0]                 n_enc,
  output logic [31:0]                 n_dec,
  output logic [31:0]                 n_mul,
  output logic [31:0]                 n_add,
  output logic                        down_valid,
  output logic                        down_ready,
  output logic                        up_valid,
  output logic                        up_ready
);

  cipher_link_if #(.WIDTH(W)) down (.clk(clk), .rst_n(rst_n));
  cipher_link_if #(.WIDTH(W)) up   (.clk(clk), .rst_n(rst_n));

  fhe_adapter #(
    .P_ELL(P_ELL), .P_N(P_N), .P_M(P_M), .P_E_BITS(P_E_BITS), .P_MQ(P_MQ),
    .P_NQ(P_NQ), .P_RHO(P_RHO), .P_GAMMA(P_GAMMA), .P_NU(P_NU)
  ) u_adapter (
    .clk              (clk),
    .rst_n            (rst_n),
    .seed             (seed),
    .gain_we          (gain_we),
    .gain_addr        (gain_addr),
    .gain_wdata       (gain_wdata),
    .start            (start),
    .sample           (sample),
    .y_in             (y_in),
    .ready_for_sample (ready_for_sample),
    .u_out            (u_out),
    .u_valid          (u_valid),
    .xhat_out         (xhat_out),
    .tx_valid         (down.valid),
    .tx_ready         (down.ready),
    .tx_row           (down.data),
    .rx_valid         (up.valid),
    .rx_ready         (up.ready),
    .rx_row           (up.data),
    .keys_ready       (keys_ready),
    .n_enc            (n_enc),
    .n_dec            (n_dec)
  );

  fhe_controller #(
    .P_ELL(P_ELL), .P_N(P_N), .P_RHO(P_RHO), .P_GAMMA(P_GAMMA), .P_NU(P_NU)
  ) u_controller (
    .clk          (clk),
    .rst_n        (rst_n),
    .rx_valid     (down.valid),
    .rx_ready     (down.ready),
    .rx_row       (down.data),
    .tx_valid     (up.valid),
    .tx_ready     (up.ready),
    .tx_row       (up.data),
    .gains_loaded (gains_loaded),
    .step_done    (step_done),
    .n_mul        (n_mul),
    .n_add        (n_add)
  );

  assign down_valid = down.valid;
  assign down_ready = down.ready;
  assign up_valid   = up.valid;
  assign up_ready   = up.ready;

endmodule
