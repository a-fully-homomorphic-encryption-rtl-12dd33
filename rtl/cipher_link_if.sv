// cipher_link_if: one direction of the cipher link between the two units.
//
// Carries reduced-cipher rows, one row of (N_LWE+1)*ELL bits per transfer,
// with a ready/valid handshake: a row moves in a cycle where both `valid` and
// `ready` are high. The physical link between the two boards is not
// specified by the paper; this interface stands in for it as ideal wires.
// The assertions state the handshake rules: once raised, `valid` stays high
// and `data` stays stable until the row is taken.
interface cipher_link_if #(
  parameter int unsigned WIDTH = 512
) (
  input logic clk,
  input logic rst_n
);
  logic             valid;
  logic             ready;
  logic [WIDTH-1:0] data;

  modport src (output valid, output data, input ready);
  modport dst (input valid, input data, output ready);

  a_valid_held: assert property (@(posedge clk) disable iff (!rst_n)
      (valid && !ready) |=> valid);
  a_data_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (valid && !ready) |=> $stable(data));
endinterface
