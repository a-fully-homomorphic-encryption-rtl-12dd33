// fhe_cipher_ram: cipher storage of the encrypted controller.
//
// A simple dual-port memory: one write port and one read port, both
// synchronous. Each word is one row of a reduced cipher (N_LWE+1 words of
// ELL bits, 512 bits by default); a cipher occupies N = ELL*(N_LWE+1)
// consecutive words. The paper counts memory use per operation but does not
// describe the memory organisation; this row-per-word layout is this
// design's choice, made so that the homomorphic ALU reads one full cipher row
// per cycle. Contents are not reset.
//
// Timing: `rd_data` is the word at `rd_addr` one cycle after `rd_en`; a read
// of the address being written returns the old word.
module fhe_cipher_ram #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 32256
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
