// tb_fhe_mpdec: feeds v_k = mu*2^k + e_k (mod 2^64) with random mu and random
// noise |e_k| < 2^61, and checks that mu is recovered in ELL cycles.
module tb_fhe_mpdec;
  import fhe_pkg::*;
  import tb_fhe_ref_pkg::*;
  localparam int L = ELL;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [L-1:0][L-1:0] v;
  logic [L-1:0] mu;
  int checks = 0, failures = 0;

  fhe_mpdec dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      word_t m, e;
      int cycles;
      m = {$urandom, $urandom};
      if (trial == 0) m = 0;
      if (trial == 1) m = '1;
      for (int k = 0; k < L; k++) begin
        // noise up to +-2^(61 - trial % 40)
        e = {$urandom, $urandom} >> (3 + trial % 40);
        if ($urandom % 2) e = -e;
        v[k] = (m << k) + e;
      end
      start = 1; @(negedge clk); start = 0; cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (mu != m) begin failures++; $display("FAIL mu %h exp %h", mu, m); end
      checks++;
      if (cycles != L + 1) begin failures++; $display("FAIL latency %0d", cycles); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
