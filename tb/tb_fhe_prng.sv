// tb_fhe_prng: checks the xorshift64 sequence against a software model,
// seed loading, the zero-seed rule and that `next` low holds the word.
module tb_fhe_prng;
  logic clk = 0, rst_n = 0, seed_load = 0, next = 0;
  logic [63:0] seed = '0, rnd;
  int checks = 0, failures = 0;

  fhe_prng dut (.*);
  always #5 clk = ~clk;

  function automatic logic [63:0] model(logic [63:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 7); x = x ^ (x << 17);
    return x;
  endfunction

  task automatic chk(logic [63:0] exp, string what);
    checks++;
    if (rnd !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, rnd, exp);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] m;
    @(negedge clk); rst_n = 1;
    m = 64'h9E37_79B9_7F4A_7C15;
    chk(m, "reset seed");
    next = 1;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk); m = model(m); chk(m, "sequence");
    end
    next = 0;
    repeat (3) @(negedge clk);
    chk(m, "hold");
    seed = 64'h0123_4567_89AB_CDEF; seed_load = 1;
    @(negedge clk); seed_load = 0; m = seed; chk(m, "seed load");
    next = 1;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); m = model(m); chk(m, "seeded sequence");
    end
    next = 0; seed = 0; seed_load = 1;
    @(negedge clk); seed_load = 0; chk(64'h9E37_79B9_7F4A_7C15, "zero seed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
