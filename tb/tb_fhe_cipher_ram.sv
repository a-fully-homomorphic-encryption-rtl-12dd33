// tb_fhe_cipher_ram: random writes and reads against a software copy, with
// the one-cycle read latency and read-old-data on a same-address write.
module tb_fhe_cipher_ram;
  localparam int W = 512, D = 1024;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [$clog2(D)-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  fhe_cipher_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [W-1:0] rnd_word();
    logic [W-1:0] w;
    for (int i = 0; i < W / 32; i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = a; wr_data = rnd_word(); model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    // mixed traffic
    for (int i = 0; i < 5000; i++) begin
      logic [W-1:0] exp;
      @(negedge clk);
      rd_en = 1; rd_addr = $urandom % D;
      wr_en = $urandom % 2; wr_addr = ($urandom % 4 == 0) ? rd_addr : $urandom % D;
      wr_data = rnd_word();
      exp = model[rd_addr];
      @(posedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      #1;
      checks++;
      if (rd_data !== exp) begin failures++; $display("FAIL addr %0d", rd_addr); end
    end
    // rd_en low holds the output
    @(negedge clk); wr_en = 0; rd_en = 0;
    begin
      logic [W-1:0] held;
      held = rd_data;
      repeat (3) @(negedge clk);
      checks++;
      if (rd_data !== held) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
