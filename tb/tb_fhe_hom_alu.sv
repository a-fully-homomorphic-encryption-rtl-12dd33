// tb_fhe_hom_alu: the ALU with a fhe_cipher_ram at reduced sizes (ELL = 16,
// n = 1, so 32-row ciphers). Slots are filled with random rows; every
// operation is run on random slots and compared with the reference model
// (which multiplies out the full bit matrices); cycle counts are checked.
// A product of two real ciphers is also decrypted to mu1*mu2.
module tb_fhe_hom_alu;
  import fhe_pkg::*;
  import tb_fhe_ref_pkg::*;
  localparam int L = 16, N = 1, NR = L * (N + 1), SL = 8, W = (N + 1) * L;
  localparam int AW = $clog2(SL * NR), SW = $clog2(SL);

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  hom_op_e op = OP_ADD;
  logic [SW-1:0] dst = '0, src_a = '0, src_b = '0;
  logic [L-1:0] alpha = '0;
  logic rd_en, wr_en, a_wr_en, tb_we = 0;
  logic [AW-1:0] rd_addr, wr_addr, a_wr_addr, tb_waddr = '0;
  logic [W-1:0] rd_data, wr_data, a_wr_data, tb_wdata = '0;
  int checks = 0, failures = 0;

  fhe_hom_alu #(.P_ELL(L), .P_N(N), .P_SLOTS(SL)) dut (
    .clk, .rst_n, .start, .op, .dst, .src_a, .src_b, .alpha, .busy, .done,
    .rd_en, .rd_addr, .rd_data, .wr_en(a_wr_en), .wr_addr(a_wr_addr), .wr_data(a_wr_data));
  assign wr_en   = tb_we | a_wr_en;
  assign wr_addr = tb_we ? tb_waddr : a_wr_addr;
  assign wr_data = tb_we ? tb_wdata : a_wr_data;
  fhe_cipher_ram #(.WIDTH(W), .DEPTH(SL * NR)) u_ram (.*);
  always #5 clk = ~clk;

  cipher_t slot [SL];
  cipher_t expc;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic load_slot(int s);
    for (int i = 0; i < NR; i++) begin
      @(negedge clk);
      tb_we = 1; tb_waddr = AW'(s * NR + i);
      for (int j = 0; j <= N; j++) tb_wdata[j*L +: L] = slot[s][i][j][L-1:0];
    end
    @(negedge clk); tb_we = 0;
  endtask

  // read back a slot through the ALU read port is not possible; instead the
  // result rows are captured as the ALU writes them
  cipher_t got;
  always @(posedge clk) if (a_wr_en) begin
    for (int j = 0; j <= N; j++) got[a_wr_addr % NR][j] = word_t'(a_wr_data[j*L +: L]);
  end

  task automatic run(hom_op_e o, int d, int a, int b, word_t al, int exp_cycles);
    int cycles;
    @(negedge clk);
    op = o; dst = SW'(d); src_a = SW'(a); src_b = SW'(b); alpha = al[L-1:0]; start = 1;
    @(negedge clk); start = 0; cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    unique case (o)
      OP_ADD:  ref_add(expc, slot[a], slot[b], L, N);
      OP_MUL:  ref_mul(expc, slot[a], slot[b], L, N);
      OP_SADD: ref_sadd(expc, slot[a], al, L, N);
      default: ref_smul(expc, slot[a], al, L, N);
    endcase
    begin
      automatic int bad = 0;
      for (int i = 0; i < NR; i++) for (int j = 0; j <= N; j++) if (got[i][j] != expc[i][j]) bad++;
      chk(bad == 0, $sformatf("op %s: %0d wrong words", o.name(), bad));
    end
    chk(cycles == exp_cycles, $sformatf("op %s cycles %0d exp %0d", o.name(), cycles, exp_cycles));
    slot[d] = expc;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < SL; s++)
      for (int i = 0; i < MAXR; i++) for (int j = 0; j < MAXC; j++)
        slot[s][i][j] = (i < NR && j <= N) ? word_t'($urandom % 65536) : 0;
    @(negedge clk); rst_n = 1;
    for (int s = 0; s < 6; s++) load_slot(s);
    // Per output row: ADD 2+3, SADD 1+3, SMUL L+3, MUL N+4 cycles; +1 done.
    for (int k = 0; k < 4; k++) begin
      run(OP_ADD,  6, k % 6, (k + 1) % 6, 0, NR * 6 + 1);
      run(OP_SADD, 7, (k + 2) % 6, 0, word_t'($urandom), NR * 5 + 1);
      run(OP_SMUL, 6, 7, 0, word_t'($urandom), NR * (L + 4) + 1);
      run(OP_MUL,  7, k % 6, 6, 0, NR * (NR + 5) + 1);
      run(OP_ADD,  6, 6, 6, 0, NR * 6 + 1);   // in place: dst = a = b
    end
    // Products of real ciphers decrypt to the product of the messages.
    begin
      cipher_t amod, c1, c2;
      word_t t [MAXC];
      word_t rb [MAXR];
      word_t m1, m2;
      for (int j = 0; j < MAXC; j++) t[j] = 0;
      t[0] = $urandom % 65536;
      for (int r = 0; r < 2; r++) begin
        amod[r][1] = $urandom % 65536;
        amod[r][0] = msk(amod[r][1] * t[0] + word_t'(r), L);   // e = 0, 1
      end
      m1 = 3; m2 = 5;
      for (int i = 0; i < NR; i++) rb[i] = $urandom % 4;
      ref_encrypt(c1, m1, amod, rb, L, N, 2);
      for (int i = 0; i < NR; i++) rb[i] = $urandom % 4;
      ref_encrypt(c2, m2, amod, rb, L, N, 2);
      slot[0] = c1; slot[1] = c2;
      load_slot(0); load_slot(1);
      run(OP_MUL, 2, 0, 1, 0, NR * (NR + 5) + 1);
      chk(ref_decrypt(slot[2], t, L, N) == 15, "decrypt product = 15");
      run(OP_ADD, 3, 0, 1, 0, NR * 6 + 1);
      chk(ref_decrypt(slot[3], t, L, N) == 8, "decrypt sum = 8");
      run(OP_SMUL, 4, 1, 0, 7, NR * (L + 4) + 1);
      chk(ref_decrypt(slot[4], t, L, N) == 35, "decrypt scalar product = 35");
      run(OP_SADD, 5, 0, 0, 9, NR * 5 + 1);
      chk(ref_decrypt(slot[5], t, L, N) == 12, "decrypt scalar sum = 12");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
