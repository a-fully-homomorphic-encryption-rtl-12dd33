// tb_fhe_ctrl_seq: the sequencer at the default controller size (5 states,
// 1 input, 2 outputs). A model ALU acknowledges each operation after a
// random delay; the issued (op, dst, a, b) list is compared with the list
// written out from x+ = W v, u+ = (K W) v and the slot map. Run twice.
module tb_fhe_ctrl_seq;
  import fhe_pkg::*;
  localparam int R = RHO, G = GAMMA, U = NU, NV = R + G + U;
  localparam int NG = (R + G) * NV, NS = NG + NV + R + G + 1, SW = $clog2(NS);
  localparam int XP = NG + NV, T = NG + NV + R + G;

  logic clk = 0, rst_n = 0, start = 0, busy, done, alu_start, alu_done = 0;
  hom_op_e alu_op;
  logic [SW-1:0] alu_dst, alu_a, alu_b;
  logic [31:0] n_mul, n_add;
  int checks = 0, failures = 0;

  fhe_ctrl_seq dut (.*);
  always #5 clk = ~clk;

  typedef struct { hom_op_e op; int d, a, b; } ins_t;
  ins_t expq [$];
  ins_t gotq [$];

  // model ALU
  initial begin
    forever begin
      @(posedge clk);
      if (alu_start) begin
        automatic ins_t x;
        x.op = alu_op; x.d = alu_dst; x.a = alu_a; x.b = alu_b;
        gotq.push_back(x);
        repeat ($urandom % 5) @(posedge clk);
        @(negedge clk); alu_done = 1;
        @(negedge clk); alu_done = 0;
      end
    end
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic ins_t mk(hom_op_e o, int d, int a, int b);
    ins_t x; x.op = o; x.d = d; x.a = a; x.b = b; return x;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < R + G; i++)
      for (int t = 0; t < NV; t++)
        if (t == 0) expq.push_back(mk(OP_MUL, XP + i, i * NV, NG));
        else begin
          expq.push_back(mk(OP_MUL, T, i * NV + t, NG + t));
          expq.push_back(mk(OP_ADD, XP + i, XP + i, T));
        end
    @(negedge clk); rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      gotq.delete();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      chk(gotq.size() == expq.size(), $sformatf("count %0d exp %0d", gotq.size(), expq.size()));
      for (int k = 0; k < expq.size() && k < gotq.size(); k++)
        chk(gotq[k] == expq[k], $sformatf("op %0d: got %s %0d %0d %0d exp %s %0d %0d %0d", k,
            gotq[k].op.name(), gotq[k].d, gotq[k].a, gotq[k].b, expq[k].op.name(), expq[k].d, expq[k].a, expq[k].b));
      repeat (3) @(negedge clk);
      chk(!busy, "idle");
    end
    chk(n_mul == 2 * (R + G) * NV, "n_mul");
    chk(n_add == 2 * (R + G) * (NV - 1), "n_add");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
