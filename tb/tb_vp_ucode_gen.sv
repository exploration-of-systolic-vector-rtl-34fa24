// tb_vp_ucode_gen: self-checking test of the vector microcode generator.
// For random tasks of every operation the expected instruction list is built
// here from the documented sequences, and the instructions the generator
// issues (taken when adv is high, adv driven at random) are compared one by
// one, including the broadcast index of each MAC. Also checked: the
// instruction is held stable while adv is low, busy drops right after the
// last instruction, and a zero-row or zero-depth task issues nothing harmful.
module tb_vp_ucode_gen;
  import hsv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, adv, busy, iv;
  task_t tsk;
  vinstr_t ins;
  logic [31:0] bidx;

  vp_ucode_gen dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  vinstr_t exp_i[$];
  int      exp_b[$];

  function automatic vinstr_t mk(vop_e o, int rd, int rs1, int rs2, bit bc, int imm);
    vinstr_t v;
    v = '0; v.op = o; v.rd = 4'(rd); v.rs1 = 4'(rs1); v.rs2 = 4'(rs2); v.bcast = bc; v.imm = 16'(imm);
    return v;
  endfunction
  task automatic e(vinstr_t v, int b = 0);
    exp_i.push_back(v); exp_b.push_back(b);
  endtask

  task automatic build(op_e op, int m, int k);
    exp_i.delete(); exp_b.delete();
    case (op)
      OP_ADD: for (int i = 0; i < m; i++) begin
        e(mk(V_LD, 1, 0, 0, 0, i)); e(mk(V_LD, 2, 0, 0, 0, m + i)); e(mk(V_ADD, 3, 1, 2, 0, 0)); e(mk(V_ST, 0, 3, 0, 0, i));
      end
      OP_RELU: begin
        e(mk(V_MOVI, 0, 0, 0, 0, 0));
        for (int i = 0; i < m; i++) begin e(mk(V_LD, 1, 0, 0, 0, i)); e(mk(V_MAX, 2, 1, 0, 0, 0)); e(mk(V_ST, 0, 2, 0, 0, i)); end
      end
      OP_MAXPOOL: begin
        e(mk(V_LD, 3, 0, 0, 0, 0));
        for (int i = 1; i < m; i++) begin e(mk(V_LD, 1, 0, 0, 0, i)); e(mk(V_MAX, 3, 3, 1, 0, 0)); end
        e(mk(V_ST, 0, 3, 0, 0, 0));
      end
      OP_LUT, OP_EXP, OP_RECIP: for (int i = 0; i < m; i++) begin
        e(mk(V_LD, 1, 0, 0, 0, i));
        e(mk(op == OP_LUT ? V_LUT : op == OP_EXP ? V_EXP : V_RCP, 2, 1, 0, 0, 0));
        e(mk(V_ST, 0, 2, 0, 0, i));
      end
      OP_SOFTMAX: begin
        e(mk(V_MOVI, 3, 0, 0, 0, 0));
        for (int i = 0; i < m; i++) begin e(mk(V_LD, 1, 0, 0, 0, i)); e(mk(V_EXP, 2, 1, 0, 0, 0)); e(mk(V_ADD, 3, 3, 2, 0, 0)); end
        e(mk(V_RCP, 4, 3, 0, 0, 0));
        for (int i = 0; i < m; i++) begin
          e(mk(V_LD, 1, 0, 0, 0, i)); e(mk(V_EXP, 2, 1, 0, 0, 0)); e(mk(V_MULQ, 5, 2, 4, 0, 0)); e(mk(V_ST, 0, 5, 0, 0, i));
        end
      end
      OP_GEMM: for (int i = 0; i < m; i++) begin
        e(mk(V_MOVI, 2, 0, 0, 0, 0));
        for (int q = 0; q < k; q++) begin e(mk(V_LD, 1, 0, 0, 0, q)); e(mk(V_MAC, 2, 1, 0, 1, 0), i * k + q); end
        e(mk(V_ST, 0, 2, 0, 0, i));
      end
      default: ;
    endcase
  endtask

  task automatic run(op_e op, int m, int k);
    vinstr_t held;
    bit was_low;
    build(op, m, k);
    @(negedge clk);
    tsk = '0; tsk.op = op; tsk.m = 16'(m); tsk.k = 16'(k); tsk.n = 16'd4;
    start = 1;
    @(negedge clk); start = 0;
    was_low = 0;
    while (busy) begin
      adv = ($urandom % 3) != 0;
      #1;
      if (was_low) begin
        checks++;
        if (ins != held) begin failures++; $display("FAIL instruction changed while held"); end
      end
      if (adv) begin
        automatic vinstr_t x = exp_i.size() ? exp_i.pop_front() : '0;
        automatic int b = exp_b.size() ? exp_b.pop_front() : 0;
        checks++;
        if (!iv || ins != x || (x.op == V_MAC && bidx != 32'(b))) begin
          failures++;
          $display("FAIL op %0d: got ins %h bidx %0d, expected %h bidx %0d", op, ins, bidx, x, b);
        end
      end
      was_low = !adv; held = ins;
      @(negedge clk);
    end
    adv = 0;
    checks++;
    if (exp_i.size() != 0) begin failures++; $display("FAIL op %0d: %0d instructions missing", op, exp_i.size()); end
  endtask

  initial begin
    op_e ops[8] = '{OP_ADD, OP_RELU, OP_MAXPOOL, OP_LUT, OP_EXP, OP_RECIP, OP_SOFTMAX, OP_GEMM};
    start = 0; adv = 0; tsk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 6; r++)
      foreach (ops[o]) run(ops[o], 1 + $urandom % 6, 1 + $urandom % 5);
    run(OP_MAXPOOL, 1, 1);
    run(OP_GEMM, 3, 0);
    run(OP_ADD, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
