// vp_ucode_gen: microcode generator of the vector processor.
//
// Turns one layer or sub-layer task into the stream of vector-lane
// instructions that computes it, so the scheduler only sends a task
// descriptor and no program has to be fetched. A task is a number of passes;
// a pass is either one instruction or a loop over the input rows i with a
// fixed list of steps per row. Scratchpad use: r0 zero, r1/r2 operands,
// r3 running sum or maximum, r4 reciprocal, r5 product.
//   ADD      per row: LD r1,i; LD r2,m+i; ADD r3,r1,r2; ST r3,i
//   RELU     MOVI r0,0; per row: LD r1,i; MAX r2,r1,r0; ST r2,i
//   MAXPOOL  LD r3,0; per row i>=1: LD r1,i; MAX r3,r3,r1; then ST r3,0
//   LUT      per row: LD r1,i; LUT r2,r1; ST r2,i
//   EXP/RECIP per row: LD r1,i; EXP|RCP r2,r1; ST r2,i
//   SOFTMAX  MOVI r3,0; per row: LD r1,i; EXP r2,r1; ADD r3,r3,r2;
//            RCP r4,r3; per row: LD r1,i; EXP r2,r1; MULQ r5,r2,r4; ST r5,i
//   GEMM     per row: MOVI r2,0; k times (LD r1,kk; MAC r2+=r1*A[i][kk]
//            from the broadcast buffer at bidx = i*k+kk); ST r2,i
// Interface: start with the task (taken when busy is low); iv/ins/bidx hold
// the current instruction until adv is high (the lane controller issued it);
// busy drops after the last instruction is issued.
//
// From the paper: a microcode generator that receives a layer or sub-layer
// task and generates the low-level instructions for the lanes, held by the
// lane controller on a stall; softmax built from the exponent and reciprocal
// units; matrix multiplication on the vector processor by program. The
// instruction sequences themselves are this design's own.
module vp_ucode_gen
  import hsv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  task_t       tsk,
  input  logic        adv,
  output logic        busy,
  output logic        iv,
  output vinstr_t     ins,
  output logic [31:0] bidx
);
  op_e         op;
  logic [15:0] m, k;
  logic [1:0]  pass;
  logic [15:0] i;
  logic [16:0] step;

  // pass description: number of steps (0 = empty), loop over rows, first row
  function automatic logic [16:0] pass_steps(op_e o, logic [1:0] p, logic [15:0] kk);
    unique case (o)
      OP_ADD:     return (p == 1) ? 17'd4 : 17'd0;
      OP_RELU:    return (p == 0) ? 17'd1 : (p == 1) ? 17'd3 : 17'd0;
      OP_MAXPOOL: return (p == 0) ? 17'd1 : (p == 1) ? 17'd2 : (p == 2) ? 17'd1 : 17'd0;
      OP_LUT, OP_EXP, OP_RECIP: return (p == 1) ? 17'd3 : 17'd0;
      OP_SOFTMAX: return (p == 0) ? 17'd1 : (p == 1) ? 17'd3 : (p == 2) ? 17'd1 : 17'd4;
      OP_GEMM:    return (p == 1) ? 17'(2 * 32'(kk) + 2) : 17'd0;
      default:    return 17'd0;
    endcase
  endfunction

  function automatic logic pass_loops(op_e o, logic [1:0] p);
    unique case (o)
      OP_SOFTMAX: return p == 1 || p == 3;
      default:    return p == 1;
    endcase
  endfunction

  function automatic logic [15:0] pass_first(op_e o, logic [1:0] p);
    return (o == OP_MAXPOOL && p == 1) ? 16'd1 : 16'd0;
  endfunction

  function automatic vinstr_t mk(vop_e o, int rd, int rs1, int rs2, logic bc, int imm);
    vinstr_t v;
    v       = '0;
    v.op    = o;
    v.rd    = 4'(rd);
    v.rs1   = 4'(rs1);
    v.rs2   = 4'(rs2);
    v.bcast = bc;
    v.imm   = 16'(imm);
    return v;
  endfunction

  always_comb begin
    ins  = '0;
    bidx = '0;
    unique case (op)
      OP_ADD: unique case (step)
        0: ins = mk(V_LD, 1, 0, 0, 0, int'(i));
        1: ins = mk(V_LD, 2, 0, 0, 0, int'(m) + int'(i));
        2: ins = mk(V_ADD, 3, 1, 2, 0, 0);
        default: ins = mk(V_ST, 0, 3, 0, 0, int'(i));
      endcase
      OP_RELU:
        if (pass == 0) ins = mk(V_MOVI, 0, 0, 0, 0, 0);
        else unique case (step)
          0: ins = mk(V_LD, 1, 0, 0, 0, int'(i));
          1: ins = mk(V_MAX, 2, 1, 0, 0, 0);
          default: ins = mk(V_ST, 0, 2, 0, 0, int'(i));
        endcase
      OP_MAXPOOL:
        if (pass == 0) ins = mk(V_LD, 3, 0, 0, 0, 0);
        else if (pass == 2) ins = mk(V_ST, 0, 3, 0, 0, 0);
        else ins = (step == 0) ? mk(V_LD, 1, 0, 0, 0, int'(i)) : mk(V_MAX, 3, 3, 1, 0, 0);
      OP_LUT, OP_EXP, OP_RECIP: unique case (step)
        0: ins = mk(V_LD, 1, 0, 0, 0, int'(i));
        1: ins = mk(op == OP_LUT ? V_LUT : op == OP_EXP ? V_EXP : V_RCP, 2, 1, 0, 0, 0);
        default: ins = mk(V_ST, 0, 2, 0, 0, int'(i));
      endcase
      OP_SOFTMAX:
        if (pass == 0) ins = mk(V_MOVI, 3, 0, 0, 0, 0);
        else if (pass == 2) ins = mk(V_RCP, 4, 3, 0, 0, 0);
        else unique case (step)
          0: ins = mk(V_LD, 1, 0, 0, 0, int'(i));
          1: ins = mk(V_EXP, 2, 1, 0, 0, 0);
          2: ins = (pass == 1) ? mk(V_ADD, 3, 3, 2, 0, 0) : mk(V_MULQ, 5, 2, 4, 0, 0);
          default: ins = mk(V_ST, 0, 5, 0, 0, int'(i));
        endcase
      OP_GEMM:
        if (step == 0) ins = mk(V_MOVI, 2, 0, 0, 0, 0);
        else if (step == 17'(2 * 32'(k) + 1)) ins = mk(V_ST, 0, 2, 0, 0, int'(i));
        else if (step[0]) ins = mk(V_LD, 1, 0, 0, 0, int'((step - 1) >> 1));
        else begin
          ins  = mk(V_MAC, 2, 1, 0, 1, 0);
          bidx = 32'(i) * 32'(k) + 32'((step - 2) >> 1);
        end
      default: ;
    endcase
  end

  assign iv = busy;

  // first non-empty pass at or after p (3'd4 = none)
  function automatic logic [2:0] next_pass(op_e o, logic [2:0] p, logic [15:0] kk, logic [15:0] mm);
    for (int q = 0; q < 4; q++)
      if (q >= int'(p) && pass_steps(o, 2'(q), kk) != 0 &&
          !(pass_loops(o, 2'(q)) && pass_first(o, 2'(q)) >= mm))
        return 3'(q);
    return 3'd4;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; op <= OP_NOP; m <= '0; k <= '0; pass <= '0; i <= '0; step <= '0;
    end else if (!busy) begin
      if (start) begin
        automatic logic [2:0] p0 = next_pass(tsk.op, 3'd0, tsk.k, tsk.m);
        op   <= tsk.op; m <= tsk.m; k <= tsk.k;
        step <= '0;
        pass <= p0[1:0];
        i    <= pass_first(tsk.op, p0[1:0]);
        busy <= (p0 != 3'd4);
      end
    end else if (adv) begin
      if (step + 1 < pass_steps(op, pass, k)) step <= step + 1;
      else begin
        step <= '0;
        if (pass_loops(op, pass) && i + 1 < m) i <= i + 1;
        else begin
          automatic logic [2:0] pn = next_pass(op, 3'(pass) + 3'd1, k, m);
          if (pn == 3'd4) busy <= 1'b0;
          else begin
            pass <= pn[1:0];
            i    <= pass_first(op, pn[1:0]);
          end
        end
      end
    end
  end
endmodule
