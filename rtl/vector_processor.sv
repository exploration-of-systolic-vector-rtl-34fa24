// vector_processor: in-order SIMD vector processor of an SV cluster.
//
// LANES identical lanes (vector_lane) are driven by one instruction stream.
// A task works on a tile of at most LANES columns: lane j handles column j of
// every row. The processor goes through these phases:
//   LOAD_A  read operand A from shared memory through the memory interface
//           into the input buffer (element (i,j) -> lane j, row i), or, for
//           GEMM, the signed bytes of A into the broadcast buffer.
//   LOAD_B  ADD: operand B into input-buffer rows m..2m-1; GEMM: the signed
//           bytes of W (row kk, column j) into lane j, row kk; LUT: the
//           segment table (NSEG pairs of weight, bias words) into every lane.
//   EXEC    the microcode generator (vp_ucode_gen) produces the instructions
//           and the vector lane controller issues them, one per cycle. The
//           controller detects data hazards on the multi-cycle special
//           function unit: an instruction that touches the register the SFU
//           is still producing, or a second SFU instruction, is held, and the
//           hold goes back to the generator. stall is high in such a cycle.
//   STORE   write the output buffer (m rows, one for MAXPOOL) back to shared
//           memory, element (i,j) at addr_c + 4*(i*ld + j).
// Element formats: 32-bit words (Q16.16 for LUT/EXP/RECIP/SOFTMAX) for vector
// operations, signed bytes in and 32-bit words out for GEMM.
// Interface: task_t with start (taken when busy is low), done pulses at the
// end; one shared-memory master port, one word per grant, read data one
// cycle after the grant.
//
// From the paper: microcode generator, vector lane controller with hazard
// detection and hold signal, multiple lanes, input/output buffers reached by
// DMA, the 16-lane implementation with 16 x 2 KB input and output buffers
// (512 words per lane), the operations (pooling, nonlinear activation by LUT,
// element-wise, softmax, matrix multiplication by program). This design's
// own: the phase sequence, the data layout, the broadcast buffer for GEMM,
// and that the input/output buffers are not double-buffered (loading,
// execution and storing of a task run one after the other).
module vector_processor
  import hsv_pkg::*;
#(
  parameter int unsigned LANES      = 64,
  parameter int unsigned BUF_DEPTH  = 512,   // 32-bit words per lane, input and output buffer
  parameter int unsigned ABUF_DEPTH = 2048,  // broadcast buffer words
  parameter int unsigned NSEG       = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  task_t    tsk,
  output logic     busy,
  output logic     done,
  output logic     stall,
  output mem_req_t mreq,
  input  mem_rsp_t mrsp
);
  localparam int unsigned BAW = $clog2(BUF_DEPTH);
  localparam int unsigned AAW = $clog2(ABUF_DEPTH);
  localparam int unsigned LW  = $clog2(NSEG);

  typedef enum logic [2:0] {S_IDLE, S_LOAD_A, S_LOAD_B, S_EXEC, S_DRAIN, S_STORE, S_DONE} state_e;
  state_e st;
  task_t  t;

  logic [31:0] ibuf [LANES][BUF_DEPTH];
  logic [31:0] obuf [LANES][BUF_DEPTH];
  logic [31:0] abuf [ABUF_DEPTH];

  logic [15:0] ci, cj;
  logic        issue_done;
  logic        pend_v;
  logic [15:0] pend_i, pend_j;
  logic [1:0]  pend_b;
  logic [31:0] lut_w_hold;
  logic [3:0]  drain;
  logic        skip_b;   // the task has no second operand to load

  // ---------------- microcode generator and lane controller ----------------
  logic        g_busy, g_iv, issue;
  vinstr_t     g_ins;
  logic [31:0] g_bidx;

  vp_ucode_gen u_gen (
    .clk, .rst_n, .start(st == S_LOAD_B && ((issue_done && !pend_v) || skip_b)),
    .tsk(t), .adv(issue), .busy(g_busy), .iv(g_iv), .ins(g_ins), .bidx(g_bidx)
  );

  logic       l_sfu_busy [LANES];
  logic [3:0] l_sfu_rd   [LANES];
  logic       last_sfu;
  logic [3:0] last_rd;

  function automatic logic is_sfu(vop_e o);
    return o == V_EXP || o == V_RCP;
  endfunction

  logic pend_sfu;
  logic [3:0] pend_rd;
  logic hazard;
  always_comb begin
    pend_sfu = last_sfu || l_sfu_busy[0];
    pend_rd  = last_sfu ? last_rd : l_sfu_rd[0];
    hazard   = pend_sfu && (is_sfu(g_ins.op) || g_ins.rs1 == pend_rd ||
                            g_ins.rs2 == pend_rd || g_ins.rd == pend_rd);
  end
  assign issue = (st == S_EXEC) && g_iv && !hazard;
  assign stall = (st == S_EXEC) && g_iv && hazard;

  // ---------------- lanes ----------------
  logic        lut_we;
  logic [LW-1:0] lut_idx;
  logic [31:0] bcast;
  assign bcast = abuf[AAW'(g_bidx)];

  logic        l_st_v   [LANES];
  logic [15:0] l_st_row [LANES];
  logic [31:0] l_st_d   [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    vector_lane #(.NSEG(NSEG)) u_lane (
      .clk, .rst_n,
      .iv(issue), .ins(g_ins),
      .ld_data(ibuf[l][BAW'(g_ins.imm)]),
      .bcast,
      .lut_we, .lut_idx, .lut_w(lut_w_hold), .lut_b(mrsp.rdata),
      .st_valid(l_st_v[l]), .st_row(l_st_row[l]), .st_data(l_st_d[l]),
      .sfu_busy(l_sfu_busy[l]), .sfu_rd(l_sfu_rd[l])
    );
  end

  // ---------------- memory interface ----------------
  assign skip_b = !(t.op == OP_ADD || t.op == OP_GEMM || t.op == OP_LUT);

  logic [15:0] outer_n, inner_n;
  always_comb begin
    outer_n = t.m;
    inner_n = t.n;
    unique case (st)
      S_LOAD_A: if (t.op == OP_GEMM) inner_n = t.k;
      S_LOAD_B: if (t.op == OP_GEMM) outer_n = t.k;
                else if (t.op == OP_LUT) begin outer_n = 16'(NSEG); inner_n = 16'd2; end
      S_STORE:  if (t.op == OP_MAXPOOL) outer_n = 16'd1;
      default: ;
    endcase
  end

  always_comb begin
    mreq = '0;
    unique case (st)
      S_LOAD_A: if (!issue_done) begin
        mreq.req  = 1'b1;
        mreq.addr = (t.op == OP_GEMM) ? t.addr_a + 32'(ci) * t.k + 32'(cj)
                                      : t.addr_a + ((32'(ci) * t.ld + 32'(cj)) << 2);
      end
      S_LOAD_B: if (!issue_done && !skip_b) begin
        mreq.req  = 1'b1;
        mreq.addr = (t.op == OP_GEMM) ? t.addr_b + 32'(ci) * t.ld + 32'(cj) :
                    (t.op == OP_LUT)  ? t.addr_b + ((32'(ci) * 2 + 32'(cj)) << 2)
                                      : t.addr_b + ((32'(ci) * t.ld + 32'(cj)) << 2);
      end
      S_STORE: if (!issue_done) begin
        mreq.req   = 1'b1;
        mreq.we    = 1'b1;
        mreq.be    = 4'hF;
        mreq.addr  = t.addr_c + ((32'(ci) * t.ld + 32'(cj)) << 2);
        mreq.wdata = obuf[cj][BAW'(ci)];
      end
      default: ;
    endcase
  end

  logic last_issue;
  assign last_issue = (ci == outer_n - 1) && (cj == inner_n - 1);
  assign lut_we  = (st == S_LOAD_B) && (t.op == OP_LUT) && pend_v && mrsp.rvalid && pend_j == 16'd1;
  assign lut_idx = LW'(pend_i);
  assign busy    = (st != S_IDLE);

  logic lanes_quiet;
  always_comb begin
    lanes_quiet = 1'b1;
    for (int l = 0; l < int'(LANES); l++) if (l_sfu_busy[l]) lanes_quiet = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; t <= '0; done <= 1'b0; ci <= '0; cj <= '0; issue_done <= 1'b0;
      pend_v <= 1'b0; pend_i <= '0; pend_j <= '0; pend_b <= '0; lut_w_hold <= '0;
      last_sfu <= 1'b0; last_rd <= '0; drain <= '0;
    end else begin
      done     <= 1'b0;
      last_sfu <= issue && is_sfu(g_ins.op);
      last_rd  <= g_ins.rd;

      // read returns
      pend_v <= 1'b0;
      if (pend_v && mrsp.rvalid) begin
        automatic logic [31:0] sb = 32'(signed'(mrsp.rdata[8*pend_b +: 8]));
        if (st == S_LOAD_A) begin
          if (t.op == OP_GEMM) abuf[AAW'(32'(pend_i) * t.k + 32'(pend_j))] <= sb;
          else                 ibuf[pend_j][BAW'(pend_i)] <= mrsp.rdata;
        end else begin
          if (t.op == OP_GEMM)     ibuf[pend_j][BAW'(pend_i)] <= sb;
          else if (t.op == OP_ADD) ibuf[pend_j][BAW'(32'(t.m) + 32'(pend_i))] <= mrsp.rdata;
          else if (pend_j == 16'd0) lut_w_hold <= mrsp.rdata;
        end
      end
      // lane stores into the output buffer
      for (int l = 0; l < int'(LANES); l++)
        if (l_st_v[l]) obuf[l][BAW'(l_st_row[l])] <= l_st_d[l];

      if (mreq.req && mrsp.gnt) begin
        if (!mreq.we) begin
          pend_v <= 1'b1;
          pend_b <= mreq.addr[1:0];
          pend_i <= ci;
          pend_j <= cj;
        end
        if (cj == inner_n - 1) begin cj <= '0; ci <= ci + 1; end
        else cj <= cj + 1;
        if (last_issue) issue_done <= 1'b1;
      end

      unique case (st)
        S_IDLE: if (start) begin
          t <= tsk; ci <= '0; cj <= '0; issue_done <= 1'b0; st <= S_LOAD_A;
        end
        S_LOAD_A: if (issue_done && !pend_v) begin
          ci <= '0; cj <= '0; issue_done <= 1'b0; st <= S_LOAD_B;
        end
        S_LOAD_B: if ((issue_done && !pend_v) || skip_b) st <= S_EXEC;
        S_EXEC: if (!g_busy) begin drain <= '0; st <= S_DRAIN; end
        S_DRAIN: begin
          drain <= drain + 1;
          if (drain >= 4'd3 && lanes_quiet) begin
            ci <= '0; cj <= '0; issue_done <= 1'b0; st <= S_STORE;
          end
        end
        S_STORE: if (issue_done) st <= S_DONE;
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
