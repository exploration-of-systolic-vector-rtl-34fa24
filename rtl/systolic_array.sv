// systolic_array: weight-stationary systolic array processor of an SV cluster.
//
// Runs one GEMM task C[m x n] = A[m x k] * W[k x n] (signed 8-bit A and W,
// 32-bit C) on a ROWS x COLS grid of PEs, with n <= COLS and any k that fits
// the buffers. The controller goes through these phases:
//   LOAD_W  read the k x n weights from shared memory into the weight buffer
//           (column c of W goes to bank c).
//   LOAD_A  read the m x k inputs into the input buffer (element A[i][kk] goes
//           to bank kk % ROWS, row (kk / ROWS) * m + i).
//   PRE     shift the first ROWS rows of W (chunk 0) into the PEs' loading
//           weight registers, then swap them active.
//   COMP    for each chunk of ROWS rows of W: stream the m input vectors in
//           from the left, row r delayed by r cycles; column c of the array
//           delivers the dot product of input row i at cycle i + ROWS + c,
//           which the accumulation unit of column c writes (first chunk) or
//           adds (later chunks) into output-buffer row i. During the first
//           ROWS cycles of a chunk the next chunk's weights are shifted into
//           the second weight register of every PE, so a chunk change costs
//           only the swap.
//   STORE   write the m x n results to shared memory, row pitch ld words.
// Interface: task_t in with start (taken when busy is low), done pulses for
// one cycle at the end; one shared-memory master port (mem_req_t/mem_rsp_t,
// one 32-bit word per grant, read data one cycle after the grant).
// Timing: k*n + m*k read grants, ROWS + 1 preload cycles, ceil(k/ROWS) *
// (m + ROWS + COLS + 1) compute cycles, m*n write grants, plus one cycle per
// phase change.
//
// From the paper: controller, PE array, input/weight/output buffers with one
// bank per array row/column, weight-stationary mapping (row of the weight
// matrix of a layer on a PE column), inputs fed from the left with one cycle of
// delay per row, partial sums accumulated downward, accumulation units that add
// partial sums over several passes, double-buffered PE weights. The buffer
// sizes follow the 16x16 implementation (16 x 2 KB input and weight banks,
// 16 x 4 KB output banks). This design's own: the phase sequence, the byte-wise
// loads, the element layout in the buffers, and that the input and output
// buffers are not double-buffered (loads, compute and store run one after the
// other within a task).
module systolic_array
  import hsv_pkg::*;
#(
  parameter int unsigned ROWS       = 64,
  parameter int unsigned COLS       = 64,
  parameter int unsigned IBUF_DEPTH = 2048,  // bytes per input-buffer bank
  parameter int unsigned WBUF_DEPTH = 2048,  // bytes per weight-buffer bank
  parameter int unsigned OBUF_DEPTH = 1024   // 32-bit words per output-buffer bank
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  task_t    tsk,
  output logic     busy,
  output logic     done,
  output mem_req_t mreq,
  input  mem_rsp_t mrsp
);
  localparam int unsigned IAW = $clog2(IBUF_DEPTH);
  localparam int unsigned WAW = $clog2(WBUF_DEPTH);
  localparam int unsigned OAW = $clog2(OBUF_DEPTH);

  typedef enum logic [2:0] {S_IDLE, S_LOAD_W, S_LOAD_A, S_PRE, S_COMP, S_STORE, S_DONE} state_e;
  state_e st;

  task_t t;
  logic signed [7:0]  wbuf [COLS][WBUF_DEPTH];
  logic signed [7:0]  ibuf [ROWS][IBUF_DEPTH];
  logic signed [31:0] obuf [COLS][OBUF_DEPTH];

  // Phase counters
  logic [15:0] ci, cj;          // outer / inner loop index of loads and stores
  logic        issue_done;      // all requests of the current load/store issued
  logic [15:0] ch, nch;         // current chunk, number of chunks
  logic [15:0] cyc;             // cycle within PRE / COMP
  logic        pend_v;          // a read grant is outstanding
  logic [15:0] pend_i, pend_j;
  logic [1:0]  pend_b;

  // PE grid wiring
  logic signed [7:0]  xh  [ROWS][COLS+1];
  logic               xvh [ROWS][COLS+1];
  logic signed [31:0] psv [ROWS+1][COLS];
  logic signed [7:0]  wv  [ROWS+1][COLS];
  logic               w_shift, w_swap, pe_en;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe u_pe (
        .clk, .rst_n, .en(pe_en),
        .x_in(xh[r][c]), .xv_in(xvh[r][c]), .ps_in(psv[r][c]),
        .w_in(wv[r][c]), .w_shift, .w_swap,
        .x_out(xh[r][c+1]), .xv_out(xvh[r][c+1]), .ps_out(psv[r+1][c]),
        .w_out(wv[r+1][c])
      );
    end
  end

  // Weights entering the top of each column during a preload: the chunk being
  // loaded is ch (PRE) or ch+1 (COMP); after ROWS shifts row r holds W[row r].
  logic [15:0] ld_chunk;
  assign ld_chunk = (st == S_PRE) ? ch : ch + 16'd1;
  for (genvar c = 0; c < COLS; c++) begin : g_wtop
    logic [31:0] wrow;
    assign wrow = 32'(ld_chunk) * ROWS + (ROWS - 1) - 32'(cyc);
    assign wv[0][c]  = (c < int'(t.n) && wrow < 32'(t.k)) ? wbuf[c][WAW'(wrow)] : '0;
    assign psv[0][c] = '0;
  end

  // Inputs entering the left of each row during COMP: A[cyc - r][ch*ROWS + r]
  for (genvar r = 0; r < ROWS; r++) begin : g_xleft
    logic [31:0] ii, kk;
    assign ii = 32'(cyc) - r;
    assign kk = 32'(ch) * ROWS + r;
    assign xvh[r][0] = (st == S_COMP) && (32'(cyc) >= r) && (ii < 32'(t.m)) && (kk < 32'(t.k));
    assign xh[r][0]  = xvh[r][0] ? ibuf[r][IAW'(32'(ch) * t.m + ii)] : '0;
  end

  assign pe_en   = (st == S_COMP);
  assign w_shift = ((st == S_PRE) && cyc < 16'(ROWS)) ||
                   ((st == S_COMP) && cyc < 16'(ROWS) && (ch + 16'd1 < nch));
  assign w_swap  = ((st == S_PRE) && cyc == 16'(ROWS)) ||
                   ((st == S_COMP) && cyc == 16'(t.m + ROWS + COLS) && (ch + 16'd1 < nch));

  // Memory requests
  always_comb begin
    mreq = '0;
    unique case (st)
      S_LOAD_W: if (!issue_done) begin
        mreq.req  = 1'b1;
        mreq.addr = t.addr_b + 32'(ci) * t.ld + 32'(cj);
      end
      S_LOAD_A: if (!issue_done) begin
        mreq.req  = 1'b1;
        mreq.addr = t.addr_a + 32'(ci) * t.k + 32'(cj);
      end
      S_STORE: if (!issue_done) begin
        mreq.req   = 1'b1;
        mreq.we    = 1'b1;
        mreq.be    = 4'hF;
        mreq.addr  = t.addr_c + ((32'(ci) * t.ld + 32'(cj)) << 2);
        mreq.wdata = obuf[cj][OAW'(ci)];
      end
      default: ;
    endcase
  end

  // Loop bounds of the current load/store: (ci over outer, cj over inner)
  logic [15:0] outer_n, inner_n;
  always_comb begin
    unique case (st)
      S_LOAD_W: begin outer_n = t.k; inner_n = t.n; end
      S_LOAD_A: begin outer_n = t.m; inner_n = t.k; end
      default:  begin outer_n = t.m; inner_n = t.n; end
    endcase
  end

  logic last_issue;
  assign last_issue = (ci == outer_n - 1) && (cj == inner_n - 1);

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; ci <= '0; cj <= '0; issue_done <= 1'b0;
      ch <= '0; nch <= '0; cyc <= '0; pend_v <= 1'b0; pend_i <= '0; pend_j <= '0;
      pend_b <= '0; t <= '0;
    end else begin
      done <= 1'b0;
      // read returns
      pend_v <= 1'b0;
      if (pend_v && mrsp.rvalid) begin
        if (st == S_LOAD_W) wbuf[pend_j][WAW'(pend_i)] <= mrsp.rdata[8*pend_b +: 8];
        else                ibuf[pend_i % ROWS][IAW'((pend_i / ROWS) * t.m + pend_j)] <= mrsp.rdata[8*pend_b +: 8];
      end
      // request issue
      if (mreq.req && mrsp.gnt) begin
        if (!mreq.we) begin
          pend_v <= 1'b1;
          pend_b <= mreq.addr[1:0];
          // buffer coordinates: LOAD_W (row kk=ci, col cj); LOAD_A (k index cj, row ci)
          pend_i <= (st == S_LOAD_W) ? ci : cj;
          pend_j <= (st == S_LOAD_W) ? cj : ci;
        end
        if (cj == inner_n - 1) begin cj <= '0; ci <= ci + 1; end
        else cj <= cj + 1;
        if (last_issue) issue_done <= 1'b1;
      end

      unique case (st)
        S_IDLE: if (start) begin
          t <= tsk; ci <= '0; cj <= '0; issue_done <= 1'b0;
          nch <= (tsk.k + 16'(ROWS) - 1) / 16'(ROWS);
          st <= S_LOAD_W;
        end
        S_LOAD_W: if (issue_done && !pend_v) begin
          ci <= '0; cj <= '0; issue_done <= 1'b0; st <= S_LOAD_A;
        end
        S_LOAD_A: if (issue_done && !pend_v) begin
          ch <= '0; cyc <= '0; st <= S_PRE;
        end
        S_PRE: begin
          cyc <= cyc + 1;
          if (cyc == 16'(ROWS)) begin cyc <= '0; st <= S_COMP; end
        end
        S_COMP: begin
          cyc <= cyc + 1;
          // accumulation units: column c delivers input row i at cycle i + ROWS + c
          for (int c = 0; c < COLS; c++) begin
            automatic int ii = int'(cyc) - int'(ROWS) - c;
            if (ii >= 0 && ii < int'(t.m) && c < int'(t.n))
              obuf[c][OAW'(ii)] <= (ch == 0) ? psv[ROWS][c] : obuf[c][OAW'(ii)] + psv[ROWS][c];
          end
          if (cyc == 16'(t.m + ROWS + COLS)) begin
            cyc <= '0;
            if (ch + 1 == nch) begin
              ci <= '0; cj <= '0; issue_done <= 1'b0; st <= S_STORE;
            end else ch <= ch + 1;
          end
        end
        S_STORE: if (issue_done) st <= S_DONE;
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
