// tb_vector_processor: self-checking test of the vector processor.
// A 4-lane processor runs each task type (ADD, RELU, MAXPOOL, LUT, EXP,
// RECIP, SOFTMAX, GEMM) on random data in a behavioural memory that
// withholds grants at random. Results are compared with values computed
// here: exactly for the integer operations, the LUT interpolation and the
// reciprocal (within one unit of the last place), and within a relative
// tolerance for EXP and SOFTMAX, which are checked against real arithmetic.
// It also checks that the lane controller held the instruction stream on
// the multi-cycle special function unit (stall cycles counted) and that
// words outside the result tile are not written.
module tb_vector_processor;
  import hsv_pkg::*;
  localparam int L = 4, NSEG = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, stalls = 0;

  logic start, busy, done, stall;
  task_t tsk;
  mem_req_t mreq;
  mem_rsp_t mrsp;

  vector_processor #(.LANES(L), .NSEG(NSEG)) dut (.*);
  tb_mem #(.BYTES(65536)) u_mem (.clk, .req(mreq), .rsp(mrsp));

  always @(posedge clk) if (stall) stalls++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rd32(int a);
    return int'({u_mem.mem[a+3], u_mem.mem[a+2], u_mem.mem[a+1], u_mem.mem[a]});
  endfunction
  task automatic wr32(int a, int v);
    for (int y = 0; y < 4; y++) u_mem.mem[a + y] = 8'(v >> (8 * y));
  endtask

  task automatic run(op_e op, int m, int k, int n, int ld);
    @(negedge clk);
    tsk = '0; tsk.op = op; tsk.m = 16'(m); tsk.k = 16'(k); tsk.n = 16'(n); tsk.ld = 16'(ld);
    tsk.addr_a = 0; tsk.addr_b = 16384; tsk.addr_c = 32768;
    start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
  endtask

  task automatic chk(string what, int got, int exp, int tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int sat(longint v);
    if (v > 64'sh7FFFFFFF) return 32'h7FFFFFFF;
    if (v < -64'sh80000000) return 32'h80000000;
    return int'(v);
  endfunction

  initial begin
    int m, n, ld;
    start = 0; tsk = '0;
    for (int i = 0; i < 65536; i++) u_mem.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    m = 5; n = 3; ld = 4;

    // ADD and RELU on random words
    for (int i = 0; i < 64; i++) begin wr32(4 * i, int'($urandom) >>> 2); wr32(16384 + 4 * i, int'($urandom) >>> 2); end
    wr32(32768 + 4 * 3, 32'h5A5A5A5A);
    run(OP_ADD, m, 0, n, ld);
    for (int i = 0; i < m; i++) for (int j = 0; j < n; j++)
      chk("add", rd32(32768 + 4 * (i * ld + j)), rd32(4 * (i * ld + j)) + rd32(16384 + 4 * (i * ld + j)), 0);
    chk("add untouched", rd32(32768 + 4 * 3), 32'h5A5A5A5A, 0);
    run(OP_RELU, m, 0, n, ld);
    for (int i = 0; i < m; i++) for (int j = 0; j < n; j++) begin
      automatic int a = rd32(4 * (i * ld + j));
      chk("relu", rd32(32768 + 4 * (i * ld + j)), a > 0 ? a : 0, 0);
    end
    // MAXPOOL over rows
    run(OP_MAXPOOL, m, 0, L, L);
    for (int j = 0; j < L; j++) begin
      automatic int mx = rd32(4 * j);
      for (int i = 1; i < m; i++) if (rd32(4 * (i * L + j)) > mx) mx = rd32(4 * (i * L + j));
      chk("maxpool", rd32(32768 + 4 * j), mx, 0);
    end
    // LUT: table of NSEG (w, b) pairs, inputs in [-10, 10) Q16.16
    for (int s = 0; s < NSEG; s++) begin
      wr32(16384 + 8 * s, int'($urandom % 131072) - 65536);
      wr32(16384 + 8 * s + 4, int'($urandom % 131072) - 65536);
    end
    for (int i = 0; i < 64; i++) wr32(4 * i, int'($urandom % (20 * 65536)) - 10 * 65536);
    run(OP_LUT, m, 0, L, L);
    for (int i = 0; i < m; i++) for (int j = 0; j < L; j++) begin
      automatic int x = rd32(4 * (i * L + j));
      automatic int s = (x >>> 16) + NSEG / 2;
      if (s < 0) s = 0;
      if (s > NSEG - 1) s = NSEG - 1;
      chk("lut", rd32(32768 + 4 * (i * L + j)),
          sat(((longint'(rd32(16384 + 8 * s)) * longint'(x)) >>> 16) + longint'(rd32(16384 + 8 * s + 4))), 0);
    end
    // EXP, inputs in [-8, 8)
    for (int i = 0; i < 64; i++) wr32(4 * i, int'($urandom % (16 * 65536)) - 8 * 65536);
    stalls = 0;
    run(OP_EXP, m, 0, L, L);
    for (int i = 0; i < m; i++) for (int j = 0; j < L; j++) begin
      automatic real x = real'(rd32(4 * (i * L + j))) / 65536.0;
      automatic int e = int'($exp(x) * 65536.0);
      chk("exp", rd32(32768 + 4 * (i * L + j)), e, 4 + e / 500);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no SFU stall seen"); end
    // RECIP, inputs of magnitude in [0.25, 64)
    for (int i = 0; i < 64; i++) begin
      automatic int v = 16384 + int'($urandom % (64 * 65536));
      wr32(4 * i, ($urandom % 2) ? v : -v);
    end
    run(OP_RECIP, m, 0, L, L);
    for (int i = 0; i < m; i++) for (int j = 0; j < L; j++) begin
      automatic int x = rd32(4 * (i * L + j));
      automatic longint q = (64'sd1 <<< 32) / longint'(x < 0 ? -x : x);
      chk("recip", rd32(32768 + 4 * (i * L + j)), x < 0 ? -int'(q) : int'(q), 1);
    end
    // SOFTMAX over the rows of each column, inputs in [-4, 2)
    for (int i = 0; i < 64; i++) wr32(4 * i, int'($urandom % (6 * 65536)) - 4 * 65536);
    run(OP_SOFTMAX, m, 0, L, L);
    for (int j = 0; j < L; j++) begin
      automatic real sum = 0.0;
      for (int i = 0; i < m; i++) sum += $exp(real'(rd32(4 * (i * L + j))) / 65536.0);
      for (int i = 0; i < m; i++) begin
        automatic int e = int'($exp(real'(rd32(4 * (i * L + j))) / 65536.0) / sum * 65536.0);
        chk("softmax", rd32(32768 + 4 * (i * L + j)), e, 8 + e / 200);
      end
    end
    // GEMM by program: int8 A[m x k], W[k x n] (pitch ld), int32 C
    for (int t = 0; t < 3; t++) begin
      automatic int gk = 1 + $urandom % 9;
      automatic int gn = 1 + $urandom % L;
      automatic int gl = gn + $urandom % 2;
      for (int i = 0; i < 256; i++) begin u_mem.mem[i] = 8'($urandom); u_mem.mem[16384 + i] = 8'($urandom); end
      run(OP_GEMM, m, gk, gn, gl);
      for (int i = 0; i < m; i++) for (int j = 0; j < gn; j++) begin
        automatic int s = 0;
        for (int q = 0; q < gk; q++)
          s += int'($signed(u_mem.mem[i * gk + q])) * int'($signed(u_mem.mem[16384 + q * gl + j]));
        chk("gemm", rd32(32768 + 4 * (i * gl + j)), s, 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
