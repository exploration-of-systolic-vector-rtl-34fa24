// tb_systolic_array: self-checking test of the systolic array processor.
// A 4x4 array runs GEMM tasks of random shape (k up to three times the row
// count, so partial sums are accumulated over several weight chunks; n up to
// the column count; row pitch ld larger than n) against a behavioural memory
// that withholds grants at random. Every result word is compared with a
// product computed here, and words next to the result tile must stay
// untouched.
module tb_systolic_array;
  import hsv_pkg::*;
  localparam int R = 4, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  task_t tsk;
  mem_req_t mreq;
  mem_rsp_t mrsp;

  systolic_array #(.ROWS(R), .COLS(C)) dut (.*);
  tb_mem #(.BYTES(65536)) u_mem (.clk, .req(mreq), .rsp(mrsp));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] rd32(int a);
    return {u_mem.mem[a+3], u_mem.mem[a+2], u_mem.mem[a+1], u_mem.mem[a]};
  endfunction

  initial begin
    start = 0; tsk = '0;
    for (int i = 0; i < 65536; i++) u_mem.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      automatic int m = 1 + $urandom % 9;
      automatic int k = 1 + $urandom % (3 * R);
      automatic int n = 1 + $urandom % C;
      automatic int ld = n + $urandom % 3;
      automatic int aa = 0, ab = 4096, ac = 8192;
      automatic int pre = int'(rd32(ac + 4 * n));  // word after the first row of C
      if (it == 0) begin m = 5; k = 3 * R; n = C; ld = C; end
      @(negedge clk);
      tsk = '0; tsk.op = OP_GEMM; tsk.m = 16'(m); tsk.k = 16'(k); tsk.n = 16'(n); tsk.ld = 16'(ld);
      tsk.addr_a = aa; tsk.addr_b = ab; tsk.addr_c = ac;
      start = 1;
      @(negedge clk); start = 0;
      checks++;
      if (!busy) begin failures++; $display("FAIL not busy after start"); end
      wait (done);
      @(negedge clk);
      for (int i = 0; i < m; i++)
        for (int j = 0; j < n; j++) begin
          automatic int s = 0;
          for (int q = 0; q < k; q++)
            s += int'($signed(u_mem.mem[aa + i * k + q])) * int'($signed(u_mem.mem[ab + q * ld + j]));
          checks++;
          if (int'(rd32(ac + 4 * (i * ld + j))) != s) begin
            failures++;
            $display("FAIL it%0d C[%0d][%0d]=%0d expected %0d (m%0d k%0d n%0d)", it, i, j,
                     int'(rd32(ac + 4 * (i * ld + j))), s, m, k, n);
          end
        end
      if (ld > n) begin
        checks++;
        if (int'(rd32(ac + 4 * n)) != pre) begin failures++; $display("FAIL wrote outside tile"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
