// tb_vector_lane: self-checking test of one vector lane.
// Random operands are loaded with V_LD and combined back to back (so the
// forwarding path is used) by ADD, MAX, MAC (scratchpad and broadcast
// operand, random shift), MULQ and LUT; EXP and RCP run on the special
// function unit, the test waiting for sfu_busy to drop before storing.
// Every V_ST result leaving on st_* is compared with a value computed here
// (EXP within a relative tolerance of real exp, RCP within one unit).
module tb_vector_lane;
  import hsv_pkg::*;
  localparam int NSEG = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, lut_we, st_valid, sfu_busy;
  vinstr_t ins;
  logic [31:0] ld_data, bcast, lut_w, lut_b, st_data;
  logic [3:0] lut_idx;
  logic [15:0] st_row;
  logic [3:0] sfu_rd;

  vector_lane #(.NSEG(NSEG)) dut (.*);

  int exp_q[$], tol_q[$], row_q[$];
  int lw[NSEG], lb[NSEG];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && st_valid) begin
    automatic int e = exp_q.pop_front(), t = tol_q.pop_front(), r = row_q.pop_front();
    checks++;
    if (int'(st_data) - e > t || e - int'(st_data) > t || st_row != 16'(r)) begin
      failures++; $display("FAIL row %0d: got %0d expected %0d", st_row, int'(st_data), e);
    end
  end

  function automatic int sat(longint v);
    if (v > 64'sh7FFFFFFF) return 32'h7FFFFFFF;
    if (v < -64'sh80000000) return 32'h80000000;
    return int'(v);
  endfunction

  function automatic vinstr_t mk(vop_e op, int rd, int rs1, int rs2, int imm, int sh = 0, bit bc = 0);
    vinstr_t x;
    x = '0; x.op = op; x.rd = 4'(rd); x.rs1 = 4'(rs1); x.rs2 = 4'(rs2);
    x.imm = 16'(imm); x.shift = 5'(sh); x.bcast = bc;
    return x;
  endfunction

  task automatic issue(vinstr_t x, int d = 0, int b = 0);
    @(negedge clk);
    iv = 1; ins = x; ld_data = d; bcast = b;
    @(negedge clk);
    iv = 0; ins = '0;
  endtask
  // issue without a gap cycle
  task automatic issue2(vinstr_t x, vinstr_t y, int d1, int d2);
    @(negedge clk); iv = 1; ins = x; ld_data = d1;
    @(negedge clk); ins = y; ld_data = d2;
    @(negedge clk); iv = 0; ins = '0;
  endtask
  task automatic store(int rs, int row, int e, int tol = 0);
    exp_q.push_back(e); tol_q.push_back(tol); row_q.push_back(row);
    issue(mk(V_ST, 0, rs, 0, row));
  endtask
  task automatic wait_sfu;
    @(negedge clk);
    while (sfu_busy) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    iv = 0; ins = '0; ld_data = 0; bcast = 0; lut_we = 0; lut_idx = 0; lut_w = 0; lut_b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NSEG; s++) begin
      @(negedge clk);
      lw[s] = int'($urandom % 131072) - 65536; lb[s] = int'($urandom % 131072) - 65536;
      lut_we = 1; lut_idx = 4'(s); lut_w = lw[s]; lut_b = lb[s];
    end
    @(negedge clk); lut_we = 0;
    for (int t = 0; t < 40; t++) begin
      automatic int a = int'($urandom), b = int'($urandom), c = int'($urandom) >>> 4;
      automatic int sh = $urandom % 20, bc = int'($urandom) >>> 8;
      automatic int x = int'($urandom % (16 * 65536)) - 8 * 65536;
      automatic int s;
      issue2(mk(V_LD, 1, 0, 0, 0), mk(V_LD, 2, 0, 0, 0), a, b);
      store(1, t, a);
      issue(mk(V_ADD, 3, 1, 2, 0));
      store(3, t, sat(longint'(a) + longint'(b)));
      issue(mk(V_MAX, 3, 1, 2, 0));
      store(3, t, a > b ? a : b);
      issue2(mk(V_LD, 4, 0, 0, 0), mk(V_MAC, 4, 1, 2, 0, sh), c, 0);
      store(4, t, sat(longint'(c) + ((longint'(a) * longint'(b)) >>> sh)));
      issue(mk(V_MAC, 4, 2, 0, 0, sh, 1), 0, bc);
      store(4, t, sat(longint'(sat(longint'(c) + ((longint'(a) * longint'(b)) >>> sh))) +
                      ((longint'(b) * longint'(bc)) >>> sh)));
      issue(mk(V_MULQ, 5, 1, 2, 0));
      store(5, t, sat((longint'(a) * longint'(b)) >>> 16));
      issue2(mk(V_LD, 6, 0, 0, 0), mk(V_LUT, 7, 6, 0, 0), x, 0);
      s = (x >>> 16) + NSEG / 2;
      if (s < 0) s = 0;
      if (s > NSEG - 1) s = NSEG - 1;
      store(7, t, sat(((longint'(lw[s]) * longint'(x)) >>> 16) + longint'(lb[s])));
      issue(mk(V_EXP, 8, 6, 0, 0));
      wait_sfu;
      begin
        automatic int e = int'($exp(real'(x) / 65536.0) * 65536.0);
        store(8, t, e, 4 + e / 500);
      end
      if (x != 0) begin
        automatic longint q = (64'sd1 <<< 32) / longint'(x < 0 ? -x : x);
        issue(mk(V_RCP, 9, 6, 0, 0));
        wait_sfu;
        store(9, t, x < 0 ? -int'(q) : int'(q), 1);
      end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d stores missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
