// tb_pe: self-checking test of one processing element.
// Shifts two weights through the loading register, swaps, and checks that
// the multiply-add uses the active weight while the next one is loaded, that
// input and partial sum are forwarded with one cycle of delay, and that an
// input marked invalid adds nothing.
module tb_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, xv_in, w_shift, w_swap, xv_out;
  logic signed [7:0]  x_in, w_in, x_out, w_out;
  logic signed [31:0] ps_in, ps_out;

  pe dut (.*);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; xv_in = 0; w_shift = 0; w_swap = 0; x_in = 0; w_in = 0; ps_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load weight -7 and make it active
    @(negedge clk); w_in = -7; w_shift = 1;
    @(negedge clk); w_shift = 0; w_swap = 1;
    @(negedge clk); w_swap = 0;
    // random MACs while loading the next weight 11 in the background
    for (int i = 0; i < 50; i++) begin
      automatic logic signed [7:0]  x = 8'($urandom);
      automatic logic signed [31:0] p = 32'($urandom % 100000) - 50000;
      automatic logic v = (i % 5 != 3);
      @(negedge clk);
      en = 1; x_in = x; ps_in = p; xv_in = v;
      w_in = 11; w_shift = (i == 10);
      @(posedge clk); #1;
      check("psum", ps_out, v ? p + x * -7 : p);
      check("x fwd", x_out, x);
      check("xv fwd", xv_out, v);
    end
    check("next weight visible below", w_out, 11);
    @(negedge clk); w_shift = 0; w_swap = 1; en = 0;
    @(negedge clk); w_swap = 0;
    @(negedge clk); en = 1; x_in = 3; xv_in = 1; ps_in = 100;
    @(posedge clk); #1;
    check("after swap", ps_out, 100 + 3 * 11);
    // en low holds the outputs
    @(negedge clk); en = 0; x_in = 5; ps_in = 0;
    @(posedge clk); #1;
    check("hold", ps_out, 133);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
