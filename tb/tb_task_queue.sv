// tb_task_queue: self-checking test of the FIFO used for task and request
// queues. A 5-entry queue of 16-bit values takes random legal pushes and
// pops (pushes only when not full, pops only when not empty, both at once
// allowed); head, empty, full and count are compared with a reference queue
// every cycle.
module tb_task_queue;
  localparam int D = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, pop, empty, full;
  logic [15:0] din, head;
  logic [$clog2(D):0] count;

  task_queue #(.T(logic [15:0]), .DEPTH(D)) dut (.*);

  logic [15:0] model[$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4000) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == D) || int'(count) != model.size() ||
          (model.size() != 0 && head != model[0])) begin
        failures++; $display("FAIL state: count %0d expected %0d", count, model.size());
      end
      push = !full && ($urandom % 2);
      pop  = !empty && ($urandom % 2);
      din  = 16'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
