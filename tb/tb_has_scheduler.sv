// tb_has_scheduler: self-checking test of the HAS scheduling unit.
// Three task queues hold random mixes of GEMM and vector tasks; one systolic
// array and two vector processors are modelled here (busy for a random
// number of cycles after start, then a done pulse). Checked:
//   - every scheduling decision equals Algorithm 1 recomputed here from the
//     scheduling table (earliest-end nomination, shortest idle time,
//     round-robin tie break) and updates t_free to the chosen end time;
//   - the array only receives array operations;
//   - the tasks of one queue start in order and never overlap;
//   - a processor never starts while busy and every task runs exactly once;
//   - an array operation was placed on a vector processor at least once.
module tb_has_scheduler;
  import hsv_pkg::*;
  localparam int NQ = 3, NSA = 1, NVP = 2, NP = NSA + NVP, R = 4, C = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, a2v_cnt = 0, ties = 0;

  logic  q_valid [NQ];
  task_t q_head  [NQ];
  logic  q_pop   [NQ];
  logic  proc_busy [NP], proc_done [NP], proc_start [NP];
  task_t proc_task [NP];
  logic  sched_v, a2v;
  logic [1:0] sel_p;
  logic [31:0] now;

  has_scheduler #(.NQ(NQ), .NSA(NSA), .NVP(NVP), .ROWS(R), .COLS(C)) dut (.*);

  task_t tq [NQ][$];
  int    next_seq [NQ], running [NQ], rem [NP], started;
  localparam int NT = 40;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb for (int q = 0; q < NQ; q++) begin
    q_valid[q] = tq[q].size() != 0;
    q_head[q]  = q_valid[q] ? tq[q][0] : '0;
  end

  // reference Algorithm 1 on the scheduler's table
  always @(posedge clk) if (rst_n) begin
    automatic bit ok [NQ];
    automatic int bp [NQ];
    automatic longint be [NQ], bi [NQ];
    automatic bit sv = 0;
    automatic int sq = 0;
    for (int q = 0; q < NQ; q++) begin
      ok[q] = 0; bp[q] = 0; be[q] = 0; bi[q] = 0;
      if (q_valid[q] && !dut.q_wait[q])
        for (int p = 0; p < NP; p++) begin
          automatic longint ts = dut.t_free[p] > now ? dut.t_free[p] : now;
          automatic longint te = ts + ((p < NSA) ? est_sa_cycles(q_head[q], R, C) : est_vp_cycles(q_head[q]));
          if ((p >= NSA || is_array_op(q_head[q].op)) && !dut.slot_v[p] && (!ok[q] || te < be[q])) begin
            ok[q] = 1; bp[q] = p; be[q] = te; bi[q] = ts - dut.t_free[p];
          end
        end
    end
    for (int o = 1; o <= NQ; o++) begin
      automatic int q = (int'(dut.rr_last) + o) % NQ;
      if (ok[q] && sv && bi[q] == bi[sq]) ties++;
      if (ok[q] && (!sv || bi[q] < bi[sq])) begin sv = 1; sq = q; end
    end
    checks++;
    if (sched_v != sv || (sv && (!q_pop[sq] || int'(sel_p) != bp[sq]))) begin
      failures++; $display("FAIL decision: got v%0d p%0d, expected v%0d q%0d p%0d", sched_v, sel_p, sv, sq, bp[sq]);
    end
    if (sv) begin
      #1;
      checks++;
      if (dut.t_free[bp[sq]] != 32'(be[sq])) begin failures++; $display("FAIL t_free update"); end
    end
  end

  // queue pops and processor models
  always @(posedge clk) if (rst_n) begin
    for (int q = 0; q < NQ; q++) if (q_pop[q]) void'(tq[q].pop_front());
    for (int p = 0; p < NP; p++) begin
      proc_done[p] <= 1'b0;
      if (proc_start[p]) begin
        automatic int q = proc_task[p].addr_a / 1000, s = proc_task[p].addr_a % 1000;
        started++;
        checks += 4;
        if (proc_busy[p]) begin failures++; $display("FAIL start on busy processor %0d", p); end
        if (p < NSA && !is_array_op(proc_task[p].op)) begin failures++; $display("FAIL vector op on array"); end
        if (s != next_seq[q]) begin failures++; $display("FAIL queue %0d order: %0d expected %0d", q, s, next_seq[q]); end
        if (running[q]) begin failures++; $display("FAIL queue %0d overlap", q); end
        if (p >= NSA && is_array_op(proc_task[p].op)) a2v_cnt++;
        next_seq[q]++;
        running[q] = 1;
        proc_busy[p] <= 1'b1;
        rem[p] = 2 + $urandom % 30;
      end else if (proc_busy[p]) begin
        rem[p]--;
        if (rem[p] == 0) begin
          proc_busy[p] <= 1'b0; proc_done[p] <= 1'b1;
          running[proc_task[p].addr_a / 1000] = 0;
        end
      end
    end
  end

  initial begin
    for (int p = 0; p < NP; p++) begin proc_busy[p] = 0; proc_done[p] = 0; rem[p] = 0; end
    for (int q = 0; q < NQ; q++) begin next_seq[q] = 0; running[q] = 0; end
    started = 0;
    for (int q = 0; q < NQ; q++)
      for (int s = 0; s < NT; s++) begin
        automatic task_t t = '0;
        t.op = ($urandom % 2) ? OP_GEMM : op_e'(2 + $urandom % 7);
        t.m = 16'(1 + $urandom % 8); t.k = 16'(1 + $urandom % 8); t.n = 16'(1 + $urandom % 4);
        t.addr_a = 32'(q * 1000 + s);
        tq[q].push_back(t);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (started < NQ * NT) @(posedge clk);
    repeat (60) @(posedge clk);
    for (int q = 0; q < NQ; q++) begin
      checks++;
      if (next_seq[q] != NT) begin failures++; $display("FAIL queue %0d ran %0d tasks", q, next_seq[q]); end
    end
    checks++;
    if (a2v_cnt == 0) begin failures++; $display("FAIL no array operation on a vector processor"); end
    $display("a2v=%0d idle ties=%0d", a2v_cnt, ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
