// has_scheduler: heterogeneity-aware scheduling (HAS) unit of an SV cluster.
//
// Each cycle it looks at the head task of every task queue whose previous
// task has finished (tasks of one request run in order) and, for each such
// candidate, at every processor that can run it: systolic arrays take array
// operations (GEMM) only, vector processors take every operation. For a
// candidate and processor p:
//   t_start = max(now, t_free[p])          (t_free: estimated end of the work
//                                            already given to p)
//   t_end   = t_start + t_comp(task, p)     (t_comp from the cycle model in
//                                            hsv_pkg)
// The processor with the earliest t_end is nominated (lowest index on a tie)
// and the candidate's idle time is t_start - t_free[p], the gap the new task
// leaves after the previous task on that processor. The candidate with the
// shortest idle time is selected; on equal idle times the queue next in
// round-robin order after the last selected one wins. The selected task is
// written to the nominated processor's one-entry pending slot (only
// processors whose slot is empty are considered), t_free[p] becomes t_end and
// the queue is popped. A processor that is idle starts its pending task the
// next cycle. When a processor reports done, the owning queue may schedule
// again and, if nothing is pending, t_free[p] is set to the actual time.
// This scheduling table (t_free, pending slots, running queue per processor)
// is the hardware form of the table the paper keeps for the scheduler.
// Outputs: proc_start/proc_task per processor (processors 0..NSA-1 are the
// systolic arrays), pop per queue, and sched_v/sel_p/a2v for observation
// (a2v: an array operation was placed on a vector processor).
//
// From the paper: Algorithm 1 (t_start as the maximum of memory, task and
// processor ready times, t_end = t_start + t_comp, nomination by earliest end
// time, idle time, selection by shortest idle time, round-robin tie break),
// the scheduling table, array operations allowed on vector processors. This
// design's own: the algorithm runs as fixed-function hardware rather than as
// a program on the cluster's RISC-V scheduler; memory ready time is taken as
// now (external-memory access scheduling, Algorithm 2, is not built); the
// pending slots and the per-queue ordering.
module has_scheduler
  import hsv_pkg::*;
#(
  parameter int unsigned NQ   = 4,
  parameter int unsigned NSA  = 4,
  parameter int unsigned NVP  = 8,
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        q_valid   [NQ],   // queue not empty
  input  task_t       q_head    [NQ],
  output logic        q_pop     [NQ],
  input  logic        proc_busy [NSA+NVP],
  input  logic        proc_done [NSA+NVP],
  output logic        proc_start[NSA+NVP],
  output task_t       proc_task [NSA+NVP],
  output logic        sched_v,
  output logic [$clog2(NSA+NVP)-1:0] sel_p,
  output logic        a2v,
  output logic [31:0] now
);
  localparam int unsigned NP = NSA + NVP;
  localparam int unsigned PW = $clog2(NP);
  localparam int unsigned QW = (NQ > 1) ? $clog2(NQ) : 1;

  logic [31:0] t_free [NP];
  logic        slot_v [NP];
  task_t       slot_t [NP];
  logic [QW-1:0] slot_q [NP];
  logic        run_v  [NP];
  logic [QW-1:0] run_q [NP];
  logic        q_wait [NQ];     // a task of this queue is pending or running
  logic [QW-1:0] rr_last;

  // ---------------- HAS evaluation ----------------
  logic          c_ok   [NQ];
  logic [PW-1:0] c_p    [NQ];
  logic [31:0]   c_end  [NQ];
  logic [31:0]   c_idle [NQ];

  always_comb begin
    for (int q = 0; q < int'(NQ); q++) begin
      c_ok[q]   = 1'b0;
      c_p[q]    = '0;
      c_end[q]  = '1;
      c_idle[q] = '1;
      if (q_valid[q] && !q_wait[q]) begin
        for (int p = 0; p < int'(NP); p++) begin
          automatic logic        fits = (p >= int'(NSA)) || is_array_op(q_head[q].op);
          automatic logic [31:0] ts   = (t_free[p] > now) ? t_free[p] : now;
          automatic logic [31:0] tc   = (p < int'(NSA)) ? est_sa_cycles(q_head[q], ROWS, COLS)
                                                          : est_vp_cycles(q_head[q]);
          automatic logic [31:0] te   = ts + tc;
          if (fits && !slot_v[p] && (!c_ok[q] || te < c_end[q])) begin
            c_ok[q]   = 1'b1;
            c_p[q]    = PW'(p);
            c_end[q]  = te;
            c_idle[q] = ts - t_free[p];
          end
        end
      end
    end
  end

  logic          s_v;
  logic [QW-1:0] s_q;
  always_comb begin
    s_v = 1'b0;
    s_q = '0;
    for (int o = 1; o <= int'(NQ); o++) begin
      automatic int q = (int'(rr_last) + o) % int'(NQ);
      if (c_ok[q] && (!s_v || c_idle[q] < c_idle[s_q])) begin
        s_v = 1'b1;
        s_q = QW'(q);
      end
    end
  end

  assign sched_v = s_v;
  assign sel_p   = c_p[s_q];
  assign a2v     = s_v && int'(c_p[s_q]) >= int'(NSA);

  for (genvar q = 0; q < NQ; q++) begin : g_pop
    assign q_pop[q] = s_v && int'(s_q) == q;
  end

  // ---------------- scheduling table ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      now <= '0;
      rr_last <= QW'(NQ - 1);
      for (int p = 0; p < int'(NP); p++) begin
        t_free[p] <= '0; slot_v[p] <= 1'b0; slot_t[p] <= '0; slot_q[p] <= '0;
        run_v[p] <= 1'b0; run_q[p] <= '0; proc_start[p] <= 1'b0; proc_task[p] <= '0;
      end
      for (int q = 0; q < int'(NQ); q++) q_wait[q] <= 1'b0;
    end else begin
      now <= now + 1;
      for (int p = 0; p < int'(NP); p++) begin
        proc_start[p] <= 1'b0;
        if (proc_done[p] && run_v[p]) begin
          run_v[p] <= 1'b0;
          q_wait[run_q[p]] <= 1'b0;
          if (!slot_v[p]) t_free[p] <= now;
        end
        // start the pending task on an idle processor
        if (slot_v[p] && !proc_busy[p] && !proc_start[p] && !run_v[p]) begin
          slot_v[p]     <= 1'b0;
          proc_start[p] <= 1'b1;
          proc_task[p]  <= slot_t[p];
          run_v[p]      <= 1'b1;
          run_q[p]      <= slot_q[p];
        end
      end
      if (s_v) begin
        rr_last           <= s_q;
        q_wait[s_q]       <= 1'b1;
        slot_v[c_p[s_q]]  <= 1'b1;
        slot_t[c_p[s_q]]  <= q_head[s_q];
        slot_q[c_p[s_q]]  <= s_q;
        t_free[c_p[s_q]]  <= c_end[s_q];
      end
    end
  end
endmodule
