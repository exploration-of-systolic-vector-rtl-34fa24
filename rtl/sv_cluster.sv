// sv_cluster: systolic-vector (SV) cluster.
//
// The cluster runs the inference requests the load balancer assigns to it.
// It holds NSA systolic arrays, NVP vector processors, one shared memory, a
// model information buffer, NQ task queues and the HAS scheduler.
// Flow of a request (model, transaction ID):
//   1. It is accepted (req_ready) when a task queue is free and the task
//      expander is idle; the queue is reserved for the request.
//   2. The task expander reads the model's layer descriptors from the model
//      information buffer, one per layer, and splits each layer into
//      sub-layer tasks of at most TILE_N output columns (the column count of
//      the arrays and the lane count of the vector processors). Each
//      sub-layer task is pushed into the request's queue; the last one is
//      marked. split counts the layers that were split into more than one task.
//   3. The scheduler (has_scheduler) assigns queue heads to processors.
//   4. When the marked task finishes, the request is complete: done_v rises
//      with the transaction ID and stays up until done_ack; then the queue
//      is released. Completions wait in q_fin and leave one at a time.
// All processors and the external-memory port ext_req/ext_rsp share the
// shared memory; activations and parameters are expected there before a
// request arrives, and results are read back through the same port.
// Interface timing: req_v/req_ready handshake; model information writes mi_*
// are taken every cycle they are valid; done_v/done_ack handshake.
//
// From the paper: the cluster's parts (scheduler with scheduling table and
// task queues, model info buffer, systolic arrays, vector processors, shared
// memory), the flow from request to layer-wise tasks, the scheduler's
// splitting into sub-layer tasks, completion signalled back to the load
// balancer, and the configuration of the GPU comparison (four 64x64 arrays,
// eight 64-lane vector processors, 40 MB shared memory per cluster). This
// design's own: the number of task queues, one queue per request, splitting
// along output columns only, in-order execution of the tasks of one request,
// and the external-memory port in place of the HBM path.
module sv_cluster
  import hsv_pkg::*;
#(
  parameter int unsigned NSA        = 4,
  parameter int unsigned NVP        = 8,
  parameter int unsigned ROWS       = 64,
  parameter int unsigned COLS       = 64,
  parameter int unsigned LANES      = 64,
  parameter int unsigned NQ         = 4,
  parameter int unsigned QDEPTH     = 8,
  parameter int unsigned MAX_MODELS = 16,
  parameter int unsigned MAX_LAYERS = 64,
  parameter int unsigned NBANKS     = 16,
  parameter longint unsigned SM_BYTES = 64'd41943040
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // request from the load balancer
  input  logic                          req_v,
  output logic                          req_ready,
  input  logic [$clog2(MAX_MODELS)-1:0] req_model,
  input  logic [31:0]                   req_txn,
  // completion to the load balancer
  output logic                          done_v,
  output logic [31:0]                   done_txn,
  input  logic                          done_ack,
  // model information writes
  input  logic                          mi_we,
  input  logic [$clog2(MAX_MODELS)-1:0] mi_model,
  input  logic [$clog2(MAX_LAYERS)-1:0] mi_layer,
  input  layer_desc_t                   mi_desc,
  // external-memory side of the shared memory
  input  mem_req_t                      ext_req,
  output mem_rsp_t                      ext_rsp,
  // observation
  output logic                          split,
  output logic                          sched_v,
  output logic                          a2v,
  output logic                          vp_stall,
  output logic                          sm_conflict
);
  localparam int unsigned NP   = NSA + NVP;
  localparam int unsigned QW   = (NQ > 1) ? $clog2(NQ) : 1;
  localparam int unsigned LW   = $clog2(MAX_LAYERS);
  localparam int unsigned TILE_N = (COLS < LANES) ? COLS : LANES;

  // ---------------- model information buffer ----------------
  logic [$clog2(MAX_MODELS)-1:0] x_model;
  logic [LW-1:0]                 x_layer;
  layer_desc_t                   x_desc;
  logic [LW:0]                   x_nl;

  model_info_buffer #(.MAX_MODELS(MAX_MODELS), .MAX_LAYERS(MAX_LAYERS)) u_mib (
    .clk, .rst_n, .we(mi_we), .wmodel(mi_model), .wlayer(mi_layer), .wdesc(mi_desc),
    .rmodel(x_model), .rlayer(x_layer), .rdesc(x_desc), .nlayers(x_nl)
  );

  // ---------------- queues ----------------
  logic  q_used  [NQ];
  logic [31:0] q_txn [NQ];
  logic  q_push  [NQ];
  task_t x_task;
  logic  q_pop   [NQ];
  task_t q_head  [NQ];
  logic  q_empty [NQ];
  logic  q_full  [NQ];
  logic  q_valid [NQ];

  for (genvar q = 0; q < NQ; q++) begin : g_q
    task_queue #(.T(task_t), .DEPTH(QDEPTH)) u_tq (
      .clk, .rst_n, .push(q_push[q]), .din(x_task), .pop(q_pop[q]),
      .head(q_head[q]), .empty(q_empty[q]), .full(q_full[q]), .count()
    );
    assign q_valid[q] = !q_empty[q];
  end

  // ---------------- task expander ----------------
  logic          x_busy;
  logic [QW-1:0] x_q;
  logic [15:0]   x_col;       // first column of the current tile

  logic          free_v;
  logic [QW-1:0] free_q;
  always_comb begin
    free_v = 1'b0;
    free_q = '0;
    for (int q = int'(NQ) - 1; q >= 0; q--) if (!q_used[q]) begin free_v = 1'b1; free_q = QW'(q); end
  end
  assign req_ready = !x_busy && free_v;

  logic [15:0] tile_n;
  logic        last_tile, last_layer;
  always_comb begin
    tile_n     = ((x_desc.n - x_col) > 16'(TILE_N)) ? 16'(TILE_N) : (x_desc.n - x_col);
    last_tile  = (x_col + tile_n) >= x_desc.n;
    last_layer = ((LW+1)'(x_layer) + 1'b1) >= x_nl;
    x_task        = '0;
    x_task.op     = x_desc.op;
    x_task.m      = x_desc.m;
    x_task.k      = x_desc.k;
    x_task.n      = tile_n;
    x_task.ld     = x_desc.n;
    x_task.addr_a = (x_desc.op == OP_GEMM) ? x_desc.addr_a : x_desc.addr_a + (32'(x_col) << 2);
    x_task.addr_b = (x_desc.op == OP_GEMM) ? x_desc.addr_b + 32'(x_col) :
                    (x_desc.op == OP_LUT)  ? x_desc.addr_b : x_desc.addr_b + (32'(x_col) << 2);
    x_task.addr_c = x_desc.addr_c + (32'(x_col) << 2);
    x_task.last   = last_tile && last_layer;
    x_task.qid    = 8'(x_q);
  end

  logic x_push;
  assign x_push = x_busy && !q_full[x_q];
  for (genvar q = 0; q < NQ; q++) begin : g_push
    assign q_push[q] = x_push && int'(x_q) == q;
  end
  assign split = x_push && x_col == 0 && !last_tile;

  // ---------------- scheduler and processors ----------------
  logic  p_busy [NP];
  logic  p_done [NP];
  logic  p_start[NP];
  task_t p_task [NP];
  logic [31:0] now;
  logic [$clog2(NP)-1:0] sel_p;

  has_scheduler #(.NQ(NQ), .NSA(NSA), .NVP(NVP), .ROWS(ROWS), .COLS(COLS)) u_sched (
    .clk, .rst_n, .q_valid, .q_head, .q_pop,
    .proc_busy(p_busy), .proc_done(p_done), .proc_start(p_start), .proc_task(p_task),
    .sched_v, .sel_p, .a2v, .now
  );

  mem_req_t m_req [NP+1];
  mem_rsp_t m_rsp [NP+1];
  logic     vst   [NVP];

  for (genvar s = 0; s < NSA; s++) begin : g_sa
    systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_sa (
      .clk, .rst_n, .start(p_start[s]), .tsk(p_task[s]), .busy(p_busy[s]), .done(p_done[s]),
      .mreq(m_req[s]), .mrsp(m_rsp[s])
    );
  end
  for (genvar v = 0; v < NVP; v++) begin : g_vp
    vector_processor #(.LANES(LANES)) u_vp (
      .clk, .rst_n, .start(p_start[NSA+v]), .tsk(p_task[NSA+v]), .busy(p_busy[NSA+v]),
      .done(p_done[NSA+v]), .stall(vst[v]), .mreq(m_req[NSA+v]), .mrsp(m_rsp[NSA+v])
    );
  end
  always_comb begin
    vp_stall = 1'b0;
    for (int v = 0; v < int'(NVP); v++) if (vst[v]) vp_stall = 1'b1;
  end

  assign m_req[NP] = ext_req;
  assign ext_rsp   = m_rsp[NP];

  shared_memory #(.NPORTS(NP + 1), .NBANKS(NBANKS), .BYTES(SM_BYTES)) u_sm (
    .clk, .rst_n, .req(m_req), .rsp(m_rsp), .conflict(sm_conflict)
  );

  // ---------------- request bookkeeping ----------------
  // q_fin marks queues whose last task has finished; one completion is
  // reported per cycle, lowest queue first.
  logic          q_fin [NQ];
  logic          fin_v;
  logic [QW-1:0] fin_q;
  always_comb begin
    fin_v = 1'b0;
    fin_q = '0;
    for (int q = int'(NQ) - 1; q >= 0; q--) if (q_fin[q]) begin fin_v = 1'b1; fin_q = QW'(q); end
  end

  assign done_v   = fin_v;
  assign done_txn = q_txn[fin_q];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_busy <= 1'b0; x_q <= '0; x_col <= '0; x_model <= '0; x_layer <= '0;
      for (int q = 0; q < int'(NQ); q++) begin q_used[q] <= 1'b0; q_txn[q] <= '0; q_fin[q] <= 1'b0; end
    end else begin
      if (fin_v && done_ack) begin
        q_used[fin_q] <= 1'b0;
        q_fin[fin_q]  <= 1'b0;
      end
      for (int p = 0; p < int'(NP); p++)
        if (p_done[p] && p_task[p].last) q_fin[QW'(p_task[p].qid)] <= 1'b1;
      if (req_v && req_ready) begin
        x_busy         <= 1'b1;
        x_q            <= free_q;
        x_model        <= req_model;
        x_layer        <= '0;
        x_col          <= '0;
        q_used[free_q] <= 1'b1;
        q_txn[free_q]  <= req_txn;
      end else if (x_push) begin
        if (last_tile) begin
          x_col <= '0;
          if (last_layer) x_busy <= 1'b0;
          else x_layer <= x_layer + 1'b1;
        end else x_col <= x_col + tile_n;
      end
    end
  end

endmodule
