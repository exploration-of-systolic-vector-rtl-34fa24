// load_balancer: entry block of the accelerator.
//
// Receives UMF frames from the host, keeps track of the requests in flight
// and hands each inference request to an SV cluster.
//   UMF decoder    splits the frame (umf_decoder).
//   model load     every information packet becomes a layer descriptor that
//                  is written to the model information buffers of all
//                  clusters (mi_*); the data packets (parameters) leave on
//                  the data_* stream towards external memory. At the end of
//                  the frame the model is marked loaded and an
//                  acknowledgement (RSP_LOADED) is returned.
//   check          a check-ack frame from the host asks whether a model is
//                  loaded; the answer is RSP_CHECK with ok = loaded.
//   request        the frame header's user, transaction and model IDs go to
//                  a free entry of the request table and the entry's index
//                  into the request queue (first in, first out); the
//                  request's data packets (input activations) leave on the
//                  data_* stream. A request for a model that is not loaded
//                  is answered at once with RSP_RETURN, ok = 0.
//   dispatch       the head of the request queue goes to the cluster with
//                  the fewest requests in flight according to the status
//                  table, among the clusters that can take one now (lowest
//                  index on a tie); the status table counts it.
//   completion     a cluster's done (transaction ID) decrements its status
//                  entry, frees the request-table entry and returns
//                  RSP_RETURN with the user and transaction IDs, ok = 1.
// Input flow control: in_ready drops while the request table is full.
// Responses are one-cycle pulses (rsp_v); completions of different clusters
// in the same cycle are taken one per cycle, the others wait (done_ack).
//
// From the paper: the load balancer's parts (UMF decoder, controller,
// request queue, request table, status table), storing user ID and model in
// the request table, first-in first-out allocation to a cluster by checking
// the status table, completion signalled back by the clusters, the ack on a
// successful model load and the model check. This design's own: the
// allocation is fixed-function logic rather than a program on the paper's
// RISC-V controller; the least-loaded choice among available clusters; the
// table sizes; the response encoding.
module load_balancer
  import hsv_pkg::*;
#(
  parameter int unsigned NCL        = 4,
  parameter int unsigned NREQ       = 16,
  parameter int unsigned MAX_MODELS = 16,
  parameter int unsigned MAX_LAYERS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // host side (UMF flits)
  input  logic        in_v,
  output logic        in_ready,
  input  logic [31:0] in_data,
  // responses to the host
  output logic        rsp_v,
  output logic [1:0]  rsp_kind,     // 1 loaded, 2 check, 3 return
  output logic        rsp_ok,
  output logic [31:0] rsp_user,
  output logic [31:0] rsp_txn,
  output logic [11:0] rsp_model,
  // data payload stream towards external memory
  output logic        data_v,
  output logic [11:0] data_tensor,
  output logic [31:0] data_idx,
  output logic [31:0] data_word,
  // model information to all clusters
  output logic                          mi_we,
  output logic [$clog2(MAX_MODELS)-1:0] mi_model,
  output logic [$clog2(MAX_LAYERS)-1:0] mi_layer,
  output layer_desc_t                   mi_desc,
  // requests to the clusters
  output logic                          cl_req_v   [NCL],
  input  logic                          cl_req_rdy [NCL],
  output logic [$clog2(MAX_MODELS)-1:0] cl_req_model,
  output logic [31:0]                   cl_req_txn,
  // completions from the clusters
  input  logic                          cl_done_v   [NCL],
  input  logic [31:0]                   cl_done_txn [NCL],
  output logic                          cl_done_ack [NCL],
  // observation
  output logic                          dispatch_v
);
  localparam logic [1:0] RSP_LOADED = 2'd1, RSP_CHECK = 2'd2, RSP_RETURN = 2'd3;
  localparam int unsigned RW = $clog2(NREQ);
  localparam int unsigned MW = $clog2(MAX_MODELS);
  localparam int unsigned CW = (NCL > 1) ? $clog2(NCL) : 1;

  // ---------------- decoder ----------------
  logic           hdr_v, layer_v, end_v;
  umf_frame_hdr_t hdr;
  logic [11:0]    layer_id;
  layer_desc_t    layer;
  logic           tbl_full;

  umf_decoder u_dec (
    .clk, .rst_n, .in_v, .in_ready, .in_data, .hold(tbl_full),
    .hdr_v, .hdr, .layer_v, .layer_id, .layer,
    .data_v, .data_tensor, .data_idx, .data_word, .end_v
  );

  assign mi_we    = layer_v;
  assign mi_model = MW'(hdr.w2.model_id);
  assign mi_layer = $bits(mi_layer)'(layer_id);
  assign mi_desc  = layer;

  // ---------------- request table, loaded models, status table ----------------
  typedef struct packed {
    logic        valid;
    logic [31:0] user;
    logic [31:0] txn;
    logic [MW-1:0] model;
  } req_ent_t;

  req_ent_t        tbl [NREQ];
  logic [MAX_MODELS-1:0] loaded;
  logic [RW:0]     inflight [NCL];

  logic          free_v;
  logic [RW-1:0] free_i;
  always_comb begin
    free_v = 1'b0;
    free_i = '0;
    for (int i = int'(NREQ) - 1; i >= 0; i--) if (!tbl[i].valid) begin free_v = 1'b1; free_i = RW'(i); end
  end
  assign tbl_full = !free_v;

  // ---------------- request queue ----------------
  logic          rq_push, rq_pop, rq_empty, rq_full;
  logic [RW-1:0] rq_head;
  task_queue #(.T(logic [RW-1:0]), .DEPTH(NREQ)) u_rq (
    .clk, .rst_n, .push(rq_push), .din(free_i), .pop(rq_pop),
    .head(rq_head), .empty(rq_empty), .full(rq_full), .count()
  );

  logic is_req, req_ok;
  assign is_req  = hdr_v && hdr.w2.pkt_type == PKT_REQUEST_RETURN;
  assign req_ok  = loaded[MW'(hdr.w2.model_id)];
  assign rq_push = is_req && req_ok && free_v && !rq_full;

  // ---------------- dispatch ----------------
  logic          d_v;
  logic [CW-1:0] d_c;
  always_comb begin
    d_v = 1'b0;
    d_c = '0;
    for (int c = 0; c < int'(NCL); c++)
      if (cl_req_rdy[c] && (!d_v || inflight[c] < inflight[d_c])) begin d_v = 1'b1; d_c = CW'(c); end
    if (rq_empty) d_v = 1'b0;
  end
  assign rq_pop       = d_v;
  assign dispatch_v   = d_v;
  assign cl_req_model = tbl[rq_head].model;
  assign cl_req_txn   = tbl[rq_head].txn;
  for (genvar c = 0; c < NCL; c++) begin : g_req
    assign cl_req_v[c] = d_v && int'(d_c) == c;
  end

  // ---------------- completions ----------------
  logic          f_v;
  logic [CW-1:0] f_c;
  always_comb begin
    f_v = 1'b0;
    f_c = '0;
    for (int c = int'(NCL) - 1; c >= 0; c--) if (cl_done_v[c]) begin f_v = 1'b1; f_c = CW'(c); end
  end
  // a completion is taken only in a cycle with no host-side response
  logic host_rsp, cl_done_ack_ok;
  assign host_rsp = (end_v && hdr.w2.pkt_type == PKT_MODEL_LOAD) ||
                    (hdr_v && hdr.w2.pkt_type == PKT_CHECK_ACK) || (is_req && !rq_push);
  assign cl_done_ack_ok = !host_rsp;
  for (genvar c = 0; c < NCL; c++) begin : g_ack
    assign cl_done_ack[c] = f_v && cl_done_ack_ok && int'(f_c) == c;
  end

  logic          f_hit;
  logic [RW-1:0] f_i;
  always_comb begin
    f_hit = 1'b0;
    f_i   = '0;
    for (int i = 0; i < int'(NREQ); i++)
      if (!f_hit && tbl[i].valid && tbl[i].txn == cl_done_txn[f_c]) begin f_hit = 1'b1; f_i = RW'(i); end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NREQ); i++) tbl[i] <= '0;
      for (int c = 0; c < int'(NCL); c++) inflight[c] <= '0;
      loaded <= '0;
      rsp_v <= 1'b0; rsp_kind <= '0; rsp_ok <= 1'b0; rsp_user <= '0; rsp_txn <= '0; rsp_model <= '0;
    end else begin
      rsp_v <= 1'b0;
      // host-side frames
      if (end_v && hdr.w2.pkt_type == PKT_MODEL_LOAD) begin
        loaded[MW'(hdr.w2.model_id)] <= 1'b1;
        rsp_v <= 1'b1; rsp_kind <= RSP_LOADED; rsp_ok <= 1'b1;
        rsp_user <= hdr.user_id; rsp_txn <= hdr.txn_id; rsp_model <= hdr.w2.model_id;
      end else if (hdr_v && hdr.w2.pkt_type == PKT_CHECK_ACK) begin
        rsp_v <= 1'b1; rsp_kind <= RSP_CHECK; rsp_ok <= loaded[MW'(hdr.w2.model_id)];
        rsp_user <= hdr.user_id; rsp_txn <= hdr.txn_id; rsp_model <= hdr.w2.model_id;
      end else if (is_req && !rq_push) begin
        rsp_v <= 1'b1; rsp_kind <= RSP_RETURN; rsp_ok <= 1'b0;
        rsp_user <= hdr.user_id; rsp_txn <= hdr.txn_id; rsp_model <= hdr.w2.model_id;
      end else if (f_v && cl_done_ack_ok) begin
        rsp_v <= 1'b1; rsp_kind <= RSP_RETURN; rsp_ok <= f_hit;
        rsp_user <= tbl[f_i].user; rsp_txn <= cl_done_txn[f_c];
        rsp_model <= 12'(tbl[f_i].model);
      end
      if (rq_push) begin
        tbl[free_i].valid <= 1'b1;
        tbl[free_i].user  <= hdr.user_id;
        tbl[free_i].txn   <= hdr.txn_id;
        tbl[free_i].model <= MW'(hdr.w2.model_id);
      end
      if (f_v && cl_done_ack_ok) begin
        if (f_hit) tbl[f_i].valid <= 1'b0;
      end
      for (int c = 0; c < int'(NCL); c++)
        inflight[c] <= inflight[c] + (RW+1)'(d_v && int'(d_c) == c)
                                   - (RW+1)'(f_v && cl_done_ack_ok && int'(f_c) == c);
    end
  end
endmodule
