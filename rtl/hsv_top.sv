// hsv_top: heterogeneous systolic-vector (HSV) accelerator.
//
// A load balancer in front of NCL systolic-vector clusters. The host sends
// UMF frames (model loads, inference requests, model checks) as 32-bit flits;
// the load balancer decodes them, writes the layer descriptors of a loaded
// model into every cluster's model information buffer, and hands each
// request to a cluster. Inside the cluster the scheduler splits layers into
// sub-layer tasks and places them on the systolic arrays and vector
// processors; the cluster reports completion, and the load balancer returns
// a response to the host.
// Ports: host flit input and response output; the data payload stream
// (parameters of a model load, activations of a request) leaves on data_*
// for the external memory; each cluster's shared memory is reachable through
// ext_req/ext_rsp[c], the place where the high-bandwidth-memory controllers
// and their interconnect would attach. The per-cluster observation outputs
// (split, sched_v, a2v, vp_stall, sm_conflict) and dispatch_v show the
// mechanisms at work.
//
// From the paper: load balancer plus SV clusters, request flow from host to
// cluster and back, and the configuration compared with the GPU: four
// clusters, each with four 64x64 systolic arrays, eight 64-lane vector
// processors and 40 MB of shared memory. The HBM controllers, the HBM, the
// PCIe interface and the host are not part of this RTL; their connections
// are the ports named above.
module hsv_top
  import hsv_pkg::*;
#(
  parameter int unsigned NCL        = 4,
  parameter int unsigned NSA        = 4,
  parameter int unsigned NVP        = 8,
  parameter int unsigned ROWS       = 64,
  parameter int unsigned COLS       = 64,
  parameter int unsigned LANES      = 64,
  parameter int unsigned NQ         = 4,
  parameter int unsigned NREQ       = 16,
  parameter int unsigned MAX_MODELS = 16,
  parameter int unsigned MAX_LAYERS = 64,
  parameter int unsigned NBANKS     = 16,
  parameter longint unsigned SM_BYTES = 64'd41943040
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_v,
  output logic        in_ready,
  input  logic [31:0] in_data,
  output logic        rsp_v,
  output logic [1:0]  rsp_kind,
  output logic        rsp_ok,
  output logic [31:0] rsp_user,
  output logic [31:0] rsp_txn,
  output logic [11:0] rsp_model,
  output logic        data_v,
  output logic [11:0] data_tensor,
  output logic [31:0] data_idx,
  output logic [31:0] data_word,
  input  mem_req_t    ext_req [NCL],
  output mem_rsp_t    ext_rsp [NCL],
  output logic        dispatch_v,
  output logic        split       [NCL],
  output logic        sched_v     [NCL],
  output logic        a2v         [NCL],
  output logic        vp_stall    [NCL],
  output logic        sm_conflict [NCL]
);
  logic                          mi_we;
  logic [$clog2(MAX_MODELS)-1:0] mi_model;
  logic [$clog2(MAX_LAYERS)-1:0] mi_layer;
  layer_desc_t                   mi_desc;
  logic                          req_v   [NCL];
  logic                          req_rdy [NCL];
  logic [$clog2(MAX_MODELS)-1:0] req_model;
  logic [31:0]                   req_txn;
  logic                          done_v   [NCL];
  logic [31:0]                   done_txn [NCL];
  logic                          done_ack [NCL];

  load_balancer #(.NCL(NCL), .NREQ(NREQ), .MAX_MODELS(MAX_MODELS), .MAX_LAYERS(MAX_LAYERS)) u_lb (
    .clk, .rst_n, .in_v, .in_ready, .in_data,
    .rsp_v, .rsp_kind, .rsp_ok, .rsp_user, .rsp_txn, .rsp_model,
    .data_v, .data_tensor, .data_idx, .data_word,
    .mi_we, .mi_model, .mi_layer, .mi_desc,
    .cl_req_v(req_v), .cl_req_rdy(req_rdy), .cl_req_model(req_model), .cl_req_txn(req_txn),
    .cl_done_v(done_v), .cl_done_txn(done_txn), .cl_done_ack(done_ack),
    .dispatch_v
  );

  for (genvar c = 0; c < NCL; c++) begin : g_cl
    sv_cluster #(
      .NSA(NSA), .NVP(NVP), .ROWS(ROWS), .COLS(COLS), .LANES(LANES), .NQ(NQ),
      .MAX_MODELS(MAX_MODELS), .MAX_LAYERS(MAX_LAYERS), .NBANKS(NBANKS), .SM_BYTES(SM_BYTES)
    ) u_cl (
      .clk, .rst_n,
      .req_v(req_v[c]), .req_ready(req_rdy[c]), .req_model, .req_txn,
      .done_v(done_v[c]), .done_txn(done_txn[c]), .done_ack(done_ack[c]),
      .mi_we, .mi_model, .mi_layer, .mi_desc,
      .ext_req(ext_req[c]), .ext_rsp(ext_rsp[c]),
      .split(split[c]), .sched_v(sched_v[c]), .a2v(a2v[c]), .vp_stall(vp_stall[c]),
      .sm_conflict(sm_conflict[c])
    );
  end
endmodule
