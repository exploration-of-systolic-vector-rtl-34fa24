// hsv_pkg: types and constants shared by the heterogeneous systolic-vector
// (HSV) accelerator.
//
// Holds the UMF (unified model format) packet field layout, the layer and task
// descriptors that travel from the load balancer to a cluster and from a
// cluster's scheduler to its processors, the vector-lane instruction format,
// and the execution-time estimate the scheduler uses.
//
// From the paper: the UMF field order of every header (frame, information
// message, information packet, data message, data packet), the three packet
// types, the split of operations into array operations (GEMM/convolution,
// run on the systolic array or the vector processor) and vector operations
// (run on the vector processor only). This design's own choices: 32-bit flits
// with fields packed most-significant first in the order the schema draws
// them, the field widths, the numeric codes, and the layer-descriptor payload.
package hsv_pkg;

  localparam int unsigned FLIT_W = 32;

  // ---------------- UMF ----------------
  typedef enum logic [7:0] {
    PKT_MODEL_LOAD     = 8'd1,
    PKT_REQUEST_RETURN = 8'd2,
    PKT_CHECK_ACK      = 8'd3
  } umf_pkt_type_e;

  // Third flit of the frame header: Packet Type | UMF Version | Reserved | Model ID
  typedef struct packed {
    logic [7:0]  pkt_type;
    logic [7:0]  version;
    logic [3:0]  reserved;
    logic [11:0] model_id;
  } umf_frame_w2_t;

  typedef struct packed {
    logic [63:0]   frame_len;   // Length of Entire Frame (High, Low), in flits
    umf_frame_w2_t w2;
    logic [31:0]   user_id;
    logic [31:0]   txn_id;
  } umf_frame_hdr_t;

  // Information packet header, flit 0: Next Info Payload Len | Current Info Payload Len
  // flit 1: Operation Type | Output Type | Input Type | Attribute Type | Layer ID
  typedef struct packed {
    logic [7:0]  op_type;
    logic [3:0]  out_type;
    logic [3:0]  in_type;
    logic [3:0]  attr_type;
    logic [11:0] layer_id;
  } umf_info_w1_t;

  // Data packet header, flit 2: Data Type | Precision | Shape | Reserved | Tensor ID
  typedef struct packed {
    logic [7:0]  data_type;
    logic [7:0]  precision;
    logic [1:0]  shape;      // number of optional dimension flits that follow (0..2)
    logic [1:0]  reserved;
    logic [11:0] tensor_id;
  } umf_data_w2_t;

  // ---------------- operations ----------------
  typedef enum logic [7:0] {
    OP_NOP     = 8'd0,
    OP_GEMM    = 8'd1,  // array operation: C[MxN] = A[MxK] * W[KxN]
    OP_ADD     = 8'd2,  // vector: C = A + B (element-wise)
    OP_RELU    = 8'd3,  // vector: C = max(A, 0)
    OP_MAXPOOL = 8'd4,  // vector: C[0][n] = max over m of A[m][n]
    OP_LUT     = 8'd5,  // vector: piecewise-linear activation, table at B
    OP_EXP     = 8'd6,  // vector: C = exp(A), Q16.16
    OP_SOFTMAX = 8'd7,  // vector: C[m][n] = exp(A[m][n]) / sum_m exp(A[m][n]), Q16.16
    OP_RECIP   = 8'd8   // vector: C = 1 / A, Q16.16
  } op_e;

  function automatic logic is_array_op(op_e op);
    return op == OP_GEMM;
  endfunction

  // Layer descriptor carried by a 5-flit information payload.
  //   flit0: M[31:16] K[15:0]   flit1: N[15:0] (upper bits reserved)
  //   flit2: byte address of A  flit3: byte address of B/W  flit4: byte address of C
  localparam int unsigned LAYER_PAYLOAD_FLITS = 5;
  typedef struct packed {
    op_e         op;
    logic [15:0] m;
    logic [15:0] k;
    logic [15:0] n;
    logic [31:0] addr_a;
    logic [31:0] addr_b;
    logic [31:0] addr_c;
  } layer_desc_t;

  // Task handed from the cluster scheduler to one processor (a layer or a
  // sub-layer tile of it). Element size is 1 byte for GEMM on the systolic
  // array (int8 in, int32 out) and 4 bytes everywhere else.
  typedef struct packed {
    op_e         op;
    logic [15:0] m;
    logic [15:0] k;
    logic [15:0] n;       // columns in this tile
    logic [15:0] ld;      // row pitch (elements) of W and C: the layer's full N
    logic [31:0] addr_a;
    logic [31:0] addr_b;
    logic [31:0] addr_c;
    logic        last;    // last task of its request
    logic [7:0]  qid;     // task queue the task came from
  } task_t;

  // ---------------- vector lane ISA ----------------
  typedef enum logic [3:0] {
    V_NOP   = 4'd0,
    V_LD    = 4'd1,   // sp[rd] <= input buffer row imm
    V_ST    = 4'd2,   // output buffer row imm <= sp[rs1]
    V_ADD   = 4'd3,   // sp[rd] <= sp[rs1] + sp[rs2]
    V_MAX   = 4'd4,   // sp[rd] <= max(sp[rs1], sp[rs2])
    V_MAC   = 4'd5,   // sp[rd] <= sp[rd] + (sp[rs1]*opb) >>> shift
    V_MOVI  = 4'd6,   // sp[rd] <= sign-extended imm
    V_LUT   = 4'd7,   // sp[rd] <= w[idx]*sp[rs1] >>> 16 + b[idx]
    V_EXP   = 4'd8,   // sp[rd] <= exp(sp[rs1])      (multi-cycle SFU)
    V_RCP   = 4'd9,   // sp[rd] <= 1 / sp[rs1]       (multi-cycle SFU)
    V_MULQ  = 4'd10   // sp[rd] <= sp[rs1]*sp[rs2] >>> 16
  } vop_e;

  typedef struct packed {
    vop_e        op;
    logic [3:0]  rd;
    logic [3:0]  rs1;
    logic [3:0]  rs2;
    logic        bcast;   // V_MAC: take operand b from the broadcast bus instead of sp[rs2]
    logic [4:0]  shift;   // V_MAC: right shift of the product
    logic [15:0] imm;     // row index for V_LD/V_ST, constant for V_MOVI
  } vinstr_t;

  // ---------------- shared-memory port ----------------
  // One 32-bit word per request; addr is a byte address (bits [1:0] ignored,
  // byte lanes selected by be). A request is taken in the cycle gnt is high;
  // read data returns with rvalid one cycle later.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;
    logic [3:0]  be;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  // ---------------- execution-time model ----------------
  // Cycle estimates used by the scheduler (paper: "the scheduler uses the
  // performance model to estimate the computation time"). They follow the
  // phase counts of this design's processor controllers.
  function automatic logic [31:0] est_sa_cycles(task_t t, int unsigned rows, int unsigned cols);
    logic [31:0] ld, cmp, st;
    ld  = 32'(t.k) * 32'(t.n) + 32'(t.m) * 32'(t.k);   // byte reads of W and A
    cmp = 32'(rows) + 32'(t.m) + 32'(rows) + 32'(cols) + 4;
    st  = 32'(t.m) * 32'(t.n);                          // word writes of C
    return ld + cmp + st;
  endfunction

  function automatic logic [31:0] est_vp_cycles(task_t t);
    logic [31:0] e;
    e = 32'(t.m) * 32'(t.n);
    unique case (t.op)
      OP_GEMM:    return e + 32'(t.m) * 32'(t.k) + 32'(t.k) * 32'(t.n) + 32'(t.m) * (2 + 32'(t.k));
      OP_ADD:     return 3 * e + 2 * 32'(t.m);
      OP_EXP:     return 2 * e + 32'(t.m) * 20;
      OP_RECIP:   return 2 * e + 32'(t.m) * 36;
      OP_SOFTMAX: return 2 * e + 32'(t.m) * 60 + 40;
      default:    return 2 * e + 2 * 32'(t.m);
    endcase
  endfunction

endpackage
