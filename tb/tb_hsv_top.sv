// tb_hsv_top: self-checking end-to-end test of the accelerator.
// A reduced configuration (two clusters, each with one 4x4 systolic array,
// two 4-lane vector processors, two task queues and 64 kB shared memory)
// is driven only through its host ports:
//   1. a check-ack frame for a model not yet loaded (answer ok = 0);
//   2. a model-load frame with three layers, GEMM 5x6 by 6x7, RELU and a
//      reciprocal (its result is not checked here), plus a
//      parameter data packet (answer loaded, ok = 1; payload on data_*);
//   3. a second check-ack (answer ok = 1);
//   4. the input and weight bytes are placed in both clusters' shared
//      memories through the external-memory ports;
//   5. a request for an unknown model (answer ok = 0) and six requests for
//      the loaded model with activation payloads.
// Each request must come back exactly once with its user and transaction
// IDs, and the GEMM and RELU results in both clusters must match values
// computed here. Each mechanism is counted and a failure is recorded if it
// never happened: model information write, dispatch, dispatch to each
// cluster, layer splitting, HAS scheduling, array operation placed on a
// vector processor, vector-processor stall, shared-memory bank conflict,
// data payload forwarding, and every response kind.
module tb_hsv_top;
  import hsv_pkg::*;
  localparam int NCL = 2, SMB = 65536;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_mi = 0, n_disp = 0, n_split = 0, n_sched = 0, n_a2v = 0, n_stall = 0, n_conf = 0, n_data = 0;
  int n_loaded = 0, n_check0 = 0, n_check1 = 0, n_rej = 0, n_ret = 0;
  int n_cl [NCL];

  logic in_v, in_ready, rsp_v, rsp_ok, data_v, dispatch_v;
  logic [31:0] in_data, rsp_user, rsp_txn, data_idx, data_word;
  logic [1:0] rsp_kind;
  logic [11:0] rsp_model, data_tensor;
  mem_req_t ext_req [NCL];
  mem_rsp_t ext_rsp [NCL];
  logic split [NCL], sched_v [NCL], a2v [NCL], vp_stall [NCL], sm_conflict [NCL];

  hsv_top #(.NCL(NCL), .NSA(1), .NVP(2), .ROWS(4), .COLS(4), .LANES(4), .NQ(2), .NREQ(4),
            .MAX_MODELS(4), .MAX_LAYERS(4), .NBANKS(4), .SM_BYTES(SMB)) dut (.*);

  logic [31:0] flits[$];
  byte unsigned img [2048];
  logic [31:0] user_of [int];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (dut.u_lb.mi_we) n_mi++;
    if (dispatch_v) n_disp++;
    if (data_v) n_data++;
    for (int c = 0; c < NCL; c++) begin
      if (split[c]) begin n_split++; n_cl[c]++; end
      if (sched_v[c]) n_sched++;
      if (a2v[c]) n_a2v++;
      if (vp_stall[c]) n_stall++;
      if (sm_conflict[c]) n_conf++;
    end
    if (rsp_v) begin
      checks++;
      unique case (rsp_kind)
        2'd1: if (rsp_ok) n_loaded++; else begin failures++; $display("FAIL load not acknowledged"); end
        2'd2: if (rsp_ok) n_check1++; else n_check0++;
        2'd3: if (!rsp_ok) n_rej++;
              else if (!user_of.exists(int'(rsp_txn)) || user_of[int'(rsp_txn)] != rsp_user) begin
                failures++; $display("FAIL return txn %0d", rsp_txn);
              end else begin n_ret++; user_of.delete(int'(rsp_txn)); end
        default: begin failures++; $display("FAIL response kind"); end
      endcase
    end
  end

  task automatic hdr(int typ, int model, int txn, logic [31:0] user);
    flits.push_back(0); flits.push_back(0);
    flits.push_back({8'(typ), 8'd1, 4'd0, 12'(model)});   // type, version, reserved, model ID
    flits.push_back(user); flits.push_back(32'(txn));
  endtask
  task automatic info(int layer, op_e op, int m, int k, int n, int a, int b, int c);
    flits.push_back(32'd5);
    flits.push_back({8'(op), 4'd0, 4'd0, 4'd0, 12'(layer)}); // op, out, in, attribute type, layer ID
    flits.push_back({16'(m), 16'(k)}); flits.push_back(32'(n));
    flits.push_back(32'(a)); flits.push_back(32'(b)); flits.push_back(32'(c));
  endtask
  task automatic data_msg(int tensor, int len);
    flits.push_back(0); flits.push_back(0); flits.push_back(1);
    flits.push_back(0); flits.push_back(32'(len));
    flits.push_back({8'd1, 8'd8, 2'd1, 2'd0, 12'(tensor)}); // type, precision, shape, reserved, tensor
    flits.push_back(32'(len));
    for (int i = 0; i < len; i++) flits.push_back($urandom);
  endtask
  task automatic send;
    while (flits.size() != 0) begin
      @(negedge clk);
      in_v = ($urandom % 4) != 0;
      in_data = flits[0];
      @(posedge clk);
      if (in_v && in_ready) void'(flits.pop_front());
    end
    @(negedge clk); in_v = 0;
  endtask
  task automatic ext_rw(int c, bit we, int a, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk); ext_req[c] = '{req: 1, we: we, addr: 32'(a), be: 4'hF, wdata: wd};
    @(posedge clk); while (!ext_rsp[c].gnt) @(posedge clk);
    @(negedge clk); ext_req[c] = '0;
    rd = ext_rsp[c].rdata;
  endtask

  initial begin
    logic [31:0] w;
    in_v = 0; in_data = 0;
    foreach (ext_req[c]) ext_req[c] = '0;
    foreach (n_cl[c]) n_cl[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    hdr(PKT_CHECK_ACK, 2, 1, 32'h11);
    hdr(PKT_MODEL_LOAD, 2, 2, 32'h11);
    flits.push_back(0); flits.push_back(0); flits.push_back(3);
    info(0, OP_GEMM, 5, 6, 7, 0, 1024, 4096);
    info(1, OP_RELU, 5, 0, 7, 4096, 0, 8192);
    info(2, OP_RECIP, 5, 0, 7, 8192, 0, 12288);   // exercises the special function unit
    data_msg(1, 10);
    hdr(PKT_CHECK_ACK, 2, 3, 32'h11);
    send;
    for (int a = 0; a < 64; a += 4) begin
      for (int y = 0; y < 4; y++) begin img[a + y] = 8'($urandom); img[1024 + a + y] = 8'($urandom); end
      for (int c = 0; c < NCL; c++) begin
        ext_rw(c, 1, a, {img[a + 3], img[a + 2], img[a + 1], img[a]}, w);
        ext_rw(c, 1, 1024 + a, {img[1027 + a], img[1026 + a], img[1025 + a], img[1024 + a]}, w);
      end
    end
    hdr(PKT_REQUEST_RETURN, 3, 9, 32'h22);
    flits.push_back(0); flits.push_back(0); flits.push_back(0);
    for (int r = 0; r < 6; r++) begin
      automatic logic [31:0] u = $urandom;
      user_of[100 + r] = u;
      hdr(PKT_REQUEST_RETURN, 2, 100 + r, u);
      data_msg(2, 3);
    end
    send;
    while (user_of.size() != 0) @(posedge clk);
    for (int c = 0; c < NCL; c++)
      for (int i = 0; i < 5; i++) for (int j = 0; j < 7; j++) begin
        automatic int s = 0;
        for (int q = 0; q < 6; q++) s += int'($signed(img[i * 6 + q])) * int'($signed(img[1024 + q * 7 + j]));
        ext_rw(c, 0, 4096 + 4 * (i * 7 + j), 0, w);
        checks++;
        if (int'(w) != s) begin failures++; $display("FAIL cluster %0d gemm %0d,%0d", c, i, j); end
        ext_rw(c, 0, 8192 + 4 * (i * 7 + j), 0, w);
        checks++;
        if (int'(w) != (s > 0 ? s : 0)) begin failures++; $display("FAIL cluster %0d relu %0d,%0d", c, i, j); end
      end
    begin
      string nm [14] = '{"model info write", "dispatch", "layer split", "HAS schedule", "array op on VP",
                         "VP stall", "bank conflict", "data forwarding", "load ack", "check not loaded",
                         "check loaded", "request reject", "request return", "both clusters used"};
      int cnt [14];
      cnt = '{n_mi, n_disp, n_split, n_sched, n_a2v, n_stall, n_conf, n_data, n_loaded, n_check0,
                       n_check1, n_rej, n_ret, (n_cl[0] != 0 && n_cl[1] != 0)};
      for (int i = 0; i < 14; i++) begin
        checks++;
        $display("%-20s %0d", nm[i], cnt[i]);
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism never seen: %s", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
