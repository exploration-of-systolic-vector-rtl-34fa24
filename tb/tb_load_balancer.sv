// tb_load_balancer: self-checking test of the load balancer.
// The host side sends UMF frames built here; the four clusters are modelled
// (random readiness, completion a random time after a request, completions
// of different clusters at the same time). Checked:
//   - a model load writes each layer descriptor to the model information
//     port and is acknowledged (loaded, ok);
//   - a check-ack frame is answered with ok = model loaded;
//   - a request for a model not loaded is answered at once with ok = 0;
//   - each request is dispatched once, in arrival order, to a ready cluster
//     with the fewest requests in flight, with its model and transaction ID;
//   - each completion returns exactly one response with the request's user
//     and transaction IDs, ok = 1;
//   - the data payload of a request leaves on the data stream.
module tb_load_balancer;
  import hsv_pkg::*;
  localparam int NCL = 4, NREQ = 8, MM = 16, ML = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, dispatches = 0, returns = 0, data_words = 0;

  logic in_v, in_ready, rsp_v, rsp_ok, data_v, mi_we, dispatch_v;
  logic [31:0] in_data, rsp_user, rsp_txn, data_idx, data_word;
  logic [1:0] rsp_kind;
  logic [11:0] rsp_model, data_tensor;
  logic [3:0] mi_model;
  logic [5:0] mi_layer;
  layer_desc_t mi_desc;
  logic cl_req_v [NCL], cl_req_rdy [NCL], cl_done_v [NCL], cl_done_ack [NCL];
  logic [3:0] cl_req_model;
  logic [31:0] cl_req_txn, cl_done_txn [NCL];

  load_balancer #(.NCL(NCL), .NREQ(NREQ), .MAX_MODELS(MM), .MAX_LAYERS(ML)) dut (.*);

  logic [31:0] flits[$];
  typedef struct { int kind; logic ok; logic [31:0] user, txn; int model; } rsp_t;
  rsp_t host_rsp[$];             // expected immediate responses, in order
  layer_desc_t mi_exp[$];
  int mi_layer_exp[$];
  int req_order[$];              // txns accepted, in arrival order
  logic [31:0] user_of [int];
  int model_of [int];
  int inflight [NCL];
  int pend_txn [NCL][$];
  int pend_time [NCL][$];
  bit loaded [MM];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic frame(int typ, int model, int txn, int nlayers, int ndata);
    automatic logic [31:0] user = $urandom;
    automatic umf_frame_w2_t w2 = '{pkt_type: 8'(typ), version: 8'd1, reserved: 0, model_id: 12'(model)};
    flits.push_back(0); flits.push_back(0); flits.push_back(w2); flits.push_back(user); flits.push_back(32'(txn));
    if (typ == PKT_MODEL_LOAD) begin
      flits.push_back(0); flits.push_back(0); flits.push_back(32'(nlayers));
      for (int l = 0; l < nlayers; l++) begin
        automatic layer_desc_t d = '{op: op_e'(1 + $urandom % 8), m: 16'($urandom), k: 16'($urandom),
                                     n: 16'($urandom), addr_a: $urandom, addr_b: $urandom, addr_c: $urandom};
        automatic umf_info_w1_t w = '{op_type: 8'(d.op), out_type: 0, in_type: 0, attr_type: 0, layer_id: 12'(l)};
        flits.push_back(32'd5); flits.push_back(w);
        flits.push_back({d.m, d.k}); flits.push_back({16'd0, d.n});
        flits.push_back(d.addr_a); flits.push_back(d.addr_b); flits.push_back(d.addr_c);
        mi_exp.push_back(d); mi_layer_exp.push_back(l);
      end
      flits.push_back(0); flits.push_back(0); flits.push_back(0);
      host_rsp.push_back('{1, 1'b1, user, 32'(txn), model});
      loaded[model] = 1;
    end else if (typ == PKT_CHECK_ACK) begin
      host_rsp.push_back('{2, loaded[model], user, 32'(txn), model});
    end else begin
      flits.push_back(0); flits.push_back(0); flits.push_back(1);
      flits.push_back(0); flits.push_back(32'(ndata)); flits.push_back(32'(7));
      for (int i = 0; i < ndata; i++) flits.push_back($urandom);
      if (loaded[model]) begin
        req_order.push_back(txn); user_of[txn] = user; model_of[txn] = model;
      end else host_rsp.push_back('{3, 1'b0, user, 32'(txn), model});
    end
  endtask

  // cluster models
  always @(posedge clk) if (rst_n) begin
    automatic int best = 1 << 30;
    for (int c = 0; c < NCL; c++) if (cl_req_rdy[c] && inflight[c] < best) best = inflight[c];
    for (int c = 0; c < NCL; c++) begin
      if (cl_done_ack[c]) begin void'(pend_txn[c].pop_front()); void'(pend_time[c].pop_front()); end
      if (cl_req_v[c]) begin
        dispatches++;
        checks += 3;
        if (!cl_req_rdy[c]) begin failures++; $display("FAIL dispatch to busy cluster"); end
        if (inflight[c] != best) begin failures++; $display("FAIL cluster %0d not least loaded", c); end
        if (req_order.size() == 0 || cl_req_txn != 32'(req_order[0]) ||
            int'(cl_req_model) != model_of[req_order[0]]) begin
          failures++; $display("FAIL dispatch order or contents");
        end
        if (req_order.size() != 0) void'(req_order.pop_front());
        pend_txn[c].push_back(int'(cl_req_txn));
        pend_time[c].push_back(10 + $urandom % 60);
        inflight[c]++;
      end
      if (cl_done_ack[c]) inflight[c]--;
    end
    for (int c = 0; c < NCL; c++) begin
      cl_req_rdy[c] <= ($urandom % 3) != 0;
      if (pend_time[c].size() != 0 && pend_time[c][0] > 0) pend_time[c][0]--;
      cl_done_v[c]   <= pend_time[c].size() != 0 && pend_time[c][0] == 0 && !cl_done_ack[c];
      cl_done_txn[c] <= pend_txn[c].size() != 0 ? 32'(pend_txn[c][0]) : 0;
    end
    if (mi_we) begin
      checks++;
      if (mi_exp.size() == 0 || mi_desc != mi_exp[0] || int'(mi_layer) != mi_layer_exp[0]) begin
        failures++; $display("FAIL model information write");
      end
      if (mi_exp.size() != 0) begin void'(mi_exp.pop_front()); void'(mi_layer_exp.pop_front()); end
    end
    if (data_v) data_words++;
    if (rsp_v) begin
      checks++;
      if (rsp_kind == 2'd3 && rsp_ok) begin
        returns++;
        if (!user_of.exists(int'(rsp_txn)) || user_of[int'(rsp_txn)] != rsp_user) begin
          failures++; $display("FAIL return for txn %0d", rsp_txn);
        end else user_of.delete(int'(rsp_txn));
      end else if (host_rsp.size() == 0 || host_rsp[0].kind != int'(rsp_kind) || host_rsp[0].ok != rsp_ok ||
                   host_rsp[0].user != rsp_user || host_rsp[0].txn != rsp_txn) begin
        failures++; $display("FAIL response kind %0d ok %0d", rsp_kind, rsp_ok);
        if (host_rsp.size() != 0) void'(host_rsp.pop_front());
      end else void'(host_rsp.pop_front());
    end
  end

  initial begin
    int txn = 1;
    in_v = 0; in_data = 0;
    for (int c = 0; c < NCL; c++) begin cl_req_rdy[c] = 0; cl_done_v[c] = 0; cl_done_txn[c] = 0; inflight[c] = 0; end
    foreach (loaded[i]) loaded[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    frame(PKT_CHECK_ACK, 3, txn++, 0, 0);
    frame(PKT_MODEL_LOAD, 3, txn++, 4, 0);
    frame(PKT_MODEL_LOAD, 5, txn++, 2, 0);
    frame(PKT_CHECK_ACK, 3, txn++, 0, 0);
    frame(PKT_REQUEST_RETURN, 9, txn++, 0, 2);
    for (int r = 0; r < 60; r++) frame(PKT_REQUEST_RETURN, ($urandom % 2) ? 3 : 5, txn++, 0, $urandom % 4);
    while (flits.size() != 0) begin
      @(negedge clk);
      in_v = ($urandom % 4) != 0;
      in_data = flits[0];
      @(posedge clk);
      if (in_v && in_ready) void'(flits.pop_front());
    end
    @(negedge clk); in_v = 0;
    repeat (3000) @(negedge clk);
    checks += 4;
    if (user_of.size() != 0) begin failures++; $display("FAIL %0d requests never returned", user_of.size()); end
    if (host_rsp.size() != 0) begin failures++; $display("FAIL %0d host responses missing", host_rsp.size()); end
    if (mi_exp.size() != 0) begin failures++; $display("FAIL model information writes missing"); end
    if (data_words == 0) begin failures++; $display("FAIL no data payload forwarded"); end
    $display("dispatches=%0d returns=%0d data=%0d", dispatches, returns, data_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
