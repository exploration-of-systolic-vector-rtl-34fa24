// tb_sv_cluster: self-checking end-to-end test of one SV cluster.
// A small cluster (one 4x4 systolic array, two 4-lane vector processors, two
// task queues, 64 kB shared memory) receives two models through the model
// information port: model 0 is GEMM (5x6 by 6x7, split into two column
// tiles) followed by RELU; model 1 is GEMM (3x5 by 5x3) followed by
// SOFTMAX. Inputs are written into the shared memory through the external
// port; two requests for each model are sent (four in total, so requests
// also wait for a free queue). Each completion must carry the transaction ID
// of an outstanding request, and the final results read back through the
// external port must match values computed here (SOFTMAX within a
// tolerance). The split and a2v (array operation on a vector processor)
// observations must each have occurred.
module tb_sv_cluster;
  import hsv_pkg::*;
  localparam int SMB = 65536;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_split = 0, n_a2v = 0, n_sched = 0, n_stall = 0, n_conf = 0;

  logic req_v, req_ready, done_v, done_ack, mi_we, split, sched_v, a2v, vp_stall, sm_conflict;
  logic [1:0] req_model, mi_model;
  logic [1:0] mi_layer;
  logic [31:0] req_txn, done_txn;
  layer_desc_t mi_desc;
  mem_req_t ext_req;
  mem_rsp_t ext_rsp;

  sv_cluster #(.NSA(1), .NVP(2), .ROWS(4), .COLS(4), .LANES(4), .NQ(2), .QDEPTH(4),
               .MAX_MODELS(4), .MAX_LAYERS(4), .NBANKS(4), .SM_BYTES(SMB)) dut (.*);

  byte unsigned img [SMB];
  bit outstanding [int];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (split) n_split++;
    if (a2v) n_a2v++;
    if (sched_v) n_sched++;
    if (vp_stall) n_stall++;
    if (sm_conflict) n_conf++;
  end

  task automatic ext_write(int a, logic [31:0] w);
    @(negedge clk); ext_req = '{req: 1, we: 1, addr: 32'(a), be: 4'hF, wdata: w};
    @(posedge clk); while (!ext_rsp.gnt) @(posedge clk);
    @(negedge clk); ext_req = '0;
  endtask
  task automatic ext_read(int a, output logic [31:0] w);
    @(negedge clk); ext_req = '{req: 1, we: 0, addr: 32'(a), be: 4'h0, wdata: 0};
    @(posedge clk); while (!ext_rsp.gnt) @(posedge clk);
    @(negedge clk); ext_req = '0;
    w = ext_rsp.rdata;
  endtask
  task automatic mi(int model, int layer, op_e op, int m, int k, int n, int a, int b, int c);
    @(negedge clk);
    mi_we = 1; mi_model = 2'(model); mi_layer = 2'(layer);
    mi_desc = '{op: op, m: 16'(m), k: 16'(k), n: 16'(n), addr_a: 32'(a), addr_b: 32'(b), addr_c: 32'(c)};
    @(negedge clk); mi_we = 0;
  endtask
  task automatic request(int model, int txn);
    @(negedge clk); req_v = 1; req_model = 2'(model); req_txn = 32'(txn);
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_v = 0;
    outstanding[txn] = 1;
  endtask

  // completions
  always @(posedge clk) if (rst_n) begin
    done_ack <= done_v && !done_ack && ($urandom % 2);
    if (done_v && done_ack) begin
      checks++;
      if (!outstanding.exists(int'(done_txn))) begin failures++; $display("FAIL completion txn %0d", done_txn); end
      else outstanding.delete(int'(done_txn));
    end
  end

  function automatic int gemm_ref(int a, int w, int i, int j, int k, int n);
    int s = 0;
    for (int q = 0; q < k; q++) s += int'($signed(img[a + i * k + q])) * int'($signed(img[w + q * n + j]));
    return s;
  endfunction

  initial begin
    logic [31:0] w;
    req_v = 0; req_model = 0; req_txn = 0; mi_we = 0; mi_model = 0; mi_layer = 0; mi_desc = '0;
    ext_req = '0; done_ack = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // model 0: C0 = A0 x W0 (int8, 5x6 x 6x7) at 4096, then RELU -> 8192
    mi(0, 0, OP_GEMM, 5, 6, 7, 0, 1024, 4096);
    mi(0, 1, OP_RELU, 5, 0, 7, 4096, 0, 8192);
    // model 1: C1 = A1 x W1 (3x5 x 5x3) at 20480 scaled down, then SOFTMAX -> 24576
    mi(1, 0, OP_GEMM, 3, 5, 3, 16384, 17408, 20480);
    mi(1, 1, OP_SOFTMAX, 3, 0, 3, 20480, 0, 24576);
    for (int a = 0; a < 128; a += 4) begin
      for (int y = 0; y < 4; y++) begin
        img[a + y] = 8'($urandom);
        img[1024 + a + y] = 8'($urandom);
        img[16384 + a + y] = 8'($urandom % 5);
        img[17408 + a + y] = 8'($urandom % 5);
      end
      ext_write(a, {img[a + 3], img[a + 2], img[a + 1], img[a]});
      ext_write(1024 + a, {img[1027 + a], img[1026 + a], img[1025 + a], img[1024 + a]});
      ext_write(16384 + a, {img[16387 + a], img[16386 + a], img[16385 + a], img[16384 + a]});
      ext_write(17408 + a, {img[17411 + a], img[17410 + a], img[17409 + a], img[17408 + a]});
    end
    fork
      request(0, 100);
      begin repeat (2) @(negedge clk); request(1, 101); end
    join
    request(0, 102);
    request(1, 103);
    while (outstanding.size() != 0) @(posedge clk);
    for (int i = 0; i < 5; i++) for (int j = 0; j < 7; j++) begin
      automatic int e = gemm_ref(0, 1024, i, j, 6, 7);
      ext_read(4096 + 4 * (i * 7 + j), w);
      checks++;
      if (int'(w) != e) begin failures++; $display("FAIL gemm0 %0d,%0d got %0d exp %0d", i, j, int'(w), e); end
      ext_read(8192 + 4 * (i * 7 + j), w);
      checks++;
      if (int'(w) != (e > 0 ? e : 0)) begin failures++; $display("FAIL relu %0d,%0d", i, j); end
    end
    for (int j = 0; j < 3; j++) begin
      automatic real sum = 0.0;
      // the GEMM result is read as Q16.16 by SOFTMAX: values are small integers / 65536
      for (int i = 0; i < 3; i++) sum += $exp(real'(gemm_ref(16384, 17408, i, j, 5, 3)) / 65536.0);
      for (int i = 0; i < 3; i++) begin
        automatic int e = int'($exp(real'(gemm_ref(16384, 17408, i, j, 5, 3)) / 65536.0) / sum * 65536.0);
        ext_read(24576 + 4 * (i * 3 + j), w);
        checks++;
        if (int'(w) - e > 8 + e / 200 || e - int'(w) > 8 + e / 200) begin
          failures++; $display("FAIL softmax %0d,%0d got %0d exp %0d", i, j, int'(w), e);
        end
      end
    end
    checks += 3;
    if (n_split == 0) begin failures++; $display("FAIL no layer split"); end
    if (n_a2v == 0) begin failures++; $display("FAIL no array operation on a vector processor"); end
    if (n_sched == 0) begin failures++; $display("FAIL nothing scheduled"); end
    $display("split=%0d a2v=%0d sched=%0d vp_stall=%0d sm_conflict=%0d", n_split, n_a2v, n_sched, n_stall, n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
