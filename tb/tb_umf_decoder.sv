// tb_umf_decoder: self-checking test of the UMF frame decoder.
// Random frames of all three packet types are built here flit by flit
// (model load with 0-4 information packets of 0-7 payload flits and 0-3
// data packets with 0-3 dimension flits, request-return with data packets,
// check-ack with the header only) and sent with random gaps while hold is
// raised at random. The decoder's outputs are compared with the expected
// event list: the frame header, each layer ID and descriptor, each data
// word with its tensor ID and index, and the end of the frame.
module tb_umf_decoder;
  import hsv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_v, in_ready, hold, hdr_v, layer_v, data_v, end_v;
  logic [31:0] in_data, data_idx, data_word;
  umf_frame_hdr_t hdr;
  logic [11:0] layer_id, data_tensor;
  layer_desc_t layer;

  umf_decoder dut (.*);

  logic [31:0] flits[$];
  // expected events: kind 0 header, 1 layer, 2 data, 3 end
  typedef struct { int kind; logic [31:0] a, b, c; umf_frame_hdr_t h; layer_desc_t l; } ev_t;
  ev_t evs[$];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic add_data_msg(int npk);
    flits.push_back(0); flits.push_back(32'($urandom % 100)); flits.push_back(32'(npk));
    for (int p = 0; p < npk; p++) begin
      automatic int len = $urandom % 5, sh = $urandom % 4;
      automatic umf_data_w2_t w = '{data_type: 8'($urandom), precision: 8'($urandom), shape: 2'(sh),
                                    reserved: 0, tensor_id: 12'($urandom)};
      flits.push_back(0); flits.push_back(32'(len)); flits.push_back(w);
      for (int d = 0; d < sh; d++) flits.push_back($urandom);
      for (int i = 0; i < len; i++) begin
        automatic ev_t e;
        e.kind = 2; e.a = 32'(w.tensor_id); e.b = 32'(i); e.c = $urandom;
        flits.push_back(e.c); evs.push_back(e);
      end
    end
  endtask

  task automatic add_frame(int typ);
    automatic umf_frame_hdr_t h;
    automatic ev_t e;
    h.frame_len = 64'($urandom); h.user_id = $urandom; h.txn_id = $urandom;
    h.w2 = '{pkt_type: 8'(typ), version: 8'd1, reserved: 0, model_id: 12'($urandom)};
    flits.push_back(h.frame_len[63:32]); flits.push_back(h.frame_len[31:0]);
    flits.push_back(h.w2); flits.push_back(h.user_id); flits.push_back(h.txn_id);
    e.kind = 0; e.h = h; evs.push_back(e);
    if (typ == PKT_MODEL_LOAD) begin
      automatic int ni = $urandom % 5;
      flits.push_back(0); flits.push_back(32'($urandom % 100)); flits.push_back(32'(ni));
      for (int p = 0; p < ni; p++) begin
        automatic int len = (p % 2) ? 5 : $urandom % 8;
        automatic umf_info_w1_t w = '{op_type: 8'(1 + $urandom % 8), out_type: 0, in_type: 0,
                                      attr_type: 0, layer_id: 12'($urandom)};
        automatic logic [31:0] pay [8];
        automatic ev_t l;
        foreach (pay[i]) pay[i] = (i < len) ? $urandom : 0;
        flits.push_back({16'd0, 16'(len)}); flits.push_back(w);
        for (int i = 0; i < len; i++) flits.push_back(pay[i]);
        l.kind = 1; l.a = 32'(w.layer_id);
        l.l = '{op: op_e'(w.op_type), m: pay[0][31:16], k: pay[0][15:0], n: pay[1][15:0],
                addr_a: pay[2], addr_b: pay[3], addr_c: pay[4]};
        evs.push_back(l);
      end
      add_data_msg($urandom % 4);
    end else if (typ == PKT_REQUEST_RETURN) add_data_msg($urandom % 4);
    e.kind = 3; evs.push_back(e);
  endtask

  // outputs of one cycle are taken in frame order: header, layer, data, end
  task automatic expect_ev(int kind);
    automatic ev_t e;
    checks++;
    if (evs.size() == 0 || evs[0].kind != kind) begin
      failures++; $display("FAIL output kind %0d not expected", kind); return;
    end
    e = evs.pop_front();
    if (kind == 0 && hdr != e.h) begin failures++; $display("FAIL header"); end
    if (kind == 1 && !(32'(layer_id) == e.a && layer == e.l)) begin failures++; $display("FAIL layer"); end
    if (kind == 2 && !(32'(data_tensor) == e.a && data_idx == e.b && data_word == e.c)) begin
      failures++; $display("FAIL data");
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (hdr_v)   expect_ev(0);
    if (layer_v) expect_ev(1);
    if (data_v)  expect_ev(2);
    if (end_v)   expect_ev(3);
  end

  initial begin
    in_v = 0; in_data = 0; hold = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 200; f++) add_frame(1 + $urandom % 3);
    while (flits.size() != 0) begin
      @(negedge clk);
      hold = ($urandom % 5) == 0;
      in_v = ($urandom % 4) != 0;
      in_data = flits[0];
      @(posedge clk);
      if (in_v && in_ready) void'(flits.pop_front());
    end
    @(negedge clk); in_v = 0; hold = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (evs.size() != 0) begin failures++; $display("FAIL %0d events missing", evs.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
