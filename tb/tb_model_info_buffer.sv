// tb_model_info_buffer: self-checking test of the model information buffer.
// Random layer descriptors are written for several models (layers in random
// order, some rewritten); every stored descriptor and each model's layer
// count are read back and compared with a reference. A second reset must
// clear all layer counts.
module tb_model_info_buffer;
  import hsv_pkg::*;
  localparam int MM = 4, ML = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [1:0] wmodel, rmodel;
  logic [2:0] wlayer, rlayer;
  layer_desc_t wdesc, rdesc;
  logic [3:0] nlayers;

  model_info_buffer #(.MAX_MODELS(MM), .MAX_LAYERS(ML)) dut (.*);

  layer_desc_t ref_d [MM][ML];
  int ref_n [MM];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all;
    for (int mo = 0; mo < MM; mo++) begin
      for (int l = 0; l < ref_n[mo]; l++) begin
        @(negedge clk); rmodel = 2'(mo); rlayer = 3'(l); #1;
        checks++;
        if (rdesc != ref_d[mo][l]) begin failures++; $display("FAIL model %0d layer %0d", mo, l); end
      end
      @(negedge clk); rmodel = 2'(mo); #1;
      checks++;
      if (int'(nlayers) != ref_n[mo]) begin failures++; $display("FAIL model %0d count %0d", mo, nlayers); end
    end
  endtask

  initial begin
    we = 0; wmodel = 0; wlayer = 0; wdesc = '0; rmodel = 0; rlayer = 0;
    foreach (ref_n[mo]) ref_n[mo] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (200) begin
      automatic int mo = $urandom % MM, l = $urandom % ML;
      @(negedge clk);
      we = 1; wmodel = 2'(mo); wlayer = 3'(l);
      wdesc = '{op: op_e'(1 + $urandom % 8), m: 16'($urandom), k: 16'($urandom), n: 16'($urandom),
                addr_a: $urandom, addr_b: $urandom, addr_c: $urandom};
      ref_d[mo][l] = wdesc;
      if (l + 1 > ref_n[mo]) ref_n[mo] = l + 1;
      if ($urandom % 8 == 0) begin @(negedge clk); we = 0; check_all; end
    end
    @(negedge clk); we = 0;
    check_all;
    rst_n = 0; @(negedge clk); rst_n = 1;
    foreach (ref_n[mo]) ref_n[mo] = 0;
    check_all;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
