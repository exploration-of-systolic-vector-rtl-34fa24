// model_info_buffer: per-cluster store of the loaded models' layer lists.
//
// When a model is loaded, the load balancer writes one layer descriptor per
// UMF information packet (we, model, layer, desc). The buffer keeps
// MAX_LAYERS descriptors for each of MAX_MODELS models and, per model, the
// number of layers (one more than the highest layer ID written). A request is
// turned into layer-wise tasks by reading the descriptors of its model one by
// one through the asynchronous read port (rmodel, rlayer -> rdesc, nlayers).
// Reset clears the layer counts, which marks every model as not loaded.
//
// From the paper: the model information buffer holds the model information
// of the cluster's requests, used for the execution-time estimate and the
// data to fetch. This design's own: the capacity and the organisation.
module model_info_buffer
  import hsv_pkg::*;
#(
  parameter int unsigned MAX_MODELS = 16,
  parameter int unsigned MAX_LAYERS = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          we,
  input  logic [$clog2(MAX_MODELS)-1:0] wmodel,
  input  logic [$clog2(MAX_LAYERS)-1:0] wlayer,
  input  layer_desc_t                   wdesc,
  input  logic [$clog2(MAX_MODELS)-1:0] rmodel,
  input  logic [$clog2(MAX_LAYERS)-1:0] rlayer,
  output layer_desc_t                   rdesc,
  output logic [$clog2(MAX_LAYERS):0]   nlayers
);
  localparam int unsigned LW = $clog2(MAX_LAYERS);
  layer_desc_t         mem [MAX_MODELS][MAX_LAYERS];
  logic [LW:0]         cnt [MAX_MODELS];

  assign rdesc   = mem[rmodel][rlayer];
  assign nlayers = cnt[rmodel];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(MAX_MODELS); i++) cnt[i] <= '0;
    end else if (we) begin
      mem[wmodel][wlayer] <= wdesc;
      if ((LW+1)'(wlayer) >= cnt[wmodel]) cnt[wmodel] <= (LW+1)'(wlayer) + 1'b1;
    end
  end
endmodule
