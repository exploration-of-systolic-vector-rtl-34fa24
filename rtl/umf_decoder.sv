// umf_decoder: decoder for unified model format (UMF) frames.
//
// Takes a UMF frame as a stream of 32-bit flits and splits it into its
// parts. Frame layout (one row of the schema = one flit):
//   frame header          len_hi, len_lo, {type,version,rsvd,model}, user, txn
//   info message header   len_hi, len_lo, {rsvd[31:16], #info packets[15:0]}
//   info packet           {next len[31:16], cur len[15:0]},
//                         {op,out type,in type,attr type,layer}, cur len payload flits
//   data message header   len_hi, len_lo, {rsvd[31:16], #data packets[15:0]}
//   data packet           len_hi, len_lo, {dtype,prec,shape,rsvd,tensor},
//                         shape dimension flits, len_lo payload flits
// model load frames carry the info message and the data message, request-
// return frames only the data message, check-ack frames only the frame
// header. Outputs (one-cycle pulses):
//   hdr_v    the frame header is complete (hdr)
//   layer_v  an info packet is complete: layer_id and the layer descriptor
//            built from the first five payload flits (see hsv_pkg)
//   data_v   one data payload flit: tensor ID, flit index, word
//   end_v    the frame is complete
// A flit is taken in every cycle in_v and in_ready are high; in_ready is
// low while hold is high.
//
// From the paper: the three-part frame, the fields and their order in each
// header, the packet types and which parts each carries, payload lengths
// telling how much to read. This design's own: the 32-bit flit, the field
// widths and codes, the meaning of Shape (number of dimension flits), the
// layer descriptor held in the info payload; the frame and packet length
// fields in the headers are read but not checked.
module umf_decoder
  import hsv_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_v,
  output logic           in_ready,
  input  logic [31:0]    in_data,
  input  logic           hold,
  output logic           hdr_v,
  output umf_frame_hdr_t hdr,
  output logic           layer_v,
  output logic [11:0]    layer_id,
  output layer_desc_t    layer,
  output logic           data_v,
  output logic [11:0]    data_tensor,
  output logic [31:0]    data_idx,
  output logic [31:0]    data_word,
  output logic           end_v
);
  typedef enum logic [3:0] {
    D_FH, D_IMH, D_IPH, D_IPAY, D_DMH, D_DPH, D_DPAY
  } dstate_e;
  dstate_e     st;
  logic [3:0]  idx;        // flit index within a header
  logic [15:0] npkt;       // packets left in the current message
  logic [31:0] plen;       // payload flits left
  logic [31:0] pidx;       // payload flit index
  logic [1:0]  ndim;
  logic [31:0] lw [LAYER_PAYLOAD_FLITS];
  umf_info_w1_t iw1;
  umf_data_w2_t dw2;
  assign dw2 = umf_data_w2_t'(in_data);

  assign in_ready = !hold;
  logic take;
  assign take = in_v && in_ready;

  always_comb begin
    layer        = '0;
    layer.op     = op_e'(iw1.op_type);
    layer.m      = lw[0][31:16];
    layer.k      = lw[0][15:0];
    layer.n      = lw[1][15:0];
    layer.addr_a = lw[2];
    layer.addr_b = lw[3];
    layer.addr_c = lw[4];
  end
  assign layer_id = iw1.layer_id;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= D_FH; idx <= '0; npkt <= '0; plen <= '0; pidx <= '0; ndim <= '0;
      hdr <= '0; iw1 <= '0; hdr_v <= 1'b0; layer_v <= 1'b0; data_v <= 1'b0; end_v <= 1'b0;
      data_tensor <= '0; data_idx <= '0; data_word <= '0;
      for (int i = 0; i < int'(LAYER_PAYLOAD_FLITS); i++) lw[i] <= '0;
    end else begin
      hdr_v <= 1'b0; layer_v <= 1'b0; data_v <= 1'b0; end_v <= 1'b0;
      if (take) begin
        idx <= idx + 1;
        unique case (st)
          D_FH: begin
            unique case (idx)
              0: hdr.frame_len[63:32] <= in_data;
              1: hdr.frame_len[31:0]  <= in_data;
              2: hdr.w2               <= umf_frame_w2_t'(in_data);
              3: hdr.user_id          <= in_data;
              default: begin
                hdr.txn_id <= in_data;
                hdr_v <= 1'b1;
                idx <= '0;
                unique case (hdr.w2.pkt_type)
                  PKT_MODEL_LOAD:     st <= D_IMH;
                  PKT_REQUEST_RETURN: st <= D_DMH;
                  default:            end_v <= 1'b1;   // check-ack: header only
                endcase
              end
            endcase
          end
          D_IMH, D_DMH: if (idx == 2) begin
            idx  <= '0;
            npkt <= in_data[15:0];
            if (in_data[15:0] != 0) st <= (st == D_IMH) ? D_IPH : D_DPH;
            else if (st == D_IMH) st <= D_DMH;
            else begin st <= D_FH; end_v <= 1'b1; end
          end
          D_IPH: begin
            if (idx == 0) plen <= 32'(in_data[15:0]);
            else begin
              iw1  <= umf_info_w1_t'(in_data);
              idx  <= '0;
              pidx <= '0;
              for (int i = 0; i < int'(LAYER_PAYLOAD_FLITS); i++) lw[i] <= '0;
              st   <= D_IPAY;
              if (plen == 0) begin
                layer_v <= 1'b1;
                npkt <= npkt - 1;
                st <= (npkt == 1) ? D_DMH : D_IPH;
              end
            end
          end
          D_IPAY: begin
            if (pidx < LAYER_PAYLOAD_FLITS) lw[pidx[2:0]] <= in_data;
            pidx <= pidx + 1;
            idx  <= '0;
            if (pidx + 1 == plen) begin
              layer_v <= 1'b1;
              npkt <= npkt - 1;
              st <= (npkt == 1) ? D_DMH : D_IPH;
            end
          end
          D_DPH: begin
            unique case (idx)
              0: ;                                  // length (high)
              1: plen <= in_data;                   // length (low)
              2: begin
                data_tensor <= dw2.tensor_id;
                ndim <= dw2.shape;
                pidx <= '0;
                if (dw2.shape == 0) begin
                  idx <= '0;
                  st  <= D_DPAY;
                end
              end
              default: if (idx - 2 == 4'(ndim)) begin idx <= '0; st <= D_DPAY; end
            endcase
            // a packet with an empty payload ends at its last header flit
            if (plen == 0 && idx >= 2 && ((idx == 2 && dw2.shape == 0) ||
                                          (idx > 2 && idx - 2 == 4'(ndim)))) begin
              npkt <= npkt - 1;
              idx  <= '0;
              if (npkt == 1) begin st <= D_FH; end_v <= 1'b1; end
              else st <= D_DPH;
            end
          end
          D_DPAY: begin
            data_v    <= 1'b1;
            data_idx  <= pidx;
            data_word <= in_data;
            pidx      <= pidx + 1;
            idx       <= '0;
            if (pidx + 1 == plen) begin
              npkt <= npkt - 1;
              if (npkt == 1) begin st <= D_FH; end_v <= 1'b1; end
              else st <= D_DPH;
            end
          end
          default: st <= D_FH;
        endcase
      end
    end
  end
endmodule
