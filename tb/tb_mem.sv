// tb_mem: behavioural single-port memory for testbenches.
//
// Answers a shared-memory master port (mem_req_t / mem_rsp_t): grants a
// request in a cycle chosen at random (about three cycles in four, or every
// cycle when STALLS is 0), writes the enabled bytes at the clock edge, and
// returns read data with rvalid one cycle after the grant. The contents are
// a byte array that the testbench reads and writes directly.
module tb_mem
  import hsv_pkg::*;
#(
  parameter int unsigned BYTES  = 65536,
  parameter bit          STALLS = 1
) (
  input  logic     clk,
  input  mem_req_t req,
  output mem_rsp_t rsp
);
  logic [7:0] mem [BYTES];
  logic       g;
  logic       rv;
  logic [31:0] rd;

  always_ff @(negedge clk) g <= !STALLS || ($urandom % 4 != 0);

  assign rsp.gnt    = req.req && g;
  assign rsp.rvalid = rv;
  assign rsp.rdata  = rd;

  always_ff @(posedge clk) begin
    rv <= 1'b0;
    if (req.req && g) begin
      automatic int unsigned a = (req.addr & ~32'd3) % BYTES;
      if (req.we) begin
        for (int y = 0; y < 4; y++) if (req.be[y]) mem[a + y] <= req.wdata[8*y +: 8];
      end else begin
        rv <= 1'b1;
        rd <= {mem[a + 3], mem[a + 2], mem[a + 1], mem[a]};
      end
    end
  end
endmodule
