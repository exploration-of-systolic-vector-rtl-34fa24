// shared_memory: multi-bank, byte-addressable shared memory of an SV cluster.
//
// NPORTS masters (the cluster's systolic arrays, vector processors and the
// external-memory side) reach NBANKS banks through a full crossbar. Each port
// presents one 32-bit word request per cycle with a byte address and byte
// enables. Words are interleaved over the banks: bank = addr[2 +: log2(NBANKS)],
// row = the address bits above. Each bank grants one port per cycle, chosen
// round-robin starting after the port it granted last; ports that address
// different banks are served in the same cycle. A granted write updates the
// enabled bytes at the clock edge; a granted read returns the word with
// rvalid one cycle after the grant. Addresses at or above BYTES wrap.
// conflicts counts, per cycle, whether any request lost arbitration.
//
// From the paper: shared by all processors of the cluster, byte-addressable,
// multiple banks, concurrent access by every processor through a fully
// connected interconnection, 40 MB per cluster in the configuration compared
// with the GPU. This design's own: the word width, the number of banks, the
// interleaving, the round-robin arbitration and the one-cycle read latency.
module shared_memory
  import hsv_pkg::*;
#(
  parameter int unsigned NPORTS = 13,
  parameter int unsigned NBANKS = 16,
  parameter longint unsigned BYTES = 64'd41943040   // 40 MB
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req  [NPORTS],
  output mem_rsp_t rsp  [NPORTS],
  output logic     conflict
);
  localparam int unsigned BKW   = (NBANKS > 1) ? $clog2(NBANKS) : 1;
  localparam longint unsigned DEPTH = BYTES / 4 / NBANKS;
  localparam int unsigned RW    = $clog2(DEPTH);
  localparam int unsigned PW    = (NPORTS > 1) ? $clog2(NPORTS) : 1;

  logic [31:0] mem [NBANKS][DEPTH];

  logic [BKW-1:0] bank_of [NPORTS];
  logic [RW-1:0]  row_of  [NPORTS];
  for (genvar p = 0; p < NPORTS; p++) begin : g_dec
    assign bank_of[p] = (NBANKS > 1) ? BKW'(req[p].addr[2 +: BKW]) : '0;
    assign row_of[p]  = RW'(req[p].addr >> (2 + ((NBANKS > 1) ? BKW : 0)));
  end

  // per-bank round-robin arbitration
  logic [PW-1:0] last   [NBANKS];
  logic          bgnt_v [NBANKS];
  logic [PW-1:0] bgnt_p [NBANKS];
  always_comb begin
    for (int b = 0; b < int'(NBANKS); b++) begin
      bgnt_v[b] = 1'b0;
      bgnt_p[b] = '0;
      for (int o = 1; o <= int'(NPORTS); o++) begin
        automatic int p = (int'(last[b]) + o) % int'(NPORTS);
        if (!bgnt_v[b] && req[p].req && int'(bank_of[p]) == b) begin
          bgnt_v[b] = 1'b1;
          bgnt_p[b] = PW'(p);
        end
      end
    end
  end

  logic gnt [NPORTS];
  always_comb begin
    conflict = 1'b0;
    for (int p = 0; p < int'(NPORTS); p++) begin
      gnt[p] = bgnt_v[bank_of[p]] && int'(bgnt_p[bank_of[p]]) == p;
      if (req[p].req && !gnt[p]) conflict = 1'b1;
    end
  end

  logic        rv [NPORTS];
  logic [31:0] rd [NPORTS];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int b = 0; b < int'(NBANKS); b++) last[b] <= PW'(NPORTS - 1);
      for (int p = 0; p < int'(NPORTS); p++) begin rv[p] <= 1'b0; rd[p] <= '0; end
    end else begin
      for (int b = 0; b < int'(NBANKS); b++) if (bgnt_v[b]) last[b] <= bgnt_p[b];
      for (int p = 0; p < int'(NPORTS); p++) begin
        rv[p] <= gnt[p] && !req[p].we;
        if (gnt[p]) begin
          if (req[p].we) begin
            for (int y = 0; y < 4; y++)
              if (req[p].be[y]) mem[bank_of[p]][row_of[p]][8*y +: 8] <= req[p].wdata[8*y +: 8];
          end else rd[p] <= mem[bank_of[p]][row_of[p]];
        end
      end
    end
  end

  for (genvar p = 0; p < NPORTS; p++) begin : g_rsp
    assign rsp[p].gnt    = gnt[p];
    assign rsp[p].rvalid = rv[p];
    assign rsp[p].rdata  = rd[p];
  end
endmodule
