// tb_shared_memory: self-checking test of the banked shared memory.
// Four ports send random reads and byte-masked writes to a 4 kB, 4-bank
// memory after it has been filled through port 0. A reference copy is kept
// here; every granted read must return the reference word one cycle after
// its grant, two ports may never be granted the same bank in one cycle, a
// port that keeps requesting must be granted within NPORTS cycles (round
// robin), and the conflict output must match the requests that lost.
module tb_shared_memory;
  import hsv_pkg::*;
  localparam int NP = 4, NB = 4, BYTES = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, conflicts = 0;

  mem_req_t req [NP];
  mem_rsp_t rsp [NP];
  logic conflict;

  shared_memory #(.NPORTS(NP), .NBANKS(NB), .BYTES(BYTES)) dut (.*);

  logic [31:0] ref_mem [BYTES / 4];
  logic [31:0] expq [NP][$];
  int wait_cnt [NP];
  bit fill;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    automatic int used [NB];
    automatic bit lost = 0;
    foreach (used[b]) used[b] = 0;
    for (int p = 0; p < NP; p++) begin
      if (rsp[p].rvalid) begin
        checks++;
        if (expq[p].size() == 0 || rsp[p].rdata != expq[p].pop_front()) begin
          failures++; $display("FAIL port %0d read data %h", p, rsp[p].rdata);
        end
      end
    end
    for (int p = 0; p < NP; p++) begin
      if (req[p].req && rsp[p].gnt) begin
        automatic int b = (req[p].addr >> 2) % NB;
        automatic int w = (req[p].addr >> 2) % (BYTES / 4);
        used[b]++;
        if (req[p].we) begin
          for (int y = 0; y < 4; y++) if (req[p].be[y]) ref_mem[w][8*y +: 8] = req[p].wdata[8*y +: 8];
        end else expq[p].push_back(ref_mem[w]);
        wait_cnt[p] = 0;
      end else if (req[p].req) begin
        lost = 1;
        wait_cnt[p]++;
        if (!fill) begin
          checks++;
          if (wait_cnt[p] > NP) begin failures++; $display("FAIL port %0d starved", p); end
        end
      end
    end
    foreach (used[b]) begin
      checks++;
      if (used[b] > 1) begin failures++; $display("FAIL bank %0d granted twice", b); end
    end
    checks++;
    if (conflict != lost) begin failures++; $display("FAIL conflict flag"); end
    if (conflict) conflicts++;
  end

  initial begin
    foreach (req[p]) req[p] = '0;
    foreach (wait_cnt[p]) wait_cnt[p] = 0;
    fill = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < BYTES / 4; w++) begin
      @(negedge clk);
      req[0] = '{req: 1, we: 1, addr: 32'(4 * w), be: 4'hF, wdata: $urandom};
      @(posedge clk);
      while (!rsp[0].gnt) @(posedge clk);
    end
    @(negedge clk); req[0] = '0;
    fill = 0;
    repeat (3000) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        // keep a request that has not been granted yet; otherwise make a new one
        if (!req[p].req || rsp[p].gnt) begin
          req[p] = '0;
          if ($urandom % 4 != 0) begin
            req[p].req   = 1;
            req[p].we    = $urandom % 2;
            req[p].addr  = ($urandom % 64) + (($urandom % 2) ? 32'(BYTES) : 0);  // hot region, and wrap-around
            req[p].be    = 4'($urandom);
            req[p].wdata = $urandom;
          end
        end
      end
    end
    @(negedge clk); foreach (req[p]) req[p] = '0;
    repeat (3) @(negedge clk);
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no bank conflict exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
