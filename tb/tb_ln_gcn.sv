// tb_ln_gcn: 4 sources and 3 destinations with random requests. Each source holds its
// word until granted. Checks: every granted word arrives at its destination one cycle
// later and unchanged, at most one word per destination per cycle, no word is lost,
// conflicts occur and are flagged, and a source waiting for a contested destination
// is granted within NSRC-1 competing grants (round robin).
module tb_ln_gcn;
  localparam int NS = 4, ND = 3, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NS-1:0] req, grant;
  logic [NS-1:0][1:0] dst;
  logic [NS-1:0][W-1:0] din;
  logic [ND-1:0] dvalid;
  logic [ND-1:0][W-1:0] dout;
  logic conflict;
  logic [NS-1:0] g_snap;
  int checks = 0, failures = 0, conflicts = 0, sent = 0, recv = 0;
  int wait_c [NS];
  logic [W-1:0] expq [ND][$];
  ln_gcn #(.NSRC(NS), .NDST(ND), .W(W)) dut (.*);
  initial begin
    req = 0; dst = 0; din = 0;
    for (int s = 0; s < NS; s++) wait_c[s] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) if (!req[s] && $urandom_range(1,0)) begin
        req[s] = 1; dst[s] = 2'($urandom_range(ND-1, 0)); din[s] = W'($urandom);
      end
      #1;
      for (int d = 0; d < ND; d++) begin
        int n; n = 0;
        for (int s = 0; s < NS; s++) if (grant[s] && dst[s] == d) n++;
        checks++; if (n > 1) begin failures++; $display("FAIL two grants to %0d", d); end
      end
      g_snap = grant;
      if (conflict) conflicts++;
      checks++;
      if (conflict != ((req & ~grant) != 0)) failures++;
      for (int s = 0; s < NS; s++) if (req[s] && g_snap[s]) expq[dst[s]].push_back(din[s]);
      @(posedge clk); #1;
      for (int d = 0; d < ND; d++) if (dvalid[d]) begin
        recv++; checks++;
        if (expq[d].size() == 0 || dout[d] !== expq[d].pop_front()) begin failures++; $display("FAIL data at %0d", d); end
      end
      for (int s = 0; s < NS; s++) begin
        if (req[s] && g_snap[s]) begin sent++; req[s] = 0; wait_c[s] = 0; end
        else if (req[s]) begin
          wait_c[s]++;
          checks++;
          if (wait_c[s] > NS) begin failures++; $display("FAIL starvation src %0d", s); end
        end
      end
    end
    checks++; if (sent != recv) begin failures++; $display("FAIL lost words"); end
    checks++; if (conflicts == 0) begin failures++; $display("FAIL no conflict seen"); end
    $display("sent=%0d recv=%0d conflicts=%0d", sent, recv, conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
