// tb_uvp_rr_arb: random request patterns on the VRF port arbiter (default
// 19 requesters = 16 lanes' PEs + sequencer + bus + PE write). Checks that
// the grant is one-hot whenever anyone requests, never goes to an idle
// requester, and that a requester holding its request is served within
// NREQ cycles (round-robin fairness). Counts conflict cycles.
module tb_uvp_rr_arb;
  localparam int NREQ = 19;
  logic clk = 0, rst_n = 0;
  logic [NREQ-1:0] req = '0, gnt;
  int wait_cnt [NREQ];
  logic [NREQ-1:0] g;
  int checks = 0, failures = 0, conflicts = 0;
  always #5 clk = ~clk;

  uvp_rr_arb #(.NREQ(NREQ)) dut (.clk, .rst_n, .req, .gnt);

  initial begin
    for (int i = 0; i < NREQ; i++) wait_cnt[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      // a requester keeps its request until granted; new ones arrive randomly
      for (int i = 0; i < NREQ; i++) if (!req[i]) req[i] = ($urandom_range(0, 3) == 0) || (n > 2500 && n < 2600);
      #1;
      checks++;
      if (req != '0 && !$onehot(gnt)) failures++;
      checks++;
      if ((gnt & ~req) != '0) failures++;
      if ($countones(req) > 1) conflicts++;
      g = gnt;
      @(posedge clk);
      for (int i = 0; i < NREQ; i++) begin
        if (g[i]) wait_cnt[i] = 0;
        else if (req[i]) wait_cnt[i]++;
        checks++;
        if (wait_cnt[i] >= NREQ) begin failures++; if (failures < 3) $display("requester %0d starved at cycle %0d", i, n); end
      end
      #1;
      req &= ~g;
    end
    checks++;
    if (conflicts == 0) failures++;
    $display("conflict cycles: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
