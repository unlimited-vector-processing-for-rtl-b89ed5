// tb_uvp_mmap_conv: the AXI4-Lite slave that maps the lanes' VRF banks into
// one linear address space. Behavioural lane banks grant the port after a
// random delay and return read data one cycle after the grant. Random
// 32-bit writes with random strobes and random reads are compared with a
// flat reference memory of 16-bit slots; the lane banks themselves are also
// checked, so the slot -> (lane, row) mapping is verified directly.
module tb_uvp_mmap_conv;
  localparam int N = 4, NV = 8, NS = N * NV;
  logic clk = 0, rst_n = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic [31:0] s_awaddr = 0, s_wdata = 0, s_araddr = 0, s_rdata;
  logic [3:0]  s_wstrb = 0;
  logic [1:0]  s_bresp, s_rresp;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [N-1:0] bus_req, bus_gnt;
  logic bus_we;
  logic [2:0] bus_row;
  logic [15:0] bus_wdata, lane_rdata [N];
  int checks = 0, failures = 0, waits = 0;
  always #5 clk = ~clk;

  uvp_mmap_conv #(.N_LANE(N), .N_VREG(NV)) dut (.*);

  logic [15:0] bank [N][NV];
  logic [15:0] flat [NS];
  logic [N-1:0] allow;

  always @(negedge clk) allow = N'($urandom);
  assign bus_gnt = bus_req & allow;
  always @(posedge clk) begin
    for (int l = 0; l < N; l++) if (bus_gnt[l]) begin
      if (bus_we) bank[l][bus_row] <= bus_wdata;
      else        lane_rdata[l] <= bank[l][bus_row];
    end
    waits += $countones(bus_req & ~allow);
  end

  task automatic axi_write(input int a, input logic [31:0] d, input logic [3:0] st);
    logic g;
    @(negedge clk);
    s_awvalid = 1; s_wvalid = 1; s_awaddr = 32'(a); s_wdata = d; s_wstrb = st;
    do begin #1 g = s_awready; @(negedge clk); end while (!g);
    s_awvalid = 0; s_wvalid = 0;
    s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    checks++;
    if (s_bresp !== 2'b00) failures++;
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic axi_read(input int a, output logic [31:0] d);
    logic g;
    @(negedge clk);
    s_arvalid = 1; s_araddr = 32'(a);
    do begin #1 g = s_arready; @(negedge clk); end while (!g);
    s_arvalid = 0;
    s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    checks++;
    if (s_rresp !== 2'b00) failures++;
    @(negedge clk);
    s_rready = 0;
  endtask

  initial begin
    logic [31:0] rd;
    for (int l = 0; l < N; l++) begin
      lane_rdata[l] = 0;
      for (int r = 0; r < NV; r++) begin bank[l][r] = 16'($urandom); flat[r * N + l] = bank[l][r]; end
    end
    allow = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      int w;
      w = $urandom_range(0, NS / 2 - 1);
      if ($urandom_range(0, 1)) begin
        logic [31:0] d; logic [3:0] st;
        d = $urandom; st = 4'($urandom);
        if (n % 3 == 0) st = 4'hf;
        axi_write(w * 4, d, st);
        if (|st[1:0]) flat[2 * w]     = d[15:0];
        if (|st[3:2]) flat[2 * w + 1] = d[31:16];
      end else begin
        axi_read(w * 4 + $urandom_range(0, 3), rd);   // low address bits are ignored
        checks++;
        if (rd !== {flat[2 * w + 1], flat[2 * w]}) begin
          failures++;
          if (failures < 10) $display("read word %0d got %h exp %h", w, rd, {flat[2 * w + 1], flat[2 * w]});
        end
      end
    end
    repeat (2) @(negedge clk);
    for (int s = 0; s < NS; s++) begin
      checks++;
      if (bank[s % N][s / N] !== flat[s]) failures++;
    end
    checks++;
    if (waits == 0) failures++;
    $display("cycles waiting for a lane grant: %0d", waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
