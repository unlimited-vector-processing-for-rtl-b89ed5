// tb_uvp_vrf: random reads and byte-enabled writes to one lane's VRF bank,
// compared with a behavioural memory. Checks the one-cycle registered read.
module tb_uvp_vrf;
  logic clk = 0, en = 0, we = 0;
  logic [1:0] be = 0;
  logic [4:0] addr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] model [32];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  uvp_vrf dut (.clk, .en, .we, .be, .addr, .wdata, .rdata);

  initial begin
    // initialise every row so later reads are defined
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); en = 1; we = 1; be = 2'b11; addr = 5'(i); wdata = 16'($urandom); model[i] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 4) != 0); we = $urandom_range(0, 1); be = 2'($urandom);
      addr = 5'($urandom); wdata = 16'($urandom);
      if (en && we) for (int b = 0; b < 2; b++) if (be[b]) model[addr][b*8 +: 8] = wdata[b*8 +: 8];
      if (en && !we) begin
        logic [15:0] e;
        e = model[addr];
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== e) begin failures++; if (failures < 10) $display("VRF row %0d got %h exp %h", addr, rdata, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
