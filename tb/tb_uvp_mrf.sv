// tb_uvp_mrf: checks the lane's mask slice: reset value all ones, per-bit
// write enables, and the two combinational read ports, against a model.
module tb_uvp_mrf;
  logic clk = 0, rst_n = 0, we = 0;
  logic [1:0] wbe = 0, wbits = 0, rbits_a, rbits_b;
  logic [4:0] waddr = 0, raddr_a = 0, raddr_b = 0;
  logic [1:0] model [32];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  uvp_mrf dut (.clk, .rst_n, .we, .wbe, .waddr, .wbits, .raddr_a, .rbits_a, .raddr_b, .rbits_b);

  initial begin
    for (int i = 0; i < 32; i++) model[i] = 2'b11;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      raddr_a = 5'($urandom); raddr_b = 5'($urandom);
      #1;
      checks += 2;
      if (rbits_a !== model[raddr_a]) failures++;
      if (rbits_b !== model[raddr_b]) failures++;
      we = $urandom_range(0, 1); wbe = 2'($urandom); waddr = 5'($urandom); wbits = 2'($urandom);
      @(posedge clk);
      if (we) for (int b = 0; b < 2; b++) if (wbe[b]) model[waddr][b] = wbits[b];
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
