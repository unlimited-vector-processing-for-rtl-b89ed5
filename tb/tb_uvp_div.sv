// tb_uvp_div: checks the saturating divider (vs1 << vshamt) / vs2 against an
// integer model: exact quotients, saturation to 0x7fff / 0x8000 on overflow
// and on division by zero, and the one-cycle latency. Counts how many
// overflow cases were exercised.
module tb_uvp_div;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [15:0] a = 0, b = 0, y;
  logic [4:0] shamt = 0;
  int checks = 0, failures = 0, n_ovf = 0;
  always #5 clk = ~clk;

  uvp_div dut (.clk, .rst_n, .in_valid, .a, .b, .shamt, .out_valid, .y);

  function automatic logic [15:0] ref_div(input int sa, input int sb, input int sh, output bit ovf);
    longint num, q;
    num = longint'(sa) <<< sh;
    ovf = 0;
    if (sb == 0) begin ovf = 1; return (sa < 0) ? 16'h8000 : 16'h7fff; end
    q = num / sb;
    if (q > 32767)  begin ovf = 1; return 16'h7fff; end
    if (q < -32768) begin ovf = 1; return 16'h8000; end
    return 16'(q);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic [15:0] e; bit ovf;
      @(negedge clk);
      a = $urandom; b = $urandom;
      if (n % 4 == 0) b = 16'($signed(8'($urandom)));  // small divisors
      if (n % 97 == 0) b = 0;
      shamt = 5'($urandom_range(0, 15));
      in_valid = 1;
      e = ref_div(int'($signed(a)), int'($signed(b)), int'(shamt), ovf);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || y !== e) begin
        failures++;
        if (failures < 10) $display("DIV a=%h b=%h sh=%0d y=%h exp=%h v=%0d", a, b, shamt, y, e, out_valid);
      end
      n_ovf += ovf;
    end
    checks++;
    if (n_ovf == 0) failures++;
    $display("overflow cases: %0d", n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
