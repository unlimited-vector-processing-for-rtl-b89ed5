// tb_uvp_cau: checks every CAU operation against a reference model, with
// random operands and shift amounts, including the complex real and imaginary
// parts, saturation, and the two-cycle latency (one result per cycle).
module tb_uvp_cau;
  import uvp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, sub = 0, out_valid;
  cau_op_e op = CAU_ADDSUB;
  logic [15:0] a = 0, b = 0, c = 0, d = 0, y;
  logic [4:0] shamt = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  uvp_cau dut (.clk, .rst_n, .in_valid, .op, .sub, .a, .b, .c, .d, .shamt, .out_valid, .y);

  function automatic logic [15:0] ref_cau(input cau_op_e o, input bit s, input int sa, sb, sc, sd, input int sh);
    longint r;
    case (o)
      CAU_ADDSUB: r = s ? sa - sb : sa + sb;
      CAU_ADDMUL: r = longint'(s ? sa - sb : sa + sb) * sc;
      CAU_MULADD: r = s ? longint'(sa) * sb - sc : longint'(sa) * sb + sc;
      CAU_MUL:    r = longint'(sa) * sb;
      CAU_CRE:    r = longint'(sa) * sc - longint'(sb) * sd;
      default:    r = longint'(sa) * sd + longint'(sb) * sc;
    endcase
    r = r >>> sh;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return 16'(r);
  endfunction

  logic [15:0] expq[$];
  int lat[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // scoreboard: compare every output with the queued expectation and its issue time
  always @(negedge clk) if (out_valid) begin
    logic [15:0] e; int t;
    e = expq.pop_front(); t = lat.pop_front();
    checks++;
    if (y !== e) begin failures++; if (failures < 10) $display("CAU mismatch y=%h exp=%h", y, e); end
    checks++;
    if (cyc - t != 2) begin failures++; $display("CAU latency %0d", cyc - t); end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      op  = cau_op_e'($urandom_range(0, 5));
      sub = $urandom_range(0, 1);
      a = $urandom; b = $urandom; c = $urandom; d = $urandom;
      shamt = (n % 3 == 0) ? 5'd0 : 5'($urandom_range(0, 20));
      if (in_valid) begin
        expq.push_back(ref_cau(op, sub, int'($signed(a)), int'($signed(b)), int'($signed(c)), int'($signed(d)), int'(shamt)));
        lat.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (expq.size() != 0) failures++;
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
