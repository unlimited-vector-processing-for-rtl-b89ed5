// tb_uvp_alu: random self-check of the lane ALU against an integer reference
// model, for short (16-bit) and packed char (2 x 8-bit) elements, including
// saturation and the per-byte compare outputs.
module tb_uvp_alu;
  import uvp_pkg::*;
  alu_op_e op; logic bm; logic [15:0] a, b, y; logic [1:0] cmp;
  int checks = 0, failures = 0;

  uvp_alu dut (.op, .byte_mode(bm), .a, .b, .y, .cmp);

  function automatic int ref_op(input alu_op_e o, input int x, input int z, input int w);
    // x, z are signed element values of width w
    int lo, hi, r, mask;
    lo = -(1 << (w - 1)); hi = (1 << (w - 1)) - 1; mask = (1 << w) - 1;
    case (o)
      ALU_ADD:  r = x + z;
      ALU_SUB:  r = x - z;
      ALU_SADD: begin r = x + z; if (r > hi) r = hi; if (r < lo) r = lo; end
      ALU_SSUB: begin r = x - z; if (r > hi) r = hi; if (r < lo) r = lo; end
      ALU_AND:  r = x & z;
      ALU_OR:   r = x | z;
      ALU_XOR:  r = x ^ z;
      ALU_SLL:  r = x << (z & (w - 1));
      ALU_SRL:  r = (x & mask) >> (z & (w - 1));
      ALU_SRA:  r = x >>> (z & (w - 1));
      ALU_MIN:  r = (x < z) ? x : z;
      ALU_MAX:  r = (x > z) ? x : z;
      ALU_MV:   r = z;
      ALU_SEQ:  r = int'(x == z);
      ALU_SNE:  r = int'(x != z);
      ALU_SLT:  r = int'(x < z);
      default:  r = int'(x <= z);
    endcase
    return r & mask;
  endfunction

  function automatic bit is_cmp(input alu_op_e o);
    return o inside {ALU_SEQ, ALU_SNE, ALU_SLT, ALU_SLE};
  endfunction

  alu_op_e ops[17] = '{ALU_ADD, ALU_SUB, ALU_SADD, ALU_SSUB, ALU_AND, ALU_OR, ALU_XOR, ALU_SLL,
                       ALU_SRL, ALU_SRA, ALU_MIN, ALU_MAX, ALU_MV, ALU_SEQ, ALU_SNE, ALU_SLT, ALU_SLE};
  initial begin
    for (int n = 0; n < 4000; n++) begin
      int exp_y, e0, e1;
      op = ops[$urandom_range(0, 16)];
      bm = $urandom_range(0, 1);
      a  = $urandom; b = $urandom;
      if (n % 7 == 0) begin a = 16'h7ff0; b = 16'h0020; end   // overflow corner
      if (n % 11 == 0) b = a;
      #1;
      if (bm) begin
        e0 = ref_op(op, int'($signed(a[7:0])), int'($signed(b[7:0])), 8);
        e1 = ref_op(op, int'($signed(a[15:8])), int'($signed(b[15:8])), 8);
        exp_y = (e1 << 8) | e0;
      end else begin
        exp_y = ref_op(op, int'($signed(a)), int'($signed(b)), 16);
        e0 = exp_y & 1; e1 = e0;
      end
      checks++;
      if (y !== 16'(exp_y)) begin
        failures++;
        if (failures < 10) $display("ALU mismatch op=%s bm=%0d a=%h b=%h y=%h exp=%h", op.name(), bm, a, b, y, 16'(exp_y));
      end
      if (is_cmp(op)) begin
        checks++;
        if (cmp !== {1'(e1), 1'(e0)}) begin failures++; $display("CMP mismatch op=%s a=%h b=%h cmp=%b", op.name(), a, b, cmp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
