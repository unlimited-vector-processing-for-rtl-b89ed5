// uvp_alu: packed-SIMD integer ALU of a lane, with saturation ("Sat. Comp.").
//
// One 16-bit VRF slot is processed per call: either one short element or two
// char elements side by side (byte_mode = 1), each byte computed on its own.
// Operand a is the vs2 element, operand b the vs1 element or the broadcast
// scalar. Following RISC-V vector convention, SUB is a - b (vs2 - vs1), shifts
// move a by b, compares test a against b. SADD/SSUB clamp to the signed range
// of the element width. Compare results come out on cmp, one bit per byte
// (both bits equal for short elements), matching the mask register layout of
// one bit per VRF byte.
//
// Purely combinational. The operation list is this design's reading of the
// paper's "basic fixed-point arithmetic, mask and reduction instructions" and
// of the saturating add/sub and arithmetic shift used in its FFT kernel.
module uvp_alu
  import uvp_pkg::*;
(
  input  alu_op_e       op,
  input  logic          byte_mode,
  input  logic [DW-1:0] a,
  input  logic [DW-1:0] b,
  output logic [DW-1:0] y,
  output logic [1:0]    cmp
);

  function automatic logic [15:0] op16(input alu_op_e o, input logic [15:0] x, input logic [15:0] z);
    logic signed [16:0] s;
    case (o)
      ALU_ADD:  return x + z;
      ALU_SUB:  return x - z;
      ALU_SADD: begin s = $signed({x[15], x}) + $signed({z[15], z}); return sat16(40'(s)); end
      ALU_SSUB: begin s = $signed({x[15], x}) - $signed({z[15], z}); return sat16(40'(s)); end
      ALU_AND:  return x & z;
      ALU_OR:   return x | z;
      ALU_XOR:  return x ^ z;
      ALU_SLL:  return x << z[3:0];
      ALU_SRL:  return x >> z[3:0];
      ALU_SRA:  return 16'($signed(x) >>> z[3:0]);
      ALU_MIN:  return ($signed(x) < $signed(z)) ? x : z;
      ALU_MAX:  return ($signed(x) < $signed(z)) ? z : x;
      ALU_MV:   return z;
      default:  return 16'(cmp16(o, x, z));
    endcase
  endfunction

  function automatic logic cmp16(input alu_op_e o, input logic [15:0] x, input logic [15:0] z);
    case (o)
      ALU_SEQ: return x == z;
      ALU_SNE: return x != z;
      ALU_SLT: return $signed(x) <  $signed(z);
      ALU_SLE: return $signed(x) <= $signed(z);
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic [7:0] op8(input alu_op_e o, input logic [7:0] x, input logic [7:0] z);
    logic signed [9:0] s;
    case (o)
      ALU_ADD:  return x + z;
      ALU_SUB:  return x - z;
      ALU_SADD: begin s = 10'($signed(x)) + 10'($signed(z)); return sat8(s); end
      ALU_SSUB: begin s = 10'($signed(x)) - 10'($signed(z)); return sat8(s); end
      ALU_AND:  return x & z;
      ALU_OR:   return x | z;
      ALU_XOR:  return x ^ z;
      ALU_SLL:  return x << z[2:0];
      ALU_SRL:  return x >> z[2:0];
      ALU_SRA:  return 8'($signed(x) >>> z[2:0]);
      ALU_MIN:  return ($signed(x) < $signed(z)) ? x : z;
      ALU_MAX:  return ($signed(x) < $signed(z)) ? z : x;
      ALU_MV:   return z;
      default:  return 8'(cmp8(o, x, z));
    endcase
  endfunction

  function automatic logic cmp8(input alu_op_e o, input logic [7:0] x, input logic [7:0] z);
    case (o)
      ALU_SEQ: return x == z;
      ALU_SNE: return x != z;
      ALU_SLT: return $signed(x) <  $signed(z);
      ALU_SLE: return $signed(x) <= $signed(z);
      default: return 1'b0;
    endcase
  endfunction

  always_comb begin
    if (byte_mode) begin
      y   = {op8(op, a[15:8], b[15:8]), op8(op, a[7:0], b[7:0])};
      cmp = {cmp8(op, a[15:8], b[15:8]), cmp8(op, a[7:0], b[7:0])};
    end else begin
      y   = op16(op, a, b);
      cmp = {2{cmp16(op, a, b)}};
    end
  end

endmodule
