// uvp_cau: complex arithmetic unit of a lane.
//
// Two pre-adders, two multipliers and a post-adder serve all
// multiplication-related instructions:
//   CAU_ADDSUB  A +- B            CAU_ADDMUL  (A +- B) x C
//   CAU_MULADD  A x B +- C        CAU_MUL     A x B
//   CAU_CRE     C x (A - B) + B x (C - D)   = A*C - B*D  (real part)
//   CAU_CIM     D x (A + B) + B x (C - D)   = A*D + B*C  (imaginary part)
// For a complex product (A + jB)(C + jD) the lane issues CRE and CIM as two
// uops; B x (C - D) is shared by both, so each uop needs only two
// multiplications. Operands map as A = vs1 (or vs1.real), B = vs2 (or
// vs1.imag), C = vd (or vs2.real), D = vs2.imag.
//
// Timing: registers before and after the multipliers, so a result appears on
// y with out_valid two cycles after in_valid; a new operation can start every
// cycle. Products are kept at full precision; the final shifter shifts the
// result right (arithmetic) by the vshamt CSR value and saturates it to 16
// bits. The datapath, the operation list and the two pipeline registers follow
// the paper; saturation (rather than plain truncation) in the final stage is
// this design's choice.
module uvp_cau
  import uvp_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  cau_op_e        op,
  input  logic           sub,      // selects - in the "+-" of ADDSUB/ADDMUL/MULADD
  input  logic [15:0]    a, b, c, d,
  input  logic [SHW-1:0] shamt,
  output logic           out_valid,
  output logic [15:0]    y
);

  // ---- stage 0: pre-adders and multiplier operand muxes ----
  logic signed [16:0] pre1, pre2, m1x, m1y;
  always_comb begin
    logic s;
    s    = (op == CAU_CRE) ? 1'b1 : (op == CAU_CIM) ? 1'b0 : sub;
    pre1 = s ? 17'($signed(a)) - 17'($signed(b)) : 17'($signed(a)) + 17'($signed(b));
    pre2 = 17'($signed(c)) - 17'($signed(d));
    m1x  = (op == CAU_ADDMUL || op == CAU_CRE || op == CAU_CIM) ? pre1 : 17'($signed(a));
    m1y  = (op == CAU_CIM) ? 17'($signed(d)) :
           (op == CAU_ADDMUL || op == CAU_CRE) ? 17'($signed(c)) : 17'($signed(b));
  end

  // ---- pipeline register 1 (before the multipliers) ----
  logic               v1, v2;
  cau_op_e            op1, op2;
  logic               sub1, sub2;
  logic signed [16:0] x1, y1, b1, d1, pre1_1;
  logic signed [15:0] c1, c2;
  logic [SHW-1:0]     sh1, sh2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      op1 <= CAU_ADDSUB; sub1 <= 1'b0; x1 <= '0; y1 <= '0; b1 <= '0; d1 <= '0;
      pre1_1 <= '0; c1 <= '0; sh1 <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        op1 <= op; sub1 <= sub; x1 <= m1x; y1 <= m1y;
        b1 <= 17'($signed(b)); d1 <= pre2; pre1_1 <= pre1; c1 <= $signed(c); sh1 <= shamt;
      end
    end
  end

  // ---- multipliers and pipeline register 2 (after the multipliers) ----
  logic signed [33:0] p1, p2;
  logic signed [16:0] pre1_2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; op2 <= CAU_ADDSUB; sub2 <= 1'b0; p1 <= '0; p2 <= '0; pre1_2 <= '0; c2 <= '0; sh2 <= '0;
    end else begin
      v2 <= v1;
      if (v1) begin
        op2 <= op1; sub2 <= sub1; p1 <= x1 * y1; p2 <= b1 * d1; pre1_2 <= pre1_1; c2 <= c1; sh2 <= sh1;
      end
    end
  end

  // ---- post-adder, output mux and shifter ----
  logic signed [39:0] full, shifted;
  always_comb begin
    case (op2)
      CAU_ADDSUB: full = 40'(pre1_2);
      CAU_MULADD: full = sub2 ? 40'(p1) - 40'(c2) : 40'(p1) + 40'(c2);
      CAU_CRE,
      CAU_CIM:    full = 40'(p1) + 40'(p2);
      default:    full = 40'(p1);
    endcase
    shifted = full >>> sh2;
  end

  assign out_valid = v2;
  assign y         = sat16(shifted);

endmodule
