// uvp_div: fixed-point saturating divider of a lane.
//
// Computes vd = (vs1 << s) / vs2 for 16-bit signed operands, where s is the
// vshamt CSR value. Shifting the numerator left before dividing moves s bits
// of the quotient from its integer part to its fraction: an aQb numerator and
// a cQd denominator give an (a+d+1-s)Q(b+c+s) quotient, which avoids losing
// small quotients to underflow. Overflow is detected from the sign bits of
// vs1, vs2 and the unsaturated 16-bit quotient (their XOR), and the output mux
// picks, with select {sign(res), ovf}: 01 NEG_MAX, 11 POS_MAX, 10/00 res.
//
// Two additions of this design: a range check on the full-width quotient is
// ORed into ovf (the XOR alone cannot see an overflow whose truncated sign is
// still correct, and would flag a zero quotient), and the mux's upper select
// bit is the inverse of the true quotient sign, which equals sign(res) in the
// XOR case. Division by zero saturates towards the sign of vs1.
// Timing: combinational divide, result registered; out_valid one cycle after
// in_valid.
module uvp_div
  import uvp_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [15:0]    a,      // vs1
  input  logic [15:0]    b,      // vs2
  input  logic [SHW-1:0] shamt,
  output logic           out_valid,
  output logic [15:0]    y
);

  localparam logic [15:0] NEG_MAX = 16'h8000;
  localparam logic [15:0] POS_MAX = 16'h7fff;

  logic signed [47:0] num, den, q;
  logic [15:0]        res;
  logic               xor_ovf, rng_ovf, ovf, sel_hi, q_neg;
  logic [15:0]        y_d;

  always_comb begin
    num     = 48'($signed(a)) <<< shamt;
    den     = 48'($signed(b));
    q       = (b == '0) ? 48'sd0 : num / den;
    res     = q[15:0];
    q_neg   = (b == '0) ? a[15] : (a[15] ^ b[15]);
    xor_ovf = (a[15] ^ b[15] ^ res[15]) && (res != '0);
    rng_ovf = (b == '0) || (q > 48'sd32767) || (q < -48'sd32768);
    ovf     = xor_ovf || rng_ovf;
    sel_hi  = ~q_neg;
    case ({sel_hi, ovf})
      2'b01:   y_d = NEG_MAX;
      2'b11:   y_d = POS_MAX;
      default: y_d = res;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= y_d;
    end
  end

endmodule
