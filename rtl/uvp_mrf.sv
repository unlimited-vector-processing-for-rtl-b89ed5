// uvp_mrf: this lane's slice of the single mask register vm.
//
// vm has one bit per VRF byte, so a lane holds two bits per vector register
// row (one per byte of the 16-bit slot): for char elements each byte has its
// own predicate, for short elements both bits carry the same value and bit 0
// is used. The mask is small, so it is built from flip-flops with two
// combinational read ports (lane sequencer and EXE PE) and one write port with
// per-bit enables. It resets to all ones (every element enabled), which is
// this design's choice.
module uvp_mrf #(
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [1:0]    wbe,
  input  logic [AW-1:0] waddr,
  input  logic [1:0]    wbits,
  input  logic [AW-1:0] raddr_a,
  output logic [1:0]    rbits_a,
  input  logic [AW-1:0] raddr_b,
  output logic [1:0]    rbits_b
);

  logic [1:0] m [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) m[i] <= 2'b11;
    end else if (we) begin
      for (int b = 0; b < 2; b++)
        if (wbe[b]) m[waddr][b] <= wbits[b];
    end
  end

  assign rbits_a = m[raddr_a];
  assign rbits_b = m[raddr_b];

endmodule
