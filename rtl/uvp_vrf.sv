// uvp_vrf: vector register file slice of one lane.
//
// Row r holds this lane's 16-bit slot of vector register r, so one physical
// vector register spans all lanes (VLEN = 16 x N_LANE bits). The paper
// proposes single-port SRAMs for the VRF; this is the synthesizable
// equivalent: one access per cycle (read or write), byte write enables, and a
// registered read port (data valid the cycle after en & !we). A foundry macro
// with the same port list can replace it. DEPTH is the number of vector
// registers, 32 in the paper's main Lane16Reg32 configuration.
module uvp_vrf #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned DW    = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            en,
  input  logic            we,
  input  logic [DW/8-1:0] be,
  input  logic [AW-1:0]   addr,
  input  logic [DW-1:0]   wdata,
  output logic [DW-1:0]   rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < DW/8; b++)
          if (be[b]) mem[addr][b*8 +: 8] <= wdata[b*8 +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
