// uvp_lane: one lane of the UVP extension, a small packed-SIMD core.
//
// Contents: the lane sequencer (strip-mining and uop issue), the lane's slice
// of the vector register file (single-port SRAM, one 16-bit slot per vector
// register), its slice of the mask register vm, a round-robin arbiter in
// front of the VRF, and the execution units: ALU with saturation, complex
// arithmetic unit (CAU) and saturating divider.
//
// The arbiter takes, in index order, the lane sequencer (0), the memory-map
// bus port (1), the write channel of this lane's EXE PE (2) and the read
// channels of all N_LANE EXE PEs (3 ...), so any PE can read any lane while
// writes of the exchange engine arrive only through the own PE. One access is
// granted per cycle; read data is on rdata the cycle after the grant, shared by
// all requesters (each one knows when it was granted).
module uvp_lane
  import uvp_pkg::*;
#(
  parameter int unsigned N_LANE  = 16,
  parameter int unsigned N_VREG  = 32,
  parameter int unsigned LANE_ID = 0,
  localparam int unsigned AW     = $clog2(N_VREG),
  localparam int unsigned LW     = $clog2(N_LANE)
) (
  input  logic          clk,
  input  logic          rst_n,
  // command broadcast
  input  logic          cmd_valid,
  input  lane_cmd_t     cmd,
  output logic          busy,
  output logic          done,
  // memory-map port
  input  logic          bus_req,
  input  logic          bus_we,
  input  logic [AW-1:0] bus_row,
  input  logic [DW-1:0] bus_wdata,
  output logic          bus_gnt,
  // own PE write channel
  input  logic          pe_wr_req,
  input  logic [AW-1:0] pe_wr_row,
  input  logic [DW-1:0] pe_wr_data,
  output logic          pe_wr_gnt,
  // all PEs' read channels
  input  logic [N_LANE-1:0] pe_rd_req,
  input  logic [LW-1:0]     pe_rd_lane [N_LANE],
  input  logic [AW-1:0]     pe_rd_row  [N_LANE],
  output logic [N_LANE-1:0] pe_rd_gnt,
  // own PE mask read
  input  logic [AW-1:0] pe_mrf_raddr,
  output logic [1:0]    pe_mrf_rbits,
  // read data of the VRF, valid the cycle after a read grant
  output logic [DW-1:0] rdata
);

  localparam int unsigned NREQ = N_LANE + 3;

  // ---- lane sequencer ----
  logic           s_req, s_we, s_gnt;
  logic [1:0]     s_be;
  logic [AW-1:0]  s_row;
  logic [DW-1:0]  s_wdata;
  logic [AW-1:0]  m_raddr, m_waddr;
  logic [1:0]     m_rbits, m_wbe, m_wbits;
  logic           m_we;
  alu_op_e        alu_op;
  logic           alu_byte;
  logic [DW-1:0]  alu_a, alu_b, alu_y;
  logic [1:0]     alu_cmp;
  logic           cau_valid, cau_sub, cau_ovalid, div_valid, div_ovalid;
  cau_op_e        cau_op;
  logic [15:0]    cau_a, cau_b, cau_c, cau_d, cau_y, div_a, div_b, div_y;
  logic [SHW-1:0] shamt;

  uvp_lane_seq #(.N_LANE(N_LANE), .N_VREG(N_VREG), .LANE_ID(LANE_ID)) u_seq (
    .clk, .rst_n, .cmd_valid, .cmd, .busy, .done,
    .vrf_req(s_req), .vrf_we(s_we), .vrf_be(s_be), .vrf_row(s_row), .vrf_wdata(s_wdata),
    .vrf_gnt(s_gnt), .vrf_rdata(rdata),
    .mrf_raddr(m_raddr), .mrf_rbits(m_rbits), .mrf_we(m_we), .mrf_wbe(m_wbe),
    .mrf_waddr(m_waddr), .mrf_wbits(m_wbits),
    .alu_op, .alu_byte, .alu_a, .alu_b, .alu_y, .alu_cmp,
    .cau_valid, .cau_op, .cau_sub, .cau_a, .cau_b, .cau_c, .cau_d, .cau_ovalid, .cau_y,
    .div_valid, .div_a, .div_b, .div_ovalid, .div_y, .shamt
  );

  uvp_alu u_alu (.op(alu_op), .byte_mode(alu_byte), .a(alu_a), .b(alu_b), .y(alu_y), .cmp(alu_cmp));

  uvp_cau u_cau (.clk, .rst_n, .in_valid(cau_valid), .op(cau_op), .sub(cau_sub),
                 .a(cau_a), .b(cau_b), .c(cau_c), .d(cau_d), .shamt, .out_valid(cau_ovalid), .y(cau_y));

  uvp_div u_div (.clk, .rst_n, .in_valid(div_valid), .a(div_a), .b(div_b), .shamt,
                 .out_valid(div_ovalid), .y(div_y));

  uvp_mrf #(.DEPTH(N_VREG)) u_mrf (
    .clk, .rst_n, .we(m_we), .wbe(m_wbe), .waddr(m_waddr), .wbits(m_wbits),
    .raddr_a(m_raddr), .rbits_a(m_rbits), .raddr_b(pe_mrf_raddr), .rbits_b(pe_mrf_rbits)
  );

  // ---- arbiter ----
  logic [NREQ-1:0] req, gnt;
  always_comb begin
    req    = '0;
    req[0] = s_req;
    req[1] = bus_req;
    req[2] = pe_wr_req;
    for (int p = 0; p < N_LANE; p++)
      req[3+p] = pe_rd_req[p] && (pe_rd_lane[p] == LW'(LANE_ID));
  end

  uvp_rr_arb #(.NREQ(NREQ)) u_arb (.clk, .rst_n, .req, .gnt);

  assign s_gnt     = gnt[0];
  assign bus_gnt   = gnt[1];
  assign pe_wr_gnt = gnt[2];
  assign pe_rd_gnt = gnt[NREQ-1:3];

  // ---- VRF ----
  logic          v_en, v_we;
  logic [1:0]    v_be;
  logic [AW-1:0] v_addr;
  logic [DW-1:0] v_wdata;
  always_comb begin
    v_en = |gnt; v_we = 1'b0; v_be = 2'b11; v_addr = '0; v_wdata = '0;
    if (gnt[0])      begin v_we = s_we;   v_be = s_be; v_addr = s_row;     v_wdata = s_wdata;    end
    else if (gnt[1]) begin v_we = bus_we;              v_addr = bus_row;   v_wdata = bus_wdata;  end
    else if (gnt[2]) begin v_we = 1'b1;                v_addr = pe_wr_row; v_wdata = pe_wr_data; end
    else begin
      for (int p = 0; p < N_LANE; p++)
        if (gnt[3+p]) v_addr = pe_rd_row[p];
    end
  end

  uvp_vrf #(.DEPTH(N_VREG), .DW(DW)) u_vrf (
    .clk, .en(v_en), .we(v_we), .be(v_be), .addr(v_addr), .wdata(v_wdata), .rdata
  );

endmodule
