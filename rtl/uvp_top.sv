// uvp_top: the unlimited vector processing (UVP) extension.
//
// A vector co-processor for wireless baseband work that takes 64-bit custom
// RISC-V instructions from a host core. Register groups may start at any
// vector register and span any number of them, and each instruction carries
// the full application vector length, which the hardware strip-mines across
// the lanes. Parts:
//   main sequencer  decode, CSRs, instruction monitor, RG hazard detection,
//                   in-order dispatch (uvp_main_seq, uvp_hazard_det)
//   N_LANE lanes    lane sequencer, VRF slice, mask slice, arbiter, ALU with
//                   saturation, complex arithmetic unit, saturating divider
//   EXE             element exchange engine for gather, scatter and the
//                   inter-lane step of reductions
//   MMap-Lane conv  AXI4-Lite slave mapping the VRFs into memory
// Host side: inst / avl_val / rs1_val with a valid/ready handshake; the host
// supplies the values of the scalar registers named by rs_avl and by the vs1
// field. Memory side: the AXI4-Lite slave. Defaults are the paper's main
// configuration: 16 lanes, 32 vector registers, 8 instructions in flight.
module uvp_top
  import uvp_pkg::*;
#(
  parameter int unsigned N_LANE = 16,
  parameter int unsigned N_VREG = 32,
  parameter int unsigned N_ID   = 8,
  localparam int unsigned AW    = $clog2(N_VREG),
  localparam int unsigned LW    = $clog2(N_LANE)
) (
  input  logic            clk,
  input  logic            rst_n,
  // instruction interface from the host core
  input  logic            inst_valid,
  output logic            inst_ready,
  input  logic [63:0]     inst,
  input  logic [XLEN-1:0] avl_val,
  input  logic [XLEN-1:0] rs1_val,
  // AXI4-Lite slave (memory-mapped VRF)
  input  logic            s_awvalid,
  output logic            s_awready,
  input  logic [31:0]     s_awaddr,
  input  logic            s_wvalid,
  output logic            s_wready,
  input  logic [31:0]     s_wdata,
  input  logic [3:0]      s_wstrb,
  output logic            s_bvalid,
  input  logic            s_bready,
  output logic [1:0]      s_bresp,
  input  logic            s_arvalid,
  output logic            s_arready,
  input  logic [31:0]     s_araddr,
  output logic            s_rvalid,
  input  logic            s_rready,
  output logic [31:0]     s_rdata,
  output logic [1:0]      s_rresp,
  // status
  output logic            idle,
  output logic [31:0]     stall_cycles,
  output logic [31:0]     hz_stall_cycles,
  output logic [31:0]     illegal_cnt
);

  // ---- main sequencer ----
  logic              lane_cmd_valid, exe_cmd_valid, exe_cmd_ready, exe_done;
  lane_cmd_t         lane_cmd;
  exe_cmd_t          exe_cmd;
  logic [N_LANE-1:0] lane_busy;

  uvp_main_seq #(.N_LANE(N_LANE), .N_VREG(N_VREG), .N_ID(N_ID)) u_mseq (
    .clk, .rst_n, .inst_valid, .inst_ready, .inst, .avl_val, .rs1_val,
    .lane_cmd_valid, .lane_cmd, .lane_busy,
    .exe_cmd_valid, .exe_cmd, .exe_cmd_ready, .exe_done,
    .idle, .stall_cycles, .hz_stall_cycles, .illegal_cnt, .csr_vshamt(), .csr_vsglen(), .csr_vrextra()
  );

  // ---- EXE ----
  logic [N_LANE-1:0] pe_rd_req, pe_rd_gnt, pe_wr_req, pe_wr_gnt;
  logic [LW-1:0]     pe_rd_lane [N_LANE];
  logic [AW-1:0]     pe_rd_row  [N_LANE], pe_wr_row [N_LANE], pe_mrf_raddr [N_LANE];
  logic [DW-1:0]     pe_wr_data [N_LANE], lane_rdata [N_LANE];
  logic [1:0]        pe_mrf_bits [N_LANE];
  logic [N_LANE-1:0] rd_gnt_of_lane [N_LANE];

  uvp_exe #(.N_LANE(N_LANE), .N_VREG(N_VREG)) u_exe (
    .clk, .rst_n, .cmd_valid(exe_cmd_valid), .cmd(exe_cmd), .cmd_ready(exe_cmd_ready), .done(exe_done),
    .pe_rd_req, .pe_rd_lane, .pe_rd_row, .pe_rd_gnt, .lane_rdata,
    .pe_wr_req, .pe_wr_row, .pe_wr_data, .pe_wr_gnt, .pe_mrf_raddr, .pe_mrf_bits
  );

  always_comb begin
    pe_rd_gnt = '0;
    for (int l = 0; l < N_LANE; l++) pe_rd_gnt |= rd_gnt_of_lane[l];
  end

  // ---- memory-map conversion ----
  logic [N_LANE-1:0] bus_req, bus_gnt;
  logic              bus_we;
  logic [AW-1:0]     bus_row;
  logic [DW-1:0]     bus_wdata;

  uvp_mmap_conv #(.N_LANE(N_LANE), .N_VREG(N_VREG)) u_mmap (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata, .s_wstrb,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .bus_req, .bus_we, .bus_row, .bus_wdata, .bus_gnt, .lane_rdata
  );

  // ---- lanes ----
  for (genvar l = 0; l < N_LANE; l++) begin : g_lane
    uvp_lane #(.N_LANE(N_LANE), .N_VREG(N_VREG), .LANE_ID(l)) u_lane (
      .clk, .rst_n,
      .cmd_valid(lane_cmd_valid), .cmd(lane_cmd), .busy(lane_busy[l]), .done(),
      .bus_req(bus_req[l]), .bus_we, .bus_row, .bus_wdata, .bus_gnt(bus_gnt[l]),
      .pe_wr_req(pe_wr_req[l]), .pe_wr_row(pe_wr_row[l]), .pe_wr_data(pe_wr_data[l]), .pe_wr_gnt(pe_wr_gnt[l]),
      .pe_rd_req, .pe_rd_lane, .pe_rd_row, .pe_rd_gnt(rd_gnt_of_lane[l]),
      .pe_mrf_raddr(pe_mrf_raddr[l]), .pe_mrf_rbits(pe_mrf_bits[l]),
      .rdata(lane_rdata[l])
    );
  end

endmodule
