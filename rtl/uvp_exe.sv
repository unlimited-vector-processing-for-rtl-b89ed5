// uvp_exe: element exchange engine (EXE) - permutes vector elements across
// lanes without going through memory.
//
// It runs the asymmetric instructions uvp_gather (vd[i] = vs1[vs2[i]],
// i < vsglen) and uvp_scatter (vd[vs2[i]] = vs1[i], i < AVL), and the second,
// inter-lane stage of a reduction. Inside: the EXE sequencer (here the
// command register that holds the instruction while it runs), the controller
// FSM, N_LANE shuffle PEs, and the PE crossbar. Each PE reads any lane's VRF
// through that lane's arbiter (pe_rd_*; read data is taken from lane_rdata of
// the lane it asked, one cycle after the grant) and writes only into its own
// lane (pe_wr_*). The engine handles one instruction at a time and moves one
// element per PE per S3-S4-S5 round; it favours simple hazard-free operation
// over throughput, as the paper does. cmd_ready is high in the idle state,
// done pulses for one cycle when the instruction commits.
module uvp_exe
  import uvp_pkg::*;
#(
  parameter int unsigned N_LANE = 16,
  parameter int unsigned N_VREG = 32,
  localparam int unsigned AW    = $clog2(N_VREG),
  localparam int unsigned LW    = $clog2(N_LANE)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  exe_cmd_t          cmd,
  output logic              cmd_ready,
  output logic              done,
  // read channels (to every lane's arbiter)
  output logic [N_LANE-1:0] pe_rd_req,
  output logic [LW-1:0]     pe_rd_lane [N_LANE],
  output logic [AW-1:0]     pe_rd_row  [N_LANE],
  input  logic [N_LANE-1:0] pe_rd_gnt,
  input  logic [DW-1:0]     lane_rdata [N_LANE],
  // write channels (PE p -> lane p)
  output logic [N_LANE-1:0] pe_wr_req,
  output logic [AW-1:0]     pe_wr_row  [N_LANE],
  output logic [DW-1:0]     pe_wr_data [N_LANE],
  input  logic [N_LANE-1:0] pe_wr_gnt,
  // mask read (PE p -> lane p)
  output logic [AW-1:0]     pe_mrf_raddr [N_LANE],
  input  logic [1:0]        pe_mrf_bits  [N_LANE]
);

  exe_state_e state;
  logic       enter, iter_inc, commit;
  exe_cmd_t   cfg;

  logic [N_LANE-1:0] st_done, more;

  // ---- EXE sequencer: hold the instruction ----
  assign cmd_ready = (state == EXS0_IDLE);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      cfg <= '0;
    else if (cmd_valid && cmd_ready) cfg <= cmd;
  end

  uvp_exe_fsm u_fsm (
    .clk, .rst_n, .new_inst(cmd_valid), .all_done(&st_done), .more(|more),
    .state, .enter, .iter_inc, .commit
  );
  assign done = commit;

  // ---- PEs ----
  logic [N_LANE-1:0] xo_valid, xo_ack, xi_valid, xi_ready;
  logic [LW-1:0]     xo_dst  [N_LANE];
  logic [AW-1:0]     xo_row  [N_LANE], xi_row  [N_LANE];
  logic [DW-1:0]     xo_data [N_LANE], xi_data [N_LANE];
  logic [LW-1:0]     lane_q  [N_LANE];  // lane asked by the last granted read

  for (genvar p = 0; p < N_LANE; p++) begin : g_pe
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)            lane_q[p] <= '0;
      else if (pe_rd_gnt[p]) lane_q[p] <= pe_rd_lane[p];
    end

    uvp_exe_pe #(.N_LANE(N_LANE), .N_VREG(N_VREG), .PE_ID(p)) u_pe (
      .clk, .rst_n, .cfg, .state, .enter, .iter_inc,
      .st_done(st_done[p]), .more(more[p]),
      .rd_req(pe_rd_req[p]), .rd_lane(pe_rd_lane[p]), .rd_row(pe_rd_row[p]),
      .rd_gnt(pe_rd_gnt[p]), .rd_data(lane_rdata[lane_q[p]]),
      .mrf_raddr(pe_mrf_raddr[p]), .mrf_bits(pe_mrf_bits[p]),
      .xo_valid(xo_valid[p]), .xo_dst(xo_dst[p]), .xo_row(xo_row[p]), .xo_data(xo_data[p]),
      .xo_ack(xo_ack[p]),
      .xi_valid(xi_valid[p]), .xi_row(xi_row[p]), .xi_data(xi_data[p]), .xi_ready(xi_ready[p]),
      .wr_req(pe_wr_req[p]), .wr_row(pe_wr_row[p]), .wr_data(pe_wr_data[p]), .wr_gnt(pe_wr_gnt[p])
    );
  end

  // ---- PE crossbar ----
  uvp_exe_xbar #(.N_PE(N_LANE), .AW(AW), .DW(DW)) u_xbar (
    .src_valid(xo_valid), .src_dst(xo_dst), .src_row(xo_row), .src_data(xo_data), .src_ack(xo_ack),
    .dst_valid(xi_valid), .dst_row(xi_row), .dst_data(xi_data), .dst_ready(xi_ready)
  );

endmodule
