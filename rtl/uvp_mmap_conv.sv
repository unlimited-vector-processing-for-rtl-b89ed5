// uvp_mmap_conv: memory-map-to-lane conversion with an AXI4-Lite slave port.
//
// The vector register files appear to the system bus as one linear memory in
// which a register group is contiguous: 16-bit slot s (byte address 2s) is
// lane s mod N_LANE, row s div N_LANE. A vector register is therefore
// 2 x N_LANE bytes of consecutive addresses and vectors can be moved in and
// out with plain bursts of bus accesses (the paper's dense arrangement for
// DMA).
//
// Each 32-bit AXI4-Lite access covers two slots and is split into two slot
// accesses, each waiting for the grant of the addressed lane's VRF arbiter;
// read data arrives one cycle after the grant. Write strobes are used per
// 16-bit half (a half with no strobe bit set is not written; a half with any
// strobe bit set is written whole). One transaction at a time; writes win
// over reads when both arrive together; responses are always OKAY.
// Only this passive (slave) side of the paper's bus interface is built; its
// active side is not.
module uvp_mmap_conv
  import uvp_pkg::*;
#(
  parameter int unsigned N_LANE = 16,
  parameter int unsigned N_VREG = 32,
  localparam int unsigned AW    = $clog2(N_VREG)
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_awaddr,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  output logic              s_bvalid,
  input  logic              s_bready,
  output logic [1:0]        s_bresp,
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [31:0]       s_araddr,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  // lane ports
  output logic [N_LANE-1:0] bus_req,
  output logic              bus_we,
  output logic [AW-1:0]     bus_row,
  output logic [DW-1:0]     bus_wdata,
  input  logic [N_LANE-1:0] bus_gnt,
  input  logic [DW-1:0]     lane_rdata [N_LANE]
);

  typedef enum logic [2:0] {IDLE, ACC, ACCW, BRSP, RRSP} st_e;
  st_e st;

  logic        is_wr, half;
  logic [30:0] slot0;
  logic [31:0] data;
  logic [3:0]  strb;

  logic [30:0] slot;
  logic [$clog2(N_LANE)-1:0] lane;
  assign slot = slot0 + 31'(half);
  assign lane = ($clog2(N_LANE))'(slot % N_LANE);

  logic half_en;
  assign half_en = !is_wr || (half ? |strb[3:2] : |strb[1:0]);

  always_comb begin
    bus_req   = '0;
    if (st == ACC && half_en) bus_req[lane] = 1'b1;
    bus_we    = is_wr;
    bus_row   = AW'(slot / N_LANE);
    bus_wdata = half ? data[31:16] : data[15:0];
  end

  assign s_awready = (st == IDLE) && s_awvalid && s_wvalid;
  assign s_wready  = s_awready;
  assign s_arready = (st == IDLE) && !(s_awvalid && s_wvalid) && s_arvalid;
  assign s_bvalid  = (st == BRSP);
  assign s_rvalid  = (st == RRSP);
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_rdata   = data;

  logic [$clog2(N_LANE)-1:0] lane_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; is_wr <= 1'b0; half <= 1'b0; slot0 <= '0; data <= '0; strb <= '0; lane_q <= '0;
    end else begin
      case (st)
        IDLE: begin
          half <= 1'b0;
          if (s_awready) begin
            is_wr <= 1'b1; slot0 <= {s_awaddr[31:2], 1'b0}; data <= s_wdata; strb <= s_wstrb; st <= ACC;
          end else if (s_arready) begin
            is_wr <= 1'b0; slot0 <= {s_araddr[31:2], 1'b0}; st <= ACC;
          end
        end
        ACC: begin
          lane_q <= lane;
          if (!half_en) begin
            if (half) st <= BRSP; else half <= 1'b1;
          end else if (bus_gnt[lane]) begin
            if (is_wr) begin
              if (half) st <= BRSP; else half <= 1'b1;
            end else st <= ACCW;
          end
        end
        ACCW: begin  // read data of the granted slot
          if (half) begin data[31:16] <= lane_rdata[lane_q]; st <= RRSP; end
          else begin data[15:0] <= lane_rdata[lane_q]; half <= 1'b1; st <= ACC; end
        end
        BRSP: if (s_bready) st <= IDLE;
        RRSP: if (s_rready) st <= IDLE;
        default: st <= IDLE;
      endcase
    end
  end

endmodule
