// uvp_lane_seq: lane sequencer - hardware strip-mining inside one lane.
//
// The main sequencer broadcasts one command with the full application vector
// length (AVL). Element j of a register group (RG) lives in lane j mod N_LANE,
// row head + j div N_LANE, so this lane owns
//     VL_i = floor(S / N_LANE) + (LANE_ID < S mod N_LANE)
// slots, where S = AVL for short elements and ceil(AVL/2) for char elements
// (two chars share one 16-bit slot). The paper prints the tail term with the
// comparison the other way round, which would not add up to AVL; this is the
// form that does. VL_i sets how many uops the lane runs, so no software
// strip-mining loop is needed.
//
// For each of its slots the sequencer
//   1. reads the operands one at a time through the lane's arbiter into the
//      operand queue (the VRF is a single-port SRAM, read data one cycle after
//      the grant),
//   2. runs one uop on the ALU, or on the CAU / divider and waits for their
//      result (a complex multiply runs a real and an imaginary uop),
//   3. writes the result back to the VRF through the arbiter, or to the mask
//      register (compare, vmnot), with byte enables for the odd char tail and,
//      if vmask is set, for disabled predicate bits.
// Complex vectors hold R = ceil(AVL/N_LANE) rows of real parts followed by R
// rows of imaginary parts. A reduction (LU_RED) sums this lane's elements and
// writes the partial sum to row vd; the EXE then adds the lanes together.
// Slots are processed strictly one after another (no overlap between the
// reads of one slot and the write of the previous one): simple, but slower
// than the paper's operand queues. busy is high from the accepted command
// until the last write; done pulses for one cycle at the end.
module uvp_lane_seq
  import uvp_pkg::*;
#(
  parameter int unsigned N_LANE  = 16,
  parameter int unsigned N_VREG  = 32,
  parameter int unsigned LANE_ID = 0,
  localparam int unsigned AW     = $clog2(N_VREG)
) (
  input  logic           clk,
  input  logic           rst_n,
  // command from the main sequencer
  input  logic           cmd_valid,
  input  lane_cmd_t      cmd,
  output logic           busy,
  output logic           done,
  // VRF access through the lane arbiter
  output logic           vrf_req,
  output logic           vrf_we,
  output logic [1:0]     vrf_be,
  output logic [AW-1:0]  vrf_row,
  output logic [DW-1:0]  vrf_wdata,
  input  logic           vrf_gnt,
  input  logic [DW-1:0]  vrf_rdata,
  // mask register file
  output logic [AW-1:0]  mrf_raddr,
  input  logic [1:0]     mrf_rbits,
  output logic           mrf_we,
  output logic [1:0]     mrf_wbe,
  output logic [AW-1:0]  mrf_waddr,
  output logic [1:0]     mrf_wbits,
  // execution units
  output alu_op_e        alu_op,
  output logic           alu_byte,
  output logic [DW-1:0]  alu_a,
  output logic [DW-1:0]  alu_b,
  input  logic [DW-1:0]  alu_y,
  input  logic [1:0]     alu_cmp,
  output logic           cau_valid,
  output cau_op_e        cau_op,
  output logic           cau_sub,
  output logic [15:0]    cau_a, cau_b, cau_c, cau_d,
  input  logic           cau_ovalid,
  input  logic [15:0]    cau_y,
  output logic           div_valid,
  output logic [15:0]    div_a, div_b,
  input  logic           div_ovalid,
  input  logic [15:0]    div_y,
  output logic [SHW-1:0] shamt
);

  typedef enum logic [3:0] {IDLE, SETUP, RD, RDW, EXEC, WAITU, WB, NEXT, FIN} st_e;
  st_e st;

  lane_cmd_t       c;
  logic [XLEN-1:0] slots, vl, rr;   // total slots, slots in this lane, rows per complex part
  logic [XLEN-1:0] k;               // current row offset
  logic [2:0]      ri, nrd;         // read index / number of reads
  logic [DW-1:0]   opq [4];         // operand queue
  logic [DW-1:0]   res [2];
  logic [1:0]      wi, nwr;
  logic            uop;             // complex: 0 real, 1 imaginary
  logic [DW-1:0]   acc;
  logic [1:0]      be;              // byte enables of the current slot

  // ---- combinational helpers ----
  logic [XLEN-1:0] g;     // global slot index of the current slot
  always_comb begin
    g = k * N_LANE + LANE_ID;
    if (c.byte_mode) be = {(2*g + 1) < c.avl, (2*g) < c.avl};
    else             be = {2{g < c.avl}};
    if (c.vmask && c.unit != LU_VMNOT)
      be = be & (c.byte_mode ? mrf_rbits : {2{mrf_rbits[0]}});
  end

  function automatic logic [AW-1:0] row(input logic [HEAD_W-1:0] h, input logic [XLEN-1:0] off);
    return AW'(XLEN'(h) + off);
  endfunction

  // row of read number i
  logic [AW-1:0] rd_row;
  always_comb begin
    case (c.unit)
      LU_CPLX: case (ri)
                 3'd0:    rd_row = row(c.vs1, k);
                 3'd1:    rd_row = row(c.vs1, k + rr);
                 3'd2:    rd_row = row(c.vs2, k);
                 default: rd_row = row(c.vs2, k + rr);
               endcase
      LU_CAU:  rd_row = (ri == 3'd0) ? row(c.vs1, k) : (ri == 3'd1) ? row(c.vs2, k) : row(c.vd, k);
      LU_DIV:  rd_row = (ri == 3'd0) ? row(c.vs1, k) : row(c.vs2, k);
      default: rd_row = (ri == 3'd0) ? row(c.vs2, k) : row(c.vs1, k);  // ALU, CMP, RED
    endcase
  end

  logic [AW-1:0] wr_row;
  always_comb begin
    if (c.unit == LU_RED)      wr_row = row(c.vd, XLEN'(0));
    else if (wi == 2'd1)       wr_row = row(c.vd, k + rr);
    else                       wr_row = row(c.vd, k);
  end

  // ---- port drive ----
  assign mrf_raddr = AW'(k);
  assign busy      = (st != IDLE);
  assign shamt     = c.shamt;

  always_comb begin
    vrf_req   = 1'b0;
    vrf_we    = 1'b0;
    vrf_be    = 2'b11;
    vrf_row   = rd_row;
    vrf_wdata = res[wi[0]];
    if (st == RD) vrf_req = 1'b1;
    if (st == WB) begin
      vrf_req = (be != 2'b00);
      vrf_we  = 1'b1;
      vrf_be  = be;
      vrf_row = wr_row;
    end
    if (st == FIN && c.unit == LU_RED) begin
      vrf_req   = 1'b1;
      vrf_we    = 1'b1;
      vrf_row   = wr_row;
      vrf_wdata = acc;
    end
  end

  always_comb begin
    mrf_we    = (st == EXEC) && (c.unit == LU_CMP || c.unit == LU_VMNOT);
    mrf_waddr = AW'(k);
    mrf_wbe   = be;
    mrf_wbits = (c.unit == LU_VMNOT) ? ~mrf_rbits
              : (c.byte_mode ? alu_cmp : {2{alu_cmp[0]}});
  end

  assign alu_op   = c.alu_op;
  assign alu_byte = c.byte_mode;
  assign alu_a    = opq[0];
  assign alu_b    = c.use_scl ? c.scl : opq[1];

  always_comb begin
    cau_op  = c.cau_op;
    cau_sub = c.sub;
    cau_a   = c.use_scl ? c.scl : opq[0];
    cau_b   = opq[1];
    cau_c   = opq[2];
    cau_d   = opq[3];
    if (c.unit == LU_CPLX) begin
      cau_op = uop ? CAU_CIM : CAU_CRE;
      cau_a  = opq[0];  // vs1.real
      cau_b  = opq[1];  // vs1.imag
      cau_c  = opq[2];  // vs2.real
      cau_d  = opq[3];  // vs2.imag
    end
    cau_valid = (st == EXEC) && (c.unit == LU_CAU || c.unit == LU_CPLX);
    div_valid = (st == EXEC) && (c.unit == LU_DIV);
    div_a     = c.use_scl ? c.scl : opq[0];
    div_b     = opq[1];
  end

  // reduction step of the current slot
  logic [DW-1:0] red_add;
  always_comb begin
    if (c.byte_mode)
      red_add = (be[0] ? {{8{opq[0][7]}},  opq[0][7:0]}  : 16'd0)
              + (be[1] ? {{8{opq[0][15]}}, opq[0][15:8]} : 16'd0);
    else
      red_add = be[0] ? opq[0] : 16'd0;
  end

  // ---- FSM ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; c <= '0; slots <= '0; vl <= '0; rr <= '0; k <= '0;
      ri <= '0; nrd <= '0; wi <= '0; nwr <= '0; uop <= 1'b0; acc <= '0; done <= 1'b0;
      for (int i = 0; i < 4; i++) opq[i] <= '0;
      res[0] <= '0; res[1] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        IDLE: if (cmd_valid) begin
          c     <= cmd;
          slots <= cmd.byte_mode ? (cmd.avl + 1) >> 1 : cmd.avl;
          st    <= SETUP;
        end
        SETUP: begin
          vl  <= slots / N_LANE + XLEN'(LANE_ID < slots % N_LANE);
          rr  <= (slots + N_LANE - 1) / N_LANE;
          k   <= '0;
          acc <= '0;
          ri  <= '0;
          wi  <= '0;
          uop <= 1'b0;
          case (c.unit)
            LU_CPLX:  begin nrd <= 3'd4; nwr <= 2'd2; end
            LU_CAU:   begin nrd <= (c.cau_op == CAU_MULADD || c.cau_op == CAU_ADDMUL) ? 3'd3 : 3'd2; nwr <= 2'd1; end
            LU_VMNOT: begin nrd <= 3'd0; nwr <= 2'd0; end
            LU_RED:   begin nrd <= 3'd1; nwr <= 2'd0; end
            LU_ALU, LU_CMP: begin nrd <= c.use_scl ? 3'd1 : 3'd2; nwr <= (c.unit == LU_ALU) ? 2'd1 : 2'd0; end
            default:  begin nrd <= 3'd2; nwr <= 2'd1; end  // divider
          endcase
          if (slots / N_LANE + XLEN'(LANE_ID < slots % N_LANE) == 0) st <= FIN;
          else st <= (c.unit == LU_VMNOT) ? EXEC : RD;
        end
        RD:  if (vrf_gnt) st <= RDW;
        RDW: begin
          opq[ri[1:0]] <= vrf_rdata;
          ri      <= ri + 3'd1;
          st      <= (ri + 3'd1 == nrd) ? EXEC : RD;
        end
        EXEC: begin
          case (c.unit)
            LU_ALU:  begin res[0] <= alu_y; st <= WB; end
            LU_CMP, LU_VMNOT: st <= NEXT;  // mask bits written this cycle
            LU_RED:  begin acc <= acc + red_add; st <= NEXT; end
            default: st <= WAITU;
          endcase
        end
        WAITU: begin
          if (c.unit == LU_DIV) begin
            if (div_ovalid) begin res[0] <= div_y; st <= WB; end
          end else if (cau_ovalid) begin
            res[uop] <= cau_y;
            if (c.unit == LU_CPLX && !uop) begin uop <= 1'b1; st <= EXEC; end
            else st <= WB;
          end
        end
        WB: if (vrf_gnt || be == 2'b00) begin
          if (wi + 2'd1 < nwr) wi <= wi + 2'd1;
          else                 st <= NEXT;
        end
        NEXT: begin
          ri  <= '0;
          wi  <= '0;
          uop <= 1'b0;
          k   <= k + 1;
          if (k + 1 == vl) begin
            if (c.unit == LU_RED) st <= FIN;
            else begin st <= IDLE; done <= 1'b1; end
          end else st <= (c.unit == LU_VMNOT) ? EXEC : RD;
        end
        FIN: begin
          // reduction: write the partial sum (0 for a lane without elements)
          if (c.unit != LU_RED || vrf_gnt) begin st <= IDLE; done <= 1'b1; end
        end
        default: st <= IDLE;
      endcase
    end
  end

endmodule
