// uvp_main_seq: main sequencer of the UVP extension.
//
// It takes 64-bit UVP instructions from the host core together with the
// values of the two scalar registers they name (rs_avl holds the application
// vector length AVL; the vs1 field names a scalar register for vector-scalar
// forms), decodes them and routes them to the lanes or to the element
// exchange engine (EXE). The AVL is passed on unchanged: each lane works out
// its own share of the elements, which is the hardware strip-mining of UVP.
//
// Flow per instruction:
//   decode -> CSR write (uvp_vsetcsr: vshamt, vsglen, vrextra; done at once)
//          or: take a free one-hot instruction ID (instruction monitor, at
//              most N_ID in flight), enter the RG ranges into the hazard
//              detector, append to the in-order dispatch queue;
//   dispatch -> the oldest queued instruction leaves when its hazard-table
//              row is clear and its unit is free (all lanes idle, or the EXE
//              idle); otherwise the pipeline stalls (stall_cycles counts every
//              blocked cycle, hz_stall_cycles those caused by an RG conflict);
//   complete -> lanes all idle again / EXE commit; the ID is freed and the
//              hazard detector clears it.
// A reduction sum is split into a lane phase (each lane sums its elements)
// and an EXE phase (log2 N_LANE steps between lanes), each with its own ID;
// the hazard table orders them. RG ranges run from the head to
// head + ceil(S / N_LANE) - 1 rows, S the number of 16-bit slots; complex
// vectors use twice that. vrextra supplies register-number bits above the 13
// encoded ones. Illegal encodings are dropped and counted.
// Routing, stalling and the CSRs follow the paper; the queue organisation,
// in-order dispatch and the funct3/funct7 code points are this design's.
module uvp_main_seq
  import uvp_pkg::*;
#(
  parameter int unsigned N_LANE = 16,
  parameter int unsigned N_VREG = 32,
  parameter int unsigned N_ID   = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  // instruction interface
  input  logic            inst_valid,
  output logic            inst_ready,
  input  logic [63:0]     inst,
  input  logic [XLEN-1:0] avl_val,
  input  logic [XLEN-1:0] rs1_val,
  // lanes
  output logic            lane_cmd_valid,
  output lane_cmd_t       lane_cmd,
  input  logic [N_LANE-1:0] lane_busy,
  // EXE
  output logic            exe_cmd_valid,
  output exe_cmd_t        exe_cmd,
  input  logic            exe_cmd_ready,
  input  logic            exe_done,
  // status
  output logic            idle,
  output logic [31:0]     stall_cycles,
  output logic [31:0]     hz_stall_cycles,
  output logic [31:0]     illegal_cnt,
  output logic [SHW-1:0]  csr_vshamt,
  output logic [XLEN-1:0] csr_vsglen,
  output logic [XLEN-1:0] csr_vrextra
);

  localparam int unsigned IW = (N_ID > 1) ? $clog2(N_ID) : 1;

  typedef struct packed {
    logic       is_exe;
    logic [IW-1:0] id;
    lane_cmd_t  lc;
    exe_cmd_t   ec;
  } qent_t;

  // ---------------- decode ----------------
  inst_t     di;
  logic      legal, is_csr, is_red;
  qent_t     dent;             // decoded entry (lane or EXE part)
  logic      wr_en, rd1_en, rd2_en, m_rd, m_wr;
  logic [31:0] wr_h, wr_t, rd1_h, rd1_t, rd2_h, rd2_t;
  logic      split_q;          // second (EXE) half of a reduction pending
  inst_t     red_i;
  logic [XLEN-1:0] red_avl;

  function automatic logic [31:0] rows_of(input logic [XLEN-1:0] len, input logic byte_mode);
    logic [XLEN-1:0] s;
    s = byte_mode ? (len + 1) >> 1 : len;
    return (s + N_LANE - 1) / N_LANE;
  endfunction

  function automatic logic [31:0] head_of(input logic [HEAD_W-1:0] h, input logic [XLEN-1:0] extra);
    return (extra << HEAD_W) | 32'(h);
  endfunction

  always_comb begin
    inst_t i;
    logic [XLEN-1:0] avl;
    logic [31:0] r, rs;
    i   = split_q ? red_i : inst_unpack(inst);
    avl = split_q ? red_avl : avl_val;
    di  = i;
    legal  = 1'b1;
    is_csr = 1'b0;
    is_red = 1'b0;
    dent   = '0;
    dent.lc.byte_mode = (i.vew == 2'b00);
    dent.lc.vmask = i.vmask;
    dent.lc.vd    = HEAD_W'(head_of(i.vd,  csr_vrextra));
    dent.lc.vs1   = HEAD_W'(head_of(i.vs1, csr_vrextra));
    dent.lc.vs2   = HEAD_W'(head_of(i.vs2, csr_vrextra));
    dent.lc.avl   = avl;
    dent.lc.shamt = csr_vshamt;
    dent.lc.scl   = rs1_val[DW-1:0];
    dent.lc.alu_op = alu_op_e'(i.funct7[4:0]);
    dent.lc.cau_op = cau_op_e'(i.funct7[3:1]);
    dent.lc.sub    = i.funct7[0];
    dent.ec.vmask = i.vmask;
    dent.ec.vd    = dent.lc.vd;
    dent.ec.vs1   = dent.lc.vs1;
    dent.ec.vs2   = dent.lc.vs2;
    dent.ec.avl   = avl;
    dent.ec.sglen = csr_vsglen;
    r  = rows_of(avl, dent.lc.byte_mode);
    rs = rows_of(csr_vsglen, 1'b0);
    wr_en = 1'b0; rd1_en = 1'b0; rd2_en = 1'b0; m_rd = i.vmask; m_wr = 1'b0;
    wr_h  = head_of(i.vd,  csr_vrextra);  wr_t  = wr_h  + r - 1;
    rd1_h = head_of(i.vs1, csr_vrextra);  rd1_t = rd1_h + r - 1;
    rd2_h = head_of(i.vs2, csr_vrextra);  rd2_t = rd2_h + r - 1;
    case (cat_e'(i.funct3))
      CAT_OPVV, CAT_OPVX: begin
        legal = (i.opcode == OPC_CUSTOM1) && (i.funct7 <= 7'd19) && !(i.funct7 inside {[7'd13:7'd15]});
        dent.lc.unit    = LU_ALU;
        dent.lc.use_scl = (i.funct3 == 3'(CAT_OPVX));
        wr_en = 1'b1; rd1_en = !dent.lc.use_scl; rd2_en = 1'b1;
      end
      CAT_CMP: begin
        legal = (i.opcode == OPC_CUSTOM1) && (i.funct7[4:0] inside {[5'd16:5'd19]}) && (i.funct7[6] == 1'b0);
        dent.lc.unit    = LU_CMP;
        dent.lc.use_scl = i.funct7[5];
        rd1_en = !i.funct7[5]; rd2_en = 1'b1; m_wr = 1'b1;
      end
      CAT_CAU: begin
        legal = (i.opcode == OPC_CUSTOM1) && (i.funct7 == F7_CPLXMUL || i.funct7 < 7'd8);
        dent.lc.unit = (i.funct7 == F7_CPLXMUL) ? LU_CPLX : LU_CAU;
        wr_en = 1'b1; rd1_en = 1'b1; rd2_en = 1'b1;
        if (i.funct7 == F7_CPLXMUL) begin
          wr_t = wr_h + 2*r - 1; rd1_t = rd1_h + 2*r - 1; rd2_t = rd2_h + 2*r - 1;
        end
      end
      CAT_DIV: begin
        legal = (i.opcode == OPC_CUSTOM1);
        dent.lc.unit = LU_DIV;
        wr_en = 1'b1; rd1_en = 1'b1; rd2_en = 1'b1;
      end
      CAT_MASK: begin
        legal = (i.opcode == OPC_CUSTOM2) && (i.funct7 == F7_VMNOT || i.funct7 == F7_REDSUM);
        if (i.funct7 == F7_VMNOT) begin
          dent.lc.unit = LU_VMNOT; m_rd = 1'b1; m_wr = 1'b1;
        end else begin
          is_red = 1'b1;
          wr_t = wr_h;  // one row: partial sums, then the result in lane 0
          wr_en = 1'b1;
          if (split_q) begin
            dent.is_exe = 1'b1;
            dent.ec.op  = EX_REDSUM;
            m_rd = 1'b0;
          end else begin
            dent.lc.unit = LU_RED;
            rd2_en = 1'b1;
          end
        end
      end
      CAT_EXE: begin
        legal = (i.opcode == OPC_CUSTOM2) && (i.funct7 == F7_GATHER || i.funct7 == F7_SCATTER);
        dent.is_exe = 1'b1;
        dent.ec.op  = (i.funct7 == F7_SCATTER) ? EX_SCATTER : EX_GATHER;
        wr_en = 1'b1; rd1_en = 1'b1; rd2_en = 1'b1;
        wr_t = wr_h + rs - 1;
        if (i.funct7 == F7_GATHER) rd2_t = rd2_h + rs - 1;
      end
      default: begin  // CAT_CSR
        legal  = (i.opcode == OPC_CUSTOM2) && (i.funct7 <= CSR_VREXTRA);
        is_csr = 1'b1;
      end
    endcase
    // empty ranges
    if (wr_t < wr_h || wr_t == 32'hffff_ffff) wr_en = 1'b0;
    if (rd1_t < rd1_h || rd1_t == 32'hffff_ffff) rd1_en = 1'b0;
    if (rd2_t < rd2_h || rd2_t == 32'hffff_ffff) rd2_en = 1'b0;
  end

  // ---------------- instruction monitor ----------------
  logic [N_ID-1:0] used;        // allocated IDs
  logic [N_ID-1:0] free_oh;     // lowest free ID, one-hot
  logic [IW-1:0]   free_idx;
  always_comb begin
    free_oh = '0; free_idx = '0;
    for (int k = N_ID - 1; k >= 0; k--)
      if (!used[k]) begin free_oh = '0; free_oh[k] = 1'b1; free_idx = IW'(k); end
  end

  // ---------------- dispatch queue ----------------
  qent_t           q [N_ID];
  logic [IW-1:0]   q_rd, q_wr;
  logic [IW:0]     q_cnt;
  logic            q_full;
  assign q_full = (q_cnt == (IW+1)'(N_ID));

  logic take, alloc;
  assign inst_ready = !split_q && (is_csr || !legal || (used != '1 && !q_full));
  assign take       = (inst_valid && inst_ready) || (split_q && used != '1 && !q_full);
  assign alloc      = take && legal && !is_csr;

  // ---------------- hazard detection ----------------
  logic [N_ID-1:0] done_id, row_valid;
  logic [N_ID-1:0] hz_row [N_ID];

  uvp_hazard_det #(.N_VREG(N_VREG), .N_ID(N_ID)) u_hz (
    .clk, .rst_n, .alloc_valid(alloc), .alloc_id(free_oh),
    .wr_en, .wr_head(wr_h), .wr_tail(wr_t),
    .rd1_en, .rd1_head(rd1_h), .rd1_tail(rd1_t),
    .rd2_en, .rd2_head(rd2_h), .rd2_tail(rd2_t),
    .mask_rd(m_rd), .mask_wr(m_wr), .done_id, .row_valid, .hz_row
  );

  // ---------------- dispatch / completion ----------------
  qent_t   head;
  logic    head_ok, unit_free, disp;
  logic    lane_act, lane_wait;    // lane instruction in flight, 1st cycle
  logic [IW-1:0] lane_id, exe_id;
  logic    exe_act;

  assign head      = q[q_rd];
  assign unit_free = head.is_exe ? (!exe_act && exe_cmd_ready) : (!lane_act && lane_busy == '0);
  assign head_ok   = (q_cnt != 0) && row_valid[head.id] && (hz_row[head.id] == '0);
  assign disp      = head_ok && unit_free;

  assign lane_cmd_valid = disp && !head.is_exe;
  assign lane_cmd       = head.lc;
  assign exe_cmd_valid  = disp && head.is_exe;
  assign exe_cmd        = head.ec;

  logic lane_fin;
  assign lane_fin = lane_act && !lane_wait && (lane_busy == '0);
  always_comb begin
    done_id = '0;
    if (lane_fin)           done_id[lane_id] = 1'b1;
    if (exe_act && exe_done) done_id[exe_id] = 1'b1;
  end

  assign idle = (used == '0) && !split_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used <= '0; q_rd <= '0; q_wr <= '0; q_cnt <= '0; split_q <= 1'b0; red_i <= '0; red_avl <= '0;
      lane_act <= 1'b0; lane_wait <= 1'b0; lane_id <= '0; exe_act <= 1'b0; exe_id <= '0;
      stall_cycles <= '0; hz_stall_cycles <= '0; illegal_cnt <= '0;
      csr_vshamt <= '0; csr_vsglen <= '0; csr_vrextra <= '0;
      for (int k = 0; k < N_ID; k++) q[k] <= '0;
    end else begin
      // CSR writes and illegal instructions
      if (inst_valid && inst_ready && !split_q) begin
        if (!legal) illegal_cnt <= illegal_cnt + 1;
        else if (is_csr) begin
          case (di.funct7)
            CSR_VSHAMT:  csr_vshamt  <= avl_val[SHW-1:0];
            CSR_VSGLEN:  csr_vsglen  <= avl_val;
            default:     csr_vrextra <= avl_val;
          endcase
        end
      end
      // reduction: queue the EXE half in the next cycle
      if (take && is_red && !split_q) begin
        split_q <= 1'b1; red_i <= di; red_avl <= avl_val;
      end else if (take && split_q) split_q <= 1'b0;

      // allocate
      if (alloc) begin
        q[q_wr]    <= '{is_exe: dent.is_exe, id: free_idx, lc: dent.lc, ec: dent.ec};
        q_wr       <= (q_wr == IW'(N_ID - 1)) ? '0 : q_wr + 1'b1;
      end
      used <= (used | (alloc ? free_oh : '0)) & ~done_id;
      q_cnt <= q_cnt + (IW+1)'(alloc) - (IW+1)'(disp);

      // dispatch
      if (disp) begin
        q_rd <= (q_rd == IW'(N_ID - 1)) ? '0 : q_rd + 1'b1;
        if (head.is_exe) begin exe_act <= 1'b1; exe_id <= head.id; end
        else begin lane_act <= 1'b1; lane_wait <= 1'b1; lane_id <= head.id; end
      end
      if (lane_wait) lane_wait <= 1'b0;
      if (lane_fin) lane_act <= 1'b0;
      if (exe_act && exe_done) exe_act <= 1'b0;
      if (q_cnt != 0 && !disp) stall_cycles <= stall_cycles + 1;
      if (q_cnt != 0 && row_valid[head.id] && hz_row[head.id] != '0) hz_stall_cycles <= hz_stall_cycles + 1;
    end
  end

endmodule
