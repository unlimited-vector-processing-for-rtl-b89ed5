// tb_uvp_main_seq: the main sequencer (decode, instruction monitor, hazard
// detector, in-order dispatch) of a 4-lane, 32-register, 8-ID configuration
// with behavioural lanes and EXE that stay busy for random times.
//
// A random stream of ALU (vector and scalar), compare, CAU, complex multiply,
// divide, vmnot, reduction, gather, scatter, CSR writes and illegal words is
// issued. The testbench keeps its own list of the register rows (and mask
// register) each instruction reads and writes and checks:
//   - every vector instruction is dispatched exactly once, in program order,
//     to the right unit with the right decoded fields;
//   - no instruction is dispatched before every older instruction it
//     conflicts with (RAW, WAR, WAW) has completed;
//   - no unit gets a second command while busy;
//   - CSR values, the illegal-instruction count and the ID limit (inst_ready
//     low with 8 instructions in flight).
// Counts hazard stalls, ID-full back-pressure and concurrent lane/EXE work.
module tb_uvp_main_seq;
  import uvp_pkg::*;
  localparam int N = 4, NV = 32, NI = 8;
  logic clk = 0, rst_n = 0;
  logic inst_valid = 0, inst_ready;
  logic [63:0] inst = 0;
  logic [31:0] avl_val = 0, rs1_val = 0;
  logic lane_cmd_valid, exe_cmd_valid, exe_cmd_ready, exe_done, idle;
  lane_cmd_t lane_cmd;
  exe_cmd_t exe_cmd;
  logic [N-1:0] lane_busy;
  logic [31:0] stall_cycles, hz_stall_cycles, illegal_cnt, csr_vsglen, csr_vrextra;
  logic [4:0] csr_vshamt;
  int checks = 0, failures = 0, cyc = 0, n_full = 0, n_overlap = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  uvp_main_seq #(.N_LANE(N), .N_VREG(NV), .N_ID(NI)) dut (.*);

  // ---- records of issued vector instructions (a reduction gives two) ----
  typedef struct {
    bit is_exe;
    lane_unit_e unit;
    exe_op_e eop;
    logic [NV:0] w, r;
    int disp_t, done_t;
    logic [15:0] scl;
    bit use_scl;
  } rec_t;
  rec_t recs[$];
  int next_disp = 0;

  // ---- behavioural units ----
  int lane_left = 0, exe_left = 0, lane_rec = -1, exe_rec = -1;
  bit exe_busy = 0;
  assign lane_busy = {N{lane_left > 0}};
  assign exe_cmd_ready = !exe_busy;
  assign exe_done = exe_busy && exe_left == 0;

  always @(posedge clk) if (rst_n) begin
    if (lane_left > 0) begin
      lane_left <= lane_left - 1;
      if (lane_left == 1) recs[lane_rec].done_t = cyc;
    end
    if (exe_busy) begin
      if (exe_left == 0) begin exe_busy <= 0; recs[exe_rec].done_t = cyc; end
      else exe_left <= exe_left - 1;
    end
    if (lane_busy != 0 && exe_busy) n_overlap++;
    if (lane_cmd_valid || exe_cmd_valid) begin
      checks++;
      if (lane_cmd_valid && exe_cmd_valid) failures++;
      if (next_disp >= recs.size()) begin failures++; $display("dispatch without instruction"); end
      else begin
        rec_t x;
        x = recs[next_disp];
        checks++;
        if (x.is_exe != exe_cmd_valid || (!x.is_exe && lane_cmd.unit != x.unit) || (x.is_exe && exe_cmd.op != x.eop)
            || (!x.is_exe && x.use_scl && (lane_cmd.use_scl != 1'b1 || lane_cmd.scl != x.scl))) begin
          failures++; $display("wrong dispatch of record %0d", next_disp);
        end
        // ordering against older conflicting instructions
        for (int j = 0; j < next_disp; j++) begin
          if ((((x.w & (recs[j].w | recs[j].r)) | (x.r & recs[j].w)) != 0)) begin
            checks++;
            if (recs[j].done_t < 0 || recs[j].done_t >= cyc) begin
              failures++; $display("record %0d dispatched before conflicting %0d finished", next_disp, j);
            end
          end
        end
        recs[next_disp].disp_t = cyc;
        if (lane_cmd_valid) begin
          checks++;
          if (lane_left > 0) failures++;
          lane_left <= $urandom_range(1, 12); lane_rec = next_disp;
        end else begin
          checks++;
          if (exe_busy) failures++;
          exe_busy <= 1; exe_left <= $urandom_range(2, 20); exe_rec = next_disp;
        end
        next_disp++;
      end
    end
  end

  function automatic logic [NV:0] rows(input int h, input int n);
    logic [NV:0] s;
    s = '0;
    for (int i = h; i < h + n; i++) if (i < NV) s[i] = 1'b1;
    return s;
  endfunction

  int sglen = 0, vshamt = 0, vrextra = 0, n_illegal = 0;

  task automatic issue(input logic [63:0] w, input logic [31:0] av, input logic [31:0] r1);
    logic g;
    @(negedge clk);
    inst_valid = 1; inst = w; avl_val = av; rs1_val = r1;
    do begin
      #1 g = inst_ready;
      if (!g && dut.used == '1) n_full++;
      @(negedge clk);
    end while (!g);
    inst_valid = 0;
  endtask

  task automatic random_inst();
    inst_t i;
    int avl, r, rs, kind;
    bit bm;
    rec_t x, y;
    i = '0;
    kind = $urandom_range(0, 11);
    avl = $urandom_range(1, 16);
    i.vew = 2'b01;
    i.vmask = $urandom_range(0, 3) == 0;
    i.vd = 13'($urandom_range(0, 23)); i.vs1 = 13'($urandom_range(0, 23)); i.vs2 = 13'($urandom_range(0, 23));
    i.opcode = OPC_CUSTOM1;
    bm = 0;
    x = '{is_exe: 0, unit: LU_ALU, eop: EX_GATHER, w: '0, r: '0, disp_t: -1, done_t: -1, scl: 16'($urandom), use_scl: 0};
    if (kind <= 1 && $urandom_range(0, 1)) begin bm = 1; i.vew = 2'b00; end
    r = ((bm ? (avl + 1) / 2 : avl) + N - 1) / N;
    rs = (sglen + N - 1) / N;
    x.r[NV] = i.vmask;
    case (kind)
      0: begin i.funct3 = 3'(CAT_OPVV); i.funct7 = 7'($urandom_range(0, 12));
         x.w = rows(i.vd, r); x.r |= rows(i.vs1, r) | rows(i.vs2, r); end
      1: begin i.funct3 = 3'(CAT_OPVX); i.funct7 = 7'($urandom_range(0, 12)); x.use_scl = 1;
         x.w = rows(i.vd, r); x.r |= rows(i.vs2, r); end
      2: begin i.funct3 = 3'(CAT_CMP); i.funct7 = 7'($urandom_range(16, 19)); x.unit = LU_CMP;
         x.w[NV] = 1; x.r |= rows(i.vs1, r) | rows(i.vs2, r); end
      3: begin i.funct3 = 3'(CAT_CAU); i.funct7 = 7'($urandom_range(0, 7)); x.unit = LU_CAU;
         x.w = rows(i.vd, r); x.r |= rows(i.vs1, r) | rows(i.vs2, r); end
      4: begin i.funct3 = 3'(CAT_CAU); i.funct7 = F7_CPLXMUL; x.unit = LU_CPLX;
         x.w = rows(i.vd, 2 * r); x.r |= rows(i.vs1, 2 * r) | rows(i.vs2, 2 * r); end
      5: begin i.funct3 = 3'(CAT_DIV); x.unit = LU_DIV;
         x.w = rows(i.vd, r); x.r |= rows(i.vs1, r) | rows(i.vs2, r); end
      6: begin i.opcode = OPC_CUSTOM2; i.funct3 = 3'(CAT_MASK); i.funct7 = F7_VMNOT; x.unit = LU_VMNOT;
         x.w[NV] = 1; x.r[NV] = 1; end
      7: begin i.opcode = OPC_CUSTOM2; i.funct3 = 3'(CAT_MASK); i.funct7 = F7_REDSUM; x.unit = LU_RED;
         x.w = rows(i.vd, 1); x.r |= rows(i.vs2, r);
         y = x; y.is_exe = 1; y.eop = EX_REDSUM; y.r = '0; end
      8, 9: begin i.opcode = OPC_CUSTOM2; i.funct3 = 3'(CAT_EXE); x.is_exe = 1;
         x.eop = (kind == 8) ? EX_GATHER : EX_SCATTER; i.funct7 = (kind == 8) ? F7_GATHER : F7_SCATTER;
         x.w = rows(i.vd, rs);
         x.r |= rows(i.vs1, r) | rows(i.vs2, (kind == 8) ? rs : r); end
      10: begin  // CSR write
         i.opcode = OPC_CUSTOM2; i.funct3 = 3'(CAT_CSR); i.funct7 = 7'($urandom_range(0, 1));
         avl = (i.funct7 == 0) ? $urandom_range(0, 15) : $urandom_range(0, 16);
         if (i.funct7 == 0) vshamt = avl; else sglen = avl;
      end
      default: begin  // illegal: wrong opcode
         i.opcode = 7'b0001011; i.funct3 = 3'(CAT_OPVV); n_illegal++;
      end
    endcase
    if (kind <= 9) begin recs.push_back(x); if (kind == 7) recs.push_back(y); end
    issue(inst_pack(i), 32'(avl), 32'(x.scl));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      random_inst();
      if (n % 50 == 49) begin
        checks += 3;
        if (csr_vsglen != 32'(sglen)) failures++;
        if (csr_vshamt != 5'(vshamt)) failures++;
        if (illegal_cnt != 32'(n_illegal)) failures++;
      end
    end
    // vrextra write and read-back
    begin
      inst_t i;
      i = '0; i.opcode = OPC_CUSTOM2; i.funct3 = 3'(CAT_CSR); i.funct7 = CSR_VREXTRA;
      issue(inst_pack(i), 32'd0, 32'd0);
    end
    while (!idle) @(negedge clk);
    repeat (3) @(negedge clk);
    checks += 3;
    if (next_disp != recs.size()) begin failures++; $display("dispatched %0d of %0d", next_disp, recs.size()); end
    if (hz_stall_cycles == 0 || n_full == 0 || n_overlap == 0) failures++;
    if (stall_cycles < hz_stall_cycles) failures++;
    $display("records %0d, hazard stall cycles %0d, all stall cycles %0d, ID-full cycles %0d, lane+EXE overlap cycles %0d",
             recs.size(), hz_stall_cycles, stall_cycles, n_full, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
