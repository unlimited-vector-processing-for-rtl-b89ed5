// tb_uvp_lane: one lane (lane 1 of a 4-lane configuration) with its
// sequencer, ALU, CAU, divider, mask slice, arbiter and VRF bank.
//
// The VRF is preloaded with random data through the memory-map port. Random
// lane commands (ALU ops with vector or scalar operand, char and short
// elements, compares into the mask, vmnot, predicated execution, CAU ops,
// complex multiply, division with vshamt, and the lane part of a reduction)
// are then run one at a time. A reference model applies the same command to
// a copy of this lane's rows, slot by slot, using this lane's share of the
// strip-mined vector (slots g = k*4 + 1 < AVL). After each command all rows
// and mask bits are read back and compared. While commands run, a second
// process issues PE read requests to rows the commands never write, so the
// arbiter sees conflicts; their data is checked too.
module tb_uvp_lane;
  import uvp_pkg::*;
  localparam int N = 4, NV = 32, LID = 1;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, busy, done;
  lane_cmd_t cmd;
  logic bus_req = 0, bus_we = 0, bus_gnt;
  logic [4:0] bus_row = 0;
  logic [15:0] bus_wdata = 0, rdata;
  logic pe_wr_req = 0, pe_wr_gnt;
  logic [4:0] pe_wr_row = 0;
  logic [15:0] pe_wr_data = 0;
  logic [N-1:0] pe_rd_req = 0, pe_rd_gnt;
  logic [1:0] pe_rd_lane [N];
  logic [4:0] pe_rd_row [N];
  logic [4:0] pe_mrf_raddr = 0;
  logic [1:0] pe_mrf_rbits;
  int checks = 0, failures = 0, conflicts = 0, n_pe = 0, n_sat = 0;
  always #5 clk = ~clk;

  uvp_lane #(.N_LANE(N), .N_VREG(NV), .LANE_ID(LID)) dut (.*);

  always @(posedge clk) if ($countones(dut.req) > 1) conflicts++;

  logic [15:0] mem [NV];
  logic [1:0]  msk [NV];

  // ---------------- reference model ----------------
  function automatic int sx8(input logic [7:0] v); return int'($signed(v)); endfunction
  function automatic int sx16(input logic [15:0] v); return int'($signed(v)); endfunction

  function automatic logic [15:0] sat(input longint r);
    if (r > 32767) begin n_sat++; return 16'h7fff; end
    if (r < -32768) begin n_sat++; return 16'h8000; end
    return 16'(r);
  endfunction

  function automatic int alu_e(input alu_op_e o, input int x, input int z, input int w);
    int lo, hi, r, m;
    lo = -(1 << (w - 1)); hi = (1 << (w - 1)) - 1; m = (1 << w) - 1;
    case (o)
      ALU_ADD:  r = x + z;
      ALU_SUB:  r = x - z;
      ALU_SADD: begin r = x + z; if (r > hi) r = hi; if (r < lo) r = lo; end
      ALU_SSUB: begin r = x - z; if (r > hi) r = hi; if (r < lo) r = lo; end
      ALU_AND:  r = x & z;
      ALU_OR:   r = x | z;
      ALU_XOR:  r = x ^ z;
      ALU_SLL:  r = x << (z & (w - 1));
      ALU_SRL:  r = (x & m) >> (z & (w - 1));
      ALU_SRA:  r = x >>> (z & (w - 1));
      ALU_MIN:  r = (x < z) ? x : z;
      ALU_MAX:  r = (x > z) ? x : z;
      ALU_MV:   r = z;
      ALU_SEQ:  r = int'(x == z);
      ALU_SNE:  r = int'(x != z);
      ALU_SLT:  r = int'(x < z);
      default:  r = int'(x <= z);
    endcase
    return r & m;
  endfunction

  function automatic logic [15:0] alu16(input alu_op_e o, input logic [15:0] a, input logic [15:0] b, input bit bm);
    if (bm) return {8'(alu_e(o, sx8(a[15:8]), sx8(b[15:8]), 8)), 8'(alu_e(o, sx8(a[7:0]), sx8(b[7:0]), 8))};
    return 16'(alu_e(o, sx16(a), sx16(b), 16));
  endfunction

  function automatic logic [15:0] div_ref(input logic [15:0] a, input logic [15:0] b, input int sh);
    longint q;
    if (b == 0) return a[15] ? 16'h8000 : 16'h7fff;
    q = (longint'(sx16(a)) <<< sh) / sx16(b);
    return sat(q);
  endfunction

  function automatic logic [15:0] cau_ref(input cau_op_e o, input bit s, input logic [15:0] a, b, c, input int sh);
    longint r;
    case (o)
      CAU_ADDSUB: r = s ? sx16(a) - sx16(b) : sx16(a) + sx16(b);
      CAU_ADDMUL: r = longint'(s ? sx16(a) - sx16(b) : sx16(a) + sx16(b)) * sx16(c);
      CAU_MULADD: r = s ? longint'(sx16(a)) * sx16(b) - sx16(c) : longint'(sx16(a)) * sx16(b) + sx16(c);
      default:    r = longint'(sx16(a)) * sx16(b);
    endcase
    return sat(r >>> sh);
  endfunction

  task automatic model(input lane_cmd_t c);
    int slots, vl, rr, g;
    logic [1:0] be;
    logic [15:0] acc, a, b, y;
    slots = c.byte_mode ? (int'(c.avl) + 1) / 2 : int'(c.avl);
    vl = slots / N + ((LID < slots % N) ? 1 : 0);
    rr = (slots + N - 1) / N;
    acc = 0;
    for (int k = 0; k < vl; k++) begin
      g = k * N + LID;
      be = c.byte_mode ? {2*g + 1 < int'(c.avl), 2*g < int'(c.avl)} : 2'b11;
      if (c.vmask && c.unit != LU_VMNOT) be &= c.byte_mode ? msk[k] : {2{msk[k][0]}};
      a = mem[c.vs2 + k];
      b = c.use_scl ? c.scl : mem[c.vs1 + k];
      case (c.unit)
        LU_ALU: begin
          y = alu16(c.alu_op, a, b, c.byte_mode);
          for (int i = 0; i < 2; i++) if (be[i]) mem[c.vd + k][8*i +: 8] = y[8*i +: 8];
        end
        LU_CMP: begin
          y = alu16(c.alu_op, a, b, c.byte_mode);
          for (int i = 0; i < 2; i++) if (be[i]) msk[k][i] = c.byte_mode ? y[8*i] : y[0];
        end
        LU_VMNOT: for (int i = 0; i < 2; i++) if (be[i]) msk[k][i] = ~msk[k][i];
        LU_RED: begin
          if (c.byte_mode) acc += (be[0] ? 16'(sx8(a[7:0])) : 16'd0) + (be[1] ? 16'(sx8(a[15:8])) : 16'd0);
          else if (be[0]) acc += a;
        end
        LU_DIV: begin
          y = div_ref(c.use_scl ? c.scl : mem[c.vs1 + k], mem[c.vs2 + k], int'(c.shamt));
          for (int i = 0; i < 2; i++) if (be[i]) mem[c.vd + k][8*i +: 8] = y[8*i +: 8];
        end
        LU_CAU: begin
          y = cau_ref(c.cau_op, c.sub, c.use_scl ? c.scl : mem[c.vs1 + k], mem[c.vs2 + k], mem[c.vd + k], int'(c.shamt));
          for (int i = 0; i < 2; i++) if (be[i]) mem[c.vd + k][8*i +: 8] = y[8*i +: 8];
        end
        default: begin  // complex multiply
          logic [15:0] ar, ai, br, bi, re, im;
          ar = mem[c.vs1 + k]; ai = mem[c.vs1 + k + rr]; br = mem[c.vs2 + k]; bi = mem[c.vs2 + k + rr];
          re = sat((longint'(sx16(ar)) * sx16(br) - longint'(sx16(ai)) * sx16(bi)) >>> c.shamt);
          for (int i = 0; i < 2; i++) if (be[i]) mem[c.vd + k][8*i +: 8] = re[8*i +: 8];
          im = sat((longint'(sx16(ar)) * sx16(bi) + longint'(sx16(ai)) * sx16(br)) >>> c.shamt);
          for (int i = 0; i < 2; i++) if (be[i]) mem[c.vd + k + rr][8*i +: 8] = im[8*i +: 8];
        end
      endcase
    end
    if (c.unit == LU_RED) mem[c.vd] = acc;
  endtask

  // ---------------- bus access ----------------
  task automatic bus(input bit we, input int r, input logic [15:0] wd, output logic [15:0] rd);
    logic g;
    @(negedge clk);
    bus_req = 1; bus_we = we; bus_row = 5'(r); bus_wdata = wd;
    do begin #1 g = bus_gnt; @(negedge clk); end while (!g);
    bus_req = 0;
    rd = rdata;
  endtask

  // ---------------- PE read injector ----------------
  bit inject = 0;
  initial begin
    for (int p = 0; p < N; p++) begin pe_rd_lane[p] = 0; pe_rd_row[p] = 0; end
    forever begin
      @(negedge clk);
      if (inject && $urandom_range(0, 3) == 0) begin
        int p, r;
        logic g;
        p = $urandom_range(0, N - 1); r = $urandom_range(28, 31);
        pe_rd_req[p] = 1; pe_rd_lane[p] = 2'(LID); pe_rd_row[p] = 5'(r);
        do begin #1 g = pe_rd_gnt[p]; @(negedge clk); end while (!g);
        pe_rd_req[p] = 0;
        checks++; n_pe++;
        if (rdata !== mem[r]) begin failures++; $display("PE read row %0d got %h exp %h", r, rdata, mem[r]); end
      end
    end
  end

  // a request addressed to another lane must be ignored
  always @(negedge clk) begin
    checks++;
    if (pe_rd_gnt != '0 && !(pe_rd_lane[0] == LID || pe_rd_lane[1] == LID || pe_rd_lane[2] == LID || pe_rd_lane[3] == LID))
      failures++;
  end

  task automatic check_all(input string what);
    logic [15:0] rd;
    inject = 0;
    for (int r = 0; r < NV; r++) begin
      bus(0, r, 0, rd);
      checks++;
      if (rd !== mem[r]) begin failures++; if (failures < 20) $display("%s: row %0d got %h exp %h", what, r, rd, mem[r]); end
    end
    for (int r = 0; r < NV; r++) begin
      pe_mrf_raddr = 5'(r); #1;
      checks++;
      if (pe_mrf_rbits !== msk[r]) begin failures++; if (failures < 20) $display("%s: mask %0d got %b exp %b", what, r, pe_mrf_rbits, msk[r]); end
    end
  endtask

  lane_unit_e units[7] = '{LU_ALU, LU_CMP, LU_CAU, LU_CPLX, LU_DIV, LU_VMNOT, LU_RED};
  int per_unit [7];

  initial begin
    logic [15:0] rd;
    cmd = '0;
    for (int r = 0; r < NV; r++) begin mem[r] = 16'($urandom); msk[r] = 2'b11; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NV; r++) bus(1, r, mem[r], rd);
    check_all("preload");
    for (int n = 0; n < 300; n++) begin
      lane_cmd_t c;
      int ui, maxrows;
      ui = $urandom_range(0, 6);
      c = '0;
      c.unit = units[ui];
      c.alu_op = alu_op_e'($urandom_range(0, 12));
      if (c.unit == LU_CMP) c.alu_op = alu_op_e'($urandom_range(16, 19));
      c.cau_op = cau_op_e'($urandom_range(0, 3));
      c.sub = $urandom_range(0, 1);
      c.byte_mode = (c.unit inside {LU_ALU, LU_CMP, LU_RED, LU_VMNOT}) ? 1'($urandom_range(0, 1)) : 1'b0;
      c.vmask = $urandom_range(0, 2) == 0;
      c.use_scl = (c.unit inside {LU_ALU, LU_CMP, LU_CAU, LU_DIV}) ? 1'($urandom_range(0, 2) == 0) : 1'b0;
      c.scl = 16'($urandom);
      if (n % 5 == 0) c.scl = 16'h7fff;
      c.shamt = (c.unit inside {LU_CAU, LU_CPLX}) ? 5'($urandom_range(0, 16)) : 5'($urandom_range(0, 6));
      maxrows = (c.unit == LU_CPLX) ? 3 : 6;
      c.avl = 32'($urandom_range(0, maxrows * N * (c.byte_mode ? 2 : 1)));
      c.vd  = 13'($urandom_range(0, 7));
      c.vs1 = 13'($urandom_range(8, 20));
      c.vs2 = 13'($urandom_range(8, 20));
      per_unit[ui]++;
      model(c);
      inject = 1;
      @(negedge clk);
      cmd = c; cmd_valid = 1;
      @(negedge clk);
      cmd_valid = 0;
      fork
        begin : wait_done
          while (!done) @(negedge clk);
        end
      join
      check_all(c.unit.name());
    end
    for (int u = 0; u < 7; u++) begin
      checks++;
      if (per_unit[u] == 0) failures++;
    end
    checks++;
    if (conflicts == 0 || n_pe == 0 || n_sat == 0) failures++;
    $display("arbiter conflicts %0d, PE reads %0d, saturations %0d", conflicts, n_pe, n_sat);
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
