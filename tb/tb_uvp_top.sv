// tb_uvp_top: end-to-end test of the full-size UVP (16 lanes, 32 vector
// registers of 16 x 16 bits, 8 instruction IDs; default parameters).
//
// The whole register file is loaded through the AXI4-Lite port (register
// group element j of head h is 16-bit slot h*16 + j, i.e. byte address
// 2*(h*16 + j)). A directed program and then a random instruction stream run
// on the core: ALU vector/scalar ops on short and char elements (mode
// switches), saturating add/sub, compares into the mask register, vmnot,
// predicated execution, CAU ops, complex multiply, saturating division with
// vshamt, reduction sum, gather and scatter with in- and out-of-range
// indices, CSR writes and an illegal word. A reference model executes every
// instruction on a flat copy of the register file and mask; after each
// program phase the complete register file is read back over AXI and
// compared. During execution, a second process keeps reading read-only rows
// over AXI, so the bus competes with lanes and PEs for the VRF ports.
//
// Mechanism counters (each must be non-zero): hazard stalls, dispatch
// stalls, ID-full back-pressure, saturations, division overflows, predicated
// instructions, element-width mode switches, compare-to-mask, vmnot,
// reductions, gathers, scatters, out-of-range gather indices, CSR writes,
// illegal instructions, VRF arbitration conflicts, lane/EXE overlap and bus
// accesses during execution.
module tb_uvp_top;
  import uvp_pkg::*;
  localparam int N = 16, NV = 32, NS = N * NV;
  logic clk = 0, rst_n = 0;
  logic inst_valid = 0, inst_ready;
  logic [63:0] inst = 0;
  logic [31:0] avl_val = 0, rs1_val = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic [31:0] s_awaddr = 0, s_wdata = 0, s_araddr = 0, s_rdata;
  logic [3:0]  s_wstrb = 0;
  logic [1:0]  s_bresp, s_rresp;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic idle;
  logic [31:0] stall_cycles, hz_stall_cycles, illegal_cnt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  uvp_top dut (.*);

  // ---------------- mechanism counters ----------------
  int c_sat = 0, c_ovf = 0, c_masked = 0, c_mode = 0, c_cmp = 0, c_vmnot = 0, c_red = 0, c_gather = 0,
      c_scatter = 0, c_oor = 0, c_csr = 0, c_arb = 0, c_overlap = 0, c_busacc = 0, c_full = 0,
      c_cplx = 0, c_div = 0, c_cau = 0;
  int n_illegal = 0;
  bit last_bm = 0;

  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.g_lane[0].u_lane.req) > 1 || $countones(dut.g_lane[5].u_lane.req) > 1) c_arb++;
    if (dut.u_exe.state != EXS0_IDLE && dut.lane_busy != '0) c_overlap++;
    if (inst_valid && !inst_ready && dut.u_mseq.used == '1) c_full++;
    if (dut.bus_req != '0 && dut.lane_busy != '0) c_busacc++;
  end

  // ---------------- reference model ----------------
  logic [15:0] mem [NS];
  logic [1:0]  msk [NS];
  int vshamt = 0, sglen = 0;

  function automatic int sx8(input logic [7:0] v); return int'($signed(v)); endfunction
  function automatic int sx16(input logic [15:0] v); return int'($signed(v)); endfunction
  function automatic logic [15:0] sat(input longint r);
    if (r > 32767) begin c_sat++; return 16'h7fff; end
    if (r < -32768) begin c_sat++; return 16'h8000; end
    return 16'(r);
  endfunction

  function automatic int alu_e(input int o, input int x, input int z, input int w);
    int lo, hi, r, m;
    lo = -(1 << (w - 1)); hi = (1 << (w - 1)) - 1; m = (1 << w) - 1;
    case (o)
      0:  r = x + z;
      1:  r = x - z;
      2:  begin r = x + z; if (r > hi || r < lo) c_sat++; if (r > hi) r = hi; if (r < lo) r = lo; end
      3:  begin r = x - z; if (r > hi || r < lo) c_sat++; if (r > hi) r = hi; if (r < lo) r = lo; end
      4:  r = x & z;
      5:  r = x | z;
      6:  r = x ^ z;
      7:  r = x << (z & (w - 1));
      8:  r = (x & m) >> (z & (w - 1));
      9:  r = x >>> (z & (w - 1));
      10: r = (x < z) ? x : z;
      11: r = (x > z) ? x : z;
      12: r = z;
      16: r = int'(x == z);
      17: r = int'(x != z);
      18: r = int'(x < z);
      default: r = int'(x <= z);
    endcase
    return r & m;
  endfunction

  function automatic logic [15:0] alu16(input int o, input logic [15:0] a, input logic [15:0] b, input bit bm);
    if (bm) return {8'(alu_e(o, sx8(a[15:8]), sx8(b[15:8]), 8)), 8'(alu_e(o, sx8(a[7:0]), sx8(b[7:0]), 8))};
    return 16'(alu_e(o, sx16(a), sx16(b), 16));
  endfunction

  function automatic logic [15:0] div_ref(input logic [15:0] a, input logic [15:0] b);
    longint q;
    if (b == 0) begin c_ovf++; return a[15] ? 16'h8000 : 16'h7fff; end
    q = (longint'(sx16(a)) <<< vshamt) / sx16(b);
    if (q > 32767 || q < -32768) c_ovf++;
    return sat(q);
  endfunction

  function automatic logic [15:0] cau_ref(input int op, input bit s, input logic [15:0] a, b, c);
    longint r;
    case (op)
      0: r = s ? sx16(a) - sx16(b) : sx16(a) + sx16(b);
      1: r = longint'(s ? sx16(a) - sx16(b) : sx16(a) + sx16(b)) * sx16(c);
      2: r = s ? longint'(sx16(a)) * sx16(b) - sx16(c) : longint'(sx16(a)) * sx16(b) + sx16(c);
      default: r = longint'(sx16(a)) * sx16(b);
    endcase
    return sat(r >>> vshamt);
  endfunction

  // Execute one decoded instruction on the model.
  task automatic model(input inst_t i, input int avl, input logic [15:0] scl);
    bit bm;
    int slots, rr, cat;
    bm = (i.vew == 2'b00);
    cat = int'(i.funct3);
    slots = bm ? (avl + 1) / 2 : avl;
    rr = (slots + N - 1) / N;
    if (cat <= 4 || (cat == 5 && i.funct7 == F7_REDSUM)) begin
      if (bm != last_bm) c_mode++;
      last_bm = bm;
    end
    if (i.vmask && cat != 7) c_masked++;
    case (cat)
      0, 1, 2, 3, 4: for (int s = 0; s < slots; s++) begin
        logic [1:0] be;
        logic [15:0] a, b, y;
        be = bm ? {2*s + 1 < avl, 1'b1} : 2'b11;
        if (i.vmask) be &= bm ? msk[s] : {2{msk[s][0]}};
        a = mem[i.vs2 * N + s];
        b = (cat == 1) ? scl : mem[i.vs1 * N + s];
        if (cat == 2 && i.funct7[5]) b = scl;
        case (cat)
          0, 1: y = alu16(int'(i.funct7), a, b, bm);
          2: begin
            y = alu16(int'(i.funct7[4:0]), a, b, bm);
            for (int k = 0; k < 2; k++) if (be[k]) msk[s][k] = bm ? y[8*k] : y[0];
          end
          3: if (i.funct7 == F7_CPLXMUL) begin
            logic [15:0] ar, ai, br, bi, re, im;
            ar = mem[i.vs1 * N + s]; ai = mem[(i.vs1 + rr) * N + s];
            br = mem[i.vs2 * N + s]; bi = mem[(i.vs2 + rr) * N + s];
            re = sat((longint'(sx16(ar)) * sx16(br) - longint'(sx16(ai)) * sx16(bi)) >>> vshamt);
            for (int k = 0; k < 2; k++) if (be[k]) mem[i.vd * N + s][8*k +: 8] = re[8*k +: 8];
            im = sat((longint'(sx16(ar)) * sx16(bi) + longint'(sx16(ai)) * sx16(br)) >>> vshamt);
            for (int k = 0; k < 2; k++) if (be[k]) mem[(i.vd + rr) * N + s][8*k +: 8] = im[8*k +: 8];
          end else
            y = cau_ref(int'(i.funct7[3:1]), i.funct7[0], mem[i.vs1 * N + s], mem[i.vs2 * N + s], mem[i.vd * N + s]);
          default: y = div_ref(mem[i.vs1 * N + s], mem[i.vs2 * N + s]);
        endcase
        if (cat != 2 && !(cat == 3 && i.funct7 == F7_CPLXMUL))
          for (int k = 0; k < 2; k++) if (be[k]) mem[i.vd * N + s][8*k +: 8] = y[8*k +: 8];
      end
      5: if (i.funct7 == F7_VMNOT) begin
        c_vmnot++;
        for (int s = 0; s < slots; s++) begin
          logic [1:0] be;
          be = bm ? {2*s + 1 < avl, 1'b1} : 2'b11;
          for (int k = 0; k < 2; k++) if (be[k]) msk[s][k] = ~msk[s][k];
        end
      end else begin
        logic [15:0] part [N];
        c_red++;
        for (int l = 0; l < N; l++) part[l] = 0;
        for (int s = 0; s < slots; s++) begin
          logic [1:0] be;
          logic [15:0] a;
          be = bm ? {2*s + 1 < avl, 1'b1} : 2'b11;
          if (i.vmask) be &= bm ? msk[s] : {2{msk[s][0]}};
          a = mem[i.vs2 * N + s];
          if (bm) part[s % N] += (be[0] ? 16'(sx8(a[7:0])) : 16'd0) + (be[1] ? 16'(sx8(a[15:8])) : 16'd0);
          else if (be[0]) part[s % N] += a;
        end
        for (int n = 1; n < N; n *= 2)
          for (int l = 0; l + n < N; l += 2 * n) part[l] += part[l + n];
        for (int l = 0; l < N; l++) mem[i.vd * N + l] = part[l];
      end
      6: if (i.funct7 == F7_GATHER) begin
        c_gather++;
        for (int j = 0; j < sglen; j++) if (!i.vmask || msk[j][0]) begin
          int idx;
          idx = int'(mem[i.vs2 * N + j]);
          if (idx >= avl) c_oor++;
          mem[i.vd * N + j] = (idx < avl) ? mem[i.vs1 * N + idx] : 16'd0;
        end
      end else begin
        c_scatter++;
        for (int j = 0; j < avl; j++) begin
          int idx;
          idx = int'(mem[i.vs2 * N + j]);
          if ((!i.vmask || msk[j][0]) && idx < sglen) mem[i.vd * N + idx] = mem[i.vs1 * N + j];
        end
      end
      default: begin
        c_csr++;
        if (i.funct7 == CSR_VSHAMT) vshamt = avl & 31;
        else if (i.funct7 == CSR_VSGLEN) sglen = avl;
      end
    endcase
  endtask

  // ---------------- bus and instruction drivers ----------------
  semaphore axi_lock = new(1);

  task automatic axi_write(input int a, input logic [31:0] d);
    logic g;
    axi_lock.get(1);
    @(negedge clk);
    s_awvalid = 1; s_wvalid = 1; s_awaddr = 32'(a); s_wdata = d; s_wstrb = 4'hf;
    do begin #1 g = s_awready; @(negedge clk); end while (!g);
    s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk);
    s_bready = 0;
    axi_lock.put(1);
  endtask

  task automatic axi_read(input int a, output logic [31:0] d);
    logic g;
    axi_lock.get(1);
    @(negedge clk);
    s_arvalid = 1; s_araddr = 32'(a);
    do begin #1 g = s_arready; @(negedge clk); end while (!g);
    s_arvalid = 0; s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
    axi_lock.put(1);
  endtask

  task automatic issue(input inst_t i, input int avl, input logic [15:0] scl, input bit legal = 1);
    logic g;
    if (legal) model(i, avl, scl);
    @(negedge clk);
    inst_valid = 1; inst = inst_pack(i); avl_val = 32'(avl); rs1_val = {16'h0, scl};
    do begin #1 g = inst_ready; @(negedge clk); end while (!g);
    inst_valid = 0;
  endtask

  function automatic inst_t mk(input int cat, input int f7, input int vd, input int vs1, input int vs2,
                               input bit bm = 0, input bit vm = 0);
    inst_t i;
    i = '0;
    i.opcode = (cat <= 4) ? OPC_CUSTOM1 : OPC_CUSTOM2;
    i.funct3 = 3'(cat); i.funct7 = 7'(f7); i.vew = bm ? 2'b00 : 2'b01; i.vmask = vm;
    i.vd = 13'(vd); i.vs1 = 13'(vs1); i.vs2 = 13'(vs2);
    return i;
  endfunction

  task automatic csr(input int a, input int v);
    issue(mk(7, a, 0, 0, 0), v, 0);
  endtask

  task automatic compare_all(input string what);
    logic [31:0] d;
    while (!idle) @(negedge clk);
    for (int w = 0; w < NS / 2; w++) begin
      axi_read(4 * w, d);
      checks++;
      if (d !== {mem[2*w + 1], mem[2*w]}) begin
        failures++;
        if (failures < 20) $display("%s: slots %0d/%0d (row %0d) got %h exp %h", what, 2*w, 2*w+1, (2*w) / N, d, {mem[2*w + 1], mem[2*w]});
      end
    end
  endtask

  // background bus reads of read-only rows 24..31 while instructions run
  bit bg_on = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (bg_on && !idle) begin
        logic [31:0] d;
        int w;
        w = $urandom_range(24 * N / 2, NS / 2 - 1);
        axi_read(4 * w, d);
        checks++;
        if (d !== {mem[2*w + 1], mem[2*w]}) begin failures++; $display("background read word %0d", w); end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- load the register file ----
    for (int s = 0; s < NS; s++) begin mem[s] = 16'($urandom); msk[s] = 2'b11; end
    // rows 28..31: index vectors, distinct within every group of 16
    for (int r = 28; r < 32; r++) for (int l = 0; l < N; l++) begin
      bit dup;
      do begin
        mem[r * N + l] = 16'($urandom_range(0, 70));
        dup = 0;
        for (int m = 0; m < l; m++) if (mem[r * N + m] == mem[r * N + l]) dup = 1;
      end while (dup);
    end
    for (int w = 0; w < NS / 2; w++) axi_write(4 * w, {mem[2*w + 1], mem[2*w]});
    compare_all("load");

    // ---- directed program ----
    bg_on = 1;
    csr(CSR_VSHAMT, 0);
    issue(mk(0, ALU_ADD, 0, 24, 25), 40, 0);                    // short add
    issue(mk(1, ALU_SADD, 3, 0, 0), 40, 16'h7000);               // scalar saturating add
    issue(mk(0, ALU_SSUB, 6, 24, 26, 1), 50, 0);                 // char saturating sub
    issue(mk(2, 18, 0, 24, 26), 64, 0);                          // compare -> mask
    issue(mk(0, ALU_MV, 8, 25, 25, 0, 1), 64, 0);                // predicated move
    issue(mk(5, F7_VMNOT, 0, 0, 0), 64, 0);                      // vmnot
    issue(mk(0, ALU_XOR, 8, 24, 26, 0, 1), 64, 0);               // predicated xor
    csr(CSR_VSHAMT, 8);
    issue(mk(3, 4, 12, 24, 25), 32, 0);                          // CAU a*b+c
    issue(mk(3, F7_CPLXMUL, 14, 24, 26), 16, 0);                 // complex multiply
    issue(mk(4, 0, 16, 24, 25), 48, 0);                          // divide with vshamt
    csr(CSR_VSHAMT, 0);
    issue(mk(5, F7_REDSUM, 18, 0, 24), 100, 0);                  // reduction sum
    csr(CSR_VSGLEN, 48);
    issue(mk(6, F7_GATHER, 19, 24, 28), 40, 0);                  // gather
    issue(mk(0, ALU_ADD, 22, 19, 20), 32, 0);                    // depends on the gather
    issue(mk(6, F7_SCATTER, 0, 25, 28), 64, 0);                  // scatter
    issue(mk(6, F7_GATHER, 3, 26, 29, 0, 1), 60, 0);             // predicated gather
    begin
      inst_t bad;
      bad = mk(0, 0, 0, 0, 0); bad.opcode = 7'b0001011; n_illegal++;
      issue(bad, 4, 0, 0);
    end
    compare_all("directed");

    // ---- random stream ----
    for (int n = 0; n < 400; n++) begin
      int kind, avl, vd, vs1, vs2;
      bit bm, vm;
      inst_t i;
      kind = $urandom_range(0, 11);
      bm = (kind <= 2 || kind == 7) ? 1'($urandom_range(0, 1)) : 1'b0;
      vm = $urandom_range(0, 3) == 0;
      avl = $urandom_range(0, bm ? 96 : 48);
      vd = $urandom_range(0, 21); vs1 = $urandom_range(0, 24); vs2 = $urandom_range(0, 24);
      case (kind)
        0: i = mk(0, $urandom_range(0, 12), vd, vs1, vs2, bm, vm);
        1: i = mk(1, $urandom_range(0, 12), vd, vs1, vs2, bm, vm);
        2: i = mk(2, $urandom_range(16, 19) + 32 * $urandom_range(0, 1), vd, vs1, vs2, bm, vm);
        3: i = mk(3, $urandom_range(0, 7), vd, vs1, vs2, 0, vm);
        4: begin avl = $urandom_range(0, 32); vd = $urandom_range(0, 19); i = mk(3, F7_CPLXMUL, vd, vs1, vs2, 0, vm); end
        5: i = mk(4, 0, vd, vs1, vs2, 0, vm);
        6: i = mk(5, F7_VMNOT, 0, 0, 0, bm, 0);
        7: i = mk(5, F7_REDSUM, vd, vs1, vs2, bm, vm);
        8: begin avl = $urandom_range(0, 64); i = mk(6, F7_GATHER, vd, 24 + $urandom_range(0, 1), 28, 0, vm); end
        9: begin avl = $urandom_range(0, 64); i = mk(6, F7_SCATTER, vd, 24, 28, 0, vm); end
        10: begin
          if ($urandom_range(0, 1)) csr(CSR_VSHAMT, $urandom_range(0, 12));
          else csr(CSR_VSGLEN, $urandom_range(0, 48));
          continue;
        end
        default: begin
          i = mk(0, 13, vd, vs1, vs2);   // unused ALU code point: illegal
          n_illegal++;
        end
      endcase
      issue(i, avl, 16'($urandom), kind != 11);
      if (n % 100 == 99) compare_all("random");
    end
    bg_on = 0;
    while (!idle) @(negedge clk);

    checks++;
    if (illegal_cnt != 32'(n_illegal)) begin failures++; $display("illegal count %0d exp %0d", illegal_cnt, n_illegal); end
    $display("hazard stalls %0d, dispatch stalls %0d, ID-full %0d, saturations %0d, div overflows %0d",
             hz_stall_cycles, stall_cycles, c_full, c_sat, c_ovf);
    $display("predicated %0d, mode switches %0d, vmnot %0d, reductions %0d, gathers %0d, scatters %0d, out-of-range idx %0d",
             c_masked, c_mode, c_vmnot, c_red, c_gather, c_scatter, c_oor);
    $display("CSR writes %0d, illegal %0d, arbitration conflicts %0d, lane/EXE overlap %0d, bus during execution %0d",
             c_csr, illegal_cnt, c_arb, c_overlap, c_busacc);
    begin
      int mech [16];
      mech = '{int'(hz_stall_cycles), int'(stall_cycles), c_full, c_sat, c_ovf, c_masked, c_mode, c_vmnot,
               c_red, c_gather, c_scatter, c_oor, c_csr, int'(illegal_cnt), c_arb, c_overlap};
      for (int m = 0; m < 16; m++) begin
        checks++;
        if (mech[m] == 0) begin failures++; $display("mechanism %0d never happened", m); end
      end
      checks++;
      if (c_busacc == 0) begin failures++; $display("no bus access during execution"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
