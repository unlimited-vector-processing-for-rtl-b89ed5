// tb_uvp_kernels: two benchmark kernels run on the full-size UVP (default
// parameters: 16 lanes, 32 vector registers), at sizes that fit its 512-slot
// register file.
//
// 1. matmul (m,n,k) = (5,9,11), all three sizes non-powers of two. C = A x B
//    is computed with the gather-based kernel: two index vectors of length
//    m*k are stored in advance, piA[p] = (p div k)*n and piB[p] = p mod k.
//    For every i < n the loop issues
//      piA += 1 (from the second iteration on), piB += k    (ALU, scalar)
//      GA = gather(A, piA), GB = gather(B, piB)           (EXE, vsglen = m*k)
//      C  = GA x GB + C                                    (CAU multiply-add)
//    so each loop iteration accumulates one rank-1 term a_i (x) b_i. The
//    in-place index updates and the reuse of GA/GB make consecutive
//    iterations depend on each other through RG hazards.
// 2. redsum496: one reduction sum over a 496-element int16 RG (31 rows).
// 3. fft32: a 32-point complex radix-2 Stockham FFT. X is a complex RG
//    (rows 0,1 real parts, rows 2,3 imaginary parts). In stage t (s = 2^t)
//    with a = X[i], b = X[i+16], i < 16, p = i div s:
//      S = a + b, D = a - b                  (4 ALU ops on single rows)
//      E = D x w_p                           (complex multiply, Q14, vshamt 14)
//      X[q + 2sp] = S[i], X[q + 2sp + s] = E[i]   (q = i mod s, two gathers)
//    The gathers read S and E as one 32-element RG: rows S_re,E_re for the
//    real parts and rows E_im,S_im for the imaginary parts, so the imaginary
//    index vector is the real one xor 16 (one ALU op). Twiddles and index
//    vectors of all five stages are loaded in advance; together with the
//    data they fill all 32 registers. The result is compared bit-exactly with
//    an integer model of the same sequence and, within a tolerance, with a
//    floating-point DFT.
//
// Results are read back over AXI4-Lite and compared with a plain integer
// matrix product and sum computed here. Values are kept small enough that
// nothing saturates or wraps. The cycle count of each kernel is printed; the
// test also requires that hazard stalls occurred.
module tb_uvp_kernels;
  import uvp_pkg::*;
  localparam int N = 16;
  localparam int M = 5, K = 9, P = 11;      // A is M x K, B is K x P, C is M x P
  localparam int RA = 0, RB = 3, RPA = 10, RPB = 14, RGA = 18, RGB = 22, RC = 26;
  localparam int LRED = 496;

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
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  uvp_top dut (.*);

  task automatic axi_write(input int a, input logic [31:0] d);
    logic g;
    @(negedge clk);
    s_awvalid = 1; s_wvalid = 1; s_awaddr = 32'(a); s_wdata = d; s_wstrb = 4'hf;
    do begin #1 g = s_awready; @(negedge clk); end while (!g);
    s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic axi_read(input int a, output logic [31:0] d);
    logic g;
    @(negedge clk);
    s_arvalid = 1; s_araddr = 32'(a);
    do begin #1 g = s_arready; @(negedge clk); end while (!g);
    s_arvalid = 0; s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
  endtask

  // element j of the RG with head h is 16-bit slot h*N + j
  task automatic put(input int h, input int j, input logic [15:0] v0, input logic [15:0] v1);
    axi_write(2 * (h * N + j), {v1, v0});
  endtask

  function automatic logic [15:0] half(input logic [31:0] d, input int j);
    return j[0] ? d[31:16] : d[15:0];
  endfunction

  task automatic get(input int h, input int j, output logic [15:0] v);
    logic [31:0] d;
    axi_read(2 * (h * N + (j & ~1)), d);
    v = half(d, j);
  endtask

  task automatic issue(input inst_t i, input int avl, input logic [15:0] scl);
    logic g;
    @(negedge clk);
    inst_valid = 1; inst = inst_pack(i); avl_val = 32'(avl); rs1_val = {16'h0, scl};
    do begin #1 g = inst_ready; @(negedge clk); end while (!g);
    inst_valid = 0;
  endtask

  function automatic inst_t mk(input logic [2:0] cat, input logic [6:0] f7, input int vd, input int vs1, input int vs2);
    inst_t i;
    i = '0;
    i.opcode = (cat <= 4) ? OPC_CUSTOM1 : OPC_CUSTOM2;
    i.funct3 = cat; i.funct7 = f7; i.vew = 2'b01;
    i.vd = 13'(vd); i.vs1 = 13'(vs1); i.vs2 = 13'(vs2);
    return i;
  endfunction

  int a [M*K], b [K*P], c [M*P];
  int pia [M*P], pib [M*P];
  int red [LRED];

  localparam int NF = 32, NH = 16, NST = 5;
  localparam int FX = 0, FD = 4, FZ = 6, FIM = 10, FW = 12, FIDX = 22;
  function automatic logic [15:0] sat16(input longint r);
    return (r > 32767) ? 16'h7fff : (r < -32768) ? 16'h8000 : 16'(r);
  endfunction
  function automatic int sx(input logic [15:0] v); return int'($signed(v)); endfunction

  initial begin
    longint t0;
    int n_gather;
    logic [15:0] v;
    int sum;
    repeat (3) @(posedge clk);
    rst_n = 1;
    n_gather = 0;

    // ---------------- matmul ----------------
    foreach (a[x]) a[x] = $urandom_range(0, 120) - 60;
    foreach (b[x]) b[x] = $urandom_range(0, 120) - 60;
    for (int p = 0; p < M * P; p++) begin pia[p] = (p / P) * K; pib[p] = p % P; end
    for (int r = 0; r < M; r++) for (int q = 0; q < P; q++) begin
      c[r*P + q] = 0;
      for (int i = 0; i < K; i++) c[r*P + q] += a[r*K + i] * b[i*P + q];
    end
    for (int x = 0; x < M * K; x += 2) put(RA, x, 16'(a[x]), (x + 1 < M * K) ? 16'(a[x+1]) : 16'h0);
    for (int x = 0; x < K * P; x += 2) put(RB, x, 16'(b[x]), (x + 1 < K * P) ? 16'(b[x+1]) : 16'h0);
    for (int x = 0; x < M * P; x += 2) begin
      put(RPA, x, 16'(pia[x]), (x + 1 < M * P) ? 16'(pia[x+1]) : 16'h0);
      put(RPB, x, 16'(pib[x]), (x + 1 < M * P) ? 16'(pib[x+1]) : 16'h0);
      put(RC, x, 16'h0, 16'h0);
    end

    t0 = cyc;
    issue(mk(CAT_CSR, CSR_VSHAMT, 0, 0, 0), 0, 0);
    issue(mk(CAT_CSR, CSR_VSGLEN, 0, 0, 0), M * P, 0);
    for (int i = 0; i < K; i++) begin
      if (i > 0) begin
        issue(mk(CAT_OPVX, {2'b00, ALU_ADD}, RPA, 0, RPA), M * P, 16'd1);
        issue(mk(CAT_OPVX, {2'b00, ALU_ADD}, RPB, 0, RPB), M * P, 16'(P));
      end
      issue(mk(CAT_EXE, F7_GATHER, RGA, RA, RPA), M * K, 0);
      issue(mk(CAT_EXE, F7_GATHER, RGB, RB, RPB), K * P, 0);
      n_gather += 2;
      issue(mk(CAT_CAU, {3'b000, CAU_MULADD, 1'b0}, RC, RGA, RGB), M * P, 0);
    end
    while (!idle) @(negedge clk);
    $display("matmul (%0d,%0d,%0d): %0d instructions in %0d cycles, %0d hazard-stall cycles",
             M, K, P, 2 + 5 * K - 2, cyc - t0, hz_stall_cycles);
    for (int p = 0; p < M * P; p++) begin
      get(RC, p, v);
      checks++;
      if (v !== 16'(c[p])) begin
        failures++;
        if (failures < 20) $display("C[%0d][%0d] got %0d exp %0d", p / P, p % P, $signed(v), c[p]);
      end
    end

    // ---------------- redsum ----------------
    sum = 0;
    foreach (red[x]) begin red[x] = $urandom_range(0, 120) - 60; sum += red[x]; end
    for (int x = 0; x < LRED; x += 2) put(0, x, 16'(red[x]), 16'(red[x+1]));
    t0 = cyc;
    issue(mk(CAT_MASK, F7_REDSUM, 31, 0, 0), LRED, 0);
    while (!idle) @(negedge clk);
    $display("redsum%0d: %0d cycles", LRED, cyc - t0);
    get(31, 0, v);
    checks++;
    if (v !== 16'(sum)) begin failures++; $display("redsum got %0d exp %0d", $signed(v), sum); end

    // ---------------- fft32 ----------------
    begin
      logic [15:0] xr [NF], xi [NF], wr [NST][NH], wi [NST][NH], sr [NH], si [NH], er [NH], ei [NH];
      int idx [NST][NF];
      real fr [NF], fi [NF];
      int err, maxerr;
      for (int x = 0; x < NF; x++) begin
        xr[x] = 16'($urandom_range(0, 600) - 300); xi[x] = 16'($urandom_range(0, 600) - 300);
      end
      // floating-point DFT of the input
      for (int k = 0; k < NF; k++) begin
        fr[k] = 0.0; fi[k] = 0.0;
        for (int x = 0; x < NF; x++) begin
          real ang;
          ang = -2.0 * 3.14159265358979 * real'(k * x) / real'(NF);
          fr[k] += real'(sx(xr[x])) * $cos(ang) - real'(sx(xi[x])) * $sin(ang);
          fi[k] += real'(sx(xr[x])) * $sin(ang) + real'(sx(xi[x])) * $cos(ang);
        end
      end
      // twiddles and output index vectors of each stage
      for (int t = 0; t < NST; t++) begin
        int sp, n;
        sp = 1 << t; n = NF >> t;
        for (int i = 0; i < NH; i++) begin
          real ang;
          ang = -2.0 * 3.14159265358979 * real'(i / sp) / real'(n);
          wr[t][i] = 16'($rtoi($floor(16384.0 * $cos(ang) + 0.5)));
          wi[t][i] = 16'($rtoi($floor(16384.0 * $sin(ang) + 0.5)));
        end
        for (int o = 0; o < NF; o++) idx[t][o] = (o % sp) + sp * (o / (2 * sp)) + ((o / sp) % 2) * NH;
      end
      for (int x = 0; x < NF; x += 2) begin
        put(FX, x, xr[x], xr[x+1]);
        put(FX + 2, x, xi[x], xi[x+1]);
      end
      for (int t = 0; t < NST; t++) begin
        for (int x = 0; x < NH; x += 2) begin
          put(FW + 2 * t, x, wr[t][x], wr[t][x+1]);
          put(FW + 2 * t + 1, x, wi[t][x], wi[t][x+1]);
        end
        for (int x = 0; x < NF; x += 2) put(FIDX + 2 * t, x, 16'(idx[t][x]), 16'(idx[t][x+1]));
      end
      t0 = cyc;
      issue(mk(CAT_CSR, CSR_VSHAMT, 0, 0, 0), 14, 0);
      issue(mk(CAT_CSR, CSR_VSGLEN, 0, 0, 0), NF, 0);
      for (int t = 0; t < NST; t++) begin
        issue(mk(CAT_OPVV, {2'b00, ALU_ADD}, FZ,     FX + 1, FX),     NH, 0);  // S_re
        issue(mk(CAT_OPVV, {2'b00, ALU_ADD}, FZ + 3, FX + 3, FX + 2), NH, 0);  // S_im
        issue(mk(CAT_OPVV, {2'b00, ALU_SUB}, FD,     FX + 1, FX),     NH, 0);  // D_re
        issue(mk(CAT_OPVV, {2'b00, ALU_SUB}, FD + 1, FX + 3, FX + 2), NH, 0);  // D_im
        issue(mk(CAT_CAU, F7_CPLXMUL, FZ + 1, FD, FW + 2 * t), NH, 0);        // E -> rows Z+1, Z+2
        issue(mk(CAT_OPVX, {2'b00, ALU_XOR}, FIM, 0, FIDX + 2 * t), NF, 16'(NH));
        issue(mk(CAT_EXE, F7_GATHER, FX,     FZ,     FIDX + 2 * t), NF, 0);
        issue(mk(CAT_EXE, F7_GATHER, FX + 2, FZ + 2, FIM),          NF, 0);
        // integer model of the same stage
        for (int i = 0; i < NH; i++) begin
          logic [15:0] dr, di;
          sr[i] = xr[i] + xr[i + NH]; si[i] = xi[i] + xi[i + NH];
          dr = xr[i] - xr[i + NH];    di = xi[i] - xi[i + NH];
          er[i] = sat16((longint'(sx(dr)) * sx(wr[t][i]) - longint'(sx(di)) * sx(wi[t][i])) >>> 14);
          ei[i] = sat16((longint'(sx(dr)) * sx(wi[t][i]) + longint'(sx(di)) * sx(wr[t][i])) >>> 14);
        end
        for (int o = 0; o < NF; o++) begin
          xr[o] = (idx[t][o] < NH) ? sr[idx[t][o]] : er[idx[t][o] - NH];
          xi[o] = (idx[t][o] < NH) ? si[idx[t][o]] : ei[idx[t][o] - NH];
        end
      end
      while (!idle) @(negedge clk);
      $display("fft32: %0d instructions in %0d cycles", 2 + 8 * NST, cyc - t0);
      maxerr = 0;
      for (int k = 0; k < NF; k++) begin
        logic [15:0] gr, gi;
        get(FX, k, gr); get(FX + 2, k, gi);
        checks++;
        if (gr !== xr[k] || gi !== xi[k]) begin
          failures++;
          if (failures < 20) $display("X[%0d] got (%0d,%0d) exp (%0d,%0d)", k, sx(gr), sx(gi), sx(xr[k]), sx(xi[k]));
        end
        err = $rtoi($floor($sqrt((real'(sx(gr)) - fr[k]) ** 2 + (real'(sx(gi)) - fi[k]) ** 2) + 0.5));
        if (err > maxerr) maxerr = err;
      end
      $display("fft32: largest distance to the floating-point DFT %0d", maxerr);
      checks++;
      if (maxerr > 16) begin failures++; $display("fft32 too far from the DFT"); end
    end

    // the kernel must have been throttled by RG hazards at least once
    checks++;
    if (hz_stall_cycles == 0) begin failures++; $display("no hazard stall happened"); end
    checks++;
    if (n_gather != 2 * K || illegal_cnt != 0) begin failures++; $display("instruction count / illegal"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
