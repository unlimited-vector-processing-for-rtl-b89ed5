// tb_uvp_exe: the EXE unit (controller FSM, 8 PEs, PE crossbar) against
// behavioural lane VRF banks. Each lane model grants one of the requests
// addressed to it per cycle (random priority, random busy cycles standing in
// for the lane sequencer), returns read data one cycle after the grant and
// applies write-channel writes. Random gather, scatter (with repeated and
// out-of-range indices, optional vm predicate; indices repeat only across
// rows, as scatter writes within one iteration are unordered) and the inter-lane reduction
// are compared with a reference model of the whole register file after each
// instruction. Counts stalled request cycles and lane conflicts.
module tb_uvp_exe;
  import uvp_pkg::*;
  localparam int N = 8, NV = 32;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done;
  exe_cmd_t cmd;
  logic [N-1:0] pe_rd_req, pe_rd_gnt, pe_wr_req, pe_wr_gnt;
  logic [2:0]  pe_rd_lane [N];
  logic [4:0]  pe_rd_row [N], pe_wr_row [N], pe_mrf_raddr [N];
  logic [15:0] lane_rdata [N], pe_wr_data [N];
  logic [1:0]  pe_mrf_bits [N];
  int checks = 0, failures = 0, stalls = 0, conflicts = 0;
  always #5 clk = ~clk;

  uvp_exe #(.N_LANE(N), .N_VREG(NV)) dut (.*);

  logic [15:0] mem [N][NV], refm [N][NV];
  logic [1:0]  msk [N][NV];
  int          prio [N];
  logic [N-1:0] lbusy;

  // ---- lane models ----
  always_comb begin
    pe_rd_gnt = '0; pe_wr_gnt = '0;
    for (int l = 0; l < N; l++) begin
      bit taken;
      taken = lbusy[l];
      for (int k = 0; k <= N; k++) begin
        int c;
        c = (prio[l] + k) % (N + 1);
        if (!taken) begin
          if (c == N && pe_wr_req[l]) begin pe_wr_gnt[l] = 1; taken = 1; end
          else if (c < N && pe_rd_req[c] && pe_rd_lane[c] == 3'(l)) begin pe_rd_gnt[c] = 1; taken = 1; end
        end
      end
    end
    for (int p = 0; p < N; p++) pe_mrf_bits[p] = msk[p][pe_mrf_raddr[p]];
  end

  always @(posedge clk) begin
    for (int p = 0; p < N; p++) if (pe_rd_gnt[p]) lane_rdata[pe_rd_lane[p]] <= mem[pe_rd_lane[p]][pe_rd_row[p]];
    for (int l = 0; l < N; l++) if (pe_wr_gnt[l]) mem[l][pe_wr_row[l]] <= pe_wr_data[l];
    stalls += $countones(pe_rd_req & ~pe_rd_gnt) + $countones(pe_wr_req & ~pe_wr_gnt);
    for (int l = 0; l < N; l++) begin
      int c;
      c = 0;
      for (int p = 0; p < N; p++) if (pe_rd_req[p] && pe_rd_lane[p] == 3'(l)) c++;
      if (c + int'(pe_wr_req[l]) > 1) conflicts++;
    end
  end
  always @(negedge clk) for (int l = 0; l < N; l++) begin
    prio[l] = $urandom_range(0, N);
    lbusy[l] = $urandom_range(0, 4) == 0;
  end

  // ---- reference ----
  task automatic model(input exe_cmd_t c);
    case (c.op)
      EX_GATHER: for (int j = 0; j < int'(c.sglen); j++) begin
        int p, r, idx;
        p = j % N; r = j / N;
        if (!c.vmask || msk[p][r][0]) begin
          idx = int'(refm[p][c.vs2 + r]);
          refm[p][c.vd + r] = (idx < int'(c.avl)) ? refm[idx % N][c.vs1 + idx / N] : 16'd0;
        end
      end
      EX_SCATTER: for (int j = 0; j < int'(c.avl); j++) begin
        int p, r, idx;
        p = j % N; r = j / N;
        idx = int'(refm[p][c.vs2 + r]);
        if ((!c.vmask || msk[p][r][0]) && idx < int'(c.sglen)) refm[idx % N][c.vd + idx / N] = refm[p][c.vs1 + r];
      end
      default: for (int n = 1; n < N; n *= 2)
        for (int p = 0; p + n < N; p += 2 * n) refm[p][c.vd] = refm[p][c.vd] + refm[p + n][c.vd];
    endcase
  endtask

  int n_op [3];
  initial begin
    cmd = '0;
    for (int l = 0; l < N; l++) begin
      prio[l] = 0; lbusy[l] = 0; lane_rdata[l] = 0;
      for (int r = 0; r < NV; r++) begin mem[l][r] = 16'($urandom); msk[l][r] = 2'($urandom); end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      exe_cmd_t c;
      c = '0;
      c.op = exe_op_e'($urandom_range(0, 2));
      c.vmask = $urandom_range(0, 2) == 0;
      c.avl = 32'($urandom_range(0, 48));
      c.sglen = 32'($urandom_range(0, 48));
      c.vs2 = 13'($urandom_range(0, 2)); c.vs1 = 13'($urandom_range(8, 10)); c.vd = 13'($urandom_range(16, 18));
      if (c.op == EX_REDSUM) c.vd = 13'($urandom_range(24, 31));
      n_op[c.op]++;
      @(negedge clk);
      // fresh index rows: mostly in range, some repeated, some out of range
      // (distinct within one row, since scatter writes of one iteration are unordered)
      for (int r = 0; r < 8; r++) for (int l = 0; l < N; l++) begin
        bit dup;
        do begin
          mem[l][r] = 16'($urandom_range(0, 52));
          dup = 0;
          for (int m = 0; m < l; m++) if (mem[m][r] == mem[l][r]) dup = 1;
        end while (dup);
      end
      for (int l = 0; l < N; l++) for (int r = 0; r < NV; r++) refm[l][r] = mem[l][r];
      model(c);
      cmd = c; cmd_valid = 1;
      #1;
      checks++;
      if (!cmd_ready) failures++;
      @(negedge clk);
      cmd_valid = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int l = 0; l < N; l++) for (int r = 0; r < NV; r++) begin
        checks++;
        if (mem[l][r] !== refm[l][r]) begin
          failures++;
          if (failures < 10) $display("%s lane %0d row %0d got %h exp %h", c.op.name(), l, r, mem[l][r], refm[l][r]);
        end
      end
    end
    for (int o = 0; o < 3; o++) begin checks++; if (n_op[o] == 0) failures++; end
    checks++;
    if (stalls == 0 || conflicts == 0) failures++;
    $display("stalled request cycles %0d, lane conflicts %0d", stalls, conflicts);
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
