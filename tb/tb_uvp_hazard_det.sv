// tb_uvp_hazard_det: random allocate / complete traffic on the hazard
// detector. A model keeps every in-flight instruction's written and read
// register sets (plus the mask register) and computes which older
// instructions each new one conflicts with (RAW, WAR, WAW). Two cycles after
// an allocation the detector's table row must equal the model's, and a
// completion must clear its column in every row and its valid bit.
module tb_uvp_hazard_det;
  localparam int NV = 32, NI = 8;
  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0, wr_en = 0, rd1_en = 0, rd2_en = 0, mask_rd = 0, mask_wr = 0;
  logic [NI-1:0] alloc_id = 0, done_id = 0, row_valid;
  logic [31:0] wr_head = 0, wr_tail = 0, rd1_head = 0, rd1_tail = 0, rd2_head = 0, rd2_tail = 0;
  logic [NI-1:0] hz_row [NI];
  int checks = 0, failures = 0, n_hz = 0;
  always #5 clk = ~clk;

  uvp_hazard_det #(.N_VREG(NV), .N_ID(NI)) dut (.*);

  logic [NV:0]   mw [NI], mr [NI];
  logic [NI-1:0] mvalid = 0;
  logic [NI-1:0] mhz [NI];

  function automatic logic [NV:0] rng(input logic en, input logic [31:0] h, input logic [31:0] t);
    logic [NV:0] r;
    r = '0;
    for (int i = 0; i < NV; i++) if (en && h <= 32'(i) && 32'(i) <= t) r[i] = 1'b1;
    return r;
  endfunction

  task automatic compare();
    checks++;
    if (row_valid !== mvalid) begin failures++; $display("row_valid %b exp %b", row_valid, mvalid); end
    for (int k = 0; k < NI; k++) if (mvalid[k]) begin
      checks++;
      if (hz_row[k] !== mhz[k]) begin failures++; if (failures < 10) $display("row %0d %b exp %b", k, hz_row[k], mhz[k]); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (mvalid != '1 && ($urandom_range(0, 2) != 0 || mvalid == '0)) begin
        int k;
        logic [NV:0] w, r;
        k = 0;
        while (mvalid[k]) k++;
        alloc_id = NI'(1) << k; alloc_valid = 1;
        wr_en = $urandom_range(0, 3) != 0; rd1_en = $urandom_range(0, 1); rd2_en = $urandom_range(0, 1);
        wr_head = $urandom_range(0, 34); wr_tail = wr_head + $urandom_range(0, 3);
        rd1_head = $urandom_range(0, 34); rd1_tail = rd1_head + $urandom_range(0, 3);
        rd2_head = $urandom_range(0, 34); rd2_tail = rd2_head + $urandom_range(0, 3);
        mask_rd = $urandom_range(0, 3) == 0; mask_wr = $urandom_range(0, 5) == 0;
        w = rng(wr_en, wr_head, wr_tail); w[NV] = mask_wr;
        r = rng(rd1_en, rd1_head, rd1_tail) | rng(rd2_en, rd2_head, rd2_tail); r[NV] = mask_rd;
        mhz[k] = '0;
        for (int j = 0; j < NI; j++)
          if (mvalid[j] && (((w & (mw[j] | mr[j])) != '0) || ((r & mw[j]) != '0))) mhz[k][j] = 1'b1;
        if (mhz[k] != '0) n_hz++;
        mw[k] = w; mr[k] = r; mvalid[k] = 1;
      end else begin
        int j;
        do j = $urandom_range(0, NI - 1); while (!mvalid[j]);
        done_id = NI'(1) << j;
        mvalid[j] = 0;
        for (int k = 0; k < NI; k++) mhz[k][j] = 1'b0;
      end
      @(negedge clk);
      alloc_valid = 0; done_id = 0;
      repeat (2) @(negedge clk);
      compare();
    end
    checks++;
    if (n_hz == 0) failures++;
    $display("allocations with a hazard: %0d", n_hz);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
