// tb_uvp_exe_xbar: random packet traffic through the PE crossbar. Checks
// that each destination receives at most one packet per cycle, that each
// delivered packet belongs to a valid source addressed to it (lowest source
// index wins), that a source is acknowledged exactly when its packet is
// delivered to a ready destination, and counts destination conflicts.
module tb_uvp_exe_xbar;
  localparam int N = 16;
  logic [N-1:0] src_valid, src_ack, dst_valid, dst_ready;
  logic [3:0]   src_dst  [N];
  logic [4:0]   src_row  [N], dst_row [N];
  logic [15:0]  src_data [N], dst_data [N];
  int checks = 0, failures = 0, conflicts = 0;

  uvp_exe_xbar #(.N_PE(N), .AW(5), .DW(16)) dut (.src_valid, .src_dst, .src_row, .src_data, .src_ack,
                                                .dst_valid, .dst_row, .dst_data, .dst_ready);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int s = 0; s < N; s++) begin
        src_dst[s] = (n % 2) ? 4'($urandom_range(0, 3)) : 4'($urandom);
        src_row[s] = 5'($urandom); src_data[s] = 16'($urandom);
      end
      src_valid = 16'($urandom); dst_ready = 16'($urandom) | 16'($urandom);
      #1;
      for (int d = 0; d < N; d++) begin
        int win, cnt;
        win = -1; cnt = 0;
        for (int s = N - 1; s >= 0; s--) if (src_valid[s] && src_dst[s] == 4'(d)) begin win = s; cnt++; end
        if (cnt > 1) conflicts++;
        checks++;
        if (dst_valid[d] !== (win >= 0)) failures++;
        if (win >= 0) begin
          checks++;
          if (dst_row[d] !== src_row[win] || dst_data[d] !== src_data[win]) failures++;
        end
      end
      for (int s = 0; s < N; s++) begin
        logic exp_ack;
        int win;
        win = -1;
        for (int t = N - 1; t >= 0; t--) if (src_valid[t] && src_dst[t] == src_dst[s]) win = t;
        exp_ack = src_valid[s] && win == s && dst_ready[src_dst[s]];
        checks++;
        if (src_ack[s] !== exp_ack) failures++;
      end
      #1;
    end
    checks++;
    if (conflicts == 0) failures++;
    $display("destination conflicts: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
