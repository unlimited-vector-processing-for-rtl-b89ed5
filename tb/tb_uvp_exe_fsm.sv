// tb_uvp_exe_fsm: drives the EXE state machine with random pending/done and
// iteration inputs and compares its state every cycle with a reference copy
// of the chart: S0 -> S1 -> S2 -> S3 -> S4 -> S5 -> (S3 | S6) -> S0, with the
// pending self-loops on S3..S5 and the one-cycle entry pulse that blocks a
// state from completing in the cycle it is entered.
module tb_uvp_exe_fsm;
  import uvp_pkg::*;
  logic clk = 0, rst_n = 0, new_inst = 0, all_done = 0, more = 0;
  exe_state_e state;
  logic enter, iter_inc, commit;
  int checks = 0, failures = 0, n_loop = 0, n_end = 0;
  always #5 clk = ~clk;

  uvp_exe_fsm dut (.clk, .rst_n, .new_inst, .all_done, .more, .state, .enter, .iter_inc, .commit);

  exe_state_e ms = EXS0_IDLE;
  logic me = 0;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      exe_state_e nx;
      @(negedge clk);
      new_inst = $urandom_range(0, 1); all_done = $urandom_range(0, 2) != 0; more = $urandom_range(0, 1);
      #1;
      checks++;
      if (state !== ms || enter !== me) begin
        failures++;
        if (failures < 10) $display("FSM state %s exp %s enter %b exp %b", state.name(), ms.name(), enter, me);
      end
      nx = ms;
      case (ms)
        EXS0_IDLE:   if (new_inst) nx = EXS1_DECODE;
        EXS1_DECODE: nx = EXS2_SETCNT;
        EXS2_SETCNT: nx = EXS3_RDIDX;
        EXS3_RDIDX:  if (all_done && !me) nx = EXS4_RDDATA;
        EXS4_RDDATA: if (all_done && !me) nx = EXS5_WRDATA;
        EXS5_WRDATA: if (all_done && !me) nx = more ? EXS3_RDIDX : EXS6_END;
        default:     nx = EXS0_IDLE;
      endcase
      checks += 2;
      if (iter_inc !== (ms == EXS5_WRDATA && nx == EXS3_RDIDX)) failures++;
      if (commit !== (ms == EXS6_END)) failures++;
      n_loop += iter_inc; n_end += commit;
      @(posedge clk);
      me = (nx != ms);
      ms = nx;
    end
    checks++;
    if (n_loop == 0 || n_end == 0) failures++;
    $display("iterations %0d, completed instructions %0d", n_loop, n_end);
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
