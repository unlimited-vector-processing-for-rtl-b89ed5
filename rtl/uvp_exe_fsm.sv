// uvp_exe_fsm: controller of the element exchange engine (EXE).
//
// Seven states in three stages:
//   configuration   S1 instruction decode, S2 set counter and threshold
//   data movement   S3 read index, S4 read data, S5 write data
//   commit          S6 end of execution (complete signal to the main sequencer)
// S0 is idle. S0 waits (pending) for a new instruction. In S3, S4 and S5 every
// PE works on its own part, and the controller waits (pending) until all PEs
// report that part finished (all_done) before it moves on, so the PEs run in
// lockstep. After S5 it goes back to S3 while some PE still has iterations
// left (more, i.e. counter < threshold), otherwise to S6 and then S0.
// State names and the transition conditions are the paper's; the encoding is
// this design's. Outputs: the state, a one-cycle 'enter' flag in the first
// cycle of every state, 'iter_inc' on the S5 -> S3 step (PE counters advance)
// and 'commit' in S6.
module uvp_exe_fsm
  import uvp_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       new_inst,
  input  logic       all_done,
  input  logic       more,
  output exe_state_e state,
  output logic       enter,
  output logic       iter_inc,
  output logic       commit
);

  exe_state_e nxt;

  always_comb begin
    nxt = state;
    case (state)
      EXS0_IDLE:   if (new_inst) nxt = EXS1_DECODE;
      EXS1_DECODE: nxt = EXS2_SETCNT;
      EXS2_SETCNT: nxt = EXS3_RDIDX;
      EXS3_RDIDX:  if (all_done && !enter) nxt = EXS4_RDDATA;
      EXS4_RDDATA: if (all_done && !enter) nxt = EXS5_WRDATA;
      EXS5_WRDATA: if (all_done && !enter) nxt = more ? EXS3_RDIDX : EXS6_END;
      EXS6_END:    nxt = EXS0_IDLE;
      default:     nxt = EXS0_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= EXS0_IDLE;
      enter <= 1'b0;
    end else begin
      state <= nxt;
      enter <= (nxt != state);
    end
  end

  assign iter_inc = (state == EXS5_WRDATA) && (nxt == EXS3_RDIDX);
  assign commit   = (state == EXS6_END);

endmodule
