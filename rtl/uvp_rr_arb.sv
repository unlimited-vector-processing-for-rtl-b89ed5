// uvp_rr_arb: round-robin multiple-input single-output arbiter.
//
// Sits in front of each lane's single-port VRF and picks one of NREQ
// requesters (lane sequencer, EXE PEs, memory-map port) per cycle. The grant
// is combinational and one-hot; the priority pointer moves past the winner
// after every granted cycle so no requester waits for more than NREQ-1 grants.
// The paper calls for a multiple-input single-output arbiter; the round-robin
// policy is this design's choice.
module uvp_rr_arb #(
  parameter int unsigned NREQ = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NREQ-1:0] req,
  output logic [NREQ-1:0] gnt
);

  logic [$clog2(NREQ)-1:0] ptr;  // highest priority index

  always_comb begin
    gnt = '0;
    for (int k = 0; k < NREQ; k++) begin
      int unsigned idx;
      idx = (int'(ptr) + k) % NREQ;
      if (gnt == '0 && req[idx]) gnt[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (|gnt) begin
      for (int k = 0; k < NREQ; k++)
        if (gnt[k]) ptr <= ($clog2(NREQ))'((k + 1) % NREQ);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);

endmodule
