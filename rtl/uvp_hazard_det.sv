// uvp_hazard_det: register-group hazard detection of the main sequencer.
//
// In UVP a register group (RG) may start and end at any register, so hazards
// cannot be looked up by a register-group number. Instead every physical
// register i has an in-range detector, head <= i <= tail, for each operand
// of the instruction entering the pipeline; the results are registered. In
// the next cycle the ranges are checked against an occupancy table that keeps,
// per register, one bit per in-flight instruction (one-hot instruction IDs).
// A log2-depth OR tree over the registers the new instruction touches folds
// the table into an ID vector of the in-flight instructions it conflicts with,
// which becomes the new instruction's row of the N_ID x N_ID hazard table.
// The instruction may leave the sequencer once its row is all zero. When an
// instruction completes, its column of the hazard table and its occupancy
// bits are cleared.
//
// This design keeps separate write and read occupancy (a hazard is a write
// after read or write, or a read after write; two readers never conflict)
// and treats the mask register vm as one extra register, index N_VREG.
// Ports: alloc_* registers a new instruction with a one-hot ID; row_valid[k]
// and hz_row[k] give the state of ID k from two cycles after allocation;
// done_id clears IDs.
module uvp_hazard_det #(
  parameter int unsigned N_VREG = 32,
  parameter int unsigned N_ID   = 8,
  localparam int unsigned NR    = N_VREG + 1  // registers + mask register
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            alloc_valid,
  input  logic [N_ID-1:0] alloc_id,      // one-hot
  // operand ranges (inclusive), en = 0 for an unused operand
  input  logic            wr_en,
  input  logic [31:0]     wr_head, wr_tail,
  input  logic            rd1_en,
  input  logic [31:0]     rd1_head, rd1_tail,
  input  logic            rd2_en,
  input  logic [31:0]     rd2_head, rd2_tail,
  input  logic            mask_rd,
  input  logic            mask_wr,
  // completions (one-hot bits)
  input  logic [N_ID-1:0] done_id,
  // hazard table
  output logic [N_ID-1:0] row_valid,
  output logic [N_ID-1:0] hz_row [N_ID]
);

  // ---- in-range detection (two comparators per register and operand), registered ----
  logic [NR-1:0]   wmask_q, rmask_q;
  logic            valid_q;
  logic [N_ID-1:0] id_q;

  function automatic logic in_range(input int unsigned i, input logic [31:0] h, input logic [31:0] t);
    return (h <= 32'(i)) && (32'(i) <= t);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wmask_q <= '0; rmask_q <= '0; valid_q <= 1'b0; id_q <= '0;
    end else begin
      valid_q <= alloc_valid;
      id_q    <= alloc_id;
      for (int i = 0; i < N_VREG; i++) begin
        wmask_q[i] <= wr_en && in_range(i, wr_head, wr_tail);
        rmask_q[i] <= (rd1_en && in_range(i, rd1_head, rd1_tail)) ||
                      (rd2_en && in_range(i, rd2_head, rd2_tail));
      end
      wmask_q[N_VREG] <= mask_wr;
      rmask_q[N_VREG] <= mask_rd;
    end
  end

  // ---- occupancy tables and OR tree ----
  logic [N_ID-1:0] wocc [NR];
  logic [N_ID-1:0] rocc [NR];
  logic [N_ID-1:0] id_vec;

  // balanced OR tree over the registers
  function automatic logic [N_ID-1:0] or_tree(input logic [N_ID-1:0] v [NR]);
    logic [N_ID-1:0] lvl [NR];
    int unsigned n;
    for (int i = 0; i < NR; i++) lvl[i] = v[i];
    n = NR;
    while (n > 1) begin
      for (int i = 0; i < NR / 2 + 1; i++)
        if (i < (n + 1) / 2) lvl[i] = (2*i + 1 < n) ? (lvl[2*i] | lvl[2*i+1]) : lvl[2*i];
      n = (n + 1) / 2;
    end
    return lvl[0];
  endfunction

  logic [N_ID-1:0] hit [NR];
  always_comb begin
    for (int i = 0; i < NR; i++)
      hit[i] = (wmask_q[i] ? (wocc[i] | rocc[i]) : '0) | (rmask_q[i] ? wocc[i] : '0);
    id_vec = or_tree(hit) & ~done_id & ~id_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NR; i++) begin wocc[i] <= '0; rocc[i] <= '0; end
      for (int k = 0; k < N_ID; k++) hz_row[k] <= '0;
      row_valid <= '0;
    end else begin
      for (int i = 0; i < NR; i++) begin
        wocc[i] <= (wocc[i] & ~done_id) | ((valid_q && wmask_q[i]) ? id_q : '0);
        rocc[i] <= (rocc[i] & ~done_id) | ((valid_q && rmask_q[i]) ? id_q : '0);
      end
      for (int k = 0; k < N_ID; k++) begin
        if (valid_q && id_q[k]) hz_row[k] <= id_vec;
        else                    hz_row[k] <= hz_row[k] & ~done_id;
      end
      row_valid <= (row_valid & ~done_id) | (valid_q ? id_q : '0);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) alloc_valid |-> $onehot(alloc_id));

endmodule
