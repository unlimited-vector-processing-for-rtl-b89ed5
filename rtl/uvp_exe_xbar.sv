// uvp_exe_xbar: the EXE's PE-to-PE interconnect.
//
// Every PE may hold one outgoing packet {destination PE, VRF row, data}. Each
// destination takes at most one packet per cycle, the pending packet with the
// lowest source index (fixed priority), and passes it to its write channel.
// The source is acknowledged in the cycle the destination accepts (ready), so
// a packet stays at its source until written. Purely combinational. The paper
// names the interconnect and the PE crossbar; the priority rule is this
// design's.
module uvp_exe_xbar #(
  parameter int unsigned N_PE = 16,
  parameter int unsigned AW   = 5,
  parameter int unsigned DW   = 16,
  localparam int unsigned PW  = $clog2(N_PE)
) (
  input  logic [N_PE-1:0] src_valid,
  input  logic [PW-1:0]   src_dst  [N_PE],
  input  logic [AW-1:0]   src_row  [N_PE],
  input  logic [DW-1:0]   src_data [N_PE],
  output logic [N_PE-1:0] src_ack,
  output logic [N_PE-1:0] dst_valid,
  output logic [AW-1:0]   dst_row  [N_PE],
  output logic [DW-1:0]   dst_data [N_PE],
  input  logic [N_PE-1:0] dst_ready
);

  logic [PW-1:0]   sel   [N_PE];  // winning source per destination
  logic [N_PE-1:0] found;

  always_comb begin
    for (int d = 0; d < N_PE; d++) begin
      found[d] = 1'b0;
      sel[d]   = '0;
      for (int s = 0; s < N_PE; s++)
        if (!found[d] && src_valid[s] && src_dst[s] == PW'(d)) begin
          found[d] = 1'b1;
          sel[d]   = PW'(s);
        end
    end
  end

  always_comb begin
    for (int d = 0; d < N_PE; d++) begin
      dst_valid[d] = found[d];
      dst_row[d]   = src_row[sel[d]];
      dst_data[d]  = src_data[sel[d]];
    end
  end

  always_comb begin
    for (int s = 0; s < N_PE; s++)
      src_ack[s] = src_valid[s] && found[src_dst[s]] && (sel[src_dst[s]] == PW'(s)) && dst_ready[src_dst[s]];
  end

endmodule
