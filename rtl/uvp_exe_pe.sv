// uvp_exe_pe: one shuffle processing element (PE) of the element exchange
// engine. There is one PE per lane, PE p sits next to lane p.
//
// Blocks (as in the paper's PE drawing): PE control with a counter and a
// threshold, Cnt2RAddr (counter -> row of the next index/element, starting at
// the RG head), Idx2PE (index -> destination PE = index mod N_LANE),
// Idx2WAddr (index -> row in the destination lane = head + index div N_LANE),
// a read channel that can read any lane's VRF through that lane's arbiter, a
// write channel into the own lane, and a data/address buffer towards the PE
// crossbar.
//
// Per iteration (counter value cnt, element j = cnt*N_LANE + p of this PE):
//   S3 read index   gather/scatter: idx = vs2[j] (own lane);
//                   reduction: x = partial sum of lane p + 2^cnt
//   S4 read data    scatter: d = vs1[j] (own lane), packet to PE idx mod N,
//                            row vd + idx div N  (dropped if idx >= vsglen)
//                   gather:  d = vs1[idx] from lane idx mod N (0 if
//                            idx >= AVL), packet to own lane, row vd + cnt
//                   reduction: y = own partial sum, packet x + y to own row vd
//   S5 write data   the packet travels through the crossbar and is written
//                   by the destination PE's write channel.
// With vmask set, an element whose predicate bit (own lane, row cnt) is 0 is
// not written. Threshold: scatter VL_p(AVL), gather VL_p(vsglen), reduction
// log2(N_LANE) iterations, in iteration n PE m*2^(n+1) adding the value of
// PE m*2^(n+1)+2^n, as the paper describes. st_done tells the controller that
// this PE has finished the current state. Scatter writes of one iteration that hit the
// same element land in arrival order (unspecified); later iterations always
// overwrite earlier ones. Out-of-range index handling and the
// adder used for the reduction are this design's choices.
module uvp_exe_pe
  import uvp_pkg::*;
#(
  parameter int unsigned N_LANE = 16,
  parameter int unsigned N_VREG = 32,
  parameter int unsigned PE_ID  = 0,
  localparam int unsigned AW    = $clog2(N_VREG),
  localparam int unsigned LW    = $clog2(N_LANE)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  exe_cmd_t      cfg,
  input  exe_state_e    state,
  input  logic          enter,
  input  logic          iter_inc,
  output logic          st_done,
  output logic          more,
  // read channel
  output logic          rd_req,
  output logic [LW-1:0] rd_lane,
  output logic [AW-1:0] rd_row,
  input  logic          rd_gnt,
  input  logic [DW-1:0] rd_data,
  // own-lane mask read
  output logic [AW-1:0] mrf_raddr,
  input  logic [1:0]    mrf_bits,
  // to PE crossbar
  output logic          xo_valid,
  output logic [LW-1:0] xo_dst,
  output logic [AW-1:0] xo_row,
  output logic [DW-1:0] xo_data,
  input  logic          xo_ack,
  // from PE crossbar -> write channel into own lane
  input  logic          xi_valid,
  input  logic [AW-1:0] xi_row,
  input  logic [DW-1:0] xi_data,
  output logic          xi_ready,
  output logic          wr_req,
  output logic [AW-1:0] wr_row,
  output logic [DW-1:0] wr_data,
  input  logic          wr_gnt
);

  localparam int unsigned LOG2N = (N_LANE > 1) ? $clog2(N_LANE) : 1;

  typedef enum logic [1:0] {PH_REQ, PH_WAIT, PH_DONE} ph_e;
  ph_e ph;

  logic [XLEN-1:0] cnt, thr;
  logic [DW-1:0]   idx, xval;
  logic            mask_ok;

  // ---- PE control: threshold of this PE ----
  function automatic logic [XLEN-1:0] vl_of(input logic [XLEN-1:0] len);
    return len / N_LANE + XLEN'(PE_ID < len % N_LANE);
  endfunction

  logic act;  // this PE takes part in the current iteration
  always_comb begin
    if (cfg.op == EX_REDSUM)
      act = (cnt < XLEN'(LOG2N)) && ((PE_ID % (2 << cnt)) == 0) && ((PE_ID + (1 << cnt)) < N_LANE);
    else
      act = (cnt < thr);
  end

  assign more      = (cnt + 1 < thr);
  assign mrf_raddr = AW'(cnt);

  // ---- Cnt2RAddr / Idx2PE / Idx2WAddr ----
  logic [AW-1:0] cnt_row_vs2, cnt_row_vs1, cnt_row_vd, idx_row_vs1, idx_row_vd;
  logic [LW-1:0] idx_pe;
  always_comb begin
    cnt_row_vs2 = AW'(XLEN'(cfg.vs2) + cnt);
    cnt_row_vs1 = AW'(XLEN'(cfg.vs1) + cnt);
    cnt_row_vd  = AW'(XLEN'(cfg.vd)  + cnt);
    idx_pe      = LW'(32'(idx) % N_LANE);
    idx_row_vs1 = AW'(XLEN'(cfg.vs1) + 32'(idx) / N_LANE);
    idx_row_vd  = AW'(XLEN'(cfg.vd)  + 32'(idx) / N_LANE);
  end

  // ---- read channel ----
  logic need_read;
  always_comb begin
    rd_lane   = LW'(PE_ID);
    rd_row    = cnt_row_vs2;
    need_read = act;
    if (state == EXS3_RDIDX) begin
      if (cfg.op == EX_REDSUM) begin
        rd_lane = LW'(PE_ID + (1 << cnt));
        rd_row  = AW'(cfg.vd);
      end
    end else begin  // S4
      case (cfg.op)
        EX_SCATTER: rd_row = cnt_row_vs1;
        EX_GATHER:  begin
          rd_lane   = idx_pe;
          rd_row    = idx_row_vs1;
          need_read = act && (XLEN'(idx) < cfg.avl);
        end
        default:    rd_row = AW'(cfg.vd);
      endcase
    end
  end

  assign rd_req  = (state == EXS3_RDIDX || state == EXS4_RDDATA) && !enter && ph == PH_REQ;
  assign st_done = (state == EXS5_WRDATA) ? !xo_valid : (ph == PH_DONE);

  // ---- control ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= PH_DONE; cnt <= '0; thr <= '0; idx <= '0; xval <= '0; mask_ok <= 1'b0;
      xo_valid <= 1'b0; xo_dst <= '0; xo_row <= '0; xo_data <= '0;
    end else begin
      if (state == EXS2_SETCNT) begin
        cnt <= '0;
        case (cfg.op)
          EX_SCATTER: thr <= vl_of(cfg.avl);
          EX_GATHER:  thr <= vl_of(cfg.sglen);
          default:    thr <= XLEN'(LOG2N);
        endcase
      end
      if (iter_inc) cnt <= cnt + 1;

      if (enter && (state == EXS3_RDIDX || state == EXS4_RDDATA)) begin
        if (state == EXS3_RDIDX) begin
          ph      <= act ? PH_REQ : PH_DONE;
          mask_ok <= !cfg.vmask || mrf_bits[0];
        end else begin
          ph <= need_read ? PH_REQ : PH_DONE;
          if (!need_read) begin
            // gather with an out-of-range index reads 0
            xo_valid <= act && mask_ok && (cfg.op == EX_GATHER);
            xo_dst   <= LW'(PE_ID);
            xo_row   <= cnt_row_vd;
            xo_data  <= '0;
          end
        end
      end else begin
        case (ph)
          PH_REQ:  if (rd_gnt) ph <= PH_WAIT;
          PH_WAIT: begin
            ph <= PH_DONE;
            if (state == EXS3_RDIDX) begin
              if (cfg.op == EX_REDSUM) xval <= rd_data;
              else                     idx  <= rd_data;
            end else begin
              case (cfg.op)
                EX_SCATTER: begin
                  xo_valid <= mask_ok && (XLEN'(idx) < cfg.sglen);
                  xo_dst   <= idx_pe;
                  xo_row   <= idx_row_vd;
                  xo_data  <= rd_data;
                end
                EX_GATHER: begin
                  xo_valid <= mask_ok;
                  xo_dst   <= LW'(PE_ID);
                  xo_row   <= cnt_row_vd;
                  xo_data  <= rd_data;
                end
                default: begin
                  xo_valid <= 1'b1;
                  xo_dst   <= LW'(PE_ID);
                  xo_row   <= AW'(cfg.vd);
                  xo_data  <= xval + rd_data;
                end
              endcase
            end
          end
          default: ;
        endcase
      end
      if (xo_valid && xo_ack) xo_valid <= 1'b0;
    end
  end

  // ---- write channel ----
  assign wr_req   = xi_valid;
  assign wr_row   = xi_row;
  assign wr_data  = xi_data;
  assign xi_ready = wr_gnt;

endmodule
