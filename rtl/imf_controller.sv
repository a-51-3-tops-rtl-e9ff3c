// imf_controller -- sysClk-domain sequencer of the in-memory filter.
//
// One frame runs three phases back to back, as in the paper:
//   CLEAR  : 15 cycles; each raises 16 word lines with BL=0/BLB=1 on every
//            column, clearing rows 16c..16c+15 in cycle c.
//   WRITE  : pops the FIFO (first-word-fall-through) at one event per cycle and
//            writes a single "1" at (x, y): one word line, one bit-line pair,
//            one bank. Events outside the frame are dropped. Popping the
//            end-of-frame marker ends the phase.
//   FILTER : Filter is high and all 22 bank selects are high. For every group
//            of n rows two cycles follow: a precharge cycle (Pchrg=0, no word
//            line) and an evaluate cycle (Pchrg=1, the n word lines of the group
//            raised). The macro performs the n x n majority in the evaluate
//            cycle. ceil(rows/n) groups, i.e. 2*ceil(rows/n) cycles: 160 for
//            n=3 and 96 for n=5 on a 240-row frame, 120 for n=3 on 180 rows.
//   DONE   : one cycle, done pulses; back to IDLE.
// In IDLE a host may read one row per request (rd_en/rd_row); the macro
// answers one cycle later.
//
// Kernel size (ksize5: n=5, else n=3) and frame height (frame_rows) are sampled
// at start. The valid-frame detector's flip-flop is reset in the first cycle of
// FILTER; its output is accumulated here into the sticky frame_valid flag,
// cleared at start.
//
// Follows the paper: phase order, 16-row clear, single-bit write, two cycles
// per n rows, all banks selected while filtering, one bank while writing.
// This design's own choices: start/done handshake, end-of-frame marker,
// frame_rows, readout port. Pchrg is high together with the group's word lines
// and low in the precharge cycle between, as the paper's timing diagram draws it.
// The reserved bits of the FIFO entry are not read.
module imf_controller
  import imf_pkg::*;
#(
  parameter int unsigned W     = IMF_W,
  parameter int unsigned H     = IMF_H,
  parameter int unsigned NB    = NBANK,
  parameter int unsigned NCLR  = CLR_WLS
) (
  input  logic            clk,          // sysClk
  input  logic            rst_n,
  // host
  input  logic            start,
  input  logic            ksize5,
  input  logic [YW:0]     frame_rows,   // 1..H
  output logic            busy,
  output logic            done,
  output logic            frame_valid,
  output imf_state_t      state,
  input  logic            rd_en,
  input  logic [YW-1:0]   rd_row,
  // FIFO read side
  input  logic            fifo_empty,
  input  fifo_entry_t     fifo_rdata,
  output logic            fifo_rd_en,
  // macro
  output logic [H-1:0]    gwl,
  output logic [H-1:0]    wl,
  output logic [W-1:0]    bl,
  output logic [W-1:0]    blb,
  output logic [NB-1:0]   bs,
  output logic            filter,
  output logic            pchrg,
  output logic            ksize5_q,
  output logic            rd,
  // valid-frame detector
  output logic            vfd_rst_n,
  input  logic            valid_fr
);
  localparam int unsigned NCLR_CYC = (H + NCLR - 1) / NCLR;   // 15

  logic [3:0]      clr_cnt;
  logic [YW-1:0]   grp;
  logic [YW-1:0]   ngrp;
  logic            phase_eval;

  wire wr_ev = (state == ST_WRITE) && !fifo_empty && !fifo_rdata.eof
               && (int'(fifo_rdata.y) < H);
  wire rd_go = (state == ST_IDLE) && rd_en && !start;

  // decoders
  row_decoder #(.H(H), .NCLR(NCLR)) u_rdec (
    .wr_en    (wr_ev || rd_go),
    .yaddr    (rd_go ? rd_row : fifo_rdata.y),
    .clr_en   (state == ST_CLEAR),
    .clr_grp  (clr_cnt),
    .filt_en  (state == ST_FILTER && phase_eval),
    .ksize5   (ksize5_q),
    .filt_grp (grp),
    .gwl      (gwl),
    .fwl      (wl)
  );

  column_decoder #(.W(W), .NB(NB)) u_cdec (
    .wr_en     (wr_ev),
    .xaddr     (fifo_rdata.x),
    .clr_en    (state == ST_CLEAR),
    .all_banks (state == ST_FILTER || rd_go),
    .bl        (bl),
    .blb       (blb),
    .bs        (bs)
  );

  assign filter     = (state == ST_FILTER);
  assign pchrg      = filter && phase_eval;
  assign rd         = rd_go;
  assign fifo_rd_en = (state == ST_WRITE) && !fifo_empty;
  assign busy       = (state != ST_IDLE);
  assign vfd_rst_n  = !(state == ST_FILTER && grp == '0 && !phase_eval);

  // number of n-row groups: ceil(rows / n)
  function automatic logic [YW-1:0] groups(input logic [YW:0] rows, input logic k5);
    int unsigned n;
    n = k5 ? 5 : 3;
    return YW'((int'(rows) + n - 1) / n);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= ST_IDLE;
      clr_cnt     <= '0;
      grp         <= '0;
      ngrp        <= '0;
      phase_eval  <= 1'b0;
      ksize5_q    <= 1'b0;
      done        <= 1'b0;
      frame_valid <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          ksize5_q    <= ksize5;
          ngrp        <= groups((frame_rows == '0 || int'(frame_rows) > H)
                                ? (YW+1)'(H) : frame_rows, ksize5);
          frame_valid <= 1'b0;
          clr_cnt     <= '0;
          state       <= ST_CLEAR;
        end
        ST_CLEAR: begin
          clr_cnt <= clr_cnt + 4'd1;
          if (int'(clr_cnt) == NCLR_CYC - 1) state <= ST_WRITE;
        end
        ST_WRITE: if (!fifo_empty && fifo_rdata.eof) begin
          grp        <= '0;
          phase_eval <= 1'b0;
          state      <= ST_FILTER;
        end
        ST_FILTER: begin
          if (valid_fr) frame_valid <= 1'b1;
          phase_eval <= !phase_eval;
          if (phase_eval) begin
            grp <= grp + 1'b1;
            if (grp == ngrp - 1'b1) state <= ST_DONE;
          end
        end
        ST_DONE: begin
          if (valid_fr) frame_valid <= 1'b1;
          done  <= 1'b1;
          state <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

endmodule
