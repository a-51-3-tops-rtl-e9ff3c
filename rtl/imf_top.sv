// imf_top -- in-memory filtering (IMF) processor: events from a neuromorphic
// vision sensor are written as a binary frame into an SRAM macro, which then
// denoises the frame in place with a non-overlapping n x n majority (median)
// filter, n = 3 or 5, and flags whether anything survived.
//
// Two clock domains, as in the paper: aer_clk runs the AER receiver and the
// write side of the 128 x 32 FIFO; sys_clk runs the FIFO read side, the
// controller, the macro and the valid-frame detector.
//
// Operation of one frame:
//   1. start (sys_clk pulse, with ksize5 and frame_rows): the controller clears
//      the macro (15 cycles), then writes events from the FIFO.
//   2. The sensor side sends events over AER (two words per event, see
//      aer_rx) and finally pulses frame_end (aer_clk), which queues an
//      end-of-frame marker behind the events.
//   3. When the controller pops the marker it filters: 2 cycles per n rows.
//   4. done pulses; frame_valid tells whether any patch decided "1". The
//      filtered frame can be read row by row (rd_en/rd_row -> rd_data one cycle
//      later with rd_valid) while the controller is idle.
// rst_n is asynchronous and is used in both domains; it must be released while
// both clocks are quiet or long enough before traffic starts.
module imf_top
  import imf_pkg::*;
#(
  parameter int unsigned W          = IMF_W,
  parameter int unsigned H          = IMF_H,
  parameter int unsigned NB         = NBANK,
  parameter int unsigned FIFO_DEPTH_P = FIFO_DEPTH
) (
  input  logic              aer_clk,
  input  logic              sys_clk,
  input  logic              rst_n,
  // sensor (AER, 4-phase)
  input  logic              aer_req,
  input  logic [AER_W-1:0]  aer_data,
  output logic              aer_ack,
  input  logic              frame_end,
  output logic              aer_stall,
  // host, sys_clk domain
  input  logic              start,
  input  logic              ksize5,
  input  logic [YW:0]       frame_rows,
  output logic              busy,
  output logic              done,
  output logic              frame_valid,
  output imf_state_t        ctrl_state,   // controller phase, for status
  input  logic              rd_en,
  input  logic [YW-1:0]     rd_row,
  output logic [W-1:0]      rd_data,
  output logic              rd_valid
);
  // AER -> FIFO
  logic          wren, fifo_full;
  fifo_entry_t   wdata;
  // FIFO -> controller
  logic          fifo_empty, fifo_rd_en;
  fifo_entry_t   rdata;
  // controller -> macro
  logic [H-1:0]  gwl, wl;
  logic [W-1:0]  bl, blb;
  logic [NB-1:0] bs;
  logic          filter, pchrg, ksize5_q, rd;
  logic          vfd_rst_n, valid_fr;
  logic [W-1:0]  bl_sense;

  aer_rx u_aer (
    .clk(aer_clk), .rst_n(rst_n), .aer_req(aer_req), .aer_data(aer_data),
    .aer_ack(aer_ack), .frame_end(frame_end), .fifo_full(fifo_full),
    .wren(wren), .wdata(wdata), .stalled(aer_stall));

  async_fifo #(.WIDTH(FIFO_W), .DEPTH(FIFO_DEPTH_P)) u_fifo (
    .wclk(aer_clk), .wrst_n(rst_n), .wr_en(wren), .wdata(wdata), .full(fifo_full),
    .rclk(sys_clk), .rrst_n(rst_n), .rd_en(fifo_rd_en), .rdata(rdata),
    .empty(fifo_empty));

  imf_controller #(.W(W), .H(H), .NB(NB)) u_ctrl (
    .clk(sys_clk), .rst_n(rst_n),
    .start(start), .ksize5(ksize5), .frame_rows(frame_rows),
    .busy(busy), .done(done), .frame_valid(frame_valid), .state(ctrl_state),
    .rd_en(rd_en), .rd_row(rd_row),
    .fifo_empty(fifo_empty), .fifo_rdata(rdata), .fifo_rd_en(fifo_rd_en),
    .gwl(gwl), .wl(wl), .bl(bl), .blb(blb), .bs(bs),
    .filter(filter), .pchrg(pchrg), .ksize5_q(ksize5_q), .rd(rd),
    .vfd_rst_n(vfd_rst_n), .valid_fr(valid_fr));

  sram_macro #(.W(W), .H(H), .NB(NB)) u_macro (
    .clk(sys_clk), .rst_n(rst_n), .gwl(gwl), .wl(wl), .bl(bl), .blb(blb),
    .bs(bs), .filter(filter), .pchrg(pchrg), .ksize5(ksize5_q), .rd(rd),
    .rdata(rd_data), .rd_valid(rd_valid), .bl_sense(bl_sense));

  valid_frame_detector #(.W(W)) u_vfd (
    .clk(sys_clk), .rst_n(vfd_rst_n), .sample_en(filter && pchrg),
    .ksize5(ksize5_q), .bl_sense(bl_sense), .valid_fr(valid_fr));

endmodule
