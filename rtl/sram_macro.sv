// sram_macro -- the 320 x 240 filtering SRAM macro: 22 banks of 15 columns,
// global word-line mux, local word-line drivers, bit-line short gates and the
// cell array with its drivers and sense amplifiers.
//
// Inputs are the controller's row buses (gwl: decoded rows; wl: filter rows),
// per-column drive levels (bl/blb, see column_decoder), bank selects, Filter,
// Pchrg, the kernel size and the read strobe. Structure as in the paper:
// wordline_driver picks gwl or wl with Filter and gates rows per bank;
// bl_short_ctrl closes the gates that join n adjacent columns in filter mode;
// sram_array (behavioural) holds the cells and performs write, clear, read and
// the read-disturb majority. Timing: every operation takes effect at the clock
// edge that ends its cycle; read data appear one cycle after rd.
module sram_macro
  import imf_pkg::*;
#(
  parameter int unsigned W     = IMF_W,
  parameter int unsigned H     = IMF_H,
  parameter int unsigned NB    = NBANK,
  parameter int unsigned BCOLS = BANK_COLS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [H-1:0]   gwl,
  input  logic [H-1:0]   wl,
  input  logic [W-1:0]   bl,
  input  logic [W-1:0]   blb,
  input  logic [NB-1:0]  bs,
  input  logic           filter,
  input  logic           pchrg,
  input  logic           ksize5,
  input  logic           rd,
  output logic [W-1:0]   rdata,
  output logic           rd_valid,
  output logic [W-1:0]   bl_sense
);
  logic [NB-1:0][H-1:0] wl_local;
  logic [W-2:0]         s;

  wordline_driver #(.H(H), .NB(NB)) u_wld (
    .gwl(gwl), .wl(wl), .filter(filter), .bs(bs), .wl_local(wl_local));

  bl_short_ctrl #(.W(W)) u_short (
    .filter(filter), .ksize5(ksize5), .s(s));

  sram_array #(.W(W), .H(H), .NB(NB), .BCOLS(BCOLS)) u_array (
    .clk(clk), .rst_n(rst_n), .wl_local(wl_local), .bl(bl), .blb(blb), .s(s),
    .filter(filter), .pchrg(pchrg), .rd(rd), .rdata(rdata),
    .rd_valid(rd_valid), .bl_sense(bl_sense));

endmodule
