// column_decoder -- column side of the macro: bit-line drive levels and bank
// select.
//
// Each column gets two drive levels, bl[c] and blb[c]. bl != blb writes bl[c]
// into the cells whose word line is raised in that column; bl == blb == 1 means
// the pair is only precharged (held at VDD by the half-select driver), so the
// cells there keep their value. Outside filter mode this is all the array needs.
//   clr_en        : every column gets BL=0, BLB=1 (clear), all banks selected.
//   wr_en, xaddr  : only column xaddr gets BL=1, BLB=0 (write "1"); every other
//                   column is half-selected (BL=BLB=1). Only the bank holding
//                   xaddr (xaddr/15) is selected, as in the paper, to save
//                   bit-line power.
//   otherwise     : all pairs precharged; banks = all_banks ? all : none.
// An xaddr past W writes nothing. Purely combinational.
// The drive levels and bank choice follow the paper; encoding them as two
// levels per column is this design's own abstraction of the driver circuit.
module column_decoder
  import imf_pkg::*;
#(
  parameter int unsigned W     = IMF_W,
  parameter int unsigned NB    = NBANK,
  parameter int unsigned BCOLS = BANK_COLS
) (
  input  logic          wr_en,
  input  logic [XW-1:0] xaddr,
  input  logic          clr_en,
  input  logic          all_banks,
  output logic [W-1:0]  bl,
  output logic [W-1:0]  blb,
  output logic [NB-1:0] bs
);
  always_comb begin
    bl  = '1;
    blb = '1;
    bs  = all_banks ? '1 : '0;
    if (clr_en) begin
      bl  = '0;
      bs  = '1;
    end else if (wr_en && int'(xaddr) < W) begin
      blb[xaddr] = 1'b0;
      bs         = '0;
      bs[int'(xaddr) / BCOLS] = 1'b1;
    end
  end
endmodule
