// row_decoder -- produces the 240-bit row signals of the macro.
//
// Two outputs, following the two 240-bit row buses from controller to macro:
//   gwl : decoded rows used outside filter mode. One-hot from yaddr for a
//         single-bit write or a row read; in clear mode the 16 rows of group
//         clr_grp (rows 16*g .. 16*g+15), so that 15 cycles clear 240 rows.
//   fwl : filter word lines, the n consecutive rows n*grp .. n*grp+n-1 of the
//         current filter step, n = 5 when ksize5 else 3.
// Rows past H are never raised. Purely combinational.
// The grouping rules (16 rows per clear cycle, n rows per filter step) are the
// paper's; splitting them over two buses is read off its top-level diagram.
module row_decoder
  import imf_pkg::*;
#(
  parameter int unsigned H     = IMF_H,
  parameter int unsigned NCLR  = CLR_WLS
) (
  input  logic                     wr_en,    // one-hot decode of yaddr
  input  logic [YW-1:0]            yaddr,
  input  logic                     clr_en,   // 16-row clear group
  input  logic [3:0]               clr_grp,
  input  logic                     filt_en,  // n-row filter group
  input  logic                     ksize5,
  input  logic [YW-1:0]            filt_grp,
  output logic [H-1:0]             gwl,
  output logic [H-1:0]             fwl
);
  int unsigned n, base;

  always_comb begin
    gwl = '0;
    fwl = '0;
    n    = ksize5 ? 5 : 3;
    base = n * int'(filt_grp);
    for (int unsigned r = 0; r < H; r++) begin
      if (clr_en && (r / NCLR) == int'(clr_grp)) gwl[r] = 1'b1;
      else if (wr_en && r == int'(yaddr))        gwl[r] = 1'b1;
      if (filt_en && r >= base && r < base + n)  fwl[r] = 1'b1;
    end
  end

endmodule
