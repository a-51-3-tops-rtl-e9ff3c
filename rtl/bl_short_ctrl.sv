// bl_short_ctrl -- enables of the transmission gates that short neighbouring
// bit lines (and, separately, bit-line bars) during the filter operation.
//
// s[c] closes the gates between column c and column c+1. With n = 3 the
// pattern over c = 0, 1, 2, ... is 110110110..., with n = 5 it is 1111011110...,
// so every group of n adjacent columns shares one BL and one BLB. Outside filter
// mode all enables are low. These patterns are the paper's. Combinational.
// About 60% of the enables are the same for both kernel sizes: a column pair
// joined in both patterns is simply wired to filter, a pair joined in neither
// (c mod 15 = 14, a bank boundary) is tied to 0. Only the rest depend on ksize5.
module bl_short_ctrl
  import imf_pkg::*;
#(
  parameter int unsigned W = IMF_W
) (
  input  logic          filter,
  input  logic          ksize5,
  output logic [W-2:0]  s
);
  always_comb begin
    for (int unsigned c = 0; c < W - 1; c++)
      s[c] = filter && (ksize5 ? (c % 5 != 4) : (c % 3 != 2));
  end
endmodule
