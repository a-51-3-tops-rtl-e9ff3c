// valid_frame_detector -- near-memory detector of a non-blank frame, fed by the
// bit lines while the frame is being filtered.
//
// After an evaluate cycle a patch's bit line BL stays high only if the patch
// decided "1" (an object pixel). Since all n columns of a patch share one BL,
// one tap per patch is enough: columns 0, n, 2n, ... (the first column of each
// patch). The taps are OR-reduced by a tree of 3-input gates that alternate
// NOR and NAND level by level, as in the paper's circuit (for 80 taps: NOR,
// NAND, NOR, NAND). Unused gate inputs are tied to the level's neutral value
// (0 into a NOR, 1 into a NAND). If the tree has an odd number of levels its
// output is inverted once more so that D is always "some patch is 1".
// A flip-flop samples D at the end of every evaluate cycle (sample_en high at
// that clock edge); it stands in for the paper's flop clocked by a delayed,
// inverted precharge signal. rst_n (asynchronous, from the controller at the
// start of filtering) clears it. valid_fr = Q, so it shows whether the last
// evaluated row group held an object; the controller accumulates it.
// The tree serves both kernel sizes: with n = 5 the taps are columns 0, 5, 10,
// ... and the remaining tree inputs are tied off. Sizing the tree for n = 3
// (ceil(W/3) taps) and this tap multiplexing are this design's choices; the
// paper draws the tree for one fixed n.
module valid_frame_detector
  import imf_pkg::*;
#(
  parameter int unsigned W = IMF_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sample_en,
  input  logic          ksize5,
  input  logic [W-1:0]  bl_sense,
  output logic          valid_fr
);
  localparam int unsigned NT   = (W + 2) / 3;   // taps for n = 3
  localparam int unsigned MAXL = 12;

  function automatic int unsigned lvl_size(input int unsigned l);
    int unsigned sz;
    sz = NT;
    for (int unsigned i = 0; i < l; i++) sz = (sz + 2) / 3;
    return sz;
  endfunction

  function automatic int unsigned num_levels();
    int unsigned l;
    l = 0;
    while (lvl_size(l) > 1) l++;
    return l;
  endfunction

  localparam int unsigned NL = num_levels();

  logic [NT-1:0] lv [MAXL+1];
  logic          d;

  always_comb begin
    for (int unsigned l = 0; l <= MAXL; l++) lv[l] = '0;
    // taps: first column of every patch
    for (int unsigned i = 0; i < NT; i++)
      lv[0][i] = ksize5 ? ((5 * i < W) ? bl_sense[5 * i] : 1'b0) : bl_sense[3 * i];
    // alternating NOR / NAND levels
    for (int unsigned l = 1; l <= NL; l++) begin
      for (int unsigned j = 0; j < lvl_size(l); j++) begin
        logic [2:0] a;
        for (int unsigned k = 0; k < 3; k++)
          a[k] = (3 * j + k < lvl_size(l - 1)) ? lv[l-1][3*j+k] : ((l % 2) == 0);
        lv[l][j] = (l % 2 == 1) ? ~|a : ~&a;
      end
    end
    d = (NL % 2 == 1) ? ~lv[NL][0] : lv[NL][0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         valid_fr <= 1'b0;
    else if (sample_en) valid_fr <= d;
  end

endmodule
