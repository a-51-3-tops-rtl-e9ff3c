// sram_array -- behavioural model of the 320 x 240 6T bit-cell array, its
// bit-line drivers and sense amplifiers, including the read-disturb majority
// that performs the filtering. The real part is analog (cells, shorted bit
// lines racing to discharge); this model gives its logic function, cycle by
// cycle, and is written in synthesizable form.
//
// Column c belongs to bank c/15 and sees word lines wl_local[c/15]. On every
// rising clock edge:
//   * filter=1, pchrg=1 (evaluate): columns joined by closed gates s[] form a
//     group sharing BL and BLB. All raised cells of a group race; the value held
//     by the majority wins and is written into every raised cell of the group:
//     result = 1 when 2*ones >= cells, i.e. ones >= ceil(n*n/2) for a full
//     n x n patch. A patch with equal counts (only possible in the 2-column
//     patch at the right edge when n=3) resolves to 1; the analog result there
//     is not predictable, this is a choice of the model.
//   * filter=1, pchrg=0 (precharge): nothing changes.
//   * filter=0: every column with bl[c] != blb[c] writes bl[c] into its raised
//     cells (write or clear); columns with bl = blb = 1 keep their cells.
//   * rd=1 (filter=0): rdata[c] <= AND of the raised cells of column c (BL stays
//     high only if no raised cell holds 0); rd_valid follows one cycle later.
// bl_sense[c] is the level BL of column c settles to in an evaluate cycle
// (1 = not discharged = patch majority 1); it is 1 in any other cycle. The
// valid-frame detector samples it.
// Groups are found within a window of +-4 columns, enough for n <= 5.
// The cells hold random values at power-up, as a real SRAM does; the
// controller clears them before every frame.
module sram_array
  import imf_pkg::*;
#(
  parameter int unsigned W     = IMF_W,
  parameter int unsigned H     = IMF_H,
  parameter int unsigned NB    = NBANK,
  parameter int unsigned BCOLS = BANK_COLS
) (
  input  logic                  clk,
  input  logic                  rst_n,        // resets rd_valid only
  input  logic [NB-1:0][H-1:0]  wl_local,
  input  logic [W-1:0]          bl,
  input  logic [W-1:0]          blb,
  input  logic [W-2:0]          s,
  input  logic                  filter,
  input  logic                  pchrg,
  input  logic                  rd,
  output logic [W-1:0]          rdata,
  output logic                  rd_valid,
  output logic [W-1:0]          bl_sense
);
  localparam int unsigned CW   = $clog2(H + 1);       // per-column count width
  localparam int unsigned GW   = CW + 4;              // group count width
  localparam int          SPAN = 4;

  wire eval = filter && pchrg;

  logic [W-1:0][CW-1:0]  ones_v;     // raised cells holding 1, per column
  logic [NB-1:0][CW-1:0] cnt_b;      // raised rows, per bank

  for (genvar b = 0; b < NB; b++) begin : g_bank
    assign cnt_b[b] = CW'($countones(wl_local[b]));
  end

  for (genvar c = 0; c < W; c++) begin : g_col
    localparam int B = c / BCOLS;
    logic [H-1:0]  q;                // the H cells of column c
    logic [H-1:0]  sel;
    logic [GW-1:0] gones, gcnt;
    logic          maj, rbit;

    assign sel       = wl_local[B];
    assign ones_v[c] = CW'($countones(q & sel));

    // sum over the columns joined to c by closed short gates
    always_comb begin
      logic linked;
      gones  = GW'(ones_v[c]);
      gcnt   = GW'(cnt_b[B]);
      linked = 1'b1;
      for (int k = 1; k <= SPAN; k++) begin              // to the right
        if (c + k < W) begin
          linked = linked && s[(c + k - 1 < W - 1) ? c + k - 1 : 0];
          if (linked) begin
            gones = gones + GW'(ones_v[(c + k < W) ? c + k : 0]);
            gcnt  = gcnt  + GW'(cnt_b[((c + k < W) ? c + k : 0) / BCOLS]);
          end
        end
      end
      linked = 1'b1;
      for (int k = 1; k <= SPAN; k++) begin              // to the left
        if (c - k >= 0) begin
          linked = linked && s[(c - k >= 0) ? c - k : 0];
          if (linked) begin
            gones = gones + GW'(ones_v[(c - k >= 0) ? c - k : 0]);
            gcnt  = gcnt  + GW'(cnt_b[((c - k >= 0) ? c - k : 0) / BCOLS]);
          end
        end
      end
      maj = ({gones, 1'b0} >= {1'b0, gcnt});
    end

    assign bl_sense[c] = (eval && gcnt != '0) ? maj : 1'b1;

    always_ff @(posedge clk) begin
      if (eval)
        q <= (q & ~sel) | ({H{maj}} & sel);
      else if (!filter && bl[c] != blb[c])
        q <= (q & ~sel) | ({H{bl[c]}} & sel);
      if (rd && !filter)
        rbit <= &(q | ~sel);
    end
    assign rdata[c] = rbit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd && !filter;
  end

endmodule
