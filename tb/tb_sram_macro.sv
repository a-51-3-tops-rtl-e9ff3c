// tb_sram_macro -- drives the macro through its controller-side ports (row
// buses, bit-line levels, bank selects, Filter, Pchrg, kernel size, read) and
// checks: clear, writes into one selected bank, that a raised row in an
// unselected bank is not written, a filter pass for n = 3 and for n = 5 against
// a software NOMF, and the bl_sense level during evaluation.
module tb_sram_macro;
  import imf_pkg::*;
  localparam int W = 320, H = 240, NB = 22;
  logic clk = 0, rst_n;
  logic [H-1:0] gwl, wl;
  logic [W-1:0] bl, blb, rdata, bl_sense;
  logic [NB-1:0] bs;
  logic filter, pchrg, ksize5, rd, rd_valid;
  int checks = 0, failures = 0, cycles = 0;
  bit ref_m [H][W];

  sram_macro dut (.clk(clk), .rst_n(rst_n), .gwl(gwl), .wl(wl), .bl(bl), .blb(blb),
    .bs(bs), .filter(filter), .pchrg(pchrg), .ksize5(ksize5), .rd(rd), .rdata(rdata),
    .rd_valid(rd_valid), .bl_sense(bl_sense));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    gwl = '0; wl = '0; bl = '1; blb = '1; bs = '0; filter = 0; pchrg = 0; rd = 0;
  endtask

  task automatic clear_all();
    for (int g = 0; g < 15; g++) begin
      idle(); bs = '1; bl = '0;
      for (int r = 16 * g; r < 16 * g + 16; r++) gwl[r] = 1'b1;
      @(posedge clk); #1;
    end
    idle();
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) ref_m[r][c] = 0;
  endtask

  // write x,y with bank select of bank `bank` (model updates only if it is x's)
  task automatic write1(input int x, input int y, input int bank);
    idle(); gwl[y] = 1'b1; blb[x] = 1'b0; bs[bank] = 1'b1;
    @(posedge clk); #1;
    idle();
    if (bank == x / 15) ref_m[y][x] = 1;
  endtask

  task automatic read_check_all();
    for (int r = 0; r < H; r++) begin
      idle(); gwl[r] = 1'b1; bs = '1; rd = 1;
      @(posedge clk); #1;
      idle();
      for (int c = 0; c < W; c++) begin
        checks++;
        if (rdata[c] !== ref_m[r][c]) begin
          failures++;
          if (failures < 8) $display("FAIL read r=%0d c=%0d", r, c);
        end
      end
    end
  endtask

  task automatic filter_pass(input int n);
    ksize5 = (n == 5);
    for (int r0 = 0; r0 < H; r0 += n) begin
      idle(); filter = 1; bs = '1;
      gwl = '1;                                // must be ignored in filter mode
      @(posedge clk); #1;
      pchrg = 1;
      for (int r = r0; r < r0 + n; r++) wl[r] = 1'b1;
      #1;
      for (int c0 = 0; c0 < W; c0 += n) begin
        int ones = 0, m = 0;
        for (int r = r0; r < r0 + n; r++)
          for (int c = c0; c < c0 + n && c < W; c++) begin ones += ref_m[r][c]; m++; end
        for (int c = c0; c < c0 + n && c < W; c++) begin
          checks++;
          if (bl_sense[c] !== (2 * ones >= m)) begin
            failures++;
            if (failures < 8) $display("FAIL sense n=%0d r0=%0d c=%0d", n, r0, c);
          end
        end
        for (int r = r0; r < r0 + n; r++)
          for (int c = c0; c < c0 + n && c < W; c++) ref_m[r][c] = (2 * ones >= m);
      end
      @(posedge clk); #1;
    end
    idle();
  endtask

  task automatic fill(input int nev);
    for (int e = 0; e < nev; e++) begin
      int x = $urandom_range(0, W - 1), y = $urandom_range(0, H - 1);
      write1(x, y, ($urandom_range(0, 7) == 0) ? $urandom_range(0, NB - 1) : x / 15);
    end
    for (int b = 0; b < 5; b++) begin
      int x0 = $urandom_range(0, W - 12), y0 = $urandom_range(0, H - 12);
      for (int y = y0; y < y0 + 10; y++) for (int x = x0; x < x0 + 10; x++)
        if ($urandom_range(0, 3) != 0) write1(x, y, x / 15);
    end
  endtask

  initial begin
    rst_n = 0; ksize5 = 0; idle();
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    clear_all(); fill(300); read_check_all();
    filter_pass(3); read_check_all();
    clear_all(); fill(300); filter_pass(5); read_check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
