// tb_sram_array -- drives the cell array model directly (local word lines,
// bit-line levels, short enables) and checks clear, single-bit writes with
// half-selected columns and unselected banks, row reads, and the n x n
// majority of a filter pass for n = 3 and n = 5 against a software NOMF.
// bl_sense is checked in every evaluate cycle.
module tb_sram_array;
  import imf_pkg::*;
  localparam int W = 320, H = 240, NB = 22;
  logic clk = 0, rst_n;
  logic [NB-1:0][H-1:0] wl_local;
  logic [W-1:0] bl, blb, rdata, bl_sense;
  logic [W-2:0] s;
  logic filter, pchrg, rd, rd_valid;
  int checks = 0, failures = 0, cycles = 0;
  bit ref_m [H][W];

  sram_array #(.W(W), .H(H), .NB(NB)) dut (.clk(clk), .rst_n(rst_n), .wl_local(wl_local),
    .bl(bl), .blb(blb), .s(s), .filter(filter), .pchrg(pchrg), .rd(rd),
    .rdata(rdata), .rd_valid(rd_valid), .bl_sense(bl_sense));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    wl_local = '0; bl = '1; blb = '1; s = '0; filter = 0; pchrg = 0; rd = 0;
  endtask

  task automatic rows_all_banks(input int r0, input int nr);
    wl_local = '0;
    for (int b = 0; b < NB; b++) for (int r = r0; r < r0 + nr; r++) wl_local[b][r] = 1'b1;
  endtask

  task automatic clear_all();
    for (int g = 0; g < 15; g++) begin
      idle(); rows_all_banks(16 * g, 16); bl = '0; blb = '1;
      @(posedge clk); #1;
    end
    idle();
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) ref_m[r][c] = 0;
  endtask

  task automatic write1(input int x, input int y);
    idle();
    wl_local[x / 15][y] = 1'b1;     // only the bank of x
    blb[x] = 1'b0;
    @(posedge clk); #1;
    idle();
    ref_m[y][x] = 1;
  endtask

  task automatic read_check_all();
    for (int r = 0; r < H; r++) begin
      idle(); rows_all_banks(r, 1); rd = 1;
      @(posedge clk); #1;
      idle();
      checks++;
      if (!rd_valid) failures++;
      for (int c = 0; c < W; c++) begin
        checks++;
        if (rdata[c] !== ref_m[r][c]) begin
          failures++;
          if (failures < 8) $display("FAIL read r=%0d c=%0d got %0b exp %0b", r, c, rdata[c], ref_m[r][c]);
        end
      end
    end
  endtask

  // software NOMF on the reference model
  task automatic ref_filter(input int n);
    for (int r0 = 0; r0 < H; r0 += n)
      for (int c0 = 0; c0 < W; c0 += n) begin
        int ones = 0, m = 0;
        for (int r = r0; r < r0 + n && r < H; r++)
          for (int c = c0; c < c0 + n && c < W; c++) begin ones += ref_m[r][c]; m++; end
        for (int r = r0; r < r0 + n && r < H; r++)
          for (int c = c0; c < c0 + n && c < W; c++) ref_m[r][c] = (2 * ones >= m);
      end
  endtask

  task automatic hw_filter(input int n);
    bit exp_sense [W];
    for (int r0 = 0; r0 < H; r0 += n) begin
      // precharge
      idle(); filter = 1;
      for (int c = 0; c < W - 1; c++) s[c] = ((c % n) != n - 1);
      @(posedge clk); #1;
      // evaluate
      pchrg = 1; rows_all_banks(r0, n);
      for (int c0 = 0; c0 < W; c0 += n) begin
        int ones = 0, m = 0;
        for (int r = r0; r < r0 + n; r++)
          for (int c = c0; c < c0 + n && c < W; c++) begin ones += ref_m[r][c]; m++; end
        for (int c = c0; c < c0 + n && c < W; c++) exp_sense[c] = (2 * ones >= m);
      end
      #1;
      for (int c = 0; c < W; c++) begin
        checks++;
        if (bl_sense[c] !== exp_sense[c]) begin
          failures++;
          if (failures < 8) $display("FAIL sense n=%0d r0=%0d c=%0d", n, r0, c);
        end
      end
      @(posedge clk); #1;
    end
    idle();
    ref_filter(n);
  endtask

  task automatic random_frame(input int nev, input int dense);
    clear_all();
    for (int e = 0; e < nev; e++) write1($urandom_range(0, W - 1), $urandom_range(0, H - 1));
    // a few dense blobs so that majorities of "1" occur
    for (int b = 0; b < dense; b++) begin
      int x0 = $urandom_range(0, W - 12), y0 = $urandom_range(0, H - 12);
      for (int y = y0; y < y0 + 10; y++) for (int x = x0; x < x0 + 10; x++)
        if ($urandom_range(0, 3) != 0) write1(x, y);
    end
  endtask

  initial begin
    rst_n = 0; idle();
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // clear, then check that the array reads all zero
    clear_all(); read_check_all();
    // writes (one bank selected, others half-selected), then read back
    random_frame(300, 4); read_check_all();
    // filter n = 3
    hw_filter(3); read_check_all();
    // filter n = 5 on a fresh frame
    random_frame(300, 4); hw_filter(5); read_check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
