// tb_row_decoder -- one-hot write rows, the 15 clear groups of 16 rows, and the
// n-row filter groups for n = 3 and 5, against directly computed row masks.
module tb_row_decoder;
  import imf_pkg::*;
  localparam int H = 240;
  logic wr_en, clr_en, filt_en, ksize5;
  logic [YW-1:0] yaddr, filt_grp;
  logic [3:0] clr_grp;
  logic [H-1:0] gwl, fwl;
  int checks = 0, failures = 0;

  row_decoder #(.H(H)) dut (.wr_en(wr_en), .yaddr(yaddr), .clr_en(clr_en),
    .clr_grp(clr_grp), .filt_en(filt_en), .ksize5(ksize5), .filt_grp(filt_grp),
    .gwl(gwl), .fwl(fwl));

  task automatic cmp(input logic [H-1:0] got, input logic [H-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 6) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [H-1:0] exp;
    wr_en = 0; clr_en = 0; filt_en = 0; ksize5 = 0; yaddr = 0; filt_grp = 0; clr_grp = 0;
    #1 cmp(gwl, '0, "idle gwl"); cmp(fwl, '0, "idle fwl");
    // single rows
    wr_en = 1;
    for (int y = 0; y < 256; y++) begin
      yaddr = YW'(y); #1;
      exp = '0; if (y < H) exp[y] = 1'b1;
      cmp(gwl, exp, $sformatf("write y=%0d", y));
    end
    wr_en = 0;
    // clear groups
    clr_en = 1;
    for (int g = 0; g < 15; g++) begin
      clr_grp = 4'(g); #1;
      exp = '0; for (int r = 16 * g; r < 16 * g + 16; r++) exp[r] = 1'b1;
      cmp(gwl, exp, $sformatf("clear g=%0d", g));
      cmp(fwl, '0, "clear fwl");
    end
    clr_en = 0;
    // filter groups
    filt_en = 1;
    for (int k = 0; k < 2; k++) begin
      int n;
      ksize5 = k[0]; n = k ? 5 : 3;
      for (int g = 0; g < H / n; g++) begin
        filt_grp = YW'(g); #1;
        exp = '0; for (int r = n * g; r < n * g + n; r++) exp[r] = 1'b1;
        cmp(fwl, exp, $sformatf("filter n=%0d g=%0d", n, g));
        cmp(gwl, '0, "filter gwl");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
