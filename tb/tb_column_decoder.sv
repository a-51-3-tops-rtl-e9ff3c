// tb_column_decoder -- drive levels and bank selects for clear, single-bit
// write at every x (including out-of-range x) and idle.
module tb_column_decoder;
  import imf_pkg::*;
  localparam int W = 320, NB = 22;
  logic wr_en, clr_en, all_banks;
  logic [XW-1:0] xaddr;
  logic [W-1:0] bl, blb;
  logic [NB-1:0] bs;
  int checks = 0, failures = 0;

  column_decoder #(.W(W), .NB(NB)) dut (.wr_en(wr_en), .xaddr(xaddr), .clr_en(clr_en),
    .all_banks(all_banks), .bl(bl), .blb(blb), .bs(bs));

  task automatic cmp(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 6) $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; clr_en = 1; all_banks = 0; xaddr = 0;
    #1 cmp(bl == '0 && blb == '1 && bs == '1, "clear");
    clr_en = 0;
    #1 cmp(bl == '1 && blb == '1 && bs == '0, "idle");
    all_banks = 1;
    #1 cmp(bl == '1 && blb == '1 && bs == '1, "idle all banks");
    all_banks = 0; wr_en = 1;
    for (int x = 0; x < 512; x++) begin
      logic [W-1:0] eblb;
      logic [NB-1:0] ebs;
      xaddr = XW'(x); #1;
      eblb = '1; ebs = '0;
      if (x < W) begin eblb[x] = 1'b0; ebs[x / 15] = 1'b1; end
      cmp(bl == '1, $sformatf("bl x=%0d", x));
      cmp(blb == eblb, $sformatf("blb x=%0d", x));
      cmp(bs == ebs, $sformatf("bs x=%0d", x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
