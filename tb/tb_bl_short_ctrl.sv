// tb_bl_short_ctrl -- checks the bit-line short enable patterns: 110110... for
// n = 3, 11110 11110... for n = 5, and all gates open outside filter mode.
module tb_bl_short_ctrl;
  localparam int W = 320;
  logic filter, ksize5;
  logic [W-2:0] s;
  int checks = 0, failures = 0;

  bl_short_ctrl #(.W(W)) dut (.filter(filter), .ksize5(ksize5), .s(s));

  task automatic check_pattern(input logic f, input logic k5);
    string pat;
    filter = f; ksize5 = k5;
    #1;
    pat = k5 ? "11110" : "110";
    for (int c = 0; c < W - 1; c++) begin
      logic exp;
      exp = f && (pat[c % pat.len()] == "1");
      checks++;
      if (s[c] !== exp) begin
        failures++;
        if (failures < 5) $display("FAIL f=%0b k5=%0b c=%0d s=%0b exp=%0b", f, k5, c, s[c], exp);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_pattern(1, 0);
    check_pattern(1, 1);
    check_pattern(0, 0);
    check_pattern(0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
