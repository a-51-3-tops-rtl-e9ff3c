// tb_valid_frame_detector -- random bit-line levels with 0, 1 or a few high
// lines, for n = 3 and n = 5, at the macro width (320) and at the paper's
// example width (240). After each sampling edge valid_fr must equal the OR of
// the patch taps (columns 0, n, 2n, ...); without sample_en it must hold, and
// reset must clear it.
module tb_valid_frame_detector;
  logic clk = 0, rst_n, sample_en, ksize5;
  logic [319:0] bl;
  logic v320, v240;
  int checks = 0, failures = 0, cycles = 0, hits = 0;

  valid_frame_detector #(.W(320)) dut320 (.clk(clk), .rst_n(rst_n), .sample_en(sample_en),
    .ksize5(ksize5), .bl_sense(bl), .valid_fr(v320));
  valid_frame_detector #(.W(240)) dut240 (.clk(clk), .rst_n(rst_n), .sample_en(sample_en),
    .ksize5(ksize5), .bl_sense(bl[239:0]), .valid_fr(v240));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 50000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ref_or(input logic [319:0] v, input int w, input int n);
    for (int c = 0; c < w; c += n) if (v[c]) return 1;
    return 0;
  endfunction

  task automatic cmp(input logic got, input bit exp, input string what);
    checks++;
    if (got !== exp) begin failures++; if (failures < 6) $display("FAIL %s", what); end
  endtask

  initial begin
    bit e320, e240;
    rst_n = 0; sample_en = 0; ksize5 = 0; bl = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int n;
      @(negedge clk);
      ksize5 = $urandom_range(0, 1); n = ksize5 ? 5 : 3;
      bl = '0;
      case ($urandom_range(0, 3))
        0: ;                                              // blank
        1: bl[$urandom_range(0, 319)] = 1'b1;              // one line
        2: for (int k = 0; k < 3; k++) bl[$urandom_range(0, 319)] = 1'b1;
        3: bl[n * $urandom_range(0, 240 / n - 1)] = 1'b1;  // a tap for sure
      endcase
      sample_en = 1;
      e320 = ref_or(bl, 320, n); e240 = ref_or(bl, 240, n);
      if (e320) hits++;
      @(posedge clk); #1;
      cmp(v320, e320, $sformatf("w320 t=%0d", t));
      cmp(v240, e240, $sformatf("w240 t=%0d", t));
      // hold without sample_en
      sample_en = 0; bl = ~bl;
      @(posedge clk); #1;
      cmp(v320, e320, "hold 320");
      cmp(v240, e240, "hold 240");
    end
    // asynchronous reset clears
    @(negedge clk); sample_en = 1; bl = '1; @(posedge clk); #1;
    cmp(v320, 1, "set before reset");
    rst_n = 0; #1;
    cmp(v320, 0, "reset 320"); cmp(v240, 0, "reset 240");
    checks++; if (hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
