// tb_imf_patterns -- the patch-pattern characterization run through the whole
// processor at its default size. Every full 3 x 3 patch of the macro (106
// columns of patches x 80 rows of patches = 8480 patches) is loaded over AER
// with k ones, each patch with its own randomly chosen pattern out of the
// C(9,k) possible ones; then the frame is filtered with n = 3 and read back.
// The ideal filter must turn every patch into all ones for k >= 5 and all zeros
// for k <= 4. Frames: k = 5 and k = 4, the two hardest cases (one "1" apart),
// which the silicon characterization also concentrates on. The model has no
// mismatch, so no patch may flip the wrong way.
module tb_imf_patterns;
  import imf_pkg::*;
  localparam int W = IMF_W, H = IMF_H, NPC = IMF_W / 3, NPR = IMF_H / 3;
  logic aer_clk = 0, sys_clk = 0, rst_n = 0;
  logic aer_req, aer_ack, frame_end, aer_stall;
  logic [AER_W-1:0] aer_data;
  logic start, ksize5, busy, done, frame_valid, rd_en, rd_valid;
  logic [YW:0] frame_rows;
  logic [YW-1:0] rd_row;
  logic [W-1:0] rd_data;
  imf_state_t ctrl_state;
  int checks = 0, failures = 0, cycles = 0, wrong_patches = 0;

  imf_top dut (.aer_clk(aer_clk), .sys_clk(sys_clk), .rst_n(rst_n), .aer_req(aer_req),
    .aer_data(aer_data), .aer_ack(aer_ack), .frame_end(frame_end), .aer_stall(aer_stall),
    .start(start), .ksize5(ksize5), .frame_rows(frame_rows), .busy(busy), .done(done),
    .frame_valid(frame_valid), .ctrl_state(ctrl_state), .rd_en(rd_en), .rd_row(rd_row),
    .rd_data(rd_data), .rd_valid(rd_valid));

  always #2 aer_clk = ~aer_clk;
  always #5 sys_clk = ~sys_clk;
  always @(posedge sys_clk) cycles++;

  initial begin
    wait (cycles == 1000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic aer_word(input logic [AER_W-1:0] w);
    aer_data = w;
    #1 aer_req = 1;
    wait (aer_ack);
    #1 aer_req = 0;
    wait (!aer_ack);
  endtask

  // random 9-bit pattern with exactly k ones
  function automatic logic [8:0] pattern(input int k);
    logic [8:0] p = '0;
    int placed = 0;
    while (placed < k) begin
      int i = $urandom_range(0, 8);
      if (!p[i]) begin p[i] = 1'b1; placed++; end
    end
    return p;
  endfunction

  task automatic run(input int k);
    bit exp;
    int wrong_before = wrong_patches;
    @(negedge sys_clk) start = 1; ksize5 = 0; frame_rows = (YW+1)'(H);
    @(negedge sys_clk) start = 0;
    for (int pr = 0; pr < NPR; pr++)
      for (int pc = 0; pc < NPC; pc++) begin
        logic [8:0] p = pattern(k);
        for (int i = 0; i < 9; i++)
          if (p[i]) begin
            aer_word({1'b0, 1'b1, 8'(3 * pr + i / 3)});
            aer_word({1'b1, 9'(3 * pc + i % 3)});
          end
      end
    @(negedge aer_clk) frame_end = 1;
    @(negedge aer_clk) frame_end = 0;
    wait (done);
    exp = (k >= 5);
    for (int r = 0; r < H; r++) begin
      @(negedge sys_clk) rd_en = 1; rd_row = YW'(r);
      @(negedge sys_clk) rd_en = 0;
      for (int c = 0; c < 3 * NPC; c++) begin
        checks++;
        if (rd_data[c] !== exp) begin
          failures++; wrong_patches++;
          if (failures < 6) $display("FAIL k=%0d r=%0d c=%0d", k, r, c);
        end
      end
    end
    checks++;
    if (frame_valid !== exp) begin failures++; $display("FAIL k=%0d frame_valid", k); end
    $display("k=%0d: %0d patches, %0d wrong cells, frame_valid=%0b, cycle %0d",
             k, NPR * NPC, wrong_patches - wrong_before, frame_valid, cycles);
  endtask

  initial begin
    aer_req = 0; aer_data = 0; frame_end = 0;
    start = 0; ksize5 = 0; frame_rows = (YW+1)'(H); rd_en = 0; rd_row = 0;
    #33 rst_n = 1;
    #20;
    run(5);
    run(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
