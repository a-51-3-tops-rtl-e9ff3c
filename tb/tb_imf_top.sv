// tb_imf_top -- end-to-end test of the IMF processor at its default size
// (320 x 240 macro, 128-entry FIFO). A 4-phase AER sender (aer_clk) streams
// the events of each frame; a host (sys_clk) starts the frame, waits for done,
// reads back all 240 rows and compares them with a software non-overlapping
// median filter of the events sent. Frames:
//   A  n=3, 240 rows, noise + objects; the events are sent before start, so
//      the FIFO fills and the sender is stalled (back-pressure)
//   B  n=5, 240 rows, noise + objects, some events outside the frame
//   C  n=3, 240 rows, isolated noise only: the frame must come out blank and
//      frame_valid must stay low
//   D  n=3, 180 rows (a 240 x 180 sensor frame): 120 filter cycles
// Checked besides the pixels: the filter phase length 2*ceil(rows/n), the clear
// phase length 15, frame_valid, and that each mechanism happened at least once.
module tb_imf_top;
  import imf_pkg::*;
  localparam int W = IMF_W, H = IMF_H;
  logic aer_clk = 0, sys_clk = 0, rst_n = 0;
  logic aer_req, aer_ack, frame_end, aer_stall;
  logic [AER_W-1:0] aer_data;
  logic start, ksize5, busy, done, frame_valid, rd_en, rd_valid;
  logic [YW:0] frame_rows;
  logic [YW-1:0] rd_row;
  logic [W-1:0] rd_data;
  imf_state_t ctrl_state;

  imf_top dut (.aer_clk(aer_clk), .sys_clk(sys_clk), .rst_n(rst_n), .aer_req(aer_req),
    .aer_data(aer_data), .aer_ack(aer_ack), .frame_end(frame_end), .aer_stall(aer_stall),
    .start(start), .ksize5(ksize5), .frame_rows(frame_rows), .busy(busy), .done(done),
    .frame_valid(frame_valid), .ctrl_state(ctrl_state), .rd_en(rd_en), .rd_row(rd_row),
    .rd_data(rd_data), .rd_valid(rd_valid));

  always #2 aer_clk = ~aer_clk;   // aerClk faster than sysClk
  always #5 sys_clk = ~sys_clk;

  int checks = 0, failures = 0, cycles = 0;
  int n_stall = 0, n_clear = 0, n_filter3 = 0, n_filter5 = 0;
  int n_valid = 0, n_blank = 0, n_dropped = 0, n_reads = 0;
  int clr_len, flt_len;
  bit img [H][W];

  always @(posedge sys_clk) begin
    cycles++;
    if (ctrl_state == ST_CLEAR)  clr_len++;
    if (ctrl_state == ST_FILTER) flt_len++;
  end
  always @(posedge aer_clk) if (aer_stall) n_stall++;

  initial begin
    wait (cycles == 60000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ---------------- AER sender
  task automatic aer_word(input logic [AER_W-1:0] w);
    #($urandom_range(1, 6));
    aer_data = w;
    #1 aer_req = 1;
    wait (aer_ack);
    #($urandom_range(1, 6));
    aer_req = 0;
    wait (!aer_ack);
  endtask

  task automatic send_event(input int x, input int y);
    aer_word({1'b0, 1'($urandom), 8'(y)});
    aer_word({1'b1, 9'(x)});
    if (x < W && y < H) img[y][x] = 1; else n_dropped++;
  endtask

  task automatic send_eof();
    @(negedge aer_clk) frame_end = 1;
    @(negedge aer_clk) frame_end = 0;
  endtask

  // frame content: isolated noise, plus `objects` dense rectangles
  task automatic send_frame(input int rows, input int noise, input int objects, input int outside);
    for (int r = 0; r < H; r++) for (int c = 0; c < W; c++) img[r][c] = 0;
    for (int o = 0; o < objects; o++) begin
      int w = $urandom_range(8, 30), h = $urandom_range(6, 20);
      int x0 = $urandom_range(0, W - w - 1), y0 = $urandom_range(0, rows - h - 1);
      for (int y = y0; y < y0 + h; y++)
        for (int x = x0; x < x0 + w; x++)
          if ($urandom_range(0, 9) < 8) send_event(x, y);
    end
    for (int i = 0; i < noise; i++) begin
      // one isolated pixel per 15 x 15 cell at most, so it stays a minority
      int x = 15 * $urandom_range(0, W / 15 - 1) + 7, y = 15 * $urandom_range(0, rows / 15 - 1) + 7;
      if (objects == 0 || !img[y][x]) send_event(x, y);
    end
    for (int i = 0; i < outside; i++) send_event($urandom_range(W, 511), $urandom_range(0, 255));
    send_eof();
  endtask

  // ---------------- reference NOMF
  task automatic ref_nomf(input int n, input int rows);
    for (int r0 = 0; r0 < rows; r0 += n)
      for (int c0 = 0; c0 < W; c0 += n) begin
        int ones = 0, m = 0;
        for (int r = r0; r < r0 + n && r < H; r++)
          for (int c = c0; c < c0 + n && c < W; c++) begin ones += img[r][c]; m++; end
        for (int r = r0; r < r0 + n && r < H; r++)
          for (int c = c0; c < c0 + n && c < W; c++) img[r][c] = (2 * ones >= m);
      end
  endtask

  // ---------------- host
  task automatic host_start(input int n, input int rows);
    @(negedge sys_clk);
    start = 1; ksize5 = (n == 5); frame_rows = (YW+1)'(rows);
    clr_len = 0; flt_len = 0;
    @(negedge sys_clk) start = 0;
  endtask

  task automatic host_finish(input int n, input int rows, input bit expect_valid, input string name);
    bit any;
    wait (done);
    @(negedge sys_clk);
    n_clear++;
    if (n == 3) n_filter3++; else n_filter5++;
    cmp(clr_len == 15, $sformatf("%s clear took %0d cycles", name, clr_len));
    cmp(flt_len == 2 * ((rows + n - 1) / n), $sformatf("%s filter took %0d cycles", name, flt_len));
    ref_nomf(n, rows);
    any = 0;
    for (int r = 0; r < H; r++) begin
      @(negedge sys_clk) rd_en = 1; rd_row = YW'(r);
      @(negedge sys_clk) rd_en = 0;
      cmp(rd_valid, "rd_valid");
      n_reads++;
      for (int c = 0; c < W; c++) begin
        checks++;
        if (r < rows && img[r][c]) any = 1;
        if (rd_data[c] !== img[r][c]) begin
          failures++;
          if (failures < 10) $display("FAIL %s pixel r=%0d c=%0d got %0b exp %0b", name, r, c, rd_data[c], img[r][c]);
        end
      end
    end
    cmp(frame_valid == any, $sformatf("%s frame_valid=%0b expected %0b", name, frame_valid, any));
    cmp(any == expect_valid, $sformatf("%s test intent", name));
    if (frame_valid) n_valid++; else n_blank++;
    $display("%s done: n=%0d rows=%0d frame_valid=%0b at cycle %0d", name, n, rows, frame_valid, cycles);
  endtask

  initial begin
    aer_req = 0; aer_data = 0; frame_end = 0;
    start = 0; ksize5 = 0; frame_rows = (YW+1)'(H); rd_en = 0; rd_row = 0;
    #33 rst_n = 1;
    #20;
    // Frame A: events first (FIFO fills, sender stalls), start later
    fork
      send_frame(H, 40, 5, 0);
      begin
        wait (n_stall > 50);
        host_start(3, H);
      end
    join
    host_finish(3, H, 1, "A");
    // Frame B: n = 5, start first, events stream while the controller writes
    host_start(5, H);
    send_frame(H, 40, 4, 6);
    host_finish(5, H, 1, "B");
    // Frame C: noise only -> blank
    host_start(3, H);
    send_frame(H, 60, 0, 0);
    host_finish(3, H, 0, "C");
    // Frame D: 180-row frame
    host_start(3, 180);
    send_frame(180, 30, 3, 0);
    host_finish(3, 180, 1, "D");

    $display("mechanisms: stall=%0d clear=%0d filter3=%0d filter5=%0d valid=%0d blank=%0d dropped=%0d reads=%0d",
             n_stall, n_clear, n_filter3, n_filter5, n_valid, n_blank, n_dropped, n_reads);
    cmp(n_stall > 0,   "FIFO back-pressure never happened");
    cmp(n_filter3 > 0, "3x3 filter never ran");
    cmp(n_filter5 > 0, "5x5 filter never ran");
    cmp(n_valid > 0,   "valid frame never detected");
    cmp(n_blank > 0,   "blank frame never detected");
    cmp(n_dropped > 0, "out-of-frame event never dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
