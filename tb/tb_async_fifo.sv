// tb_async_fifo -- writer at one clock, reader at another (unrelated periods),
// random write and read gaps. Checks data order against a queue, that full
// is reached and holds off writes (no entry lost or duplicated) and that empty
// is seen. Default size: 128 x 32.
module tb_async_fifo;
  localparam int WIDTH = 32, DEPTH = 128, N = 2000;
  logic wclk = 0, rclk = 0, rst_n = 0;
  logic wr_en, rd_en, full, empty;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] q[$];
  int checks = 0, failures = 0, sent = 0, got = 0, full_seen = 0, empty_seen = 0, rcycles = 0;
  bit slow_reader = 1;

  async_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.wclk(wclk), .wrst_n(rst_n), .wr_en(wr_en),
    .wdata(wdata), .full(full), .rclk(rclk), .rrst_n(rst_n), .rd_en(rd_en), .rdata(rdata),
    .empty(empty));

  always #3 wclk = ~wclk;
  always #7 rclk = ~rclk;
  always @(posedge rclk) rcycles++;

  initial begin
    wait (rcycles == 200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  initial begin
    wr_en = 0; wdata = 0;
    wait (rst_n);
    while (sent < N) begin
      @(negedge wclk);
      wr_en = ($urandom_range(0, 3) != 0);
      wdata = $urandom;
      @(posedge wclk);
      if (full) full_seen++;
      if (wr_en && !full) begin q.push_back(wdata); sent++; end
    end
    @(negedge wclk) wr_en = 0;
  end

  // reader: slow for the first half so the FIFO fills, fast afterwards
  initial begin
    rd_en = 0;
    wait (rst_n);
    while (got < N) begin
      @(negedge rclk);
      if (got > N / 2) slow_reader = 0;
      rd_en = slow_reader ? ($urandom_range(0, 7) == 0) : 1'b1;
      @(posedge rclk);
      if (empty) empty_seen++;
      if (rd_en && !empty) begin
        checks++;
        if (q.size() == 0 || rdata !== q[0]) begin
          failures++;
          if (failures < 5) $display("FAIL entry %0d: got %h", got, rdata);
        end
        if (q.size() != 0) void'(q.pop_front());
        got++;
      end
    end
    #100;
    checks++; if (full_seen == 0)  begin failures++; $display("FAIL full never seen"); end
    checks++; if (empty_seen == 0) begin failures++; $display("FAIL empty never seen"); end
    checks++; if (!empty) begin failures++; $display("FAIL not empty at end"); end
    $display("full cycles %0d, empty cycles %0d", full_seen, empty_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50 rst_n = 1;
  end
endmodule
