// tb_aer_rx -- a 4-phase AER sender with random delays sends two-word events
// (row word, column word) and end-of-frame pulses; a FIFO model with a
// controllable full flag collects the writes. Checks every written entry
// against the event sent, the marker order, that Ack is withheld while the
// FIFO is full (stall seen) and the Req-to-Ack latency of 3 aerClk cycles.
module tb_aer_rx;
  import imf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic aer_req, aer_ack, frame_end, fifo_full, wren, stalled;
  logic [AER_W-1:0] aer_data;
  fifo_entry_t wdata;
  fifo_entry_t exp_q[$];
  int checks = 0, failures = 0, cycles = 0, stalls = 0, events = 0;

  aer_rx dut (.clk(clk), .rst_n(rst_n), .aer_req(aer_req), .aer_data(aer_data),
    .aer_ack(aer_ack), .frame_end(frame_end), .fifo_full(fifo_full), .wren(wren),
    .wdata(wdata), .stalled(stalled));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FIFO model: checks entries and full-flag discipline
  always @(posedge clk) begin
    if (stalled) stalls++;
    if (wren) begin
      checks++;
      if (fifo_full) begin failures++; $display("FAIL write while full"); end
      if (exp_q.size() == 0 || wdata !== exp_q[0]) begin
        failures++;
        if (failures < 6) $display("FAIL entry got %h", wdata);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end

  // random full periods
  initial begin
    fifo_full = 0;
    forever begin
      repeat ($urandom_range(5, 60)) @(negedge clk);
      fifo_full = ($urandom_range(0, 2) == 0);
    end
  end

  task automatic send_word(input logic [AER_W-1:0] w, input bit measure);
    int t0;
    #($urandom_range(1, 30));
    aer_data = w;
    #1 aer_req = 1;
    t0 = cycles;
    wait (aer_ack);
    if (measure && !fifo_full) begin
      // Req raised between edges: 2 sync flops + 1 register = Ack at 3rd edge
      checks++;
      if (cycles - t0 != 3) begin failures++; $display("FAIL ack latency %0d", cycles - t0); end
    end
    #($urandom_range(1, 20));
    aer_req = 0;
    wait (!aer_ack);
  endtask

  initial begin
    fifo_entry_t e;
    aer_req = 0; aer_data = 0; frame_end = 0;
    #30 rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      for (int i = 0; i < 60; i++) begin
        int x = $urandom_range(0, 319), y = $urandom_range(0, 239);
        e = '0; e.x = XW'(x); e.y = YW'(y);
        exp_q.push_back(e);
        send_word({1'b0, 1'($urandom), 8'(y)}, 1);
        send_word({1'b1, 9'(x)}, 0);
        events++;
      end
      // end-of-frame marker
      e = '0; e.eof = 1'b1; exp_q.push_back(e);
      @(negedge clk) frame_end = 1;
      @(negedge clk) frame_end = 0;
    end
    fifo_full = 0;
    repeat (20) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d entries missing", exp_q.size()); end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("events %0d, stall cycles %0d", events, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
