// tb_imf_controller -- runs the controller against a first-word-fall-through
// FIFO model and checks, cycle by cycle, the outputs of every phase:
// CLEAR (15 cycles of 16 rows, BL=0/BLB=1, all banks), WRITE (one event per
// cycle: one row, BLB low on one column, the bank of x; out-of-frame events
// dropped; marker ends the phase), FILTER (Filter high, all banks, alternating
// precharge / evaluate with the right n rows, 2*ceil(rows/n) cycles, detector
// reset in the first cycle), DONE, the sticky frame_valid, and row reads.
// Frames: n=3 and n=5 on 240 rows, n=3 on 180 rows.
module tb_imf_controller;
  import imf_pkg::*;
  localparam int W = 320, H = 240, NB = 22;
  logic clk = 0, rst_n = 0;
  logic start, ksize5, busy, done, frame_valid, rd_en, fifo_empty, fifo_rd_en;
  logic [YW:0] frame_rows;
  logic [YW-1:0] rd_row;
  imf_state_t state;
  fifo_entry_t fifo_rdata;
  logic [H-1:0] gwl, wl;
  logic [W-1:0] bl, blb;
  logic [NB-1:0] bs;
  logic filter, pchrg, ksize5_q, rd, vfd_rst_n, valid_fr;
  fifo_entry_t q[$];
  int checks = 0, failures = 0, cycles = 0;

  imf_controller dut (.clk(clk), .rst_n(rst_n), .start(start), .ksize5(ksize5),
    .frame_rows(frame_rows), .busy(busy), .done(done), .frame_valid(frame_valid),
    .state(state), .rd_en(rd_en), .rd_row(rd_row), .fifo_empty(fifo_empty),
    .fifo_rdata(fifo_rdata), .fifo_rd_en(fifo_rd_en), .gwl(gwl), .wl(wl), .bl(bl),
    .blb(blb), .bs(bs), .filter(filter), .pchrg(pchrg), .ksize5_q(ksize5_q), .rd(rd),
    .vfd_rst_n(vfd_rst_n), .valid_fr(valid_fr));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // FIFO model (FWFT)
  always_comb begin
    fifo_empty = (q.size() == 0);
    fifo_rdata = fifo_empty ? '0 : q[0];
  end
  always @(posedge clk) if (fifo_rd_en && q.size() != 0) void'(q.pop_front());

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0d %s", cycles, what); end
  endtask

  function automatic logic [H-1:0] rows(input int r0, input int nr);
    logic [H-1:0] v = '0;
    for (int r = r0; r < r0 + nr && r < H; r++) v[r] = 1'b1;
    return v;
  endfunction

  task automatic run_frame(input int n, input int nrows, input int nev, input int vf_group);
    int ngrp, t0;
    fifo_entry_t e;
    // events queued up front (some out of frame), then the marker
    for (int i = 0; i < nev; i++) begin
      e = '0; e.x = XW'($urandom_range(0, 330)); e.y = YW'($urandom_range(0, 250));
      q.push_back(e);
    end
    e = '0; e.eof = 1'b1; q.push_back(e);
    @(negedge clk);
    start = 1; ksize5 = (n == 5); frame_rows = (YW+1)'(nrows);
    @(negedge clk);
    start = 0;
    t0 = cycles;
    // CLEAR
    for (int c = 0; c < 15; c++) begin
      cmp(state == ST_CLEAR, "in clear");
      cmp(gwl == rows(16 * c, 16) && bl == '0 && blb == '1 && bs == '1 && !filter, $sformatf("clear %0d", c));
      @(negedge clk);
    end
    // WRITE: one event per cycle
    while (!q[0].eof) begin
      logic [W-1:0] eblb = '1;
      logic [NB-1:0] ebs = '0;
      e = q[0];
      cmp(state == ST_WRITE && fifo_rd_en, "write pops");
      if (e.x < W && e.y < H) begin
        eblb[e.x] = 1'b0; ebs[e.x / 15] = 1'b1;
        cmp(gwl == rows(e.y, 1) && bl == '1 && blb == eblb && bs == ebs, $sformatf("write x=%0d y=%0d", e.x, e.y));
      end else begin
        cmp(blb == '1 || gwl == '0, "out-of-frame event writes nothing");
      end
      @(negedge clk);
    end
    cmp(state == ST_WRITE && fifo_rd_en, "marker popped");
    @(negedge clk);
    // FILTER
    ngrp = (nrows + n - 1) / n;
    t0 = cycles;
    for (int g = 0; g < ngrp; g++) begin
      // precharge
      cmp(filter && !pchrg && bs == '1 && wl == '0 && state == ST_FILTER, $sformatf("pre g=%0d", g));
      cmp(vfd_rst_n == (g != 0), "detector reset only in first cycle");
      @(negedge clk);
      // evaluate
      cmp(filter && pchrg && bs == '1 && wl == rows(g * n, n), $sformatf("eval g=%0d", g));
      cmp(ksize5_q == (n == 5), "ksize latched");
      @(negedge clk);
      valid_fr = (g == vf_group);   // detector output after this evaluate
    end
    cmp(cycles - t0 == 2 * ngrp, $sformatf("filter took %0d cycles, expected %0d", cycles - t0, 2 * ngrp));
    cmp(state == ST_DONE && !filter, "done state");
    @(negedge clk);
    valid_fr = 0;
    cmp(done && !busy && state == ST_IDLE, "done pulse");
    cmp(frame_valid == (vf_group >= 0), "frame_valid");
  endtask

  initial begin
    start = 0; ksize5 = 0; frame_rows = 240; rd_en = 0; rd_row = 0; valid_fr = 0;
    #22 rst_n = 1;
    run_frame(3, 240, 40, 17);
    run_frame(5, 240, 25, -1);
    run_frame(3, 180, 10, 59);     // last group of 60
    // row reads in idle
    for (int r = 0; r < H; r += 7) begin
      @(negedge clk); rd_en = 1; rd_row = YW'(r); #1;
      cmp(rd && gwl == rows(r, 1) && bs == '1 && bl == '1 && blb == '1 && !filter, $sformatf("read r=%0d", r));
    end
    @(negedge clk) rd_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
