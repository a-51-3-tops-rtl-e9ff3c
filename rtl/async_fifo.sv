// async_fifo -- dual-clock FIFO between the AER side (aerClk) and the filter
// side (sysClk); 128 entries of 32 bits, as in the paper.
//
// Classic Gray-code design: each side keeps a binary pointer one bit wider than
// the address, publishes it in Gray code, and the other side compares against a
// two-flop synchronized copy. Full and empty are therefore pessimistic by the
// synchronizer latency, never wrong. The read side is first-word-fall-through:
// rdata shows the head entry whenever empty is low, and rd_en pops it.
// The storage is a plain array (no vendor RAM); depth must be a power of two.
module async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 128
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wq1_rgray, wq2_rgray, rq1_wgray, rq2_wgray;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write side
  wire         do_wr     = wr_en && !full;
  wire [AW:0]  wbin_nx   = wbin + (AW+1)'(do_wr);
  wire [AW:0]  wgray_nx  = bin2gray(wbin_nx);

  always_ff @(posedge wclk) if (do_wr) mem[wbin[AW-1:0]] <= wdata;

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; full <= 1'b0;
      wq1_rgray <= '0; wq2_rgray <= '0;
    end else begin
      wbin  <= wbin_nx;
      wgray <= wgray_nx;
      {wq2_rgray, wq1_rgray} <= {wq1_rgray, rgray};
      full  <= (wgray_nx == {~wq2_rgray[AW:AW-1], wq2_rgray[AW-2:0]});
    end
  end

  // ---------------- read side
  wire         do_rd     = rd_en && !empty;
  wire [AW:0]  rbin_nx   = rbin + (AW+1)'(do_rd);
  wire [AW:0]  rgray_nx  = bin2gray(rbin_nx);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; empty <= 1'b1;
      rq1_wgray <= '0; rq2_wgray <= '0;
    end else begin
      rbin  <= rbin_nx;
      rgray <= rgray_nx;
      {rq2_wgray, rq1_wgray} <= {rq1_wgray, wgray};
      empty <= (rgray_nx == rq2_wgray);
    end
  end

  assign rdata = mem[rbin[AW-1:0]];

endmodule
