// aer_rx -- address-event representation (AER) receiver, aerClk domain.
//
// The vision sensor hands over events on a 10-bit data bus with a 4-phase
// Req/Ack handshake: the sender drives data and raises Req, the receiver
// latches the data and raises Ack, the sender drops Req, the receiver drops Ack.
// Req is asynchronous to aerClk and goes through a two-flop synchronizer; the
// data bus is bundled with Req, so it is stable by the time the synchronized
// Req is seen.
//
// A 17-bit pixel address does not fit a 10-bit word, so an event takes two
// transfers. Word format (this design's choice; the paper gives only the bus
// width and that it carries address and polarity):
//   data[9] = 0 : row word,    data[8] = polarity, data[7:0] = y
//   data[9] = 1 : column word, data[8:0] = x
// A column word completes an event: {x, last y} is written to the FIFO with a
// one-cycle wren pulse. Polarity is dropped, as the binary frame marks a pixel
// for an event of either polarity.
//
// Back-pressure: while the FIFO is full (or a marker waits for room), Ack for a
// column word is withheld, so the sender stalls instead of losing the event.
//
// frame_end (one aerClk pulse, from whoever frames the sensor burst) queues an
// end-of-frame marker behind the events already received; the controller starts
// filtering when it pops it. This marker is this design's own mechanism.
//
// The 14 reserved bits of each FIFO entry are written as 0.
//
// Timing: from Req rising to Ack rising takes 3 aerClk cycles (2 sync + 1).
module aer_rx
  import imf_pkg::*;
#(
  parameter int unsigned DW = AER_W
) (
  input  logic          clk,          // aerClk
  input  logic          rst_n,
  input  logic          aer_req,      // asynchronous
  input  logic [DW-1:0] aer_data,
  output logic          aer_ack,
  input  logic          frame_end,    // pulse: queue end-of-frame marker
  input  logic          fifo_full,
  output logic          wren,         // FIFO write strobe
  output fifo_entry_t   wdata,        // event or marker
  output logic          stalled       // column word held back by a full FIFO
);

  logic req_s1, req_s2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {req_s2, req_s1} <= '0;
    else        {req_s2, req_s1} <= {req_s1, aer_req};
  end

  logic [YW-1:0] y_q;
  logic          eof_pend;

  wire is_col  = aer_data[DW-1];
  wire take    = req_s2 && !aer_ack;              // new word waiting
  // A pending marker goes first, so no event of the next frame overtakes it.
  wire blocked  = fifo_full || eof_pend;
  wire ev_push  = take && is_col && !blocked;    // complete event
  wire eof_push = eof_pend && !fifo_full;

  assign stalled = take && is_col && blocked;

  // FIFO write, in the same cycle as the decision so that fifo_full is exact.
  always_comb begin
    wren  = ev_push || eof_push;
    wdata = '0;
    if (ev_push) begin
      wdata.x = aer_data[XW-1:0];
      wdata.y = y_q;
    end else if (eof_push) begin
      wdata.eof = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aer_ack  <= 1'b0;
      y_q      <= '0;
      eof_pend <= 1'b0;
    end else begin
      // 4-phase handshake
      if (take) begin
        if (!is_col) begin
          y_q     <= aer_data[YW-1:0];
          aer_ack <= 1'b1;
        end else if (!blocked) begin
          aer_ack <= 1'b1;
        end
      end else if (!req_s2 && aer_ack) begin
        aer_ack <= 1'b0;
      end
      if (frame_end)     eof_pend <= 1'b1;
      else if (eof_push) eof_pend <= 1'b0;
    end
  end

endmodule
