// ext_interface: hand-over of events from the external source to the HLC.
//
// The external source owns a one-bit latch `avail` and a data register `din`.
// It may write an event (ext_write with ext_din) whenever avail is clear; the
// write sets avail. On every hclk tick the interface looks at avail: if set,
// it forwards the event part of din on `ev` and its time-stamp part on
// `ext_ts`, both flagged valid for one hclk period, and clears avail so that
// the next event can be written. Without a pending event the outputs are zero
// and not valid. din holds the time stamp in its upper TS_W bits and the event
// in its lower EV_W bits; in online mode the time-stamp part is ignored
// downstream.
//
// This follows the paper's equations for ev, ext_ts, valid_ext_ts/valid_ev and
// avail. The write strobe standing in for the paper's "external" oracle and
// the placement of the time stamp in the upper bits are this design's choices.
// Timing: an event written in hclk period n appears on ev in period n+1.
module ext_interface #(
  parameter int unsigned EV_W = 105,
  parameter int unsigned TS_W = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 hclk_en,
  // external source side
  input  logic                 ext_write,
  input  logic [TS_W+EV_W-1:0] ext_din,
  output logic                 avail,
  // HLC side
  output logic [EV_W-1:0]      ev,
  output logic                 valid_ev,
  output logic [TS_W-1:0]      ext_ts,
  output logic                 valid_ext_ts
);
  logic [TS_W+EV_W-1:0] din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      avail <= 1'b0;
      din   <= '0;
    end else if (ext_write && !avail) begin
      avail <= 1'b1;
      din   <= ext_din;
    end else if (hclk_en && avail) begin
      avail <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev       <= '0;
      ext_ts   <= '0;
      valid_ev <= 1'b0;
    end else if (hclk_en) begin
      ev       <= avail ? din[EV_W-1:0] : '0;
      ext_ts   <= avail ? din[TS_W+EV_W-1:EV_W] : '0;
      valid_ev <= avail;
    end
  end

  assign valid_ext_ts = valid_ev;
endmodule
