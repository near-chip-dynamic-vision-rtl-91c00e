// event_parser: front end of the filter, from sensor packets to (x, y, p).
//
// A 256-entry FIFO of 32-bit G-AER packets takes the sensor's bursts; the
// G-AER decoder behind it turns each packet into events, one per cycle. The
// sensor side has a ready signal, but a DVS cannot be held off, so a packet
// offered while the FIFO is full is lost; such losses are counted in
// drop_count (saturating) so that an overload is visible. The FIFO depth and
// the FIFO-plus-LUT-decoder structure follow the filter description; the drop
// policy and counter are this design's own.
module event_parser
  import dvs_pkg::*;
#(
  parameter int unsigned H          = 320,
  parameter int unsigned W          = 480,
  parameter int unsigned FIFO_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        gaer_valid,
  output logic        gaer_ready,
  input  logic [31:0] gaer_data,
  output logic        ev_valid,
  input  logic        ev_ready,
  output event_t      ev,
  output logic [15:0] drop_count
);
  logic        f_valid, f_ready;
  logic [31:0] f_data;

  sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (gaer_valid), .in_ready (gaer_ready), .in_data (gaer_data),
    .out_valid(f_valid),    .out_ready(f_ready),    .out_data(f_data),
    .count    ()
  );

  gaer_decoder #(.H(H), .W(W)) u_dec (
    .clk, .rst_n,
    .in_valid (f_valid), .in_ready (f_ready), .in_data (f_data),
    .out_valid(ev_valid), .out_ready(ev_ready), .out_event(ev)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) drop_count <= '0;
    else if (gaer_valid && !gaer_ready && drop_count != '1) drop_count <= drop_count + 1'b1;
  end
endmodule
