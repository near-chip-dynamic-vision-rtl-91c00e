// dvs_filter_top: near-chip event filter for a dynamic vision sensor.
//
// Raw G-AER packets from the sensor go in; compact packets, each holding a
// subsampled, Huffman-coded binary image of recent motion, come out of a
// UART. The pipeline, one instance of each stage unless noted:
//
//   event_parser          256-entry packet FIFO + G-AER decoder -> (x, y, p)
//   coincidence_detector  tau windows in ping-pong memories; same-polarity
//                         AND with the pixel above (vertical channel) and
//                         the pixel to the left (horizontal channel)
//   aggregator       x2   OR over windows until the frame holds more than
//                         THRESH events; cleared unsent after MAX_WINDOWS
//   maxpool_subsampler x2 8x8 max pooling, packed into 8-bit symbols
//   huffman_coder    x2   256-word dictionary, packet buffer
//   packet_arbiter        "SAIC" preamble, both payloads, Fletcher-32
//   uart_tx               8N1 at BAUD
//
// The two aggregators take the coincidence stream together: a beat is
// consumed when both are ready, so they judge their frames in the same
// cycle. Both channels are sent together, when either is above THRESH and
// both coders are free of earlier frames; this keeps the two images of a
// packet from the same windows and ties the frame rate to what the UART can
// carry. Until then frames keep aggregating (and are cleared after
// MAX_WINDOWS). The arbiter sends a packet once both coders hold a frame. cfg_* loads the Huffman dictionaries (cfg_ch bit 0:
// vertical table, bit 1: horizontal table). The status outputs count lost
// sensor packets, stretched windows and sent packets, and pulse at window
// swaps and at frames sent or cleared.
//
// Defaults are the filter's main configuration: a 480 x 320 sensor, tau of
// 3 ms at a 50 MHz clock, 1000 events, 5 windows, 8 x 8 pooling to 60 x 40,
// 115200 bps. Everything listed as a choice in the submodules is this
// design's; the figures and structure are the filter's.
module dvs_filter_top
  import dvs_pkg::*;
#(
  parameter int unsigned H             = 320,
  parameter int unsigned W             = 480,
  parameter int unsigned TAU_CYCLES    = 150_000,
  parameter int unsigned THRESH        = 1000,
  parameter int unsigned MAX_WINDOWS   = 5,
  parameter int unsigned REFRACTORY    = 0,
  parameter int unsigned FIFO_DEPTH    = 256,
  parameter int unsigned PKT_BUF_DEPTH = 1024,
  parameter int unsigned CLK_HZ        = 50_000_000,
  parameter int unsigned BAUD          = 115_200
) (
  input  logic        clk,
  input  logic        rst_n,
  // sensor
  input  logic        gaer_valid,
  output logic        gaer_ready,
  input  logic [31:0] gaer_data,
  // dictionary load
  input  logic        cfg_we,
  input  logic [1:0]  cfg_ch,
  input  logic [7:0]  cfg_addr,
  input  logic [4:0]  cfg_len,
  input  logic [15:0] cfg_code,
  // serial link to the detection module
  output logic        uart_txd,
  // status
  output logic [15:0] drop_count,
  output logic [15:0] overrun_count,
  output logic [15:0] packet_count,
  output logic        window_tick,
  output logic [1:0]  frame_sent,     // {horizontal, vertical}
  output logic [1:0]  frame_dropped
);
  localparam int unsigned LW = $clog2(PKT_BUF_DEPTH + 1);

  event_t     ev;
  logic       ev_valid, ev_ready;
  coin_beat_t beat;
  logic       beat_valid, beat_ready;

  event_parser #(.H(H), .W(W), .FIFO_DEPTH(FIFO_DEPTH)) u_parser (
    .clk, .rst_n,
    .gaer_valid, .gaer_ready, .gaer_data,
    .ev_valid, .ev_ready, .ev,
    .drop_count
  );

  coincidence_detector #(.H(H), .W(W), .TAU_CYCLES(TAU_CYCLES)) u_coin (
    .clk, .rst_n,
    .ev_valid, .ev_ready, .ev,
    .out_valid(beat_valid), .out_ready(beat_ready), .out_beat(beat),
    .window_tick, .overrun_count
  );

  // per channel: 0 vertical, 1 horizontal
  logic          agg_ready [2];
  logic          blk_valid [2], blk_ready [2], blk_last [2];
  logic [63:0]   blk_word  [2];
  logic          sym_valid [2], sym_ready [2], sym_last [2];
  logic [7:0]    sym_data  [2];
  logic          byte_valid[2], byte_pop [2];
  logic [7:0]    byte_data [2];
  logic          frm_ready [2], coder_busy[2];
  logic [LW-1:0] frm_len   [2];
  logic          frame_ack;
  logic          agg_over  [2];

  assign beat_ready = agg_ready[0] && agg_ready[1];

  for (genvar c = 0; c < 2; c++) begin : g_ch

    aggregator #(.H(H), .W(W), .CH(c), .THRESH(THRESH),
                 .MAX_WINDOWS(MAX_WINDOWS), .REFRACTORY(REFRACTORY)) u_agg (
      .clk, .rst_n,
      .in_valid (beat_valid && beat_ready), .in_ready(agg_ready[c]), .in_beat(beat),
      .out_free (!coder_busy[0] && !coder_busy[1]),
      .peer_over(agg_over[1-c]), .over(agg_over[c]),
      .blk_valid(blk_valid[c]), .blk_ready(blk_ready[c]),
      .blk_word (blk_word[c]),  .blk_last (blk_last[c]),
      .frame_sent(frame_sent[c]), .frame_dropped(frame_dropped[c]),
      .event_count()
    );

    maxpool_subsampler u_pool (
      .clk, .rst_n,
      .blk_valid(blk_valid[c]), .blk_ready(blk_ready[c]),
      .blk_word (blk_word[c]),  .blk_last (blk_last[c]),
      .sym_valid(sym_valid[c]), .sym_ready(sym_ready[c]),
      .sym_data (sym_data[c]),  .sym_last (sym_last[c])
    );

    huffman_coder #(.BUF_DEPTH(PKT_BUF_DEPTH)) u_huff (
      .clk, .rst_n,
      .cfg_we (cfg_we && cfg_ch[c]), .cfg_addr, .cfg_len, .cfg_code,
      .sym_valid(sym_valid[c]), .sym_ready(sym_ready[c]),
      .sym_data (sym_data[c]),  .sym_last (sym_last[c]),
      .byte_valid(byte_valid[c]), .byte_ready(byte_pop[c]), .byte_data(byte_data[c]),
      .frame_ready(frm_ready[c]), .frame_len(frm_len[c]), .frame_ack,
      .busy(coder_busy[c])
    );
  end

  logic       tx_valid, tx_ready;
  logic [7:0] tx_byte;

  packet_arbiter #(.LW(LW)) u_arb (
    .clk, .rst_n,
    .h_ready_frame(frm_ready[1]), .h_len(frm_len[1]),
    .h_valid(byte_valid[1]), .h_pop(byte_pop[1]), .h_byte(byte_data[1]),
    .v_ready_frame(frm_ready[0]), .v_len(frm_len[0]),
    .v_valid(byte_valid[0]), .v_pop(byte_pop[0]), .v_byte(byte_data[0]),
    .frame_ack,
    .out_valid(tx_valid), .out_ready(tx_ready), .out_byte(tx_byte),
    .sending(), .packet_count
  );

  uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_uart (
    .clk, .rst_n,
    .in_valid(tx_valid), .in_ready(tx_ready), .in_byte(tx_byte),
    .tx(uart_txd)
  );
endmodule
