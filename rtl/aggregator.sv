// aggregator: temporal OR-aggregation of one coincidence channel.
//
// The coincidence pixels of successive tau windows are ORed into a frame
// memory until the frame holds enough events, which normalises the thickness
// of moving edges before subsampling. The frame memory uses a block layout:
// word b holds the 8x8 pixel block b = (row/8)*(W/8) + col/8, byte lane row%8,
// bit col%8, so one read returns a whole max-pooling area.
//
// Each incoming row segment is merged by a read-modify-write (read in one
// cycle, write in the next, with forwarding when two consecutive segments hit
// the same block). The event counter adds the pixels that become newly set, so
// it equals the number of active pixels in the aggregated frame. A window
// counter advances at every WBEGIN beat. After every WEND beat the frame is
// judged: if the event counter is above THRESH, or the other channel's is
// (peer_over), and the output path is free (out_free), the frame is streamed
// out word by word to the subsampler and cleared as it is read; otherwise,
// once MAX_WINDOWS windows have been
// aggregated, the frame is cleared without output. After a frame is sent, the
// next one may not be sent before REFRACTORY windows have started (0: no
// refractory period). Sending and clearing take (H/8)*(W/8) cycles (2,400),
// during which in_ready is low; after reset the memory is cleared the same way.
//
// CH selects the channel this instance takes from the shared beats
// (0 vertical, 1 horizontal). over is high while this frame is above the
// threshold; in the filter the two instances exchange it through peer_over,
// so that both channels of a packet show the same time span (they see the
// same beats and so reach the judgement in the same cycle). in_valid/in_ready/in_beat is the coincidence
// stream; blk_* streams the frame words with blk_last on the final one.
//
// From the filter description: the duplicated aggregator, the OR over
// windows, the block memory layout, the event and window counters, the
// threshold of 1000 events, the 5-window limit and the refractory idea. This
// design's own: counting newly set pixels as "events", the strict "above"
// comparison, holding a frame while the output path is busy, sending both
// channels when either is above the threshold, and the timing.
module aggregator
  import dvs_pkg::*;
#(
  parameter int unsigned H           = 320,
  parameter int unsigned W           = 480,
  parameter int unsigned CH          = 0,
  parameter int unsigned THRESH      = 1000,
  parameter int unsigned MAX_WINDOWS = 5,
  parameter int unsigned REFRACTORY  = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  coin_beat_t  in_beat,
  input  logic        out_free,
  input  logic        peer_over,      // the other channel is above THRESH
  output logic        over,           // this channel is above THRESH
  output logic        blk_valid,
  input  logic        blk_ready,
  output logic [63:0] blk_word,
  output logic        blk_last,
  output logic        frame_sent,     // one cycle when a frame starts streaming
  output logic        frame_dropped,  // one cycle when a frame is cleared unsent
  output logic [$clog2(H*W+1)-1:0] event_count
);
  localparam int unsigned WG  = W / 8;
  localparam int unsigned NB  = (H / 8) * WG;
  localparam int unsigned AW  = $clog2(NB);
  localparam int unsigned CW  = $clog2(H*W+1);
  localparam int unsigned WW  = $clog2(MAX_WINDOWS + 1);
  localparam int unsigned RW  = $clog2(REFRACTORY + 2);
  localparam int unsigned FD  = 4;

  typedef enum logic [2:0] {S_INIT, S_ACC, S_EVAL, S_SCAN, S_DRAIN} state_e;
  state_e state;

  logic [63:0] mem [NB];
  logic [AW-1:0] rd_addr, wr_addr;
  logic          rd_en,   wr_en;
  logic [63:0]   rd_data, wr_data;

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  // ----------------------------------------------------------- accumulation
  logic [7:0]    in_mask;
  logic [AW-1:0] in_addr;
  assign in_mask = (CH == 0) ? in_beat.mask_v : in_beat.mask_h;
  assign in_addr = AW'(32'(in_beat.row[X_W-1:3]) * WG + 32'(in_beat.cg));

  assign in_ready = (state == S_ACC);
  wire fire     = in_valid && in_ready;
  wire pix_fire = fire && in_beat.kind == BEAT_PIX && in_mask != '0;

  logic          s2_valid;
  logic [AW-1:0] s2_addr;
  logic [2:0]    s2_lane;
  logic [7:0]    s2_mask;
  logic          lw_valid;       // last written word, for forwarding
  logic [AW-1:0] lw_addr;
  logic [63:0]   lw_data;
  logic [63:0]   old_word, new_word;
  logic [7:0]    old_byte, fresh;

  assign old_word = (lw_valid && lw_addr == s2_addr) ? lw_data : rd_data;
  assign old_byte = old_word[8*s2_lane +: 8];
  assign fresh    = s2_mask & ~old_byte;
  always_comb begin
    new_word = old_word;
    new_word[8*s2_lane +: 8] = old_byte | s2_mask;
  end

  // --------------------------------------------------------------- scanning
  logic [AW-1:0] scan_addr;
  logic          scan_emit;      // send (1) or only clear (0)
  logic          ret_valid, ret_last;
  logic [$clog2(FD+1)-1:0] q_count;
  logic          q_ready;
  wire scan_issue = (state == S_SCAN) && (!scan_emit || (32'(q_count) + 32'(ret_valid)) < FD);

  always_comb begin
    rd_en   = 1'b0;  rd_addr = in_addr;
    wr_en   = 1'b0;  wr_addr = s2_addr;  wr_data = new_word;
    unique case (state)
      S_INIT: begin
        wr_en = 1'b1; wr_addr = scan_addr; wr_data = '0;
      end
      S_SCAN: begin
        rd_en = scan_issue; rd_addr = scan_addr;
        wr_en = scan_issue; wr_addr = scan_addr; wr_data = '0;
      end
      default: begin
        rd_en = pix_fire;
        wr_en = s2_valid;
      end
    endcase
  end

  // ---------------------------------------------------------------- control
  logic [WW-1:0] win_count;
  logic [RW-1:0] refr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_INIT;
      scan_addr     <= '0;
      scan_emit     <= 1'b0;
      s2_valid      <= 1'b0;
      s2_addr       <= '0;
      s2_lane       <= '0;
      s2_mask       <= '0;
      lw_valid      <= 1'b0;
      lw_addr       <= '0;
      lw_data       <= '0;
      event_count   <= '0;
      win_count     <= '0;
      refr          <= '0;
      ret_valid     <= 1'b0;
      ret_last      <= 1'b0;
      frame_sent    <= 1'b0;
      frame_dropped <= 1'b0;
    end else begin
      frame_sent    <= 1'b0;
      frame_dropped <= 1'b0;
      s2_valid  <= pix_fire;
      s2_addr   <= in_addr;
      s2_lane   <= in_beat.row[2:0];
      s2_mask   <= in_mask;
      lw_valid  <= s2_valid;
      lw_addr   <= s2_addr;
      lw_data   <= new_word;
      ret_valid <= scan_issue && scan_emit;
      ret_last  <= (scan_addr == AW'(NB - 1));
      if (s2_valid) event_count <= event_count + CW'($countones(fresh));

      unique case (state)
        S_INIT: begin
          scan_addr <= scan_addr + 1'b1;
          if (scan_addr == AW'(NB - 1)) begin
            scan_addr <= '0;
            state     <= S_ACC;
          end
        end
        S_ACC: if (fire) begin
          if (in_beat.kind == BEAT_WBEGIN) begin
            if (win_count != WW'(MAX_WINDOWS)) win_count <= win_count + 1'b1;
            if (refr != '0) refr <= refr - 1'b1;
          end
          if (in_beat.kind == BEAT_WEND) state <= S_EVAL;
        end
        S_EVAL: begin
          // the last merge has been written and counted by now
          lw_valid <= 1'b0;
          if ((over || peer_over) && out_free && refr == '0) begin
            state      <= S_SCAN;
            scan_emit  <= 1'b1;
            frame_sent <= 1'b1;
            refr       <= RW'(REFRACTORY);
          end else if (32'(win_count) >= MAX_WINDOWS) begin
            state         <= S_SCAN;
            scan_emit     <= 1'b0;
            frame_dropped <= 1'b1;
          end else begin
            state <= S_ACC;
          end
        end
        S_SCAN: if (scan_issue) begin
          scan_addr <= scan_addr + 1'b1;
          if (scan_addr == AW'(NB - 1)) begin
            scan_addr   <= '0;
            state       <= S_DRAIN;
            event_count <= '0;
            win_count   <= '0;
          end
        end
        S_DRAIN: if (!ret_valid) state <= S_ACC;
        default: state <= S_INIT;
      endcase
    end
  end

  assign over = (32'(event_count) > THRESH);

  // output queue of frame words (the credit check keeps it from overflowing)
  logic [64:0] q_out;
  sync_fifo #(.WIDTH(65), .DEPTH(FD)) u_q (
    .clk, .rst_n,
    .in_valid (ret_valid), .in_ready (q_ready), .in_data ({ret_last, rd_data}),
    .out_valid(blk_valid), .out_ready(blk_ready), .out_data(q_out),
    .count    (q_count)
  );
  assign {blk_last, blk_word} = q_out;

  a_q_room: assert property (@(posedge clk) disable iff (!rst_n) ret_valid |-> q_ready);
  a_no_pix_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    s2_valid |-> (state == S_ACC || state == S_EVAL));
endmodule
