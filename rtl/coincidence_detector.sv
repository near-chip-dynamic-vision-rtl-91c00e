// coincidence_detector: time-window binning and neighbour coincidence filter.
//
// Events are binned into windows of TAU_CYCLES clock cycles (3 ms at 50 MHz).
// Two window memories work as a ping-pong pair: while one collects the events
// of the current window (a bit set per event, 2 bits per pixel, one per
// polarity), the other holds the previous window and is read out row by row,
// 8 pixels per word, and cleared as it is read. During readout a line buffer
// keeps the previous row, so each pixel can be ANDed with the pixel above it
// (vertical channel) and, through a one-pixel carry, with the pixel to its
// left (horizontal channel). A coincidence needs the same polarity in both
// pixels; the result is marked on the lower / right pixel of the pair and the
// two polarities are ORed into one bit per pixel and channel. Only row
// segments with at least one coincidence in either channel are sent on,
// framed by a WBEGIN beat before and a WEND beat after each window.
//
// Interface: ev_* takes events (always ready once the memories are cleared
// after reset, which takes H*W/8 cycles); out_* is a valid/ready stream of
// dvs_pkg::coin_beat_t shared by the two aggregators. A readout takes about
// H*W/8 cycles (19,200 at 320 x 480) plus any stall from out_ready. If a
// window ends before the previous readout finished, the swap waits and the
// window is stretched; overrun_count counts such cases.
//
// The two memories, the readout-while-collecting scheme, the 480-pixel line
// buffer, the same-polarity AND and the two output channels follow the filter
// description. The word width of 8 pixels, which pixel of a pair is marked,
// the edge handling (pixels outside the array count as inactive) and the
// beat format are this design's choices.
module coincidence_detector
  import dvs_pkg::*;
#(
  parameter int unsigned H          = 320,
  parameter int unsigned W          = 480,
  parameter int unsigned TAU_CYCLES = 150_000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ev_valid,
  output logic       ev_ready,
  input  event_t     ev,
  output logic       out_valid,
  input  logic       out_ready,
  output coin_beat_t out_beat,
  output logic       window_tick,     // one cycle at each window swap
  output logic [15:0] overrun_count
);
  localparam int unsigned WG    = W / 8;
  localparam int unsigned DEPTH = H * WG;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned TW    = $clog2(TAU_CYCLES + 1);
  localparam int unsigned FDEPTH = 4;

  // ---------------------------------------------------------------- control
  typedef enum logic [2:0] {S_INIT, S_IDLE, S_BEGIN, S_WORDS, S_END} state_e;
  state_e state;

  logic          cbank;          // bank collecting events
  logic [AW-1:0] init_addr;
  logic [TW-1:0] timer;
  logic [X_W-1:0]  rd_row;
  logic [CG_W-1:0] rd_cg;
  logic [AW-1:0]   rd_addr;

  // output queue
  logic       q_in_valid, q_in_ready;
  coin_beat_t q_in;
  logic [$clog2(FDEPTH+1)-1:0] q_count;

  // data-return stage
  logic            ret_valid;
  logic [X_W-1:0]  ret_row;
  logic [CG_W-1:0] ret_cg;

  wire timer_done = (timer == TW'(TAU_CYCLES - 1));
  wire busy_rd    = (state == S_BEGIN) || (state == S_WORDS) || (state == S_END);
  wire swap       = (state != S_INIT) && timer_done && !busy_rd;
  wire issue      = (state == S_WORDS) && ((32'(q_count) + 32'(ret_valid)) < FDEPTH);
  wire last_word  = (rd_row == X_W'(H - 1)) && (rd_cg == CG_W'(WG - 1));

  assign ev_ready    = (state != S_INIT);
  assign window_tick = swap;

  // ---------------------------------------------------------------- memories
  logic        set_en   [2];
  logic        rd_en    [2];
  logic [AW-1:0] rd_a   [2];
  logic [15:0] rd_data  [2];
  logic [AW-1:0] ev_addr;
  logic [3:0]    ev_bit;

  assign ev_addr = AW'(32'(ev.x) * WG + 32'(ev.y[Y_W-1:3]));
  assign ev_bit  = {ev.p[1], ev.y[2:0]};

  for (genvar b = 0; b < 2; b++) begin : g_bank
    assign set_en[b] = ev_valid && ev_ready && (cbank == 1'(b));
    assign rd_en[b]  = (state == S_INIT) || (issue && (cbank != 1'(b)));
    assign rd_a[b]   = (state == S_INIT) ? init_addr : rd_addr;
    coin_bank_ram #(.DEPTH(DEPTH)) u_ram (
      .clk,
      .set_en(set_en[b]), .set_addr(ev_addr), .set_bit(ev_bit),
      .rd_en (rd_en[b]),  .rd_addr (rd_a[b]), .rd_data(rd_data[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_INIT;
      cbank         <= 1'b0;
      init_addr     <= '0;
      timer         <= '0;
      rd_row        <= '0;
      rd_cg         <= '0;
      rd_addr       <= '0;
      overrun_count <= '0;
    end else begin
      // window timer: saturates at the end of a window until the swap
      if (state != S_INIT && !timer_done) timer <= timer + 1'b1;
      if (swap) begin
        timer <= '0;
        cbank <= ~cbank;
      end
      unique case (state)
        S_INIT: begin
          init_addr <= init_addr + 1'b1;
          if (init_addr == AW'(DEPTH - 1)) state <= S_IDLE;
        end
        S_IDLE: if (swap) state <= S_BEGIN;
        S_BEGIN: if (q_in_valid && q_in_ready) begin
          state   <= S_WORDS;
          rd_row  <= '0;
          rd_cg   <= '0;
          rd_addr <= '0;
        end
        S_WORDS: if (issue) begin
          rd_addr <= rd_addr + 1'b1;
          if (rd_cg == CG_W'(WG - 1)) begin
            rd_cg  <= '0;
            rd_row <= rd_row + 1'b1;
          end else begin
            rd_cg <= rd_cg + 1'b1;
          end
          if (last_word) state <= S_END;
        end
        S_END: if (!ret_valid && q_in_ready) begin
          state <= S_IDLE;
          if (timer_done && overrun_count != '1) overrun_count <= overrun_count + 1'b1;
        end
        default: state <= S_INIT;
      endcase
    end
  end

  // ---------------------------------------------------------------- readout
  logic        ret_bank;
  logic [15:0] cur, up;
  logic [1:0]  carry;               // {off, on} of the pixel left of the word
  logic [15:0] line_buf [WG];       // previous row, 2 bits per pixel
  logic [7:0]  mask_v, mask_h, left_on, left_off;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ret_valid <= 1'b0;
      ret_row   <= '0;
      ret_cg    <= '0;
      ret_bank  <= 1'b0;
    end else begin
      ret_valid <= issue;
      ret_row   <= rd_row;
      ret_cg    <= rd_cg;
      ret_bank  <= ~cbank;
    end
  end

  assign cur      = rd_data[ret_bank];
  assign up       = (ret_row == '0) ? '0 : line_buf[ret_cg];
  assign left_on  = {cur[6:0],  (ret_cg == '0) ? 1'b0 : carry[0]};
  assign left_off = {cur[14:8], (ret_cg == '0) ? 1'b0 : carry[1]};
  assign mask_v   = (cur[7:0] & up[7:0]) | (cur[15:8] & up[15:8]);
  assign mask_h   = (cur[7:0] & left_on) | (cur[15:8] & left_off);

  always_ff @(posedge clk) begin
    if (ret_valid) begin
      line_buf[ret_cg] <= cur;
      carry            <= {cur[15], cur[7]};
    end
  end

  always_comb begin
    q_in       = '0;
    q_in_valid = 1'b0;
    if (ret_valid) begin
      q_in_valid  = (mask_v != '0) || (mask_h != '0);
      q_in.kind   = BEAT_PIX;
      q_in.row    = ret_row;
      q_in.cg     = ret_cg;
      q_in.mask_v = mask_v;
      q_in.mask_h = mask_h;
    end else if (state == S_BEGIN) begin
      q_in_valid = 1'b1;
      q_in.kind  = BEAT_WBEGIN;
    end else if (state == S_END) begin
      q_in_valid = 1'b1;
      q_in.kind  = BEAT_WEND;
    end
  end

  sync_fifo #(.WIDTH($bits(coin_beat_t)), .DEPTH(FDEPTH)) u_q (
    .clk, .rst_n,
    .in_valid (q_in_valid), .in_ready (q_in_ready), .in_data (q_in),
    .out_valid(out_valid),  .out_ready(out_ready),  .out_data(out_beat),
    .count    (q_count)
  );

  // the credit check above guarantees room for every returned word
  a_no_drop: assert property (@(posedge clk) disable iff (!rst_n)
    (ret_valid && q_in_valid) |-> q_in_ready);
endmodule
