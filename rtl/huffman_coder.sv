// huffman_coder: dictionary-based variable-length coding of one channel.
//
// Each 8-bit symbol of the pooled frame is looked up in a 256-word code table
// holding {length, codeword}; the packet splicer appends the codeword, most
// significant bit first, to a bit accumulator and moves whole bytes into the
// packet buffer, a byte FIFO. After the symbol marked last, the final partial
// byte is padded with zero bits, the frame's byte count is latched in
// frame_len and frame_ready is raised until the arbiter, having read the
// frame out of the buffer, pulses frame_ack. busy covers a frame from its
// first symbol to that acknowledge, and tells the aggregator whether a new
// frame may be sent.
//
// The dictionary is precomputed off-line from the statistics of the data and
// written through the cfg_* port. Codewords are 1 to 16 bits long. After
// reset the table is filled (256 cycles, sym_ready low) with a fixed prefix
// code so that the coder works before a dictionary is loaded: symbol 0x00, an
// empty row of eight pooled pixels and by far the most frequent symbol, is
// coded as the single bit 0, every other symbol s as 1 followed by the 8 bits
// of s. A byte moves to the buffer in the same cycle as a codeword is added,
// so one symbol is taken per cycle while codewords are at most 8 bits.
//
// The 256-word table in block memory and the lookup over the pooled frame
// follow the filter description; the code lengths, the default table, the
// bit order, the padding and the frame handshake are this design's own.
module huffman_coder #(
  parameter int unsigned BUF_DEPTH = 1024  // packet buffer, bytes
) (
  input  logic        clk,
  input  logic        rst_n,
  // dictionary load
  input  logic        cfg_we,
  input  logic [7:0]  cfg_addr,
  input  logic [4:0]  cfg_len,     // 1..16
  input  logic [15:0] cfg_code,    // right-aligned codeword
  // symbols from the subsampler
  input  logic        sym_valid,
  output logic        sym_ready,
  input  logic [7:0]  sym_data,
  input  logic        sym_last,
  // packet buffer read side
  output logic        byte_valid,
  input  logic        byte_ready,
  output logic [7:0]  byte_data,
  output logic        frame_ready,
  output logic [$clog2(BUF_DEPTH+1)-1:0] frame_len,
  input  logic        frame_ack,
  output logic        busy
);
  localparam int unsigned LW = $clog2(BUF_DEPTH + 1);

  // ------------------------------------------------------------ code table
  logic [20:0] table_mem [256];
  logic [8:0]  init_idx;
  logic        init_done;
  logic [20:0] tab_q;

  always_ff @(posedge clk) begin
    if (!init_done)
      table_mem[init_idx[7:0]] <= (init_idx[7:0] == 8'h00) ? {5'd1, 16'h0000}
                                                           : {5'd9, 7'd0, 1'b1, init_idx[7:0]};
    else if (cfg_we)
      table_mem[cfg_addr] <= {cfg_len, cfg_code};
  end
  always_ff @(posedge clk) begin
    if (sym_valid && sym_ready) tab_q <= table_mem[sym_data];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_idx  <= '0;
      init_done <= 1'b0;
    end else if (!init_done) begin
      init_idx <= init_idx + 1'b1;
      if (init_idx == 9'd255) init_done <= 1'b1;
    end
  end

  // -------------------------------------------------------------- splicer
  logic        s_valid, s_last;     // looked-up code waiting for the splicer
  logic [22:0] acc;
  logic [4:0]  nbits;
  logic        pad_pending;
  logic        f_ready;
  logic        push;
  logic [7:0]  push_byte;
  logic [LW-1:0] len_cnt;

  wire [4:0]  code_len = tab_q[20:16];
  wire [15:0] code     = tab_q[15:0];
  // a code is taken when at most 7 bits stay behind after this cycle's push
  wire        s_take   = s_valid && !pad_pending &&
                         (nbits < 5'd8 || (nbits < 5'd16 && f_ready));

  assign sym_ready = init_done && !frame_ready && !pad_pending && (!s_valid || s_take);

  always_comb begin
    push      = 1'b0;
    push_byte = 8'(acc >> (nbits - 5'd8));
    if (nbits >= 5'd8) begin
      push = 1'b1;
    end else if (pad_pending && nbits != '0) begin
      push      = 1'b1;
      push_byte = 8'(acc << (5'd8 - nbits));
    end
  end
  wire pushed = push && f_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid     <= 1'b0;
      s_last      <= 1'b0;
      acc         <= '0;
      nbits       <= '0;
      pad_pending <= 1'b0;
      frame_ready <= 1'b0;
      frame_len   <= '0;
      len_cnt     <= '0;
      busy        <= 1'b0;
    end else begin
      if (sym_valid && sym_ready) begin
        s_valid <= 1'b1;
        s_last  <= sym_last;
        busy    <= 1'b1;
      end else if (s_take) begin
        s_valid <= 1'b0;
      end

      if (pushed) len_cnt <= len_cnt + 1'b1;
      if (s_take) begin
        acc   <= 23'((acc << code_len) | 23'(code));
        nbits <= (pushed ? nbits - 5'd8 : nbits) + code_len;
        if (s_last) pad_pending <= 1'b1;
      end else if (pushed) begin
        nbits <= (nbits >= 5'd8) ? nbits - 5'd8 : 5'd0;
      end else if (pad_pending && nbits == '0) begin
        pad_pending <= 1'b0;
        frame_ready <= 1'b1;
        frame_len   <= len_cnt;
        len_cnt     <= '0;
      end

      if (frame_ack) begin
        frame_ready <= 1'b0;
        busy        <= 1'b0;
      end
    end
  end

  sync_fifo #(.WIDTH(8), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .in_valid (push),       .in_ready (f_ready),    .in_data (push_byte),
    .out_valid(byte_valid), .out_ready(byte_ready), .out_data(byte_data),
    .count    ()
  );

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> f_ready);
  a_len_range: assert property (@(posedge clk) disable iff (!rst_n)
    s_take |-> (code_len >= 5'd1 && code_len <= 5'd16));
endmodule
