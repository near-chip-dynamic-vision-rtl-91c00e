// maxpool_subsampler: 8x8 max pooling of an aggregated frame into symbols.
//
// The aggregator streams its frame as block-layout words, one 8x8 pixel area
// per 64-bit word, in raster order of the pooled image (60 x 40 at full size).
// Max pooling of binary pixels is a single comparison of the word with zero.
// The pooled bits are packed, first bit in bit 0, into bytes, the 8-bit
// symbols of the Huffman coder; the byte holding the last pooled pixel is
// marked sym_last and zero-padded if the pooled frame is not a multiple of 8
// bits. One word is taken per cycle unless the output is held.
//
// The compare-with-zero pooling on a block memory layout is the filter's;
// the bit order and byte packing are this design's choice.
module maxpool_subsampler (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        blk_valid,
  output logic        blk_ready,
  input  logic [63:0] blk_word,
  input  logic        blk_last,
  output logic        sym_valid,
  input  logic        sym_ready,
  output logic [7:0]  sym_data,
  output logic        sym_last
);
  logic [7:0] acc, next_acc;
  logic [2:0] n;

  assign blk_ready = !sym_valid || sym_ready;
  wire take = blk_valid && blk_ready;

  always_comb begin
    next_acc = acc;
    next_acc[n] = (blk_word != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      n         <= '0;
      sym_valid <= 1'b0;
      sym_data  <= '0;
      sym_last  <= 1'b0;
    end else begin
      if (sym_valid && sym_ready) sym_valid <= 1'b0;
      if (take) begin
        if (n == 3'd7 || blk_last) begin
          sym_valid <= 1'b1;
          sym_data  <= next_acc;
          sym_last  <= blk_last;
          acc       <= '0;
          n         <= '0;
        end else begin
          acc <= next_acc;
          n   <= n + 1'b1;
        end
      end
    end
  end
endmodule
