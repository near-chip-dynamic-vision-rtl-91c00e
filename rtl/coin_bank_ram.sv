// coin_bank_ram: one window memory of the coincidence detector.
//
// DEPTH words of 16 bits; a word holds 8 neighbouring pixels of one row, bits
// [7:0] for ON events and [15:8] for OFF events, so the memory stores 2 bits
// per pixel. One port, used in one of two ways each cycle: set a single bit
// (an event arriving while the bank collects), or read a word and clear it in
// the same cycle (read-first), which is how a bank is read out and left
// cleared for its next collection. Read data appear one cycle after rd_en.
// A set writes one bit of the word (a bit-enabled write), so it needs no
// read. rd_en has priority; the detector never asks for both at once in a
// bank, since a bank either collects or is read out.
//
// Two such memories of 480 x 320 x 2 bits, used in turn, are the filter's;
// the 16-bit word, the bit order and the read-and-clear port are this
// design's choices.
module coin_bank_ram #(
  parameter int unsigned DEPTH = 19200
) (
  input  logic                     clk,
  input  logic                     set_en,
  input  logic [$clog2(DEPTH)-1:0] set_addr,
  input  logic [3:0]               set_bit,
  input  logic                     rd_en,      // read and clear; wins over set_en
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [15:0]              rd_data
);
  logic [15:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_data       <= mem[rd_addr];
      mem[rd_addr]  <= '0;
    end else if (set_en) begin
      mem[set_addr][set_bit] <= 1'b1;
    end
  end
endmodule
