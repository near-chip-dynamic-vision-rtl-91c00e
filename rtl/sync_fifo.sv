// sync_fifo: single-clock first-in first-out queue with valid/ready ports.
//
// Used as the 256-entry G-AER packet FIFO at the filter input, which absorbs
// bursts from the sensor, and as the per-channel packet buffer behind each
// Huffman coder. Storage is a plain array (a block RAM on an FPGA) addressed
// by wrapping read and write pointers; an extra count register gives full and
// empty. The head entry is presented combinationally from the array, so a
// write is visible at the output one cycle later. A push when full or a pop
// when empty is ignored; the assertions below flag either as a protocol error
// of the surrounding logic. Depth and width are parameters; the input FIFO's
// depth of 256 is the filter's figure, everything else is this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  wire push = in_valid  && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    32'(count) <= DEPTH);
endmodule
