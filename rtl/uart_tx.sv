// uart_tx: asynchronous serial transmitter, 8 data bits, no parity, 1 stop bit.
//
// A byte accepted on in_valid/in_ready is sent least significant bit first
// between a low start bit and a high stop bit; each bit lasts
// round(CLK_HZ/BAUD) clock cycles (434 at 50 MHz and 115200 baud), so a byte
// takes 10 bit times. The line idles high. in_ready is high only while the
// transmitter is idle.
//
// The serial link to the detection module and its 115200 bps rate are the
// filter's; the frame format 8N1 is this design's assumption.
module uart_tx #(
  parameter int unsigned CLK_HZ = 50_000_000,
  parameter int unsigned BAUD   = 115_200
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  logic [7:0] in_byte,
  output logic       tx
);
  localparam int unsigned DIV = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned CW  = $clog2(DIV);

  logic [9:0]    shreg;     // {stop, data[7:0], start}, sent from bit 0
  logic [3:0]    bits_left;
  logic [CW-1:0] cnt;

  assign in_ready = (bits_left == '0);
  assign tx       = (bits_left == '0) ? 1'b1 : shreg[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg     <= '1;
      bits_left <= '0;
      cnt       <= '0;
    end else if (bits_left == '0) begin
      if (in_valid) begin
        shreg     <= {1'b1, in_byte, 1'b0};
        bits_left <= 4'd10;
        cnt       <= '0;
      end
    end else if (cnt == CW'(DIV - 1)) begin
      cnt       <= '0;
      shreg     <= {1'b1, shreg[9:1]};
      bits_left <= bits_left - 1'b1;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end
endmodule
