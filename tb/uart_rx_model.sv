// uart_rx_model: behavioural serial receiver for the testbenches.
//
// Watches an 8N1 line, least significant bit first, with a bit time of DIV
// clock cycles. After reset it waits for a falling edge, samples the start
// bit half a bit later, then each data bit and the stop bit one bit time
// apart (the middle of each bit), and appends the byte to the queue q, which
// the testbench reads hierarchically. A low stop bit sets frame_err. Not
// synthesizable; it has no counterpart in the filter itself.
module uart_rx_model #(
  parameter int DIV = 434
) (
  input  logic clk,
  input  logic rst_n,
  input  logic line,
  output logic frame_err
);
  byte unsigned q[$];

  initial begin
    logic [7:0] d;
    frame_err = 0;
    d = '0;
    wait (rst_n);
    forever begin
      @(negedge line);
      repeat (DIV / 2) @(posedge clk);
      if (line == 1'b0) begin
        for (int b = 0; b < 8; b++) begin
          repeat (DIV) @(posedge clk);
          d[b] = line;
        end
        repeat (DIV) @(posedge clk);
        if (line != 1'b1) frame_err = 1;
        q.push_back(d);
      end
    end
  end
endmodule
