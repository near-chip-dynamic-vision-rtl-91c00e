// tb_uart_tx: sends random bytes with random gaps and decodes the line by
// sampling in the middle of each bit; checks start bit, data bits (LSB
// first), stop bit, the bit period of round(CLK_HZ/BAUD) cycles and the
// idle-high line.
//
// A fast clock ratio (9 cycles per bit) keeps the run short; 8N1 framing is
// this design's choice, the 115200 bps default the filter's.
module tb_uart_tx;
  localparam int CLK_HZ = 1_000_000, BAUD = 115_200;
  localparam int DIV = (CLK_HZ + BAUD / 2) / BAUD;   // 9
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, tx;
  logic [7:0] in_byte;
  int checks = 0, failures = 0;
  logic [7:0] sent_q[$];

  uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver: samples in the middle of each bit, times the whole frame
  int nrx = 0, cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    @(posedge rst_n);
    forever begin
      logic [7:0] d;
      int t0;
      @(negedge tx);
      #1 t0 = cyc;
      repeat (DIV / 2) @(posedge clk);
      #1 check(tx == 0, "start bit");
      for (int b = 0; b < 8; b++) begin
        repeat (DIV) @(posedge clk);
        #1 d[b] = tx;
      end
      repeat (DIV) @(posedge clk);
      #1 check(tx == 1, "stop bit");
      if (sent_q.size() == 0) check(0, "unexpected byte");
      else check(d == sent_q.pop_front(), "data byte");
      while (!dut.in_ready) begin @(posedge clk); #1; end
      check(cyc - t0 == 10 * DIV, $sformatf("frame of %0d cycles", cyc - t0));
      nrx++;
    end
  end

  initial begin
    in_valid = 0; in_byte = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int k = 0; k < 60; k++) begin
      repeat ($urandom_range(0, 3) * DIV) @(posedge clk);
      #1;
      in_valid = 1; in_byte = 8'($urandom);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      sent_q.push_back(in_byte);
      #1 in_valid = 0;
    end
    wait (nrx == 60);
    repeat (20) @(posedge clk);
    check(tx == 1, "idle high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
