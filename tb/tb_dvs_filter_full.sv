// tb_dvs_filter_full: one complete operation of the filter at full size.
//
// The top is instantiated with every parameter at its default: a 480 x 320
// sensor, a 3 ms window at 50 MHz (150,000 cycles), an event threshold of
// 1000 per channel, a 5-window limit, the 256-entry input FIFO and a
// 115,200 baud UART (434 cycles per bit). After reset the testbench waits
// for a window boundary, sends one scene of edge segments with more than
// 1000 coincidences in each channel as G-AER packets, and decodes the UART
// line. The packet must match, byte for byte, the one the reference model
// (filter_model.svh) builds from the same scene with the built-in
// dictionary. It also checks the window period and that no window overran.
// Roughly two million cycles, most of them spent on the UART.
module tb_dvs_filter_full;
  `include "filter_model.svh"

  localparam int H = 320, W = 480, TAU = 150_000, THRESH = 1000, DIV = 434;

  logic clk = 0, rst_n = 0;
  logic gaer_valid, gaer_ready, cfg_we, uart_txd, window_tick;
  logic [31:0] gaer_data;
  logic [1:0] cfg_ch, frame_sent, frame_dropped;
  logic [7:0] cfg_addr;
  logic [4:0] cfg_len;
  logic [15:0] cfg_code, drop_count, overrun_count, packet_count;
  int checks = 0, failures = 0;

  dvs_filter_top dut (.*);
  always #10 clk = ~clk;  // 50 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ UART side
  byte unsigned exp_q[$];
  int nrx = 0, cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    @(posedge rst_n);
    forever begin
      logic [7:0] d;
      @(negedge uart_txd);
      #1;
      repeat (DIV / 2) @(posedge clk);
      #1 check(uart_txd == 0, "start bit");
      for (int b = 0; b < 8; b++) begin
        repeat (DIV) @(posedge clk);
        #1 d[b] = uart_txd;
      end
      repeat (DIV) @(posedge clk);
      #1 check(uart_txd == 1, "stop bit");
      if (exp_q.size() == 0) check(0, $sformatf("unexpected byte %h", d));
      else begin
        byte unsigned e;
        e = exp_q.pop_front();
        check(d == e, $sformatf("rx byte %0d: %h vs %h", nrx, d, e));
      end
      nrx++;
      while (!dut.u_uart.in_ready) begin @(posedge clk); #1; end
    end
  end

  int n_ticks = 0, last_tick = 0;
  always @(posedge clk) if (rst_n && window_tick) begin
    if (n_ticks > 0) check(cyc - last_tick == TAU, $sformatf("window of %0d cycles", cyc - last_tick));
    n_ticks++;
    last_tick = cyc;
  end

  // -------------------------------------------------------------- stimulus
  int tlen[256], tcode[256];

  initial begin
    pix_t s[$];
    bit fv[], fh[];
    logic [31:0] pk[$];
    bytes_t p;
    int nv, nh, t0;
    gaer_valid = 0; gaer_data = '0;
    cfg_we = 0; cfg_ch = 0; cfg_addr = 0; cfg_len = 0; cfg_code = 0;
    default_table(tlen, tcode);
    forever begin
      scene(H, W, 200, 30, s);
      coincide(s, H, W, fv, fh);
      nv = popcount(fv); nh = popcount(fh);
      if (nv > THRESH + 20 && nh > THRESH + 20) break;
    end
    p = packet(huffman(pool_bytes(fh, H, W), tlen, tcode),
               huffman(pool_bytes(fv, H, W), tlen, tcode));
    gaer_packets(s, H, W, pk);
    $display("scene: %0d events, %0d G-AER packets, coincidences v=%0d h=%0d, packet %0d bytes",
             s.size(), pk.size(), nv, nh, p.size());
    exp_q = p;

    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    @(posedge clk iff window_tick);
    #1;
    foreach (pk[i]) begin
      gaer_valid = 1; gaer_data = pk[i];
      @(posedge clk);
      while (!gaer_ready) @(posedge clk);
      #1;
    end
    gaer_valid = 0;
    t0 = cyc;
    wait (packet_count == 1);
    wait (exp_q.size() == 0);
    $display("packet received %0d cycles after the scene", cyc - t0);
    repeat (20 * DIV) @(posedge clk);

    check(exp_q.size() == 0, $sformatf("%0d bytes not received", exp_q.size()));
    check(nrx == p.size(), $sformatf("%0d bytes received, %0d expected", nrx, p.size()));
    check(packet_count == 1, $sformatf("packets %0d", packet_count));
    check(overrun_count == 0, "no window overrun");
    check(n_ticks >= 2, "window boundaries seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
