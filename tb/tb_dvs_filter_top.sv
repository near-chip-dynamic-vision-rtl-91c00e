// tb_dvs_filter_top: end-to-end test of the filter at a reduced size.
//
// A 32 x 64 sensor, tau = 3000 cycles, threshold 30, 5-window limit, a
// 16-entry input FIFO and a UART of 32 cycles per bit. Scenes of edge
// segments are sent as G-AER packets inside one window; the UART line is
// decoded and compared byte for byte with packets built by the reference
// model (filter_model.svh). The sequence makes each mechanism happen:
//   A, B   scenes in consecutive windows: A is sent, B is held while the
//          coders are busy with A and sent later
//   S      a sparse scene below the threshold: cleared after 5 windows,
//          and the next packet (C) must not contain it
//   burst  40 copies of one group packet offered regardless of ready: the
//          input FIFO overflows and drops are counted; too few
//          coincidences, so that frame is cleared too
//   E      two halves in consecutive windows, each below the threshold:
//          aggregated over both windows and sent after the second
//   F      vertical edges only: the vertical channel is above the threshold,
//          the horizontal one is not, and both are sent together
//   table  a different dictionary is loaded; scene D is coded with it
// Each mechanism is counted and must occur at least once.
module tb_dvs_filter_top;
  `include "filter_model.svh"

  localparam int H = 32, W = 64, TAU = 3000, THRESH = 30, MAXW = 5;
  localparam int BAUD = 115_200, CLK_HZ = 32 * BAUD, DIV = 32;

  logic clk = 0, rst_n = 0;
  logic gaer_valid, gaer_ready, cfg_we, uart_txd, window_tick;
  logic [31:0] gaer_data;
  logic [1:0] cfg_ch, frame_sent, frame_dropped;
  logic [7:0] cfg_addr;
  logic [4:0] cfg_len;
  logic [15:0] cfg_code, drop_count, overrun_count, packet_count;
  int checks = 0, failures = 0;

  dvs_filter_top #(.H(H), .W(W), .TAU_CYCLES(TAU), .THRESH(THRESH), .MAX_WINDOWS(MAXW),
                   .REFRACTORY(0), .FIFO_DEPTH(16), .PKT_BUF_DEPTH(64),
                   .CLK_HZ(CLK_HZ), .BAUD(BAUD)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
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

  // ------------------------------------------------------- mechanism counts
  int n_held = 0, n_dropped = 0, n_sent_frames = 0, n_multi = 0, n_peer = 0, n_ticks = 0, last_tick = 0;
  always @(posedge clk) if (rst_n) begin
    if (32'(dut.g_ch[0].u_agg.state) == 2 &&  // S_EVAL
        32'(dut.g_ch[0].u_agg.event_count) > THRESH && dut.coder_busy[0]) n_held++;
    if (frame_dropped[0]) n_dropped++;
    if (frame_sent[0] != frame_sent[1] || frame_dropped[0] != frame_dropped[1])
      check(0, "channels sent or cleared apart");
    if (frame_sent[1] && !dut.agg_over[1]) n_peer++;
    if (frame_sent[0]) begin
      n_sent_frames++;
      if (dut.g_ch[0].u_agg.win_count > 1) n_multi++;
    end
    if (window_tick) begin
      if (n_ticks > 0) check(cyc - last_tick == TAU, $sformatf("window of %0d cycles", cyc - last_tick));
      n_ticks++;
      last_tick = cyc;
    end
  end

  // -------------------------------------------------------------- stimulus
  int tlen[256], tcode[256];

  task automatic send_packets(input logic [31:0] pk[$]);
    foreach (pk[i]) begin
      gaer_valid = 1; gaer_data = pk[i];
      @(posedge clk);
      while (!gaer_ready) @(posedge clk);
      #1;
    end
    gaer_valid = 0;
  endtask

  // make a scene whose coincidences exceed (big) or stay below the threshold
  // in both channels, and return its expected packet
  task automatic make_scene(input bit big, output pix_t s[$], output bytes_t pk);
    bit fv[], fh[];
    forever begin
      if (big) scene(H, W, 24, 12, s); else scene(H, W, 3, 4, s);
      coincide(s, H, W, fv, fh);
      if (big && popcount(fv) > THRESH + 5 && popcount(fh) > THRESH + 5) break;
      if (!big && popcount(fv) < THRESH && popcount(fh) < THRESH) break;
    end
    pk = packet(huffman(pool_bytes(fh, H, W), tlen, tcode),
                huffman(pool_bytes(fv, H, W), tlen, tcode));
  endtask

  task automatic make_split(output pix_t s1[$], output pix_t s2[$], output bytes_t pk);
    bit v1[], h1[], v2[], h2[], fv[], fh[];
    forever begin
      scene(H, W, 10, 10, s1);
      scene(H, W, 10, 10, s2);
      coincide(s1, H, W, v1, h1);
      coincide(s2, H, W, v2, h2);
      fv = new[H * W]; fh = new[H * W];
      foreach (fv[i]) begin fv[i] = v1[i] | v2[i]; fh[i] = h1[i] | h2[i]; end
      if (popcount(v1) < THRESH && popcount(h1) < THRESH && popcount(v2) < THRESH &&
          popcount(h2) < THRESH && popcount(fv) > THRESH + 3 && popcount(fh) > THRESH + 3) break;
    end
    pk = packet(huffman(pool_bytes(fh, H, W), tlen, tcode),
                huffman(pool_bytes(fv, H, W), tlen, tcode));
  endtask

  // vertical segments only: many vertical coincidences, few horizontal ones
  task automatic make_vertical(output pix_t s[$], output bytes_t pk);
    bit fv[], fh[];
    forever begin
      s = {};
      for (int k = 0; k < 12; k++) begin
        int x, y, len, p;
        x = $urandom_range(H - 1); y = $urandom_range(W - 1);
        len = $urandom_range(4, 12); p = $urandom_range(1);
        for (int i = 0; i < len && x + i < H; i++) begin
          pix_t e;
          e.x = x + i; e.y = y; e.pol = p;
          s.push_back(e);
        end
      end
      coincide(s, H, W, fv, fh);
      if (popcount(fv) > THRESH + 5 && popcount(fh) < THRESH) break;
    end
    pk = packet(huffman(pool_bytes(fh, H, W), tlen, tcode),
                huffman(pool_bytes(fv, H, W), tlen, tcode));
  endtask

  task automatic inject_next_window(input pix_t s[$]);
    logic [31:0] pk[$];
    gaer_packets(s, H, W, pk);
    @(posedge clk iff window_tick);
    #1;
    send_packets(pk);
  endtask

  task automatic wait_windows(input int n);
    repeat (n) @(posedge clk iff window_tick);
    #1;
  endtask

  initial begin
    pix_t sa[$], sb[$], ss[$], sc[$], sd[$], se1[$], se2[$], sf[$];
    bytes_t pa, pb, pc, pd, pe, pf, dummy;
    gaer_valid = 0; gaer_data = '0;
    cfg_we = 0; cfg_ch = 0; cfg_addr = 0; cfg_len = 0; cfg_code = 0;
    default_table(tlen, tcode);
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;

    // A and B in consecutive windows
    make_scene(1, sa, pa);
    make_scene(1, sb, pb);
    exp_q = {pa, pb};
    inject_next_window(sa);
    inject_next_window(sb);
    wait (packet_count == 2);
    wait (exp_q.size() == 0);

    // sparse S, cleared after MAXW windows; then C
    make_scene(0, ss, dummy);
    inject_next_window(ss);
    wait_windows(MAXW + 2);
    make_scene(1, sc, pc);
    exp_q = {exp_q, pc};
    inject_next_window(sc);
    wait (packet_count == 3);
    wait_windows(1);

    // overflow burst: one column, 40 copies of one group packet
    @(posedge clk iff window_tick);
    #1;
    gaer_valid = 1; gaer_data = {2'b01, 21'd0, 9'd5};
    @(posedge clk); #1;
    for (int i = 0; i < 40; i++) begin
      gaer_data = {2'b10, 13'd0, 1'b0, 2'b00, 6'd1, 8'hFF};
      @(posedge clk); #1;
    end
    gaer_valid = 0;
    check(drop_count > 0, "input FIFO overflow counted");
    wait_windows(MAXW + 2);

    // E: two halves in consecutive windows, each below the threshold,
    // together above it: sent after the second window
    make_split(se1, se2, pe);
    exp_q = {exp_q, pe};
    inject_next_window(se1);
    inject_next_window(se2);
    wait (packet_count == 4);
    wait (exp_q.size() == 0);

    // F: only the vertical channel is above the threshold
    make_vertical(sf, pf);
    exp_q = {exp_q, pf};
    inject_next_window(sf);
    wait (packet_count == 5);
    wait (exp_q.size() == 0);

    // a different dictionary: 0x00 -> "1", s -> "0" s
    for (int s = 0; s < 256; s++) begin
      tlen[s] = (s == 0) ? 1 : 9;
      tcode[s] = (s == 0) ? 1 : s;
      cfg_we = 1; cfg_ch = 2'b11; cfg_addr = 8'(s); cfg_len = 5'(tlen[s]); cfg_code = 16'(tcode[s]);
      @(posedge clk); #1;
    end
    cfg_we = 0;
    make_scene(1, sd, pd);
    exp_q = {exp_q, pd};
    inject_next_window(sd);
    wait (packet_count == 6);
    wait (exp_q.size() == 0);
    repeat (20 * DIV) @(posedge clk);

    check(exp_q.size() == 0, $sformatf("%0d bytes not received", exp_q.size()));
    check(packet_count == 6, $sformatf("packets %0d", packet_count));
    check(overrun_count == 0, "no window overrun");
    check(n_held >= 1, "frame held while the coder was busy");
    check(n_dropped >= 2, "frames cleared at the window limit");
    check(n_multi >= 2, "frames aggregated over more than one window");
    check(n_sent_frames == 6, "six frames sent per channel");
    check(n_peer >= 1, "a channel below the threshold sent with the other");
    $display("packets=%0d held=%0d dropped=%0d refused=%0d multi_window=%0d paired=%0d windows=%0d",
             packet_count, n_held, n_dropped, drop_count, n_multi, n_peer, n_ticks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
