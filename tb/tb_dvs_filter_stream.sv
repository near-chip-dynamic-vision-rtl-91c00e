// tb_dvs_filter_stream: sustained-activity workload on the full-size filter.
//
// Two copies of the top at the default size (480 x 320, 3 ms windows at
// 50 MHz, threshold 1000, 115,200 baud) receive the same G-AER stream: copy 0
// in the main configuration (no refractory period), copy 1 with REFRACTORY =
// 33 windows, i.e. at most one packet per 100 ms. The stream, one scene per
// window, is
//   8 windows   isolated noise only: 600 events per window on a sparse grid
//               (no two noise pixels are neighbours), which the coincidence
//               filter must remove completely, so no packet may appear
//   70 windows  the outline of an object (160 x 80 pixels, two pixels thick,
//               darkening on its left and top edges, brightening on its right
//               and bottom ones) moving sideways by 4 columns per window and
//               bouncing, plus 300 noise events per window kept away from it
//   10 windows  silence, to let the last packets out
// Each copy's serial line is decoded by uart_rx_model and the byte stream is
// parsed packet by packet: preamble, two channels of exactly 300 symbols of
// the built-in prefix code (0x00 -> 0, s -> 1 s), Fletcher-32. Checked: every
// packet is well formed and its checksum matches; no pooled pixel lies
// outside the rows the object occupies (noise removed); copy 0 keeps the UART
// line busy most of the time while the object moves (the packet rate is set
// by the line, not by tau); copy 1's packets are at least 33 windows apart.
// The measured output bandwidths are printed. About 13 million cycles.
module tb_dvs_filter_stream;
  `include "filter_model.svh"

  localparam int H = 320, W = 480, DIV = 434, REFR = 33;
  localparam int NOISE_WIN = 8, OBJ_WIN = 70, TAIL_WIN = 10;
  localparam int OX = 80, OH = 160, OW = 80;  // object rows OX..OX+OH-1

  logic clk = 0, rst_n = 0;
  logic gaer_valid, cfg_we;
  logic [31:0] gaer_data;
  logic [1:0] cfg_ch;
  logic [7:0] cfg_addr;
  logic [4:0] cfg_len;
  logic [15:0] cfg_code;
  logic rdy[2], txd[2], tick[2], ferr[2];
  logic [15:0] drop[2], ovr[2], pkc[2];
  logic [1:0] fs[2], fd[2];
  int checks = 0, failures = 0;

  dvs_filter_top u0 (
    .clk, .rst_n, .gaer_valid, .gaer_ready(rdy[0]), .gaer_data,
    .cfg_we, .cfg_ch, .cfg_addr, .cfg_len, .cfg_code,
    .uart_txd(txd[0]), .drop_count(drop[0]), .overrun_count(ovr[0]), .packet_count(pkc[0]),
    .window_tick(tick[0]), .frame_sent(fs[0]), .frame_dropped(fd[0]));
  dvs_filter_top #(.REFRACTORY(REFR)) u1 (
    .clk, .rst_n, .gaer_valid, .gaer_ready(rdy[1]), .gaer_data,
    .cfg_we, .cfg_ch, .cfg_addr, .cfg_len, .cfg_code,
    .uart_txd(txd[1]), .drop_count(drop[1]), .overrun_count(ovr[1]), .packet_count(pkc[1]),
    .window_tick(tick[1]), .frame_sent(fs[1]), .frame_dropped(fd[1]));
  uart_rx_model #(.DIV(DIV)) r0 (.clk, .rst_n, .line(txd[0]), .frame_err(ferr[0]));
  uart_rx_model #(.DIV(DIV)) r1 (.clk, .rst_n, .line(txd[1]), .frame_err(ferr[1]));
  always #10 clk = ~clk;  // 50 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (16_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- monitors
  int win = 0, busy0 = 0, obj_cycles = 0, n_cleared = 0, last_sent1 = -1000, n_sent1 = 0;
  bit obj_phase = 0;
  always @(posedge clk) if (rst_n) begin
    if (tick[0]) win++;
    if (tick[0] != tick[1]) check(0, "copies out of step");
    if (obj_phase) begin
      obj_cycles++;
      if (!u0.u_uart.in_ready) busy0++;
    end
    if (fd[0][0]) n_cleared++;
    if (fs[1][0]) begin
      if (n_sent1 > 0)
        check(win - last_sent1 >= REFR, $sformatf("refractory copy sent %0d windows apart", win - last_sent1));
      n_sent1++;
      last_sent1 = win;
    end
  end

  // ------------------------------------------------------------- stimulus
  function automatic void add_noise(ref pix_t s[$], input int n, input int y0, input bit obj);
    for (int k = 0; k < n; k++) begin
      pix_t e;
      e.x = 4 * $urandom_range(H / 4 - 1) + 1;
      e.y = 4 * $urandom_range(W / 4 - 1) + 1;
      e.pol = $urandom_range(1);
      if (!(obj && e.x >= OX - 2 && e.x < OX + OH + 2 && e.y >= y0 - 2 && e.y < y0 + OW + 2))
        s.push_back(e);
    end
  endfunction

  function automatic void add_object(ref pix_t s[$], input int y0);
    for (int x = OX; x < OX + OH; x++)
      for (int t = 0; t < 2; t++) begin
        s.push_back('{x: x, y: y0 + t, pol: 1});           // left edge, darker
        s.push_back('{x: x, y: y0 + OW - 1 - t, pol: 0});  // right edge, brighter
      end
    for (int y = y0; y < y0 + OW; y++)
      for (int t = 0; t < 2; t++) begin
        s.push_back('{x: OX + t, y: y, pol: 1});           // top edge
        s.push_back('{x: OX + OH - 1 - t, y: y, pol: 0});  // bottom edge
      end
  endfunction

  task automatic send_scene(input pix_t s[$]);
    logic [31:0] pk[$];
    gaer_packets(s, H, W, pk);
    foreach (pk[i]) begin
      gaer_valid = 1; gaer_data = pk[i];
      @(posedge clk);
      while (!(rdy[0] && rdy[1])) @(posedge clk);
      #1;
    end
    gaer_valid = 0;
  endtask

  // ------------------------------------------------------------ packet parser
  function automatic bit getbit(input bytes_t q, input int pos);
    return q[pos / 8][7 - pos % 8];
  endfunction

  // parse a received byte stream; count packets, malformed ones, and pooled
  // pixels outside the block rows of the object
  function automatic void parse(input bytes_t q, output int npk, output int nbad,
                                output int stray, output int nset);
    int i;
    npk = 0; nbad = 0; stray = 0; nset = 0;
    i = 0;
    while (i < q.size()) begin
      int start, pos;
      bytes_t pay;
      int unsigned s1, s2;
      if (i + 4 > q.size() || {q[i], q[i+1], q[i+2], q[i+3]} != 32'h5341_4943) begin
        nbad++;
        break;
      end
      i += 4;
      start = i;
      pos = i * 8;
      for (int ch = 0; ch < 2; ch++) begin
        for (int sy = 0; sy < 300; sy++) begin
          byte unsigned v;
          v = 0;
          if (pos / 8 >= q.size()) break;
          if (getbit(q, pos)) begin
            pos++;
            for (int k = 7; k >= 0; k--) begin
              if (pos / 8 < q.size()) v[k] = getbit(q, pos);
              pos++;
            end
          end else pos++;
          for (int k = 0; k < 8; k++)
            if (v[k]) begin
              int blk;
              blk = sy * 8 + k;
              nset++;
              if (blk / 60 < OX / 8 || blk / 60 > (OX + OH - 1) / 8) stray++;
            end
        end
        pos = (pos + 7) / 8 * 8;
      end
      i = pos / 8;
      if (i + 4 > q.size()) begin nbad++; break; end
      pay = q[start:i-1];
      s1 = 0; s2 = 0;
      for (int j = 0; j < pay.size(); j += 2) begin
        s1 = (s1 + 256 * pay[j] + ((j + 1 < pay.size()) ? pay[j + 1] : 0)) % 65535;
        s2 = (s2 + s1) % 65535;
      end
      if ({q[i], q[i+1], q[i+2], q[i+3]} != {16'(s2), 16'(s1)}) nbad++;
      i += 4;
      npk++;
    end
  endfunction

  initial begin
    pix_t s[$];
    int y0, dy, t_obj0, t_obj1;
    int npk[2], nbad[2], stray[2], nset[2];
    real kbps[2];
    gaer_valid = 0; gaer_data = '0;
    cfg_we = 0; cfg_ch = 0; cfg_addr = 0; cfg_len = 0; cfg_code = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;

    // isolated noise only
    for (int w = 0; w < NOISE_WIN; w++) begin
      @(posedge clk iff tick[0]);
      #1;
      s = {};
      add_noise(s, 600, 0, 0);
      send_scene(s);
    end
    @(posedge clk iff tick[0]);
    @(posedge clk iff tick[0]);
    #1;
    check(pkc[0] == 0 && pkc[1] == 0, "no packet from noise alone");
    check(n_cleared >= 1, "noise frames cleared at the window limit");

    // moving object with noise
    obj_phase = 1;
    t_obj0 = $time;
    y0 = 8; dy = 4;
    for (int w = 0; w < OBJ_WIN; w++) begin
      if (w > 0) @(posedge clk iff tick[0]);
      #1;
      s = {};
      add_object(s, y0);
      add_noise(s, 300, y0, 1);
      send_scene(s);
      if (y0 + dy < 8 || y0 + dy + OW > W - 8) dy = -dy;
      y0 += dy;
    end
    @(posedge clk iff tick[0]);
    obj_phase = 0;
    t_obj1 = $time;
    repeat (TAIL_WIN) @(posedge clk iff tick[0]);
    #1;

    for (int c = 0; c < 2; c++) begin
      bytes_t q;
      q = (c == 0) ? r0.q : r1.q;
      parse(q, npk[c], nbad[c], stray[c], nset[c]);
      kbps[c] = q.size() * 8.0 / ((t_obj1 - t_obj0) * 1.0e-9) / 1000.0;
      check(nbad[c] == 0, $sformatf("copy %0d: %0d malformed packets", c, nbad[c]));
      check(npk[c] == int'(c == 0 ? pkc[0] : pkc[1]), $sformatf("copy %0d: %0d packets parsed", c, npk[c]));
      check(stray[c] == 0, $sformatf("copy %0d: %0d pooled pixels outside the object", c, stray[c]));
      check(nset[c] > 0, $sformatf("copy %0d: empty packets", c));
      check(!ferr[c], $sformatf("copy %0d: UART framing error", c));
      check(ovr[c] == 0, $sformatf("copy %0d: window overrun", c));
      $display("copy %0d: %0d packets, %0d bytes, %0d pooled pixels, %.2f kbit/s while the object moved",
               c, npk[c], q.size(), nset[c], kbps[c]);
    end
    check(npk[0] >= 8, "main configuration sends a packet whenever the line is free");
    check(busy0 * 10 >= obj_cycles * 7,
          $sformatf("UART busy %0d of %0d cycles while the object moved", busy0, obj_cycles));
    check(npk[1] >= 2 && npk[1] <= OBJ_WIN / REFR + 1, $sformatf("refractory copy sent %0d", npk[1]));
    check(n_sent1 == npk[1], "refractory copy frame count");
    $display("UART line busy %0d%% of the time while the object moved", busy0 * 100 / obj_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
