// tb_aggregator: windows of random coincidence beats against a model of the
// OR aggregation, the new-pixel event counter, the threshold / window-limit
// decision and the refractory period.
//
// Each window is WBEGIN, row segments in raster order (consecutive rows of
// one block are included to exercise the read-modify-write forwarding),
// WEND. Densities alternate so that frames are sent, held while out_free is
// low, and cleared at the window limit. Every sent frame is compared word by
// word with the model's block-layout frame, with blk_last on the last word,
// and the send/clear scan is checked to take (H/8)*(W/8) cycles plus a few.
// In two windows peer_over is raised, as the other channel would, so that a
// frame below the threshold is sent along with it.
//
// A 16 x 32 array, threshold 40 and a 3-window limit stand in for 480 x 320,
// 1000 and 5 so that every outcome occurs in a short run.
module tb_aggregator;
  import dvs_pkg::*;
  localparam int H = 16, W = 32, WG = W / 8, NB = (H / 8) * WG;
  localparam int THRESH = 40, MAXW = 3, REFR = 2, CH = 1;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_free, peer_over, over, blk_valid, blk_ready, blk_last;
  logic frame_sent, frame_dropped;
  coin_beat_t in_beat;
  logic [63:0] blk_word;
  logic [$clog2(H*W+1)-1:0] event_count;
  int checks = 0, failures = 0;

  aggregator #(.H(H), .W(W), .CH(CH), .THRESH(THRESH), .MAX_WINDOWS(MAXW),
               .REFRACTORY(REFR)) dut (.*);
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

  // model
  bit frame [H][W];
  int m_count = 0, m_win = 0, m_refr = 0;
  int n_sent = 0, n_dropped = 0, n_held = 0, n_refr = 0, n_peer = 0;
  logic [63:0] exp_words[$];

  function automatic logic [63:0] block_word(input int b);
    logic [63:0] wd;
    int br, bc;
    br = b / WG; bc = b % WG;
    wd = '0;
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++)
        wd[r*8 + c] = frame[br*8 + r][bc*8 + c];
    return wd;
  endfunction

  // capture of sent words
  int got = 0;
  always @(posedge clk) if (rst_n && blk_valid && blk_ready) begin
    if (exp_words.size() == 0) check(0, "unexpected word");
    else begin
      logic [63:0] e;
      e = exp_words.pop_front();
      check(blk_word == e, $sformatf("word %h vs %h", blk_word, e));
      check(blk_last == (exp_words.size() == 0), "blk_last");
    end
  end
  always @(negedge clk) blk_ready = ($urandom_range(99) < 75);

  int n_sent_pulse = 0, n_drop_pulse = 0;
  always @(posedge clk) begin
    if (rst_n && frame_sent) n_sent_pulse++;
    if (rst_n && frame_dropped) n_drop_pulse++;
  end

  task automatic send_beat(input coin_beat_t b);
    in_valid = 1; in_beat = b;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  initial begin
    coin_beat_t b;
    in_valid = 0; in_beat = '0; out_free = 1; peer_over = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int w = 0; w < 24; w++) begin
      int dens, t0;
      dens = (w % 4 == 3) ? 2 : (w % 4 == 1) ? 30 : 12;
      out_free = !(w >= 8 && w < 12);
      peer_over = (w == 15 || w == 19);
      b = '0; b.kind = BEAT_WBEGIN; send_beat(b);
      m_win = (m_win < MAXW) ? m_win + 1 : m_win;
      if (m_refr > 0) m_refr--;
      for (int x = 0; x < H; x++)
        for (int g = 0; g < WG; g++)
          if ($urandom_range(99) < dens) begin
            logic [7:0] m;
            m = 8'($urandom);
            b = '0; b.kind = BEAT_PIX; b.row = X_W'(x); b.cg = CG_W'(g);
            if (CH == 1) begin b.mask_h = m; b.mask_v = 8'($urandom); end
            else begin b.mask_v = m; b.mask_h = 8'($urandom); end
            send_beat(b);
            for (int i = 0; i < 8; i++)
              if (m[i] && !frame[x][g*8+i]) begin frame[x][g*8+i] = 1; m_count++; end
          end
      // pipeline settled: check the counter before WEND
      repeat (2) @(posedge clk);
      #1 check(int'(event_count) == m_count, $sformatf("count %0d vs %0d", event_count, m_count));
      b = '0; b.kind = BEAT_WEND; send_beat(b);
      t0 = $time;
      check(over == (m_count > THRESH), "over flag");
      if ((m_count > THRESH || peer_over) && out_free && m_refr == 0) begin
        if (m_count <= THRESH) n_peer++;
        for (int k = 0; k < NB; k++) exp_words.push_back(block_word(k));
        n_sent++; m_refr = REFR;
        foreach (frame[x, y]) frame[x][y] = 0;
        m_count = 0; m_win = 0;
      end else if (m_win >= MAXW) begin
        if (m_count > THRESH && !out_free) n_held++;
        if (m_count > THRESH && m_refr != 0) n_refr++;
        n_dropped++;
        foreach (frame[x, y]) frame[x][y] = 0;
        m_count = 0; m_win = 0;
      end else begin
        if (m_count > THRESH && !out_free) n_held++;
        if (m_count > THRESH && m_refr != 0) n_refr++;
      end
      // wait for the aggregator to accept again
      @(posedge clk);
      #1;
      while (!in_ready || exp_words.size() != 0) begin
        @(posedge clk);
        #1;
      end
      check(($time - t0) / 10 <= 3 * NB + 20, $sformatf("scan took %0d cycles", ($time - t0) / 10));
    end
    check(n_sent_pulse == n_sent && n_sent >= 3, $sformatf("sent %0d vs %0d", n_sent_pulse, n_sent));
    check(n_drop_pulse == n_dropped && n_dropped >= 1, $sformatf("dropped %0d vs %0d", n_drop_pulse, n_dropped));
    check(n_held >= 1, "a frame was held while the output was busy");
    check(n_refr >= 1, "a frame was held by the refractory period");
    check(n_peer >= 1, "a frame below the threshold sent with the other channel");
    $display("sent=%0d dropped=%0d held=%0d refractory=%0d", n_sent, n_dropped, n_held, n_refr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
