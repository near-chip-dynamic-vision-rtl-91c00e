// tb_coincidence_detector: random events in several windows, compared with a
// model of the vertical/horizontal same-polarity coincidence.
//
// Events are injected in the first half of a window (after a window_tick),
// so the window they fall in is known. For every window the expected beat
// stream is WBEGIN, one PIX beat per row segment with a coincidence (raster
// order), WEND. The output is randomly stalled. Also checked: the window
// period of TAU_CYCLES, that a readout ends within its window, and that a
// window with no events produces only WBEGIN/WEND (banks were cleared).
//
// A 16 x 32 array and tau of 1500 cycles replace 480 x 320 and 150,000; the
// same-polarity rule and the window scheme are the filter's.
module tb_coincidence_detector;
  import dvs_pkg::*;
  localparam int H = 16, W = 32, TAU = 1500, WG = W / 8;
  logic clk = 0, rst_n = 0;
  logic ev_valid, ev_ready, out_valid, out_ready, window_tick;
  event_t ev;
  coin_beat_t out_beat;
  logic [15:0] overrun_count;
  int checks = 0, failures = 0;
  coin_beat_t exp_q[$];
  bit pix [H][W][2];
  int last_tick = -1, n_pix = 0;

  coincidence_detector #(.H(H), .W(W), .TAU_CYCLES(TAU)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected beats of the window held in pix[][][]
  function automatic void model_window();
    coin_beat_t b;
    b = '0; b.kind = BEAT_WBEGIN; exp_q.push_back(b);
    for (int x = 0; x < H; x++)
      for (int g = 0; g < WG; g++) begin
        logic [7:0] mv, mh;
        mv = '0; mh = '0;
        for (int i = 0; i < 8; i++) begin
          int y;
          y = g * 8 + i;
          for (int p = 0; p < 2; p++) begin
            if (x > 0 && pix[x][y][p] && pix[x-1][y][p]) mv[i] = 1'b1;
            if (y > 0 && pix[x][y][p] && pix[x][y-1][p]) mh[i] = 1'b1;
          end
        end
        if (mv != 0 || mh != 0) begin
          b = '0; b.kind = BEAT_PIX; b.row = X_W'(x); b.cg = CG_W'(g);
          b.mask_v = mv; b.mask_h = mh;
          exp_q.push_back(b);
          n_pix++;
        end
      end
    b = '0; b.kind = BEAT_WEND; exp_q.push_back(b);
    foreach (pix[x, y, p]) pix[x][y][p] = 0;
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected beat");
    else begin
      coin_beat_t e;
      e = exp_q.pop_front();
      check(out_beat == e, $sformatf("beat %p vs %p", out_beat, e));
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(99) < 70);

  // window period
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (window_tick) begin
      if (last_tick >= 0) check(cyc - last_tick == TAU, $sformatf("window of %0d cycles", cyc - last_tick));
      last_tick = cyc;
    end
  end

  initial begin
    ev_valid = 0; ev = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    model_window();   // the window before the first injection is empty
    for (int w = 0; w < 8; w++) begin
      int n;
      @(posedge clk iff window_tick);
      #1;
      // density varies; window 5 is empty
      n = (w == 5) ? 0 : 50 + 60 * (w % 3);
      for (int k = 0; k < n; k++) begin
        int x, y;
        pol_t p;
        x = $urandom_range(H - 1);
        y = $urandom_range(W - 1);
        p = $urandom_range(1) ? POL_OFF : POL_ON;
        // clusters make coincidences likely
        if (k % 2 == 1) begin x = int'(ev.x) + $urandom_range(1); y = int'(ev.y) + $urandom_range(1);
          if (x >= H) x = H - 1; if (y >= W) y = W - 1; p = ev.p; end
        ev_valid = $urandom_range(3) != 0;
        ev = '{x: X_W'(x), y: Y_W'(y), p: p};
        check(ev_ready, "ev_ready");
        if (ev_valid) pix[x][y][p[1]] = 1;
        @(posedge clk);
        #1;
      end
      ev_valid = 0;
      model_window();
    end
    @(posedge clk iff window_tick);
    @(posedge clk iff window_tick);
    check(exp_q.size() == 0, $sformatf("%0d beats missing", exp_q.size()));
    check(n_pix > 20, "enough coincidences exercised");
    check(overrun_count == 0, "no overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
