// tb_maxpool_subsampler: random sparse 64-bit block words (often zero, often
// a single set bit) in frames of 20 words (not a multiple of 8, so the last
// byte is padded); checks each packed byte, the bit order, sym_last, and that
// with a free output one word is taken per cycle.
//
// The compare-with-zero pooling is the filter's; the packing order checked
// is this design's.
module tb_maxpool_subsampler;
  localparam int NW = 20;
  logic clk = 0, rst_n = 0;
  logic blk_valid, blk_ready, blk_last, sym_valid, sym_ready, sym_last;
  logic [63:0] blk_word;
  logic [7:0] sym_data;
  int checks = 0, failures = 0;
  logic [8:0] exp_q[$];   // {last, byte}

  maxpool_subsampler dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int stall = 40;
  always @(negedge clk) sym_ready = ($urandom_range(99) >= stall);
  always @(posedge clk) if (rst_n && sym_valid && sym_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected symbol");
    else begin
      logic [8:0] e;
      e = exp_q.pop_front();
      check({sym_last, sym_data} == e, $sformatf("sym %h vs %h", {sym_last, sym_data}, e));
    end
  end

  initial begin
    int t0;
    blk_valid = 0; blk_word = '0; blk_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int f = 0; f < 40; f++) begin
      logic [7:0] acc;
      int n;
      if (f == 39) stall = 0;
      acc = '0; n = 0;
      t0 = $time;
      for (int k = 0; k < NW; k++) begin
        int r;
        logic [63:0] wd;
        r = $urandom_range(2);
        wd = (r == 0) ? 64'd0 : (r == 1) ? (64'd1 << $urandom_range(63)) : {$urandom, $urandom};
        acc[n] = (wd != 0);
        n++;
        if (n == 8 || k == NW - 1) begin
          exp_q.push_back({1'(k == NW - 1), acc});
          acc = '0; n = 0;
        end
        blk_valid = 1; blk_word = wd; blk_last = (k == NW - 1);
        @(posedge clk);
        while (!blk_ready) @(posedge clk);
        #1;
      end
      blk_valid = 0;
      if (f == 39) check(($time - t0) / 10 == NW, $sformatf("frame took %0d cycles", ($time - t0) / 10));
    end
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, "all symbols out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
