// tb_huffman_coder: frames of random symbols coded first with the built-in
// table and then with a loaded table of random codewords of 1 to 16 bits.
// The expected byte string is built independently (codewords MSB first,
// zero padding to a byte) and compared with the packet buffer contents and
// frame_len; busy and frame_ready are checked around frame_ack, and a frame
// of 300 zero symbols must take about one cycle per symbol.
//
// The packet buffer is reduced to 64 bytes; the table size of 256 words is
// the filter's, the codes are this design's test data.
module tb_huffman_coder;
  localparam int BUF = 64;
  logic clk = 0, rst_n = 0;
  logic cfg_we, sym_valid, sym_ready, sym_last, byte_valid, byte_ready, frame_ready, frame_ack, busy;
  logic [7:0] cfg_addr, sym_data, byte_data;
  logic [4:0] cfg_len;
  logic [15:0] cfg_code;
  logic [$clog2(BUF+1)-1:0] frame_len;
  int checks = 0, failures = 0;
  int tab_len [256];
  logic [15:0] tab_code [256];

  huffman_coder #(.BUF_DEPTH(BUF)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(input logic [7:0] syms[$], input bit fast);
    logic [7:0] exp_b[$];
    bit bits[$];
    int t0, ncyc;
    foreach (syms[i])
      for (int b = tab_len[syms[i]] - 1; b >= 0; b--) bits.push_back(tab_code[syms[i]][b]);
    while (bits.size() % 8 != 0) bits.push_back(0);
    for (int i = 0; i < bits.size(); i += 8) begin
      logic [7:0] v;
      for (int b = 0; b < 8; b++) v[7-b] = bits[i+b];
      exp_b.push_back(v);
    end
    t0 = $time;
    foreach (syms[i]) begin
      sym_valid = 1; sym_data = syms[i]; sym_last = (i == syms.size() - 1);
      @(posedge clk);
      while (!sym_ready) @(posedge clk);
      #1;
      check(busy, "busy during frame");
    end
    sym_valid = 0;
    ncyc = ($time - t0) / 10;
    if (fast) check(ncyc <= syms.size() + 2, $sformatf("%0d symbols took %0d cycles", syms.size(), ncyc));
    // drain
    while (!frame_ready || byte_valid) begin
      if (byte_valid && $urandom_range(1)) begin
        byte_ready = 1;
        if (exp_b.size() == 0) check(0, "extra byte");
        else check(byte_data == exp_b.pop_front(), "byte");
        @(posedge clk); #1 byte_ready = 0;
      end else begin
        @(posedge clk); #1;
      end
      if (frame_ready && !byte_valid) break;
    end
    check(exp_b.size() == 0, $sformatf("%0d bytes missing", exp_b.size()));
    check(int'(frame_len) == (bits.size() / 8), $sformatf("frame_len %0d vs %0d", frame_len, bits.size() / 8));
    check(frame_ready && busy, "frame_ready");
    frame_ack = 1; @(posedge clk); #1 frame_ack = 0;
    check(!frame_ready && !busy, "cleared by ack");
  endtask

  initial begin
    logic [7:0] syms[$];
    cfg_we = 0; cfg_addr = 0; cfg_len = 0; cfg_code = 0;
    sym_valid = 0; sym_data = 0; sym_last = 0; byte_ready = 0; frame_ack = 0;
    for (int s = 0; s < 256; s++) begin
      tab_len[s] = (s == 0) ? 1 : 9;
      tab_code[s] = (s == 0) ? 16'h0 : 16'h100 | 16'(s);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    // built-in table; the frame fits the 64-byte buffer
    for (int f = 0; f < 12; f++) begin
      syms = {};
      for (int i = 0; i < 40; i++) syms.push_back(($urandom_range(99) < 70) ? 8'h00 : 8'($urandom));
      run_frame(syms, 0);
    end
    syms = {};
    for (int i = 0; i < 300; i++) syms.push_back(8'h00);
    run_frame(syms, 1);
    // loaded table
    for (int s = 0; s < 256; s++) begin
      tab_len[s] = $urandom_range(1, 16);
      tab_code[s] = 16'($urandom) & 16'((32'd1 << tab_len[s]) - 1);
      cfg_we = 1; cfg_addr = 8'(s); cfg_len = 5'(tab_len[s]); cfg_code = tab_code[s];
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int f = 0; f < 12; f++) begin
      syms = {};
      for (int i = 0; i < 20; i++) syms.push_back(8'($urandom));
      run_frame(syms, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
