// tb_packet_arbiter: two channel buffers modelled as queues that fill with
// random delays; checks that a packet starts only when both channels hold a
// frame, that it reads "SAIC", the horizontal bytes, the vertical bytes and
// the Fletcher-32 of the payload (computed here independently), that the
// frame_ack pulse follows and that packet_count advances.
//
// The preamble and checksum are the filter's packet fields; the channel
// order and byte order checked are this design's.
module tb_packet_arbiter;
  localparam int LW = 11;
  logic clk = 0, rst_n = 0;
  logic h_ready_frame, v_ready_frame, h_valid, v_valid, h_pop, v_pop, frame_ack;
  logic out_valid, out_ready, sending;
  logic [LW-1:0] h_len, v_len;
  logic [7:0] h_byte, v_byte, out_byte;
  logic [15:0] packet_count;
  int checks = 0, failures = 0;
  logic [7:0] hq[$], vq[$], exp_q[$];

  packet_arbiter #(.LW(LW)) dut (.*);
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

  function automatic logic [31:0] ref_ck(input logic [7:0] d[$]);
    int unsigned s1, s2;
    s1 = 0; s2 = 0;
    for (int i = 0; i < d.size(); i += 2) begin
      s1 = (s1 + {d[i], (i + 1 < d.size()) ? d[i+1] : 8'h00}) % 65535;
      s2 = (s2 + s1) % 65535;
    end
    return {16'(s2), 16'(s1)};
  endfunction

  // buffer heads, refreshed whenever a queue changes
  function automatic void heads();
    h_valid = hq.size() > 0;
    v_valid = vq.size() > 0;
    h_byte  = h_valid ? hq[0] : 8'h00;
    v_byte  = v_valid ? vq[0] : 8'h00;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (exp_q.size() == 0) check(0, "unexpected byte");
      else begin
        logic [7:0] e;
        e = exp_q.pop_front();
        check(out_byte == e, $sformatf("packet byte %h vs %h", out_byte, e));
      end
    end
    if (h_pop && h_valid) void'(hq.pop_front());
    if (v_pop && v_valid) void'(vq.pop_front());
    #1 heads();
  end
  always @(negedge clk) out_ready = $urandom_range(99) < 60;

  initial begin
    h_ready_frame = 0; v_ready_frame = 0; h_len = 0; v_len = 0;
    heads();
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int p = 0; p < 30; p++) begin
      logic [7:0] hb[$], vb[$], pay[$];
      int nh, nv;
      logic [31:0] ck;
      hb = {}; vb = {};
      nh = $urandom_range(1, 40); nv = $urandom_range(1, 40);
      for (int i = 0; i < nh; i++) hb.push_back(8'($urandom));
      for (int i = 0; i < nv; i++) vb.push_back(8'($urandom));
      pay = {hb, vb};
      ck = ref_ck(pay);
      exp_q = {8'h53, 8'h41, 8'h49, 8'h43, pay, ck[31:24], ck[23:16], ck[15:8], ck[7:0]};
      // channel frames become ready at different times
      hq = hb; h_len = LW'(nh); h_ready_frame = 1; heads();
      repeat ($urandom_range(0, 30)) begin
        @(posedge clk); #1;
        check(!sending, "no packet with one channel only");
      end
      vq = vb; v_len = LW'(nv); v_ready_frame = 1; heads();
      @(posedge clk iff frame_ack);
      #1;
      h_ready_frame = 0; v_ready_frame = 0;
      check(exp_q.size() == 0, $sformatf("%0d bytes missing", exp_q.size()));
      check(hq.size() == 0 && vq.size() == 0, "buffers emptied");
      @(posedge clk); #1;
      check(packet_count == 16'(p + 1), "packet_count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
