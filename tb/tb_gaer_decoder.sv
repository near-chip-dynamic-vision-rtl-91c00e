// tb_gaer_decoder: random G-AER packet streams (column, row-group, time and
// reserved packets, some addresses out of range) against a model decoder.
// The output is randomly stalled; every event is compared in order, and a
// burst of single-pixel groups checks the rate of one event per cycle.
//
// The packet layout exercised is this design's own G-AER format; a reduced
// array size makes out-of-range addresses common.
module tb_gaer_decoder;
  import dvs_pkg::*;
  localparam int H = 40, W = 48;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data;
  event_t out_event;
  int checks = 0, failures = 0;
  event_t exp_q[$];
  int col_model = 0;

  gaer_decoder #(.H(H), .W(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: expected events for one packet
  function automatic void model_packet(input logic [31:0] p);
    case (p[31:30])
      2'b01: col_model = int'(p[8:0]);
      2'b10: if (int'(p[13:8]) * 8 < H && col_model < W)
        for (int i = 0; i < 8; i++)
          if (p[i] && int'(p[13:8]) * 8 + i < H)
            exp_q.push_back('{x: X_W'(int'(p[13:8]) * 8 + i), y: Y_W'(col_model),
                              p: p[16] ? POL_OFF : POL_ON});
      default: ;
    endcase
  endfunction

  // monitor
  int stall_pct = 30;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected event");
    else begin
      event_t e;
      e = exp_q.pop_front();
      check(out_event == e, $sformatf("event %p vs %p", out_event, e));
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(99) >= stall_pct);

  task automatic send(input logic [31:0] p);
    in_valid = 1; in_data = p;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    model_packet(p);
    #1 in_valid = 0;
  endtask

  initial begin
    int t0, n;
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int k = 0; k < 3000; k++) begin
      int r;
      logic [31:0] p;
      r = $urandom_range(99);
      p = $urandom;
      if (r < 20) p = {2'b01, 21'd0, 9'($urandom_range(W + 8))};
      else if (r < 80) p = {2'b10, 13'd0, 1'($urandom), 2'b00, 6'($urandom_range(H/8 + 1)), 8'($urandom)};
      else if (r < 90) p[31:30] = 2'b00;
      else p[31:30] = 2'b11;
      send(p);
    end
    // rate: single-pixel groups with a free output run at one event per cycle
    stall_pct = 0;
    repeat (20) @(posedge clk);
    #1;
    send({2'b01, 21'd0, 9'd3});
    send({2'b10, 13'd0, 1'b0, 2'b00, 6'd1, 8'hFF});
    t0 = $time; n = 0;
    wait (exp_q.size() == 0);
    @(posedge clk);
    check(($time - t0) / 10 <= 10, $sformatf("8 events took %0d cycles", ($time - t0) / 10));
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, "all events seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
