// tb_event_parser: drives a burst of G-AER packets into the parser while the
// event output is held, so the packet FIFO fills and drops are counted; then
// releases the output and checks every event of the packets that were kept.
//
// The FIFO is reduced to 16 entries so that it fills quickly; the 256-entry
// default of the filter behaves the same way.
module tb_event_parser;
  import dvs_pkg::*;
  localparam int H = 32, W = 32, FIFO_DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic gaer_valid, gaer_ready, ev_valid, ev_ready;
  logic [31:0] gaer_data;
  event_t ev;
  logic [15:0] drop_count;
  int checks = 0, failures = 0;
  event_t exp_q[$];
  int col_model = 0, drops = 0;

  event_parser #(.H(H), .W(W), .FIFO_DEPTH(FIFO_DEPTH)) dut (.*);
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

  function automatic void model_packet(input logic [31:0] p);
    case (p[31:30])
      2'b01: col_model = int'(p[8:0]);
      2'b10: for (int i = 0; i < 8; i++)
        if (p[i]) exp_q.push_back('{x: X_W'(int'(p[13:8]) * 8 + i), y: Y_W'(col_model),
                                    p: p[16] ? POL_OFF : POL_ON});
      default: ;
    endcase
  endfunction

  always @(posedge clk) if (rst_n && ev_valid && ev_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected event");
    else begin
      event_t e;
      e = exp_q.pop_front();
      check(ev == e, $sformatf("event %p vs %p", ev, e));
    end
  end

  initial begin
    gaer_valid = 0; gaer_data = '0; ev_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    // burst of 64 packets with the output blocked: the FIFO (16) plus the
    // decoder's own packet keep some, the rest are lost
    for (int k = 0; k < 64; k++) begin
      logic [31:0] p;
      p = (k % 4 == 0) ? {2'b01, 21'd0, 9'(k % W)}
                                    : {2'b10, 13'd0, 1'(k), 2'b00, 6'(k % (H/8)), 8'($urandom | 1)};
      gaer_valid = 1; gaer_data = p;
      #1;
      if (gaer_ready) model_packet(p);
      else drops++;
      @(posedge clk);
      #1;
    end
    #1 gaer_valid = 0;
    check(int'(drop_count) == drops, $sformatf("drops %0d vs %0d", drop_count, drops));
    check(drops > 0, "burst overflowed the FIFO");
    ev_ready = 1;
    repeat (2000) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d events missing", exp_q.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
