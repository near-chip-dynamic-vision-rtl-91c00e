// tb_sync_fifo: random push/pop traffic against a queue model of the FIFO.
// Checks every popped word, the occupancy count and the full/empty flags.
//
// Run at a small depth so that full and empty occur often; the filter uses
// the same module at 256 entries.
module tb_sync_fifo;
  localparam int WIDTH = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model[$];

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

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

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // phases: fill-heavy, drain-heavy, balanced
      int pin;
      bit fin, fout;
      pin = (cyc % 1000 < 300) ? 80 : (cyc % 1000 < 600) ? 20 : 50;
      in_valid  = ($urandom_range(99) < pin);
      out_ready = ($urandom_range(99) < 100 - pin);
      in_data   = WIDTH'($urandom);
      #1;
      check(count == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      check(in_ready == (model.size() < DEPTH), "in_ready");
      check(out_valid == (model.size() > 0), "out_valid");
      if (out_valid) check(out_data == model[0], $sformatf("data %h vs %h", out_data, model[0]));
      fin = in_valid && in_ready;
      fout = out_valid && out_ready;
      @(posedge clk);
      if (fout) void'(model.pop_front());
      if (fin) model.push_back(in_data);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
