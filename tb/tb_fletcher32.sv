// tb_fletcher32: random byte strings of even and odd length, fed with gaps,
// compared with an independent Fletcher-32 computation (16-bit words, first
// byte high, sums modulo 65535, odd tail padded with zero); plus the known
// checksum of "abcde" (0xF04FC729) and "abcdef" (0x56502D2A).
//
// The checksum algorithm is the one the filter names; the word and byte
// conventions checked are this design's.
module tb_fletcher32;
  logic clk = 0, rst_n = 0;
  logic clr, in_valid, finish;
  logic [7:0] in_byte;
  logic [31:0] checksum;
  int checks = 0, failures = 0;

  fletcher32 dut (.*);
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

  function automatic logic [31:0] ref_ck(input logic [7:0] d[$], input bit little);
    int unsigned s1, s2;
    s1 = 0; s2 = 0;
    for (int i = 0; i < d.size(); i += 2) begin
      int unsigned wd;
      logic [7:0] lo;
      lo = (i + 1 < d.size()) ? d[i+1] : 8'h00;
      wd = little ? {lo, d[i]} : {d[i], lo};
      s1 = (s1 + wd) % 65535;
      s2 = (s2 + s1) % 65535;
    end
    return {16'(s2), 16'(s1)};
  endfunction

  task automatic run(input logic [7:0] d[$], output logic [31:0] ck);
    clr = 1; @(posedge clk); #1 clr = 0;
    foreach (d[i]) begin
      while ($urandom_range(3) == 0) begin @(posedge clk); #1; end
      in_valid = 1; in_byte = d[i];
      @(posedge clk); #1 in_valid = 0;
    end
    finish = 1; @(posedge clk); #1 finish = 0;
    ck = checksum;
  endtask

  initial begin
    logic [7:0] d[$];
    logic [31:0] ck;
    clr = 0; in_valid = 0; finish = 0; in_byte = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    // reference strings: the usual little-endian word convention
    // gives 0xF04FC729 for "abcde"; the checksum here takes the first byte
    // as the high half, so feed the bytes of each pair swapped.
    d = '{"b", "a", "d", "c", 8'h00, "e"};
    run(d, ck);
    check(ck == 32'hF04FC729, $sformatf("abcde %h", ck));
    d = '{"b", "a", "d", "c", "f", "e"};
    run(d, ck);
    check(ck == 32'h56502D2A, $sformatf("abcdef %h", ck));
    for (int t = 0; t < 300; t++) begin
      int n;
      d = {};
      n = $urandom_range(1, 400);
      for (int i = 0; i < n; i++) d.push_back((t % 3 == 0) ? 8'hFF : 8'($urandom));
      run(d, ck);
      check(ck == ref_ck(d, 0), $sformatf("len %0d: %h vs %h", n, ck, ref_ck(d, 0)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
