// fletcher32: Fletcher-32 checksum over a byte stream.
//
// Bytes are paired into 16-bit words, the first byte of a pair in the upper
// half. Two running sums modulo 65535 are kept: sum1 adds each word, sum2 adds
// sum1 after each word; the checksum is {sum2, sum1}. clr starts a new
// checksum (both sums zero); finish closes it, padding an odd final byte with
// a zero low half. One byte per cycle; the checksum is valid the cycle after
// finish and stays until clr.
//
// The algorithm is the one the filter names for its packet trailer; the byte
// order, zero start values and padding are this design's choices.
module fletcher32 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        in_valid,
  input  logic [7:0]  in_byte,
  input  logic        finish,
  output logic [31:0] checksum
);
  logic [15:0] sum1, sum2;
  logic [7:0]  hi;
  logic        have_hi;

  function automatic logic [15:0] add_mod(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = 17'(a) + 17'(b);
    if (s >= 17'd65535) s = s - 17'd65535;
    return s[15:0];
  endfunction

  logic        word_valid;
  logic [15:0] word;
  logic [15:0] n1;
  always_comb begin
    word_valid = 1'b0;
    word       = '0;
    if (in_valid && have_hi) begin
      word_valid = 1'b1;
      word       = {hi, in_byte};
    end else if (finish && have_hi) begin
      word_valid = 1'b1;
      word       = {hi, 8'h00};
    end
    n1 = add_mod(sum1, word);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum1 <= '0; sum2 <= '0; hi <= '0; have_hi <= 1'b0;
    end else if (clr) begin
      sum1 <= '0; sum2 <= '0; hi <= '0; have_hi <= 1'b0;
    end else begin
      if (word_valid) begin
        sum1    <= n1;
        sum2    <= add_mod(sum2, n1);
        have_hi <= 1'b0;
      end else if (in_valid) begin
        hi      <= in_byte;
        have_hi <= 1'b1;
      end
    end
  end

  assign checksum = {sum2, sum1};

  a_one_at_a_time: assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && finish));
endmodule
