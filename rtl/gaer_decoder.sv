// gaer_decoder: turns G-AER sensor packets into one (x, y, p) event per cycle.
//
// The group address-event representation sends a column address once and then
// one or more row-group packets, each naming a group of 8 rows and carrying an
// 8-bit mask of the pixels of that group that fired with one polarity. The
// decoder follows the three boxes of the filter's block diagram: a packet type
// parser on bits [31:30], a column register that remembers the last column
// packet, and a position calculator that walks the set bits of a group mask,
// lowest first, and emits x = group*8 + bit, y = column register, p = one-hot
// polarity. A group packet with k set bits therefore takes k cycles; time
// packets, reserved packets, empty masks and addresses outside the H x W array
// are consumed without output.
//
// Interface: in_* is a valid/ready stream of 32-bit packets (from the packet
// FIFO), out_* a valid/ready stream of dvs_pkg::event_t. The output is
// registered. The bit layout of the packets is this design's own: the filter
// names the packet types but does not print their fields.
module gaer_decoder
  import dvs_pkg::*;
#(
  parameter int unsigned H = 320,  // rows
  parameter int unsigned W = 480   // columns
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output event_t      out_event
);
  gaer_type_e     ptype;
  logic [Y_W-1:0] col_reg;
  logic [7:0]     mask;       // bits of the current group still to emit
  logic [5:0]     group;
  pol_t           pol;
  logic [2:0]     lsb;
  logic [X_W-1:0] xpos;

  assign ptype = gaer_type_e'(in_data[31:30]);

  // Lowest set bit of the remaining mask.
  always_comb begin
    lsb = '0;
    for (int i = 7; i >= 0; i--) if (mask[i]) lsb = 3'(i);
  end
  assign xpos = X_W'({group, lsb});

  // A new packet may be taken once the current mask is finished and the
  // output register is free or being emptied.
  wire out_free = !out_valid || out_ready;
  assign in_ready = (mask == '0) && out_free;
  wire take = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_reg   <= '0;
      mask      <= '0;
      group     <= '0;
      pol       <= POL_ON;
      out_valid <= 1'b0;
      out_event <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        unique case (ptype)
          GAER_COLUMN: col_reg <= in_data[Y_W-1:0];
          GAER_GROUP: begin
            // drop groups outside the array or with a column outside it
            if ((32'(in_data[13:8]) * 8 < H) && (32'(col_reg) < W)) begin
              mask  <= in_data[7:0];
              group <= in_data[13:8];
              pol   <= in_data[16] ? POL_OFF : POL_ON;
            end
          end
          default: ;  // time stamps and reserved packets are not used
        endcase
      end else if (mask != '0 && out_free) begin
        mask      <= mask & ~(8'(1) << lsb);
        out_valid <= (32'(xpos) < H);
        out_event <= '{x: xpos, y: col_reg, p: pol};
      end
    end
  end
endmodule
