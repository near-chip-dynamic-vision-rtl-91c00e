// packet_arbiter: assembles the output packet of the filter.
//
// When both channel coders hold a complete coded frame, the arbiter sends one
// packet as a byte stream: the 32-bit preamble "SAIC" (0x53 0x41 0x49 0x43),
// the horizontal channel's payload bytes, the vertical channel's payload
// bytes, and the 32-bit Fletcher-32 checksum of the whole payload, sum2 first
// and most significant byte first. Payload bytes come straight from the
// coders' packet buffers; the checksum is computed as they pass. After the
// last checksum byte both coders get frame_ack and the arbiter returns to
// idle. A packet is 8 + len_h + len_v bytes.
//
// Preamble text and length, the checksum type and length, and a variable
// payload between them are given by the filter's packet format. Putting both
// channels in one packet under one checksum, their order, and the byte order
// are this design's choices (the block diagram draws one checksum unit per
// channel; one unit over the joined payload gives the single 32-bit trailer
// of the packet format).
module packet_arbiter
  import dvs_pkg::*;
#(
  parameter int unsigned LW = 11   // width of the frame byte counts
) (
  input  logic          clk,
  input  logic          rst_n,
  // horizontal channel (sent first)
  input  logic          h_ready_frame,
  input  logic [LW-1:0] h_len,
  input  logic          h_valid,
  output logic          h_pop,
  input  logic [7:0]    h_byte,
  // vertical channel
  input  logic          v_ready_frame,
  input  logic [LW-1:0] v_len,
  input  logic          v_valid,
  output logic          v_pop,
  input  logic [7:0]    v_byte,
  output logic          frame_ack,
  // byte stream to the serial interface
  output logic          out_valid,
  input  logic          out_ready,
  output logic [7:0]    out_byte,
  output logic          sending,
  output logic [15:0]   packet_count
);
  typedef enum logic [2:0] {S_IDLE, S_PRE, S_PAY_H, S_PAY_V, S_FIN, S_CK, S_ACK} state_e;
  state_e        state;
  logic [1:0]    idx;
  logic [LW-1:0] left;
  logic [31:0]   ck;

  always_comb begin
    out_valid = 1'b0;
    out_byte  = '0;
    h_pop     = 1'b0;
    v_pop     = 1'b0;
    unique case (state)
      S_PRE: begin
        out_valid = 1'b1;
        out_byte  = PREAMBLE[{~idx, 3'b000} +: 8];
      end
      S_PAY_H: begin
        out_valid = h_valid;
        out_byte  = h_byte;
        h_pop     = out_ready;
      end
      S_PAY_V: begin
        out_valid = v_valid;
        out_byte  = v_byte;
        v_pop     = out_ready;
      end
      S_CK: begin
        out_valid = 1'b1;
        out_byte  = ck[{~idx, 3'b000} +: 8];
      end
      default: ;
    endcase
  end

  wire xfer     = out_valid && out_ready;
  wire pay_xfer = xfer && (state == S_PAY_H || state == S_PAY_V);

  fletcher32 u_ck (
    .clk, .rst_n,
    .clr     (state == S_IDLE),
    .in_valid(pay_xfer),
    .in_byte (out_byte),
    .finish  (state == S_FIN),
    .checksum(ck)
  );

  assign frame_ack = (state == S_ACK);
  assign sending   = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      idx          <= '0;
      left         <= '0;
      packet_count <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (h_ready_frame && v_ready_frame) begin
          state <= S_PRE;
          idx   <= '0;
        end
        S_PRE: if (xfer) begin
          idx <= idx + 1'b1;
          if (idx == 2'd3) begin
            state <= S_PAY_H;
            left  <= h_len;
          end
        end
        S_PAY_H: if (xfer) begin
          left <= left - 1'b1;
          if (left == LW'(1)) begin
            state <= S_PAY_V;
            left  <= v_len;
          end
        end
        S_PAY_V: if (xfer) begin
          left <= left - 1'b1;
          if (left == LW'(1)) state <= S_FIN;
        end
        S_FIN: begin
          state <= S_CK;
          idx   <= '0;
        end
        S_CK: if (xfer) begin
          idx <= idx + 1'b1;
          if (idx == 2'd3) state <= S_ACK;
        end
        S_ACK: begin
          state        <= S_IDLE;
          packet_count <= packet_count + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_len_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && h_ready_frame && v_ready_frame) |-> (h_len != '0 && v_len != '0));
endmodule
