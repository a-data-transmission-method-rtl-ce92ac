// fee_generator: test-data source that plays the front-end electronics (FEE), as the
// prototype board does when its FPGA generates data, sends it out of an LVDS port and
// loops it back into the readout input.
//
// Each event is sent as one FEE frame on a single serial line, one bit per clock:
//   0xAA (start), length high byte, length low byte (length in 32-bit words),
//   4*length data bytes (each word big-endian), XOR of all data bytes.
// Every byte travels as a start bit 0, eight data bits LSB first and a stop bit 1; the line
// idles at 1 and at least GAP idle bits separate frames. Word i of event e is
//   0                         when i mod 4 == 3 (gives zero compression something to drop)
//   {4'hD, e[11:0], i[15:0]}  otherwise.
// A one-clock trigger pulse is issued as each frame starts, unless no_trigger was high
// when the frame was launched; bad_checksum launches a frame whose checksum is inverted.
// The framing, pattern and the error-injection inputs are this design's own; the paper only
// says that the FPGA generated the test data.
module fee_generator #(
  parameter int unsigned GAP = 16           // idle bits between frames
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,               // send frames back to back while high
  input  logic [15:0] words_per_event,      // length of each frame, sampled at frame start
  input  logic        no_trigger,           // frame launched now gets no trigger
  input  logic        bad_checksum,         // frame launched now carries a wrong checksum
  output logic        sdo,                  // serial line to the readout input
  output logic        trigger,              // one-clock pulse per triggered frame
  output logic [31:0] frames_sent
);
  import readout_pkg::*;

  typedef enum logic [1:0] {G_GAP, G_SEND} gstate_e;
  gstate_e     state;
  logic [15:0] len;             // words in the current frame
  logic [17:0] byte_idx;        // 0:SOF 1:LEN_H 2:LEN_L 3..: data, last: checksum
  logic [3:0]  bit_idx;         // 0..9 within the 10-bit character
  logic [9:0]  shreg;
  logic [7:0]  chk;
  logic        corrupt;
  logic [15:0] gap_cnt;
  logic [11:0] event_no;

  // byte at position idx of the current frame (idx >= 3 and below the checksum)
  function automatic logic [7:0] data_byte(input logic [17:0] idx, input logic [11:0] ev);
    logic [15:0] w;
    logic [31:0] word;
    logic [1:0]  b;
    w    = 16'((idx - 18'd3) >> 2);
    b    = 2'(idx - 18'd3);
    word = (w[1:0] == 2'b11) ? 32'h0 : {4'hD, ev, w};
    return word[{~b, 3'b000} +: 8];   // byte 3-b: big-endian
  endfunction

  logic [17:0] last_idx;
  assign last_idx = 18'd3 + {len, 2'b00};   // index of the checksum byte

  // the character loaded after the current one
  logic [17:0] nidx;
  logic [7:0]  next_byte;
  assign nidx = byte_idx + 18'd1;
  always_comb begin
    if (nidx == 18'd1)           next_byte = len[15:8];
    else if (nidx == 18'd2)      next_byte = len[7:0];
    else if (nidx == last_idx)   next_byte = corrupt ? ~chk : chk;
    else                         next_byte = data_byte(nidx, event_no);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= G_GAP;
      len         <= '0;
      byte_idx    <= '0;
      bit_idx     <= '0;
      shreg       <= '1;
      chk         <= '0;
      corrupt     <= 1'b0;
      gap_cnt     <= '0;
      event_no    <= '0;
      trigger     <= 1'b0;
      frames_sent <= '0;
    end else begin
      trigger <= 1'b0;
      unique case (state)
        G_GAP: begin
          shreg <= '1;
          if (gap_cnt < 16'(GAP)) gap_cnt <= gap_cnt + 1'b1;
          else if (enable) begin
            state    <= G_SEND;
            len      <= words_per_event;
            corrupt  <= bad_checksum;
            trigger  <= ~no_trigger;
            byte_idx <= '0;
            bit_idx  <= '0;
            chk      <= '0;
            shreg    <= {1'b1, FEE_SOF, 1'b0};
          end
        end
        G_SEND: begin
          shreg <= {1'b1, shreg[9:1]};
          if (bit_idx == 4'd9) begin
            bit_idx <= '0;
            if (byte_idx == last_idx) begin
              state       <= G_GAP;
              gap_cnt     <= '0;
              event_no    <= event_no + 1'b1;
              frames_sent <= frames_sent + 1'b1;
              shreg       <= '1;
            end else begin
              byte_idx <= byte_idx + 1'b1;
              shreg    <= {1'b1, next_byte, 1'b0};
              if (nidx != last_idx && nidx >= 18'd3) chk <= chk ^ next_byte;
            end
          end else begin
            bit_idx <= bit_idx + 1'b1;
          end
        end
        default: state <= G_GAP;
      endcase
    end
  end

  assign sdo = shreg[0];
endmodule
