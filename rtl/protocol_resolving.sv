// protocol_resolving: resolves the two protocols that meet in the readout module.
//
// FEE side: parses the byte stream from data_receiving into frames
//   0xAA, LEN_H, LEN_L (length in 32-bit words), 4*LEN data bytes, XOR checksum
// and hands on frame_start (with the length), one word per 4 data bytes (big-endian) and
// frame_end with frame_ok = checksum matched. A framing error from the byte receiver while
// a frame is open ends that frame at once with frame_ok = 0; bytes outside a frame that are
// not 0xAA are skipped (resynchronisation on the next start byte).
//
// DAQ side: decodes command frames delivered by the PHY interface (opcode, argument):
//   0x01 set Module No., 0x02 request retransmission of a Counting No.,
//   0x03 zero compression on/off (arg bit 0).
// Module No. and the zero compression switch are held here as configuration registers;
// a retransmission request is passed on as a one-clock pulse. Unknown opcodes are counted.
// The paper names this block and its role; the frame and command encodings are this
// design's own.
module protocol_resolving #(
  parameter logic [7:0] MODULE_NO_INIT = 8'd0
) (
  input  logic        clk,
  input  logic        rst_n,
  // bytes from data_receiving
  input  logic [7:0]  rx_byte,
  input  logic        rx_valid,
  input  logic        framing_error,
  // frames towards data_processing
  output logic        frame_start,
  output logic [15:0] frame_len,
  output logic        word_valid,
  output logic [31:0] word,
  output logic        frame_end,
  output logic        frame_ok,
  // commands from the PHY interface
  input  logic        cmd_valid,
  input  logic [7:0]  cmd_opcode,
  input  logic [7:0]  cmd_arg,
  // configuration and requests
  output logic [7:0]  module_no,
  output logic        zero_comp_en,
  output logic        rt_req_valid,
  output logic [7:0]  rt_req_cnt,
  output logic [15:0] bad_commands
);
  import readout_pkg::*;

  typedef enum logic [2:0] {P_HUNT, P_LEN_H, P_LEN_L, P_DATA, P_CHK} pstate_e;
  pstate_e     state;
  logic [7:0]  len_h;
  logic [15:0] words_left;
  logic [1:0]  byte_in_word;
  logic [23:0] partial;
  logic [7:0]  xsum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= P_HUNT;
      len_h        <= '0;
      words_left   <= '0;
      byte_in_word <= '0;
      partial      <= '0;
      xsum         <= '0;
      frame_start  <= 1'b0;
      frame_len    <= '0;
      word_valid   <= 1'b0;
      word         <= '0;
      frame_end    <= 1'b0;
      frame_ok     <= 1'b0;
    end else begin
      frame_start <= 1'b0;
      word_valid  <= 1'b0;
      frame_end   <= 1'b0;
      if (framing_error) begin
        if (state != P_HUNT && state != P_LEN_H && state != P_LEN_L) begin
          frame_end <= 1'b1;          // abandon the open frame
          frame_ok  <= 1'b0;
        end
        state <= P_HUNT;
      end else if (rx_valid) begin
        unique case (state)
          P_HUNT:  if (rx_byte == FEE_SOF) state <= P_LEN_H;
          P_LEN_H: begin
            len_h     <= rx_byte;
            state     <= P_LEN_L;
          end
          P_LEN_L: begin
            frame_start  <= 1'b1;
            frame_len    <= {len_h, rx_byte};
            words_left   <= {len_h, rx_byte};
            byte_in_word <= '0;
            xsum         <= '0;
            state        <= ({len_h, rx_byte} == 16'd0) ? P_CHK : P_DATA;
          end
          P_DATA: begin
            xsum <= xsum ^ rx_byte;
            byte_in_word <= byte_in_word + 1'b1;
            if (byte_in_word == 2'd3) begin
              word       <= {partial, rx_byte};
              word_valid <= 1'b1;
              words_left <= words_left - 1'b1;
              if (words_left == 16'd1) state <= P_CHK;
            end else begin
              partial <= {partial[15:0], rx_byte};
            end
          end
          P_CHK: begin
            frame_end <= 1'b1;
            frame_ok  <= (rx_byte == xsum);
            state     <= P_HUNT;
          end
          default: state <= P_HUNT;
        endcase
      end
    end
  end

  // ---- DAQ command decoding ----------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      module_no    <= MODULE_NO_INIT;
      zero_comp_en <= 1'b0;
      rt_req_valid <= 1'b0;
      rt_req_cnt   <= '0;
      bad_commands <= '0;
    end else begin
      rt_req_valid <= 1'b0;
      if (cmd_valid) begin
        unique case (cmd_opcode)
          CMD_SET_MODULE_NO: module_no    <= cmd_arg;
          CMD_SET_ZERO_COMP: zero_comp_en <= cmd_arg[0];
          CMD_RETRANSMIT: begin
            rt_req_valid <= 1'b1;
            rt_req_cnt   <= cmd_arg;
          end
          default: bad_commands <= bad_commands + 1'b1;
        endcase
      end
    end
  end
endmodule
