// data_repackage: cuts buffered events into fixed-size packets and writes them into the
// local RAM, ready for the PHY interface.
//
// Packet (one 1024-byte Ethernet payload): Module No., Counting No., Packet Size, raw data,
// CRC. An event of N words (header included) becomes ceil(N/255) packets of up to 255 words;
// the last one is shorter, its size field says how many words it holds and the rest of its
// raw-data area is zero. The CRC-8 covers the 1023 bytes before it. Writing goes one byte per
// clock, header bytes first, each word fetched from event_building and written big-endian.
//
// Packets go to slot (Counting No. mod SLOTS). A new packet is begun only when its slot's
// previous packet has been transmitted (wr_count - tx_count < SLOTS) and is not being
// retransmitted at that moment; otherwise the block stalls and events wait upstream.
// wr_count is the number of finished packets; its low byte is the next Counting No.
// Fixed packet size, the field list and zero fill follow the paper; sizes counted in words,
// per-event fragmentation and the slot rule are this design's choices.
module data_repackage #(
  parameter int unsigned SLOTS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  module_no,
  // from event_building
  input  logic        evq_valid,
  input  logic [15:0] evq_len,
  output logic        evq_pop,
  output logic        rd_en,
  input  logic [31:0] rd_data,
  // local RAM write port
  output logic                               ram_we,
  output logic [$clog2(SLOTS*1024)-1:0]      ram_waddr,
  output logic [7:0]                         ram_wdata,
  // slot bookkeeping with the transmission controller
  output logic [31:0] wr_count,        // packets completed
  input  logic [31:0] tx_count,        // packets transmitted for the first time
  input  logic        rt_active,       // a retransmission is being sent ...
  input  logic [7:0]  rt_cnt,          // ... of this Counting No.
  output logic [31:0] stall_cycles
);
  import readout_pkg::*;

  localparam int unsigned SW = $clog2(SLOTS);

  typedef enum logic [2:0] {K_IDLE, K_WAIT_SLOT, K_HDR, K_FETCH, K_DATA, K_PAD, K_CRC} kstate_e;
  kstate_e     state;
  logic [15:0] remaining;      // words of the current event not yet packed
  logic [7:0]  size;           // words in the current packet
  logic [7:0]  words_done;
  logic [9:0]  offset;         // byte within the packet
  logic [1:0]  bsel;           // byte within the word
  logic [7:0]  crc;

  logic [SW-1:0] slot;
  assign slot = wr_count[SW-1:0];

  logic slot_free;
  assign slot_free = ((wr_count - tx_count) < 32'(SLOTS)) &&
                     !(rt_active && rt_cnt[SW-1:0] == slot);

  logic [7:0] wbyte;
  always_comb begin
    unique case (state)
      K_HDR:   wbyte = (offset == 10'd0) ? module_no :
                       (offset == 10'd1) ? wr_count[7:0] : size;
      K_DATA:  wbyte = rd_data[{~bsel, 3'b000} +: 8];   // byte 3-bsel: big-endian
      K_CRC:   wbyte = crc;
      default: wbyte = 8'h00;
    endcase
  end

  assign ram_we    = (state == K_HDR) || (state == K_DATA) || (state == K_PAD) || (state == K_CRC);
  assign ram_waddr = {slot, offset};
  assign ram_wdata = wbyte;
  assign rd_en     = (state == K_FETCH);
  assign evq_pop   = (state == K_IDLE) && evq_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= K_IDLE;
      remaining    <= '0;
      size         <= '0;
      words_done   <= '0;
      offset       <= '0;
      bsel         <= '0;
      crc          <= '0;
      wr_count     <= '0;
      stall_cycles <= '0;
    end else begin
      unique case (state)
        K_IDLE: if (evq_valid) begin
          remaining <= evq_len;
          state     <= K_WAIT_SLOT;
        end
        K_WAIT_SLOT: begin
          if (slot_free) begin
            size       <= (remaining > 16'(RAW_WORDS)) ? 8'(RAW_WORDS) : remaining[7:0];
            words_done <= '0;
            offset     <= '0;
            crc        <= '0;
            state      <= K_HDR;
          end else begin
            stall_cycles <= stall_cycles + 1'b1;
          end
        end
        K_HDR: begin
          crc    <= crc8_byte(crc, wbyte);
          offset <= offset + 1'b1;
          if (offset == 10'(HDR_BYTES - 1))
            state <= (size == 8'd0) ? K_PAD : K_FETCH;
        end
        K_FETCH: begin
          bsel  <= '0;
          state <= K_DATA;
        end
        K_DATA: begin
          crc    <= crc8_byte(crc, wbyte);
          offset <= offset + 1'b1;
          bsel   <= bsel + 1'b1;
          if (bsel == 2'd3) begin
            words_done <= words_done + 1'b1;
            if (words_done + 8'd1 == size)
              state <= (offset == 10'(PKT_BYTES - 2)) ? K_CRC : K_PAD;
            else
              state <= K_FETCH;
          end
        end
        K_PAD: begin
          crc    <= crc8_byte(crc, wbyte);
          offset <= offset + 1'b1;
          if (offset == 10'(PKT_BYTES - 2)) state <= K_CRC;
        end
        K_CRC: begin
          wr_count  <= wr_count + 1'b1;
          remaining <= remaining - 16'(size);
          state     <= (remaining == 16'(size)) ? K_IDLE : K_WAIT_SLOT;
        end
        default: state <= K_IDLE;
      endcase
    end
  end
endmodule
