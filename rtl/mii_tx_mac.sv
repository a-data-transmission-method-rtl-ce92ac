// mii_tx_mac: transmit half of the PHY interface. On tx_start it sends the packet held in
// local-RAM slot tx_slot as one customised Ethernet frame over MII:
//   7 x 0x55, 0xD5 | destination MAC | source MAC | type 0xFF00 | 1024-byte packet | FCS
// (no padding is ever needed, the payload is far above the 46-byte minimum), followed by a
// 96-bit-time inter-frame gap, after which tx_done pulses for one clock.
//
// The MII TX_CLK (25 MHz for 100 Mbit/s) comes from the PHY. The logic runs on the faster
// system clock, samples TX_CLK through two flops and acts once per rising edge; TXD/TX_EN
// therefore change shortly after each TX_CLK rise and are taken by the PHY on the next one.
// The system clock must be at least twice TX_CLK. Each byte goes out low nibble first.
// The packet byte for the next nibble is read from the RAM one system clock ahead.
// FCS: Ethernet CRC-32 over destination MAC .. payload, complemented, low byte first.
// Frame layout and type value follow the paper's customised frame; the clocking scheme is
// this design's own.
module mii_tx_mac #(
  parameter int unsigned SLOTS   = 8,
  parameter logic [47:0] SRC_MAC = 48'h02_00_00_00_00_01,
  parameter logic [47:0] DST_MAC = 48'hFF_FF_FF_FF_FF_FF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tx_start,
  input  logic [$clog2(SLOTS)-1:0] tx_slot,
  output logic        tx_busy,
  output logic        tx_done,
  // local RAM read port
  output logic [$clog2(SLOTS*1024)-1:0] ram_raddr,
  input  logic [7:0]  ram_rdata,
  // MII transmit
  input  logic        mii_tx_clk,
  output logic [3:0]  mii_txd,
  output logic        mii_tx_en,
  output logic [31:0] frames_sent
);
  import readout_pkg::*;

  localparam int unsigned SW        = $clog2(SLOTS);
  localparam int unsigned PAY_FIRST = PREAMBLE_BYTES + ETH_HDR_BYTES;        // 22
  localparam int unsigned FCS_FIRST = PAY_FIRST + PKT_BYTES;                 // 1046
  localparam int unsigned LAST_BYTE = FCS_FIRST + FCS_BYTES - 1;             // 1049

  typedef enum logic [1:0] {T_IDLE, T_FRAME, T_IFG} tstate_e;
  tstate_e       state;
  logic [2:0]    clk_sync;
  logic          ce;
  logic [10:0]   byte_idx;
  logic          nib;            // 0: low nibble next, 1: high nibble next
  logic [SW-1:0] slot;
  logic [31:0]   crc;
  logic [4:0]    ifg_cnt;

  assign ce = clk_sync[1] & ~clk_sync[2];

  // RAM address of the payload byte at byte_idx (don't care outside the payload)
  logic [9:0] pay_off;
  assign pay_off   = 10'(byte_idx - 11'(PAY_FIRST));
  assign ram_raddr = {slot, pay_off};

  logic [7:0] cur;
  always_comb begin
    if (byte_idx < 11'(PREAMBLE_BYTES - 1))  cur = 8'h55;
    else if (byte_idx == 11'(PREAMBLE_BYTES - 1)) cur = 8'hD5;
    else if (byte_idx < 11'(PREAMBLE_BYTES + 6))  cur = DST_MAC[8*(13 - byte_idx) +: 8];
    else if (byte_idx < 11'(PREAMBLE_BYTES + 12)) cur = SRC_MAC[8*(19 - byte_idx) +: 8];
    else if (byte_idx == 11'(PREAMBLE_BYTES + 12)) cur = ETH_TYPE[15:8];
    else if (byte_idx == 11'(PREAMBLE_BYTES + 13)) cur = ETH_TYPE[7:0];
    else if (byte_idx < 11'(FCS_FIRST))       cur = ram_rdata;
    else                                      cur = ~crc[8*(byte_idx - 11'(FCS_FIRST)) +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clk_sync    <= '0;
      state       <= T_IDLE;
      byte_idx    <= '0;
      nib         <= 1'b0;
      slot        <= '0;
      crc         <= '1;
      ifg_cnt     <= '0;
      mii_txd     <= '0;
      mii_tx_en   <= 1'b0;
      tx_done     <= 1'b0;
      frames_sent <= '0;
    end else begin
      clk_sync <= {clk_sync[1:0], mii_tx_clk};
      tx_done  <= 1'b0;
      unique case (state)
        T_IDLE: begin
          if (ce) begin
            mii_tx_en <= 1'b0;
            mii_txd   <= '0;
          end
          if (tx_start) begin
            state    <= T_FRAME;
            slot     <= tx_slot;
            byte_idx <= '0;
            nib      <= 1'b0;
            crc      <= '1;
          end
        end
        T_FRAME: if (ce) begin
          mii_tx_en <= 1'b1;
          if (!nib) begin
            mii_txd <= cur[3:0];
            nib     <= 1'b1;
          end else begin
            mii_txd <= cur[7:4];
            nib     <= 1'b0;
            if (byte_idx >= 11'(PREAMBLE_BYTES) && byte_idx < 11'(FCS_FIRST))
              crc <= crc32_byte(crc, cur);
            if (byte_idx == 11'(LAST_BYTE)) begin
              state   <= T_IFG;
              ifg_cnt <= '0;
            end else begin
              byte_idx <= byte_idx + 1'b1;
            end
          end
        end
        T_IFG: if (ce) begin
          mii_tx_en <= 1'b0;
          mii_txd   <= '0;
          ifg_cnt   <= ifg_cnt + 1'b1;
          if (ifg_cnt == 5'(IFG_NIBBLES - 1)) begin
            state       <= T_IDLE;
            tx_done     <= 1'b1;
            frames_sent <= frames_sent + 1'b1;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  assign tx_busy = (state != T_IDLE);

  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    tx_start |-> !tx_busy);
endmodule
