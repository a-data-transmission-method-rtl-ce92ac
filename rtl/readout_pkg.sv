// readout_pkg: constants, types and checksum functions shared by the readout-module RTL.
//
// Packet layout (one Ethernet payload of PKT_BYTES bytes, Table-1 style):
//   byte 0            Module No.
//   byte 1            Counting No. (packet sequence number, wraps at 256)
//   byte 2            Packet Size, counted in 32-bit raw-data words (0..RAW_WORDS)
//   bytes 3..1022     raw data, big-endian words, unused tail filled with zero
//   byte 1023         CRC-8 over bytes 0..1022
// The 1024-byte payload, the one-byte fields and the 0xFF00 EtherType follow the paper.
// Counting the size in 32-bit words (so that 1020 bytes fit a one-byte field), the CRC-8
// polynomial, the FEE link framing and the DAQ command encoding are choices of this design.
package readout_pkg;

  // ---- customised Ethernet frame ---------------------------------------------------------
  localparam int unsigned PKT_BYTES   = 1024;           // Ethernet data field, fixed
  localparam int unsigned HDR_BYTES   = 3;              // Module No., Counting No., Packet Size
  localparam int unsigned RAW_BYTES   = PKT_BYTES - HDR_BYTES - 1;  // 1020
  localparam int unsigned RAW_WORDS   = RAW_BYTES / 4;  // 255 words per packet
  localparam logic [15:0] ETH_TYPE    = 16'hFF00;       // customised protocol type
  localparam int unsigned PREAMBLE_BYTES = 8;           // 7 x 0x55 + SFD 0xD5
  localparam int unsigned ETH_HDR_BYTES  = 14;          // dst(6) src(6) type(2)
  localparam int unsigned FCS_BYTES      = 4;
  localparam int unsigned IFG_NIBBLES    = 24;          // 96 bit times at 4 bits per MII clock
  localparam int unsigned MIN_FRAME_BYTES = 64;         // dst..FCS, Ethernet minimum

  // ---- FEE link protocol -------------------------------------------------------------------
  localparam logic [7:0] FEE_SOF = 8'hAA;   // start of an FEE frame

  // ---- DAQ -> readout module commands (first two payload bytes of a 0xFF00 frame) ---------
  typedef enum logic [7:0] {
    CMD_SET_MODULE_NO = 8'h01,   // arg = new Module No.
    CMD_RETRANSMIT    = 8'h02,   // arg = Counting No. of the packet to send again
    CMD_SET_ZERO_COMP = 8'h03    // arg[0] = zero compression enable
  } cmd_op_e;

  // ---- transmission controller states (Fig. 5) ---------------------------------------------
  typedef enum logic [1:0] {
    TX_IDLE    = 2'd0,
    TX_TRANS   = 2'd1,
    TX_RETRANS = 2'd2
  } tx_state_e;

  // ---- status counters brought out of the top ---------------------------------------------
  typedef struct packed {
    logic [31:0] fee_framing_errors;
    logic [31:0] frames_accepted;     // FEE frames with a trigger
    logic [31:0] frames_rejected;     // FEE frames without a trigger
    logic [31:0] words_suppressed;    // zero-compressed words
    logic [31:0] events_built;
    logic [31:0] events_bad;          // FEE checksum failed
    logic [31:0] events_overflow;     // event buffer full
    logic [31:0] packets_built;
    logic [31:0] repackage_stall_cycles;
    logic [31:0] packets_sent;        // first transmissions
    logic [31:0] frames_sent;         // all Ethernet frames, retransmissions included
    logic [31:0] retransmissions;
    logic [31:0] rt_rejected;
    logic [31:0] rt_dropped;          // requests lost to a full request queue
    logic [15:0] bad_commands;        // unknown command opcodes
    logic [31:0] gen_frames_sent;     // frames sent by the FEE emulator
    logic [31:0] cmd_frames_ok;
    logic [31:0] cmd_frames_bad;
    logic [7:0]  module_no;
    logic        zero_comp_en;
    tx_state_e   tx_state;
  } readout_status_t;

  // ---- checksums ---------------------------------------------------------------------------
  // CRC-8, polynomial x^8+x^2+x+1 (0x07), initial value 0, MSB first.
  function automatic logic [7:0] crc8_byte(input logic [7:0] crc, input logic [7:0] data);
    logic [7:0] c;
    c = crc ^ data;
    for (int i = 0; i < 8; i++) c = c[7] ? ((c << 1) ^ 8'h07) : (c << 1);
    return c;
  endfunction

  // Ethernet CRC-32, reflected polynomial 0xEDB88320, one byte LSB first.
  // The register starts at all ones; the FCS is its complement sent low byte first.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] data);
    logic [31:0] c;
    c = crc ^ {24'h0, data};
    for (int i = 0; i < 8; i++) c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return c;
  endfunction

  localparam logic [31:0] CRC32_RESIDUE = 32'hDEBB20E3;  // register after data + good FCS

endpackage
