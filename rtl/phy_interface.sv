// phy_interface: the readout module's data exchange channel with the DAQ through an external
// Ethernet PHY on its MII port. Uploading: mii_tx_mac sends packets from the local RAM as
// customised Ethernet frames (type 0xFF00). Downloading: mii_rx_mac receives command frames
// from the DAQ and hands their opcode and argument on. The two directions are independent
// (full duplex). See the two sub-modules for framing and timing. MII, the frame type and the
// fixed 1024-byte payload follow the paper; the command format is this design's own.
module phy_interface #(
  parameter int unsigned SLOTS   = 8,
  parameter logic [47:0] SRC_MAC = 48'h02_00_00_00_00_01,   // this module
  parameter logic [47:0] DST_MAC = 48'hFF_FF_FF_FF_FF_FF    // DAQ computer
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the transmission controller
  input  logic        tx_start,
  input  logic [$clog2(SLOTS)-1:0] tx_slot,
  output logic        tx_busy,
  output logic        tx_done,
  // local RAM read port
  output logic [$clog2(SLOTS*1024)-1:0] ram_raddr,
  input  logic [7:0]  ram_rdata,
  // MII
  input  logic        mii_tx_clk,
  output logic [3:0]  mii_txd,
  output logic        mii_tx_en,
  input  logic        mii_rx_clk,
  input  logic        mii_rx_dv,
  input  logic        mii_rx_er,
  input  logic [3:0]  mii_rxd,
  // commands to protocol_resolving
  output logic        cmd_valid,
  output logic [7:0]  cmd_opcode,
  output logic [7:0]  cmd_arg,
  // statistics
  output logic [31:0] frames_sent,
  output logic [31:0] cmd_frames_ok,
  output logic [31:0] cmd_frames_bad
);
  mii_tx_mac #(.SLOTS(SLOTS), .SRC_MAC(SRC_MAC), .DST_MAC(DST_MAC)) u_tx (
    .clk, .rst_n, .tx_start, .tx_slot, .tx_busy, .tx_done, .ram_raddr, .ram_rdata,
    .mii_tx_clk, .mii_txd, .mii_tx_en, .frames_sent
  );

  mii_rx_mac #(.OWN_MAC(SRC_MAC)) u_rx (
    .clk, .rst_n, .mii_rx_clk, .mii_rx_dv, .mii_rx_er, .mii_rxd,
    .cmd_valid, .cmd_opcode, .cmd_arg, .frames_ok(cmd_frames_ok), .frames_bad(cmd_frames_bad)
  );
endmodule
