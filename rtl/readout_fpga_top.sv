// readout_fpga_top: FPGA logic of one readout module that sends detector data straight to the
// DAQ computer over an Ethernet PHY, with no TCP/IP: a fixed-size custom packet inside a
// raw Ethernet frame of type 0xFF00, and retransmission of single packets on request.
//
// Data path (one system clock, clk, at least twice the MII clocks; 100 MHz intended):
//   fee_sdi -> data_receiving (bytes) -> protocol_resolving (FEE frames -> words)
//   -> data_processing (trigger validation, zero compression)
//   -> event_building (event header, commit/rollback event buffer)
//   -> data_repackage (1024-byte packets: Module No., Counting No., size, data, CRC-8)
//   -> local_ram (SLOTS packets) -> phy_interface/mii_tx_mac (Ethernet frame on MII TX)
// Control path: MII RX -> phy_interface/mii_rx_mac (command frames) -> protocol_resolving
//   (Module No., zero-compression switch, retransmission requests) -> tx_state_machine
//   (IDLE / TRANS / RE-TRANS) which picks the RAM slot the PHY interface sends next.
// A fee_generator is included as on the prototype board: its serial output gen_sdo and its
// trigger gen_trigger come out as pins to be looped back into fee_sdi and trigger, or left
// unused when real front-end electronics drive those pins.
// The external PHY chip and the DAQ computer are outside this module: the MII pins connect
// to the PHY. Block partitioning follows the paper's FPGA logic diagram; widths, encodings
// and buffer sizes are this design's own (see each sub-module).
module readout_fpga_top
  import readout_pkg::*;
#(
  parameter int unsigned SLOTS          = 8,      // packets held in the local RAM
  parameter int unsigned EVB_DEPTH      = 2048,   // event buffer, 32-bit words
  parameter logic [7:0]  MODULE_NO_INIT = 8'd1,
  parameter logic [47:0] SRC_MAC        = 48'h02_00_00_00_00_01,
  parameter logic [47:0] DST_MAC        = 48'hFF_FF_FF_FF_FF_FF,
  parameter int unsigned GEN_GAP        = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // FEE link
  input  logic        fee_sdi,
  input  logic        trigger,
  // on-board FEE emulator
  input  logic        gen_enable,
  input  logic [15:0] gen_words_per_event,
  input  logic        gen_no_trigger,
  input  logic        gen_bad_checksum,
  output logic        gen_sdo,
  output logic        gen_trigger,
  // MII to the Ethernet PHY
  input  logic        mii_tx_clk,
  output logic [3:0]  mii_txd,
  output logic        mii_tx_en,
  input  logic        mii_rx_clk,
  input  logic        mii_rx_dv,
  input  logic        mii_rx_er,
  input  logic [3:0]  mii_rxd,
  // status
  output readout_status_t status
);
  localparam int unsigned RAM_AW = $clog2(SLOTS * PKT_BYTES);

  // data_receiving -> protocol_resolving
  logic [7:0]  rx_byte;
  logic        rx_valid, framing_error;
  // protocol_resolving -> data_processing
  logic        frame_start, word_valid, frame_end, frame_ok;
  logic [15:0] frame_len;
  logic [31:0] word;
  // data_processing -> event_building
  logic        ev_start, ev_word_valid, ev_end, ev_ok;
  logic [31:0] ev_word;
  // event_building -> data_repackage
  logic        evq_valid, evq_pop, evb_rd_en;
  logic [15:0] evq_len;
  logic [31:0] evb_rd_data;
  // local RAM
  logic              ram_we;
  logic [RAM_AW-1:0] ram_waddr, ram_raddr;
  logic [7:0]        ram_wdata, ram_rdata;
  // transmission control
  logic [31:0] wr_count, tx_count;
  logic        rt_active;
  logic [7:0]  rt_cnt;
  logic        tx_start, tx_busy, tx_done;
  logic [$clog2(SLOTS)-1:0] tx_slot;
  // commands
  logic        cmd_valid;
  logic [7:0]  cmd_opcode, cmd_arg;
  logic [7:0]  module_no;
  logic        zero_comp_en;
  logic        rt_req_valid;
  logic [7:0]  rt_req_cnt;
  logic [15:0] bad_commands;
  logic [31:0] gen_frames_sent;
  tx_state_e   tx_state;

  fee_generator #(.GAP(GEN_GAP)) u_gen (
    .clk, .rst_n, .enable(gen_enable), .words_per_event(gen_words_per_event),
    .no_trigger(gen_no_trigger), .bad_checksum(gen_bad_checksum),
    .sdo(gen_sdo), .trigger(gen_trigger), .frames_sent(gen_frames_sent)
  );

  data_receiving u_rx (
    .clk, .rst_n, .sdi(fee_sdi), .rx_byte, .rx_valid, .framing_error
  );

  // framing errors counted here
  logic [31:0] fee_framing_errors;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             fee_framing_errors <= '0;
    else if (framing_error) fee_framing_errors <= fee_framing_errors + 1'b1;
  end

  protocol_resolving #(.MODULE_NO_INIT(MODULE_NO_INIT)) u_proto (
    .clk, .rst_n, .rx_byte, .rx_valid, .framing_error,
    .frame_start, .frame_len, .word_valid, .word, .frame_end, .frame_ok,
    .cmd_valid, .cmd_opcode, .cmd_arg,
    .module_no, .zero_comp_en, .rt_req_valid, .rt_req_cnt, .bad_commands
  );

  data_processing u_proc (
    .clk, .rst_n, .trigger, .zero_comp_en,
    .frame_start, .word_valid, .word, .frame_end, .frame_ok,
    .ev_start, .ev_word_valid, .ev_word, .ev_end, .ev_ok,
    .frames_accepted(status.frames_accepted), .frames_rejected(status.frames_rejected),
    .words_suppressed(status.words_suppressed)
  );

  event_building #(.DEPTH(EVB_DEPTH)) u_evb (
    .clk, .rst_n, .ev_start, .ev_word_valid, .ev_word, .ev_end, .ev_ok,
    .evq_valid, .evq_len, .evq_pop, .rd_en(evb_rd_en), .rd_data(evb_rd_data),
    .events_built(status.events_built), .events_bad(status.events_bad),
    .events_overflow(status.events_overflow)
  );

  data_repackage #(.SLOTS(SLOTS)) u_pack (
    .clk, .rst_n, .module_no,
    .evq_valid, .evq_len, .evq_pop, .rd_en(evb_rd_en), .rd_data(evb_rd_data),
    .ram_we, .ram_waddr, .ram_wdata,
    .wr_count, .tx_count, .rt_active, .rt_cnt,
    .stall_cycles(status.repackage_stall_cycles)
  );

  local_ram #(.SLOTS(SLOTS), .PKT_BYTES(PKT_BYTES)) u_ram (
    .clk, .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata), .raddr(ram_raddr), .rdata(ram_rdata)
  );

  tx_state_machine #(.SLOTS(SLOTS)) u_txsm (
    .clk, .rst_n, .wr_count, .tx_count, .rt_req_valid, .rt_req_cnt, .rt_active, .rt_cnt,
    .tx_start, .tx_slot, .tx_done, .state(tx_state),
    .retransmissions(status.retransmissions), .rt_rejected(status.rt_rejected),
    .rt_dropped(status.rt_dropped)
  );

  phy_interface #(.SLOTS(SLOTS), .SRC_MAC(SRC_MAC), .DST_MAC(DST_MAC)) u_phy (
    .clk, .rst_n, .tx_start, .tx_slot, .tx_busy, .tx_done, .ram_raddr, .ram_rdata,
    .mii_tx_clk, .mii_txd, .mii_tx_en, .mii_rx_clk, .mii_rx_dv, .mii_rx_er, .mii_rxd,
    .cmd_valid, .cmd_opcode, .cmd_arg,
    .frames_sent(status.frames_sent), .cmd_frames_ok(status.cmd_frames_ok),
    .cmd_frames_bad(status.cmd_frames_bad)
  );

  assign status.fee_framing_errors = fee_framing_errors;
  assign status.packets_built      = wr_count;
  assign status.packets_sent       = tx_count;
  assign status.bad_commands       = bad_commands;
  assign status.gen_frames_sent    = gen_frames_sent;
  assign status.module_no          = module_no;
  assign status.zero_comp_en       = zero_comp_en;
  assign status.tx_state           = tx_state;
endmodule
