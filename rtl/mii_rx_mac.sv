// mii_rx_mac: receive half of the PHY interface, the path on which the DAQ downloads
// configuration and retransmission requests.
//
// RX_CLK, RX_DV, RX_ER and RXD are sampled together through two flops on the system clock
// (at least twice RX_CLK) and taken once per RX_CLK rising edge. After the preamble the first
// nibble 0xD of the SFD starts the frame; nibbles are paired low-first into bytes. When RX_DV
// falls the frame is accepted if it has a whole number of bytes, is at least 64 bytes long,
// saw no RX_ER, carries a good FCS (CRC-32 register equal to the residue 0xDEBB20E3), is
// addressed to OWN_MAC or broadcast, and has type 0xFF00. Its payload bytes 0 and 1 are then
// presented as cmd_opcode/cmd_arg with a one-clock cmd_valid. Other frames are counted and
// ignored. The command layout is this design's own; the paper says only that the DAQ
// sends configuration and retransmission commands to the readout module.
module mii_rx_mac #(
  parameter logic [47:0] OWN_MAC = 48'h02_00_00_00_00_01
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mii_rx_clk,
  input  logic        mii_rx_dv,
  input  logic        mii_rx_er,
  input  logic [3:0]  mii_rxd,
  output logic        cmd_valid,
  output logic [7:0]  cmd_opcode,
  output logic [7:0]  cmd_arg,
  output logic [31:0] frames_ok,
  output logic [31:0] frames_bad
);
  import readout_pkg::*;

  logic [2:0] clk_s;
  logic [1:0] dv_s, er_s;
  logic [3:0] d_s0, d_s1;
  logic       ce;
  assign ce = clk_s[1] & ~clk_s[2];

  typedef enum logic [1:0] {M_IDLE, M_PRE, M_DATA} mstate_e;
  mstate_e     state;
  logic        nib;
  logic [3:0]  lo;
  logic [10:0] nbytes;
  logic [31:0] crc;
  logic [47:0] dst;
  logic [15:0] etype;
  logic [7:0]  op, arg;
  logic        err;

  logic [7:0] b;
  assign b = {d_s1, lo};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clk_s      <= '0;
      dv_s       <= '0;
      er_s       <= '0;
      d_s0       <= '0;
      d_s1       <= '0;
      state      <= M_IDLE;
      nib        <= 1'b0;
      lo         <= '0;
      nbytes     <= '0;
      crc        <= '1;
      dst        <= '0;
      etype      <= '0;
      op         <= '0;
      arg        <= '0;
      err        <= 1'b0;
      cmd_valid  <= 1'b0;
      cmd_opcode <= '0;
      cmd_arg    <= '0;
      frames_ok  <= '0;
      frames_bad <= '0;
    end else begin
      clk_s     <= {clk_s[1:0], mii_rx_clk};
      dv_s      <= {dv_s[0], mii_rx_dv};
      er_s      <= {er_s[0], mii_rx_er};
      d_s0      <= mii_rxd;
      d_s1      <= d_s0;
      cmd_valid <= 1'b0;
      if (ce) begin
        unique case (state)
          M_IDLE: if (dv_s[1]) begin
            state <= M_PRE;
            err   <= er_s[1];
            if (d_s1 == 4'hD) begin          // preamble cut short to the SFD
              state  <= M_DATA;
              nib    <= 1'b0;
              nbytes <= '0;
              crc    <= '1;
            end
          end
          M_PRE: begin
            if (!dv_s[1]) state <= M_IDLE;
            else if (d_s1 == 4'hD) begin
              state  <= M_DATA;
              nib    <= 1'b0;
              nbytes <= '0;
              crc    <= '1;
            end
            if (er_s[1]) err <= 1'b1;
          end
          M_DATA: begin
            if (dv_s[1]) begin
              if (er_s[1]) err <= 1'b1;
              if (!nib) begin
                lo  <= d_s1;
                nib <= 1'b1;
              end else begin
                nib <= 1'b0;
                crc <= crc32_byte(crc, b);
                if (nbytes != 11'h7FF) nbytes <= nbytes + 1'b1;
                if (nbytes < 11'd6)        dst   <= {dst[39:0], b};
                else if (nbytes == 11'd12) etype[15:8] <= b;
                else if (nbytes == 11'd13) etype[7:0]  <= b;
                else if (nbytes == 11'd14) op  <= b;
                else if (nbytes == 11'd15) arg <= b;
              end
            end else begin
              state <= M_IDLE;
              if (!err && !nib && nbytes >= 11'(MIN_FRAME_BYTES) && crc == CRC32_RESIDUE &&
                  (dst == OWN_MAC || dst == 48'hFFFF_FFFF_FFFF) && etype == ETH_TYPE) begin
                cmd_valid  <= 1'b1;
                cmd_opcode <= op;
                cmd_arg    <= arg;
                frames_ok  <= frames_ok + 1'b1;
              end else begin
                frames_bad <= frames_bad + 1'b1;
              end
            end
          end
          default: state <= M_IDLE;
        endcase
      end
    end
  end
endmodule
