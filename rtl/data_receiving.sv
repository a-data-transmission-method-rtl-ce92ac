// data_receiving: the readout module's FEE input. It brings the serial FEE line into the
// clock domain through a two-flop synchroniser and turns it back into bytes.
//
// Line format (this design's choice; the paper leaves the FEE link to the experiment):
// one bit per clock, idle 1, each byte as start bit 0, eight data bits LSB first, stop bit 1.
// A byte appears on rx_byte/rx_valid for one clock, 13 clocks after the first clock edge
// that sees its start bit on sdi (two synchroniser clocks, start, eight data bits, stop). A stop bit of 0 raises framing_error for one clock instead and
// the byte is dropped, so the protocol layer above can abandon the frame it belongs to.
module data_receiving (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sdi,            // serial FEE line
  output logic [7:0] rx_byte,
  output logic       rx_valid,
  output logic       framing_error
);
  typedef enum logic [1:0] {R_IDLE, R_DATA, R_STOP} rstate_e;
  rstate_e    state;
  logic [1:0] sync;
  logic [2:0] bit_cnt;
  logic [7:0] shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync          <= 2'b11;
      state         <= R_IDLE;
      bit_cnt       <= '0;
      shreg         <= '0;
      rx_byte       <= '0;
      rx_valid      <= 1'b0;
      framing_error <= 1'b0;
    end else begin
      sync          <= {sync[0], sdi};
      rx_valid      <= 1'b0;
      framing_error <= 1'b0;
      unique case (state)
        R_IDLE: if (!sync[1]) begin
          state   <= R_DATA;
          bit_cnt <= '0;
        end
        R_DATA: begin
          shreg   <= {sync[1], shreg[7:1]};
          bit_cnt <= bit_cnt + 1'b1;
          if (bit_cnt == 3'd7) state <= R_STOP;
        end
        R_STOP: begin
          state <= R_IDLE;
          if (sync[1]) begin
            rx_byte  <= shreg;
            rx_valid <= 1'b1;
          end else begin
            framing_error <= 1'b1;
          end
        end
        default: state <= R_IDLE;
      endcase
    end
  end
endmodule
