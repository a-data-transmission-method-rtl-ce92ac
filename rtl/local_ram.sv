// local_ram: the readout module's packet buffer. SLOTS packets of PKT_BYTES bytes each, one
// byte wide, one write port (data_repackage) and one read port (PHY interface) on the same
// clock; the read is registered, rdata is valid the clock after raddr. Byte address =
// slot * PKT_BYTES + offset. Written as a plain array so that it maps to on-chip block RAM.
// The paper names a local RAM that holds packets until they are read out; its size (8 KiB by
// default, eight packets kept for retransmission) is this design's choice.
module local_ram #(
  parameter int unsigned SLOTS     = 8,
  parameter int unsigned PKT_BYTES = 1024
) (
  input  logic                                clk,
  input  logic                                we,
  input  logic [$clog2(SLOTS*PKT_BYTES)-1:0]  waddr,
  input  logic [7:0]                          wdata,
  input  logic [$clog2(SLOTS*PKT_BYTES)-1:0]  raddr,
  output logic [7:0]                          rdata
);
  logic [7:0] mem [SLOTS*PKT_BYTES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
