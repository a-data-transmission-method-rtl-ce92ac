// tb_ref_pkg: reference models used by the testbenches, written independently of the RTL:
// the checksums in their bit-serial (LFSR) forms, the FEE test pattern and helpers that build
// Ethernet command frames as byte lists.
package tb_ref_pkg;

  typedef logic [7:0] byte_q_t[$];

  // CRC-8 (x^8+x^2+x+1), init 0, fed one bit at a time, MSB first
  function automatic logic [7:0] ref_crc8(input byte_q_t data);
    logic [7:0] c = 8'h00;
    foreach (data[k])
      for (int i = 7; i >= 0; i--) begin
        logic fb = c[7] ^ data[k][i];
        c = {c[6:0], 1'b0};
        if (fb) c ^= 8'h07;
      end
    return c;
  endfunction

  // Ethernet FCS in the non-reflected form: polynomial 0x04C11DB7, bits LSB first per byte,
  // result bit-reversed and complemented. Returned as the 32-bit FCS value whose low byte is
  // sent first.
  function automatic logic [31:0] ref_fcs(input byte_q_t data);
    logic [31:0] c = 32'hFFFF_FFFF;
    logic [31:0] r;
    foreach (data[k])
      for (int i = 0; i < 8; i++) begin
        logic fb = c[31] ^ data[k][i];
        c = {c[30:0], 1'b0};
        if (fb) c ^= 32'h04C1_1DB7;
      end
    for (int i = 0; i < 32; i++) r[i] = c[31-i];
    return ~r;
  endfunction

  // word i of FEE event e as the on-board generator produces it
  function automatic logic [31:0] gen_word(input int unsigned e, input int unsigned i);
    if ((i % 4) == 3) return 32'h0;
    return {4'hD, 12'(e), 16'(i)};
  endfunction

  // Ethernet frame (without preamble) carrying a readout-module command
  function automatic byte_q_t cmd_frame(input logic [47:0] dst, input logic [47:0] src,
                                        input logic [15:0] etype, input logic [7:0] op,
                                        input logic [7:0] arg, input bit corrupt_fcs);
    byte_q_t f;
    logic [31:0] fcs;
    for (int i = 5; i >= 0; i--) f.push_back(dst[8*i +: 8]);
    for (int i = 5; i >= 0; i--) f.push_back(src[8*i +: 8]);
    f.push_back(etype[15:8]);
    f.push_back(etype[7:0]);
    f.push_back(op);
    f.push_back(arg);
    while (f.size() < 60) f.push_back(8'h00);
    fcs = ref_fcs(f);
    if (corrupt_fcs) fcs ^= 32'h0000_0100;
    for (int i = 0; i < 4; i++) f.push_back(fcs[8*i +: 8]);
    return f;
  endfunction

endpackage
