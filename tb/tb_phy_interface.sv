// tb_phy_interface: the PHY interface between a local-RAM model and an MII PHY model
// (25 MHz TX_CLK and RX_CLK against a 100 MHz system clock).
// Transmit: sends three packets (two back to back) and decodes MII TX: preamble and SFD,
// destination and source MAC, type 0xFF00, the 1024 payload bytes equal to the RAM slot,
// and the FCS against a bit-serial CRC-32 reference; each frame must last exactly 2100
// TX_CLK periods (100 Mbit/s) and be followed by at least 24 idle periods (96 bit times)
// before tx_done and the next frame.
// Receive: sends command frames and checks that only those addressed to this module (or
// broadcast), of type 0xFF00, long enough, without RX_ER and with a good FCS produce a
// command.
module tb_phy_interface;
  import tb_ref_pkg::*;
  localparam int SLOTS = 4;
  localparam logic [47:0] SRC = 48'h02_11_22_33_44_55;
  localparam logic [47:0] DST = 48'h00_AA_BB_CC_DD_EE;
  logic clk = 0, rst_n = 0;
  logic tx_start = 0;
  logic [1:0] tx_slot = 0;
  logic tx_busy, tx_done;
  logic [11:0] ram_raddr;
  logic [7:0] ram_rdata;
  logic mii_tx_clk = 0, mii_rx_clk = 0;
  logic [3:0] mii_txd;
  logic mii_tx_en;
  logic mii_rx_dv = 0, mii_rx_er = 0;
  logic [3:0] mii_rxd = 0;
  logic cmd_valid;
  logic [7:0] cmd_opcode, cmd_arg;
  logic [31:0] frames_sent, cmd_frames_ok, cmd_frames_bad;
  int checks = 0, failures = 0;

  phy_interface #(.SLOTS(SLOTS), .SRC_MAC(SRC), .DST_MAC(DST)) dut (.*);
  always #5 clk = ~clk;
  always #20 mii_tx_clk = ~mii_tx_clk;
  initial begin #7; forever #20 mii_rx_clk = ~mii_rx_clk; end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // RAM model
  logic [7:0] ram [SLOTS*1024];
  always @(posedge clk) ram_rdata <= ram[ram_raddr];

  // MII TX capture
  logic [3:0] nibs[$];
  int frames_seen = 0;
  int slot_q[$];
  int idle_run = 1000;
  bit prev_en = 0;
  always @(posedge mii_tx_clk) begin
    if (mii_tx_en) begin
      if (!prev_en) check(idle_run >= 24, $sformatf("inter-frame gap %0d", idle_run));
      nibs.push_back(mii_txd);
      idle_run = 0;
    end else begin
      if (prev_en) check_frame();
      idle_run++;
    end
    prev_en = mii_tx_en;
  end

  task automatic check_frame();
    byte_q_t b, body;
    int slot;
    logic [31:0] fcs;
    slot = slot_q.pop_front();
    check(nibs.size() == 2100, $sformatf("frame length %0d nibbles", nibs.size()));
    for (int i = 0; i + 1 < nibs.size(); i += 2) b.push_back({nibs[i+1], nibs[i]});
    nibs = {};
    for (int i = 0; i < 7; i++) check(b[i] == 8'h55, "preamble");
    check(b[7] == 8'hD5, "SFD");
    for (int i = 8; i < b.size() - 4; i++) body.push_back(b[i]);
    check({body[0], body[1], body[2], body[3], body[4], body[5]} == DST, "dst MAC");
    check({body[6], body[7], body[8], body[9], body[10], body[11]} == SRC, "src MAC");
    check({body[12], body[13]} == 16'hFF00, "type 0xFF00");
    for (int i = 0; i < 1024; i++)
      if (body[14+i] != ram[slot*1024 + i]) begin
        failures++;
        if (failures < 5) $display("FAIL payload byte %0d", i);
      end
    checks++;
    fcs = ref_fcs(body);
    check({b[b.size()-1], b[b.size()-2], b[b.size()-3], b[b.size()-4]} == fcs, "FCS");
    frames_seen++;
  endtask

  // MII RX driver
  task automatic rx_frame(input byte_q_t f, input bit er);
    @(negedge mii_rx_clk);
    mii_rx_dv = 1;
    for (int i = 0; i < 15; i++) begin mii_rxd = 4'h5; @(negedge mii_rx_clk); end
    mii_rxd = 4'hD; @(negedge mii_rx_clk);
    foreach (f[i]) begin
      mii_rxd = f[i][3:0]; mii_rx_er = er && (i == 20); @(negedge mii_rx_clk);
      mii_rxd = f[i][7:4]; mii_rx_er = 0; @(negedge mii_rx_clk);
    end
    mii_rx_dv = 0; mii_rxd = 0;
    repeat (30) @(negedge mii_rx_clk);
  endtask

  int ncmd = 0;
  logic [7:0] last_op, last_arg;
  always @(posedge clk) if (cmd_valid) begin ncmd++; last_op = cmd_opcode; last_arg = cmd_arg; end

  task automatic send_pkt(input int slot);
    @(negedge clk);
    slot_q.push_back(slot);
    tx_start = 1; tx_slot = 2'(slot);
    @(negedge clk); tx_start = 0;
  endtask

  initial begin
    longint t_done;
    byte_q_t f;
    // reference check of the CRC-32 model: CRC-32 of "123456789" is 0xCBF43926
    f = {8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
    check(ref_fcs(f) == 32'hCBF43926, "CRC-32 reference");
    foreach (ram[i]) ram[i] = 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    // transmit
    send_pkt(2);
    wait (tx_done); @(negedge clk);
    send_pkt(0);                       // back to back
    wait (tx_done); @(negedge clk);
    send_pkt(3);
    wait (tx_done); @(negedge clk);
    repeat (50) @(negedge clk);
    check(frames_seen == 3 && frames_sent == 3, "three frames");
    // receive
    rx_frame(cmd_frame(SRC, DST, 16'hFF00, 8'h02, 8'd77, 0), 0);
    check(ncmd == 1 && last_op == 8'h02 && last_arg == 8'd77, "command to own MAC");
    rx_frame(cmd_frame(48'hFFFF_FFFF_FFFF, DST, 16'hFF00, 8'h01, 8'd9, 0), 0);
    check(ncmd == 2 && last_op == 8'h01 && last_arg == 8'd9, "broadcast command");
    rx_frame(cmd_frame(48'h02_11_22_33_44_56, DST, 16'hFF00, 8'h01, 8'd1, 0), 0);
    check(ncmd == 2, "other MAC ignored");
    rx_frame(cmd_frame(SRC, DST, 16'hFF00, 8'h01, 8'd2, 1), 0);
    check(ncmd == 2, "bad FCS ignored");
    rx_frame(cmd_frame(SRC, DST, 16'h0800, 8'h01, 8'd3, 0), 0);
    check(ncmd == 2, "other type ignored");
    rx_frame(cmd_frame(SRC, DST, 16'hFF00, 8'h01, 8'd4, 0), 1);
    check(ncmd == 2, "RX_ER frame ignored");
    f = cmd_frame(SRC, DST, 16'hFF00, 8'h01, 8'd5, 0);
    f = f[0:15];
    begin
      logic [31:0] fc = ref_fcs(f);
      for (int i = 0; i < 4; i++) f.push_back(fc[8*i +: 8]);
    end
    rx_frame(f, 0);
    check(ncmd == 2, "runt frame ignored");
    rx_frame(cmd_frame(SRC, DST, 16'hFF00, 8'h03, 8'd1, 0), 0);
    check(ncmd == 3 && last_op == 8'h03, "command after errors");
    check(cmd_frames_ok == 3 && cmd_frames_bad == 5, $sformatf("rx counters %0d %0d", cmd_frames_ok, cmd_frames_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
