// tb_readout_fpga_top: end-to-end test of the readout module at its default parameters.
//
// The on-board FEE emulator is looped back into the FEE input and trigger, as on the
// prototype board. An MII PHY model (25 MHz clocks, switchable to 2.5 MHz, i.e. 10 Mbit/s)
// feeds a DAQ model that checks every frame (preamble, type 0xFF00, FCS), every packet
// (Module No., Counting No. sequence, CRC-8, zero fill) and reassembles the events, comparing
// them with the emulator's pattern. The DAQ model sends commands back over MII RX: set the
// Module No., switch zero compression, and request a retransmission whenever a frame arrives
// damaged (the PHY model corrupts one payload byte of one frame on the line).
//
// Mechanisms that must each happen at least once: triggered and untriggered frames, an FEE
// checksum error, zero compression, an event split over several packets with a zero-filled
// last packet, event-buffer overflow, re-package stall, TRANS and RE-TRANS states with a
// retransmission delivered, a Module No. change, and back-to-back frames at line rate.
// At 100 Mbit/s, full packets sent back to back must carry raw data at 96.05 Mbit/s
// (255 words every 2124 MII clocks); the rate is measured from one frame start to the next.
module tb_readout_fpga_top;
  import readout_pkg::*;
  import tb_ref_pkg::*;

  localparam logic [47:0] OWN_MAC = 48'h02_00_00_00_00_01;   // top default SRC_MAC
  localparam logic [47:0] DAQ_MAC = 48'h00_1B_21_00_00_99;

  logic clk = 0, rst_n = 0;
  logic fee_sdi, trigger;
  logic gen_enable = 0, gen_no_trigger = 0, gen_bad_checksum = 0;
  logic [15:0] gen_words_per_event = 0;
  logic gen_sdo, gen_trigger;
  logic mii_tx_clk = 0, mii_rx_clk = 0;
  logic [3:0] mii_txd;
  logic mii_tx_en;
  logic mii_rx_dv = 0, mii_rx_er = 0;
  logic [3:0] mii_rxd = 0;
  readout_status_t status;
  int checks = 0, failures = 0;

  readout_fpga_top dut (.*);

  assign fee_sdi = gen_sdo;          // loop-back as on the prototype board
  assign trigger = gen_trigger;

  always #5 clk = ~clk;                          // 100 MHz system clock
  int tx_half = 20;                              // 25 MHz, 100 Mbit/s
  always #(tx_half) mii_tx_clk = ~mii_tx_clk;
  initial begin #7; forever #20 mii_rx_clk = ~mii_rx_clk; end

  initial begin
    #60ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- expected events
  typedef logic [31:0] wq_t[$];
  wq_t exp_events[$];
  int  n_gen = 0;                  // emulator event counter
  int  n_committed = 0;
  bit  zc = 0;

  // ---------------------------------------------------------------- DAQ: MII TX side
  logic [3:0] nibs[$];
  bit prev_en = 0;
  int idle_run = 1000;
  bit damage[int] = '{2: 1, 9: 1}; // packets damaged once on the line, by Counting No.
  int frame_idx = 0;
  byte_q_t good_pkt[int];          // first good copy of each packet, by Counting No.
  int next_cnt = 0;
  logic [31:0] stream[$];          // reassembled word stream
  int n_fragmented = 0, n_zero_filled = 0, n_rt_rx = 0, n_bad_rx = 0;
  int n_line_rate_gaps = 0;
  int min_gap = 1000;
  longint clk_cnt = 0;             // system clocks since start, for rate measurement
  longint last_start_clk = -1;
  int last_raw_bits = 0;           // raw-data bits of the frame that ended last
  real best_rate = 0.0;            // raw-data Mbit/s, from one frame start to the next
  bit saw_module_21 = 0;
  logic [7:0] exp_module = 8'd1;
  byte_q_t cmd_q[$];               // frames for the RX driver

  always @(posedge clk) clk_cnt++;

  always @(posedge mii_tx_clk) begin
    if (mii_tx_en) begin
      if (!prev_en) begin
        check(idle_run >= 24, $sformatf("inter-frame gap %0d", idle_run));
        if (idle_run <= 26) n_line_rate_gaps++;
        if (idle_run < min_gap) min_gap = idle_run;
        if (idle_run <= 26 && last_start_clk >= 0) begin
          real rate;
          rate = real'(last_raw_bits) * 100.0 / real'(clk_cnt - last_start_clk);
          if (rate > best_rate) best_rate = rate;
        end
        last_start_clk = clk_cnt;
      end
      nibs.push_back(mii_txd);
      idle_run = 0;
    end else begin
      if (prev_en) daq_frame();
      idle_run++;
    end
    prev_en = mii_tx_en;
  end

  task automatic daq_frame();
    byte_q_t b, body, pkt;
    logic [31:0] fcs;
    int cnt, sz;
    bit bad;
    check(nibs.size() == 2100, $sformatf("frame of %0d nibbles", nibs.size()));
    for (int i = 0; i + 1 < nibs.size(); i += 2) b.push_back({nibs[i+1], nibs[i]});
    nibs = {};
    last_raw_bits = 0;
    if (damage.exists(b[8 + 14 + 1])) begin                     // line error
      damage.delete(b[8 + 14 + 1]);
      b[8 + 14 + 100] ^= 8'h10;
    end
    frame_idx++;
    check(b[7] == 8'hD5 && b[0] == 8'h55, "preamble/SFD");
    for (int i = 8; i < b.size() - 4; i++) body.push_back(b[i]);
    check({body[12], body[13]} == 16'hFF00, "type 0xFF00");
    fcs = {b[b.size()-1], b[b.size()-2], b[b.size()-3], b[b.size()-4]};
    for (int i = 14; i < body.size(); i++) pkt.push_back(body[i]);
    bad = (fcs != ref_fcs(body)) || (pkt[1023] != ref_crc8(pkt[0:1022]));
    cnt = pkt[1];
    if (bad) begin
      n_bad_rx++;
      cmd_q.push_back(cmd_frame(OWN_MAC, DAQ_MAC, 16'hFF00, 8'h02, 8'(cnt), 0));
      return;
    end
    if (good_pkt.exists(cnt)) begin
      checks++;
      if (good_pkt[cnt] != pkt) begin failures++; $display("FAIL retransmitted copy differs"); end
      n_rt_rx++;
      return;
    end
    if (cnt != frame_idx - 1 && cnt < next_cnt) begin end
    good_pkt[cnt] = pkt;
    check(pkt[0] == exp_module || pkt[0] == 8'h21, "Module No.");
    if (pkt[0] == 8'h21) saw_module_21 = 1;
    sz = pkt[2];
    last_raw_bits = 32 * sz;
    check(sz <= 255, "size field");
    if (sz < 255) begin
      bit zeros = 1;
      for (int i = 3 + 4*sz; i < 1023; i++) if (pkt[i] != 0) zeros = 0;
      check(zeros, "zero fill");
      n_zero_filled++;
    end
    // deliver packets in Counting No. order
    while (good_pkt.exists(next_cnt)) begin
      byte_q_t p = good_pkt[next_cnt];
      for (int w = 0; w < p[2]; w++) stream.push_back({p[3+4*w], p[4+4*w], p[5+4*w], p[6+4*w]});
      next_cnt++;
      parse_stream();
    end
  endtask

  // take complete events off the stream and compare them
  int ev_seen = 0;
  task automatic parse_stream();
    while (stream.size() > 0 && stream.size() >= 1 + stream[0][15:0]) begin
      logic [31:0] h;
      wq_t e;
      int n;
      h = stream.pop_front();
      n = h[15:0];
      check(exp_events.size() > 0, "an event was expected");
      e = exp_events.pop_front();
      check(h[31:16] == 16'(ev_seen), $sformatf("event number %0d want %0d", h[31:16], ev_seen));
      check(n == e.size(), $sformatf("event %0d: %0d words, want %0d", ev_seen, n, e.size()));
      for (int i = 0; i < n; i++) begin
        logic [31:0] w;
        w = stream.pop_front();
        if (i < e.size() && w != e[i]) begin
          failures++;
          if (failures < 10) $display("FAIL event %0d word %0d %08x want %08x", ev_seen, i, w, e[i]);
        end
      end
      checks++;
      if (n + 1 > 255) n_fragmented++;
      ev_seen++;
    end
  endtask

  // ---------------------------------------------------------------- DAQ: MII RX side
  initial begin
    forever begin
      wait (cmd_q.size() > 0);
      rx_frame(cmd_q.pop_front());
    end
  end

  task automatic rx_frame(input byte_q_t f);
    @(negedge mii_rx_clk);
    mii_rx_dv = 1;
    for (int i = 0; i < 15; i++) begin mii_rxd = 4'h5; @(negedge mii_rx_clk); end
    mii_rxd = 4'hD; @(negedge mii_rx_clk);
    foreach (f[i]) begin
      mii_rxd = f[i][3:0]; @(negedge mii_rx_clk);
      mii_rxd = f[i][7:4]; @(negedge mii_rx_clk);
    end
    mii_rx_dv = 0; mii_rxd = 0;
    repeat (24) @(negedge mii_rx_clk);
  endtask

  task automatic command(input logic [7:0] op, input logic [7:0] arg);
    int ok0 = status.cmd_frames_ok;
    cmd_q.push_back(cmd_frame(OWN_MAC, DAQ_MAC, 16'hFF00, op, arg, 0));
    wait (status.cmd_frames_ok == ok0 + 1);
    repeat (5) @(negedge clk);
  endtask

  // ---------------------------------------------------------------- FEE emulator control
  task automatic gen_frame(input int len, input bit notrig, input bit badchk, input bit fits);
    int sent0 = status.gen_frames_sent;
    if (!notrig && !badchk && fits) begin
      wq_t e;
      for (int i = 0; i < len; i++) begin
        logic [31:0] w;
        w = gen_word(n_gen, i);
        if (!(zc && w == 0)) e.push_back(w);
      end
      exp_events.push_back(e);
    end
    @(negedge clk);
    gen_words_per_event = 16'(len); gen_no_trigger = notrig; gen_bad_checksum = badchk;
    gen_enable = 1;
    wait (gen_sdo == 1'b0);
    @(negedge clk); gen_enable = 0;
    wait (status.gen_frames_sent == sent0 + 1);
    n_gen++;
  endtask

  task automatic drain(input int max_clocks);
    int t = 0;
    while ((exp_events.size() > 0 || status.packets_sent != status.packets_built ||
            status.tx_state != TX_IDLE || cmd_q.size() > 0) && t < max_clocks) begin
      @(negedge clk); t++;
    end
    repeat (3000) @(negedge clk);
    check(exp_events.size() == 0, $sformatf("%0d events never arrived", exp_events.size()));
  endtask

  // ---------------------------------------------------------------- state coverage
  int n_enter_trans = 0, n_enter_retrans = 0, n_trans_to_rt = 0, n_idle_to_rt = 0;
  tx_state_e st_prev = TX_IDLE;
  always @(posedge clk) if (rst_n) begin
    if (status.tx_state != st_prev) begin
      if (status.tx_state == TX_TRANS) n_enter_trans++;
      if (status.tx_state == TX_RETRANS) n_enter_retrans++;
      if (status.tx_state == TX_RETRANS && st_prev == TX_TRANS) n_trans_to_rt++;
      if (status.tx_state == TX_RETRANS && st_prev == TX_IDLE) n_idle_to_rt++;
    end
    st_prev <= status.tx_state;
  end

  // ---------------------------------------------------------------- scenario
  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    check(status.module_no == 8'd1, "Module No. after reset");

    gen_frame(10, 0, 0, 1);          // small event
    gen_frame(300, 0, 0, 1);         // two packets
    gen_frame(7, 1, 0, 1);           // no trigger: rejected
    gen_frame(12, 0, 1, 1);          // FEE checksum error: discarded
    gen_frame(600, 0, 0, 1);         // three packets; frame 2 is damaged on the line
    drain(400000);

    command(8'h01, 8'h21);           // new Module No.
    exp_module = 8'h21;
    command(8'h03, 8'h01);           // zero compression on
    zc = 1;
    gen_frame(40, 0, 0, 1);
    command(8'h03, 8'h00);
    zc = 0;
    gen_frame(2100, 0, 0, 0);        // larger than the event buffer: overflow
    gen_frame(2000, 0, 0, 1);        // eight packets, sent back to back at line rate
    drain(900000);

    tx_half = 200;                   // PHY now at 10 Mbit/s: re-package must stall
    repeat (100) @(negedge clk);
    gen_frame(2000, 0, 0, 1);
    gen_frame(1900, 0, 0, 1);        // arrives while the first is still being sent
    drain(3000000);
    // the DAQ asks again for a packet it already has: served from IDLE
    tx_half = 20;
    repeat (100) @(negedge clk);
    cmd_q.push_back(cmd_frame(OWN_MAC, DAQ_MAC, 16'hFF00, 8'h02, 8'(next_cnt - 3), 0));
    begin
      int t = 0;
      while (n_rt_rx == 0 && t < 100000) begin @(negedge clk); t++; end
    end
    drain(100000);

    // ------------------------------------------------------------ results
    check(status.frames_accepted == 9 && status.frames_rejected == 1, "accept / reject by trigger");
    check(status.events_bad == 1, "FEE checksum error");
    check(status.events_overflow == 1, "event-buffer overflow");
    check(status.words_suppressed == 10, $sformatf("zero compression %0d", status.words_suppressed));
    check(status.repackage_stall_cycles > 0, "re-package stall");
    check(n_fragmented >= 3, "events split over packets");
    check(n_zero_filled >= 3, "zero-filled last packets");
    check(n_bad_rx == 2 && n_rt_rx == 1, $sformatf("damaged %0d, retransmitted copies %0d", n_bad_rx, n_rt_rx));
    check(status.retransmissions == 3, $sformatf("retransmissions %0d", status.retransmissions));
    check(n_enter_trans > 0 && n_trans_to_rt >= 1 && n_idle_to_rt >= 1, "TRANS, TRANS->RE-TRANS, IDLE->RE-TRANS");
    check(saw_module_21, "Module No. changed by command");
    check(n_line_rate_gaps >= 5, $sformatf("back-to-back frames %0d", n_line_rate_gaps));
    // full packets back to back at 100 Mbit/s: 255 words in 2124 MII clocks = 8496 clocks
    check(best_rate > 95.9 && best_rate < 96.2, $sformatf("raw-data rate %f Mbit/s", best_rate));
    check(status.packets_sent == status.packets_built && next_cnt == status.packets_built,
          "every packet delivered");
    $display("mechanisms: accepted=%0d rejected=%0d fee_chk_err=%0d overflow=%0d zero_suppressed=%0d stall_cycles=%0d",
             status.frames_accepted, status.frames_rejected, status.events_bad, status.events_overflow,
             status.words_suppressed, status.repackage_stall_cycles);
    $display("mechanisms: trans->retrans=%0d idle->retrans=%0d", n_trans_to_rt, n_idle_to_rt);
    $display("mechanisms: fragmented=%0d zero_filled=%0d damaged=%0d rt_copies=%0d retrans=%0d trans_entries=%0d retrans_entries=%0d line_rate_gaps=%0d packets=%0d",
             n_fragmented, n_zero_filled, n_bad_rx, n_rt_rx, status.retransmissions, n_enter_trans,
             n_enter_retrans, n_line_rate_gaps, status.packets_built);
    $display("shortest inter-frame gap %0d MII clocks; best raw-data rate %0.2f Mbit/s; simulated %0t",
             min_gap, best_rate, $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
