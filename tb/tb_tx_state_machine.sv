// tb_tx_state_machine: drives the transmission controller with a model of the PHY interface
// (tx_done a fixed time after each tx_start) and checks the order of slots sent: new packets
// in counting order, retransmission requests served after the frame in progress ("Err.
// Occur" in TRANS) or at once when idle, requests for packets not yet sent, never written or
// already overwritten rejected, a full request queue counted, and that only the charted
// state changes (plus IDLE -> RE-TRANS) ever occur.
module tb_tx_state_machine;
  import readout_pkg::*;
  localparam int SLOTS = 8;
  logic clk = 0, rst_n = 0;
  logic [31:0] wr_count = 0, tx_count;
  logic rt_req_valid = 0;
  logic [7:0] rt_req_cnt = 0;
  logic rt_active;
  logic [7:0] rt_cnt;
  logic tx_start;
  logic [2:0] tx_slot;
  logic tx_done = 0;
  tx_state_e state;
  logic [31:0] retransmissions, rt_rejected, rt_dropped;
  int checks = 0, failures = 0;

  tx_state_machine #(.SLOTS(SLOTS), .RQ_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // PHY model: a frame takes 50 clocks
  int sent[$];                 // slots in the order sent
  bit sent_rt[$];
  int busy_cnt = 0;
  always @(posedge clk) begin
    tx_done <= 1'b0;
    if (tx_start && rst_n) begin
      sent.push_back(tx_slot);
      sent_rt.push_back(rt_active);
      busy_cnt <= 50;
    end else if (busy_cnt > 0) begin
      busy_cnt <= busy_cnt - 1;
      if (busy_cnt == 1) tx_done <= 1'b1;
    end
  end

  // legal state changes
  tx_state_e prev = TX_IDLE;
  int n_trans_to_rt = 0, n_idle_to_rt = 0;
  always @(posedge clk) if (rst_n) begin
    if (state != prev) begin
      checks++;
      if (!((prev == TX_IDLE && state == TX_TRANS) || (prev == TX_TRANS && state == TX_IDLE) ||
            (prev == TX_TRANS && state == TX_RETRANS) || (prev == TX_RETRANS && state == TX_IDLE) ||
            (prev == TX_IDLE && state == TX_RETRANS))) begin
        failures++; $display("FAIL transition %s -> %s", prev.name(), state.name());
      end
      if (prev == TX_TRANS && state == TX_RETRANS) n_trans_to_rt++;
      if (prev == TX_IDLE && state == TX_RETRANS) n_idle_to_rt++;
    end
    prev <= state;
  end

  task automatic request(input int c);
    @(negedge clk); rt_req_valid = 1; rt_req_cnt = 8'(c);
    @(negedge clk); rt_req_valid = 0;
  endtask

  task automatic expect_sent(input int slots[$], input bit rts[$], input string what);
    check(sent.size() == slots.size(), $sformatf("%s: %0d frames, want %0d", what, sent.size(), slots.size()));
    foreach (slots[i]) if (i < sent.size())
      check(sent[i] == slots[i] && sent_rt[i] == rts[i],
            $sformatf("%s: frame %0d slot %0d rt %0d, want %0d %0d", what, i, sent[i], sent_rt[i], slots[i], rts[i]));
    sent = {}; sent_rt = {};
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    check(state == TX_IDLE && sent.size() == 0, "idle without data");
    // three new packets
    wr_count = 3;
    repeat (300) @(negedge clk);
    expect_sent('{0, 1, 2}, '{0, 0, 0}, "new packets");
    check(tx_count == 3 && state == TX_IDLE, "tx_count 3");
    // error reported while idle
    request(1);
    repeat (100) @(negedge clk);
    expect_sent('{1}, '{1}, "retransmit from idle");
    // error reported during a transmission
    wr_count = 5;
    repeat (10) @(negedge clk);
    request(0);
    repeat (300) @(negedge clk);
    expect_sent('{3, 0, 4}, '{0, 1, 0}, "retransmit after frame");
    check(n_trans_to_rt == 1 && n_idle_to_rt == 1, "TRANS->RE-TRANS and IDLE->RE-TRANS seen");
    // invalid requests: not yet sent (5), never written (200); valid one (2)
    request(5); request(200); request(2);
    repeat (200) @(negedge clk);
    expect_sent('{2}, '{1}, "only the valid request");
    check(rt_rejected == 2, $sformatf("rejected %0d", rt_rejected));
    // overwritten: after 12 more packets packet 2 is gone, packet 12 is kept
    wr_count = 17;
    repeat (1000) @(negedge clk);
    check(tx_count == 17, "tx_count 17");
    sent = {}; sent_rt = {};
    request(2); request(12);
    repeat (200) @(negedge clk);
    expect_sent('{4}, '{1}, "old packet rejected");
    check(rt_rejected == 3, "rejected 3");
    // queue of 4: the fifth request is dropped
    wr_count = 18;
    repeat (5) @(negedge clk);
    request(13); request(14); request(15); request(16); request(13);
    repeat (600) @(negedge clk);
    expect_sent('{1, 5, 6, 7, 0}, '{0, 1, 1, 1, 1}, "queued requests");
    check(rt_dropped == 1 && retransmissions == 8, $sformatf("dropped %0d rt %0d", rt_dropped, retransmissions));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
