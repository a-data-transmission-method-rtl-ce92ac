// tb_event_building: writes events into a small event buffer (64 words, 4 queued events) and
// reads them back as the re-package stage would. Checks the header word
// {event number, data words}, the data, that events with a bad checksum are rolled back, that
// an event larger than the free space is dropped as overflow, that a fifth event while four
// wait in the length queue is dropped, and that space freed by reading is reused.
module tb_event_building;
  logic clk = 0, rst_n = 0;
  logic ev_start = 0, ev_word_valid = 0, ev_end = 0, ev_ok = 0;
  logic [31:0] ev_word = 0;
  logic evq_valid, evq_pop, rd_en;
  logic [15:0] evq_len;
  logic [31:0] rd_data;
  logic [31:0] events_built, events_bad, events_overflow;
  int checks = 0, failures = 0;

  event_building #(.DEPTH(64), .LEN_DEPTH(4)) dut (.*);
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

  typedef logic [31:0] wq_t[$];
  wq_t expected[$];       // committed events, header first
  int  next_ev = 0;

  task automatic send(input int len, input bit ok, input bit expect_commit);
    wq_t q;
    q.push_back({16'(next_ev), 16'(len)});
    @(negedge clk); ev_start = 1;
    @(negedge clk); ev_start = 0;
    for (int i = 0; i < len; i++) begin
      logic [31:0] w = $urandom;
      q.push_back(w);
      @(negedge clk); ev_word_valid = 1; ev_word = w;
      @(negedge clk); ev_word_valid = 0;
    end
    @(negedge clk); ev_end = 1; ev_ok = ok;
    @(negedge clk); ev_end = 0;
    if (expect_commit) begin
      expected.push_back(q);
      next_ev++;
    end
  endtask

  // reader
  logic pop_r = 0, rd_r = 0;
  assign evq_pop = pop_r;
  assign rd_en   = rd_r;
  task automatic read_all();
    while (evq_valid) begin
      wq_t q;
      int n;
      n = evq_len;
      check(expected.size() > 0, "event expected");
      q = expected.pop_front();
      check(n == q.size(), $sformatf("evq_len %0d want %0d", n, q.size()));
      @(negedge clk); pop_r = 1;
      @(negedge clk); pop_r = 0;
      for (int i = 0; i < n; i++) begin
        rd_r = 1;
        @(negedge clk); rd_r = 0;
        check(rd_data == q[i], $sformatf("word %0d: %08x want %08x", i, rd_data, q[i]));
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    send(5, 1, 1);
    send(3, 0, 0);            // bad checksum
    send(10, 1, 1);
    read_all();
    send(70, 1, 0);           // larger than the buffer
    send(0, 1, 1);            // header only
    send(20, 1, 1);
    read_all();
    // fill the length queue
    for (int k = 0; k < 4; k++) send(2, 1, 1);
    send(2, 1, 0);            // fifth waits: dropped
    read_all();
    // wrap-around of the buffer pointers
    for (int k = 0; k < 10; k++) begin send(40, 1, 1); read_all(); end
    check(expected.size() == 0, "all read");
    check(events_built == 18 && events_bad == 1 && events_overflow == 2,
          $sformatf("counters %0d %0d %0d", events_built, events_bad, events_overflow));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
