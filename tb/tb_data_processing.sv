// tb_data_processing: drives frames with and without a preceding trigger, with the trigger
// in the same clock as the frame start, with zero compression on and off, and checks which
// words come out, the ev_start/ev_end/ev_ok pulses, the one-clock latency and the counters.
module tb_data_processing;
  logic clk = 0, rst_n = 0;
  logic trigger = 0, zero_comp_en = 0;
  logic frame_start = 0, word_valid = 0, frame_end = 0, frame_ok = 0;
  logic [31:0] word = 0;
  logic ev_start, ev_word_valid, ev_end, ev_ok;
  logic [31:0] ev_word;
  logic [31:0] frames_accepted, frames_rejected, words_suppressed;
  int checks = 0, failures = 0;

  data_processing dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] expq[$];
  int n_start = 0, n_end = 0, n_bad = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_word_valid) check(expq.size() > 0 && ev_word == expq.pop_front(), "ev_word");
    if (ev_start) n_start++;
    if (ev_end) begin n_end++; if (!ev_ok) n_bad++; end
  end

  // send a frame; trig: 0 none, 1 some clocks before, 2 in the same clock as frame_start
  task automatic frame(input int trig, input int len, input bit ok, input bit zc);
    bit acc = (trig != 0);
    zero_comp_en = zc;
    if (trig == 1) begin
      @(negedge clk); trigger = 1; @(negedge clk); trigger = 0;
      repeat (5) @(negedge clk);
    end
    @(negedge clk); frame_start = 1; trigger = (trig == 2);
    @(negedge clk); frame_start = 0; trigger = 0;
    // output follows one clock after the input
    check(ev_start == acc, "ev_start latency");
    for (int i = 0; i < len; i++) begin
      logic [31:0] w = (i % 3 == 1) ? 32'h0 : $urandom;
      @(negedge clk); word_valid = 1; word = w;
      if (acc && !(zc && w == 0)) expq.push_back(w);
      @(negedge clk); word_valid = 0;
    end
    @(negedge clk); frame_end = 1; frame_ok = ok;
    @(negedge clk); frame_end = 0;
    check(ev_end == acc && (!acc || ev_ok == ok), "ev_end/ev_ok");
    repeat (2) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    frame(1, 6, 1, 0);   // triggered, all words
    frame(0, 6, 1, 0);   // no trigger: dropped
    frame(2, 9, 1, 1);   // trigger with start, zero compression: 3 zeros dropped
    frame(1, 4, 0, 0);   // triggered, bad checksum passed on
    frame(0, 3, 1, 1);   // no trigger
    check(expq.size() == 0, "all words out");
    check(frames_accepted == 3 && frames_rejected == 2, "accept/reject counters");
    check(words_suppressed == 3, "suppressed counter");
    check(n_start == 3 && n_end == 3 && n_bad == 1, "start/end counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
