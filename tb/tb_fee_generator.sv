// tb_fee_generator: launches single frames from the FEE emulator with different lengths and
// error-injection settings, deserialises its serial output with an independent sampler and
// checks every byte (start byte, length, pattern words, XOR checksum, inverted when asked),
// the ten-clock character time, the trigger pulses and the frame counter.
module tb_fee_generator;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic enable = 0, no_trigger = 0, bad_checksum = 0;
  logic [15:0] words_per_event = 0;
  logic sdo, trigger;
  logic [31:0] frames_sent;
  int checks = 0, failures = 0;
  int ntrig = 0;
  longint cyc = 0;

  fee_generator #(.GAP(8)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (trigger) ntrig++;
  end

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

  // receive one character; returns its byte and the cycle of its start bit
  task automatic get_byte(output logic [7:0] b, output longint t0);
    do @(negedge clk); while (sdo !== 1'b0);
    t0 = cyc;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      b[i] = sdo;
    end
    @(negedge clk);
    check(sdo === 1'b1, "stop bit");
  endtask

  task automatic one_frame(input int e, input int len, input bit notrig, input bit badchk);
    logic [7:0] b, x;
    longint t0, tfirst;
    int tr0;
    @(negedge clk);
    words_per_event = 16'(len); no_trigger = notrig; bad_checksum = badchk; enable = 1;
    tr0 = ntrig;
    get_byte(b, tfirst);
    enable = 0;
    check(b == 8'hAA, "start byte");
    get_byte(b, t0); check(b == 8'(len >> 8), "len hi");
    get_byte(b, t0); check(b == 8'(len), "len lo");
    x = 0;
    for (int i = 0; i < len; i++) begin
      logic [31:0] w = gen_word(e, i);
      for (int k = 3; k >= 0; k--) begin
        get_byte(b, t0);
        x ^= w[8*k +: 8];
        check(b == w[8*k +: 8], $sformatf("data e%0d w%0d got %02x want %02x", e, i, b, w[8*k +: 8]));
      end
    end
    get_byte(b, t0);
    check(b == (badchk ? ~x : x), "checksum");
    check(t0 - tfirst == 10 * (3 + 4 * len), "character time");
    check(ntrig - tr0 == (notrig ? 0 : 1), "trigger pulse");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    one_frame(0, 5, 0, 0);
    one_frame(1, 0, 0, 0);
    one_frame(2, 3, 0, 1);
    one_frame(3, 7, 1, 0);
    one_frame(4, 300, 0, 0);
    repeat (20) @(posedge clk);
    check(frames_sent == 5, "frames_sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
