// tb_protocol_resolving: feeds FEE frames byte by byte (random spacing, random garbage
// between frames) and checks the words, frame_start/length and frame_end/frame_ok; includes a
// zero-length frame, a frame with a wrong checksum and a frame cut by a framing error. Then
// sends DAQ commands and checks the Module No. and zero-compression registers, the
// retransmission pulse and the count of unknown opcodes.
module tb_protocol_resolving;
  logic clk = 0, rst_n = 0;
  logic [7:0] rx_byte = 0;
  logic rx_valid = 0, framing_error = 0;
  logic frame_start, word_valid, frame_end, frame_ok;
  logic [15:0] frame_len;
  logic [31:0] word;
  logic cmd_valid = 0;
  logic [7:0] cmd_opcode = 0, cmd_arg = 0;
  logic [7:0] module_no;
  logic zero_comp_en, rt_req_valid;
  logic [7:0] rt_req_cnt;
  logic [15:0] bad_commands;
  int checks = 0, failures = 0;

  protocol_resolving #(.MODULE_NO_INIT(8'd7)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // expectations
  logic [31:0] exp_words[$];
  int          exp_len[$];
  bit          exp_ok[$];
  int          n_rt = 0;
  logic [7:0]  last_rt;

  always @(posedge clk) if (rst_n) begin
    if (frame_start) begin
      check(exp_len.size() > 0 && frame_len == 16'(exp_len.pop_front()), "frame_len");
    end
    if (word_valid) begin
      logic [31:0] e;
      e = exp_words.pop_front();
      check(word == e, $sformatf("word %08x want %08x", word, e));
    end
    if (frame_end) begin
      bit e;
      e = exp_ok.pop_front();
      check(frame_ok == e, "frame_ok");
    end
    if (rt_req_valid) begin n_rt++; last_rt = rt_req_cnt; end
  end

  task automatic put(input logic [7:0] b);
    @(negedge clk);
    rx_byte = b; rx_valid = 1;
    @(negedge clk);
    rx_valid = 0;
    repeat ($urandom_range(0, 4)) @(negedge clk);
  endtask

  task automatic frame(input int len, input bit good, input int cut_after);
    logic [7:0] x = 0;
    exp_len.push_back(len);
    put(8'hAA); put(8'(len >> 8)); put(8'(len));
    for (int i = 0; i < len; i++) begin
      logic [31:0] w = $urandom;
      if (cut_after == i) begin
        put(w[31:24]);
        exp_ok.push_back(0);
        @(negedge clk); framing_error = 1; @(negedge clk); framing_error = 0;
        return;
      end
      exp_words.push_back(w);
      for (int k = 3; k >= 0; k--) begin put(w[8*k +: 8]); x ^= w[8*k +: 8]; end
    end
    exp_ok.push_back(good);
    put(good ? x : ~x);
  endtask

  task automatic cmd(input logic [7:0] op, input logic [7:0] arg);
    @(negedge clk); cmd_valid = 1; cmd_opcode = op; cmd_arg = arg;
    @(negedge clk); cmd_valid = 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    put(8'h13); put(8'h55);               // noise before the first frame
    frame(4, 1, -1);
    frame(0, 1, -1);
    put(8'h00);
    frame(10, 0, -1);
    frame(6, 1, 2);                        // broken by a framing error
    frame(300, 1, -1);
    frame(1, 1, -1);
    repeat (10) @(negedge clk);
    check(exp_words.size() == 0 && exp_ok.size() == 0 && exp_len.size() == 0, "all frames seen");
    // commands
    check(module_no == 8'd7 && zero_comp_en == 0, "config reset values");
    cmd(8'h01, 8'd42);  check(module_no == 8'd42, "set module no");
    cmd(8'h03, 8'h01);  check(zero_comp_en == 1, "zero comp on");
    cmd(8'h02, 8'd200); check(n_rt == 1 && last_rt == 8'd200, "retransmit request");
    cmd(8'h77, 8'd1);   check(bad_commands == 1 && module_no == 8'd42, "unknown opcode");
    cmd(8'h03, 8'h00);  check(zero_comp_en == 0, "zero comp off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
