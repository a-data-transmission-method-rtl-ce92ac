// tb_data_receiving: serialises random bytes (start 0, 8 bits LSB first, stop 1, one bit per
// clock) with random idle gaps, and checks the bytes and their latency (two synchroniser
// clocks plus the ten bit times). One byte is sent with a broken stop bit and must produce
// framing_error and no byte.
module tb_data_receiving;
  logic clk = 0, rst_n = 0, sdi = 1;
  logic [7:0] rx_byte;
  logic rx_valid, framing_error;
  int checks = 0, failures = 0;
  logic [7:0] expq[$];
  int n_err = 0;
  longint start_cyc[$];
  longint cyc = 0;

  data_receiving dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [7:0] b, input bit bad_stop);
    logic [9:0] ch = {~bad_stop, b, 1'b0};
    start_cyc.push_back(cyc);
    for (int i = 0; i < 10; i++) begin
      sdi = ch[i];
      @(negedge clk);
    end
    sdi = 1;
  endtask

  always @(posedge clk) begin
    if (rx_valid) begin
      logic [7:0] e;
      longint s;
      checks++;
      e = expq.pop_front();
      s = start_cyc.pop_front();
      if (rx_byte !== e) begin failures++; $display("byte %02x want %02x", rx_byte, e); end
      // 2 synchroniser clocks, 1 to see the start bit, 8 data bits, stop bit, output register
      checks++;
      if (cyc - s != 13) begin failures++; $display("latency %0d", cyc - s); end
    end
    if (framing_error) begin
      n_err++;
      void'(start_cyc.pop_front());
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    for (int k = 0; k < 300; k++) begin
      logic [7:0] b = 8'($urandom);
      if (k == 150) begin
        send(b, 1);
        repeat (3) @(negedge clk);
      end else begin
        expq.push_back(b);
        send(b, 0);
      end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (n_err != 1 || expq.size() != 0) begin failures++; $display("n_err=%0d left=%0d", n_err, expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
