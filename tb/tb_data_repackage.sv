// tb_data_repackage: offers events of 1, 255, 256, 600 and 40 words to the re-package stage,
// records its writes into a model of the local RAM and, each time a packet is completed,
// checks the whole packet: Module No., Counting No., size in words, big-endian data, zero fill
// and the CRC-8 computed by a bit-serial reference. Also checks the write time of one packet
// (1024 bytes at one per clock plus one fetch clock per word), that at most SLOTS packets are
// written ahead of transmission (stall), and that a slot under retransmission is not
// overwritten.
module tb_data_repackage;
  import tb_ref_pkg::*;
  localparam int SLOTS = 4;
  logic clk = 0, rst_n = 0;
  logic [7:0] module_no = 8'h5A;
  logic evq_valid;
  logic [15:0] evq_len;
  logic evq_pop, rd_en;
  logic [31:0] rd_data;
  logic ram_we;
  logic [$clog2(SLOTS*1024)-1:0] ram_waddr;
  logic [7:0] ram_wdata;
  logic [31:0] wr_count, tx_count = 0;
  logic rt_active = 0;
  logic [7:0] rt_cnt = 0;
  logic [31:0] stall_cycles;
  int checks = 0, failures = 0;

  data_repackage #(.SLOTS(SLOTS)) dut (.*);
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

  // event source model: length queue + word stream with registered read
  typedef logic [31:0] wq_t[$];
  logic [31:0] words[$];
  int lens[$];
  always_comb begin
    evq_valid = lens.size() > 0;
    evq_len   = evq_valid ? 16'(lens[0]) : 16'd0;
  end
  always @(posedge clk) begin
    if (evq_pop && evq_valid) void'(lens.pop_front());
    if (rd_en) rd_data <= words.pop_front();
  end

  // RAM model
  logic [7:0] ram [SLOTS*1024];
  always @(posedge clk) if (ram_we) ram[ram_waddr] <= ram_wdata;

  // expected packets
  logic [31:0] exp_data[$];     // words in packing order
  int          exp_sizes[$];
  int          pkt_checked = 0;

  task automatic add_event(input int n);
    wq_t q;
    int left = n;
    for (int i = 0; i < n; i++) q.push_back($urandom);
    foreach (q[i]) exp_data.push_back(q[i]);
    while (left > 0) begin
      exp_sizes.push_back(left > 255 ? 255 : left);
      left -= 255;
    end
    foreach (q[i]) words.push_back(q[i]);
    lens.push_back(n);
  endtask

  // check a packet as soon as its CRC byte has been written
  logic [31:0] prev_wr = 0;
  always @(negedge clk) if (rst_n && wr_count != prev_wr) begin
    int slot, sz;
    byte_q_t body;
    prev_wr = wr_count;
    body = {};
    slot = (wr_count - 1) % SLOTS;
    sz = exp_sizes.pop_front();
    for (int i = 0; i < 1023; i++) body.push_back(ram[slot*1024 + i]);
    check(body[0] == module_no, "module no");
    check(body[1] == 8'(wr_count - 1), "counting no");
    check(body[2] == 8'(sz), $sformatf("size %0d want %0d", body[2], sz));
    for (int w = 0; w < 255; w++) begin
      logic [31:0] got, want;
      got  = {body[3+4*w], body[4+4*w], body[5+4*w], body[6+4*w]};
      want = (w < sz) ? exp_data.pop_front() : 32'h0;
      if (got != want) begin
        failures++;
        if (failures < 10) $display("FAIL pkt %0d word %0d %08x want %08x", wr_count-1, w, got, want);
      end
    end
    checks++;
    check(ram[slot*1024 + 1023] == ref_crc8(body), "crc8");
    pkt_checked++;
  end

  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    longint t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    tx_count = 0;
    add_event(1);
    add_event(255);
    add_event(256);
    add_event(600);
    // only SLOTS packets may be written while nothing is transmitted
    repeat (8000) @(negedge clk);
    check(wr_count == SLOTS, $sformatf("stalled at %0d packets", wr_count));
    check(stall_cycles > 0, "stall counted");
    // release one slot at a time; packet 4 reuses slot 0
    tx_count = 1;
    t0 = cyc;
    wait (wr_count == 5);
    // 3 header bytes + 255 words x (1 fetch + 4 bytes) + CRC clock, plus one to restart
    check(cyc - t0 <= 3 + 255*5 + 1 + 3 && cyc - t0 >= 3 + 255*5, $sformatf("packet time %0d", cyc - t0));
    // a retransmission of packet 2 (slot 2) blocks the next packet (6 -> slot 2)
    rt_active = 1; rt_cnt = 8'd2;
    tx_count = 3;
    repeat (3000) @(negedge clk);
    check(wr_count == 6, $sformatf("blocked by retransmission: %0d", wr_count));
    rt_active = 0;
    add_event(40);
    repeat (8000) begin @(negedge clk); tx_count = wr_count; end
    check(wr_count == 8 && pkt_checked == 8, $sformatf("all packets %0d %0d", wr_count, pkt_checked));
    check(exp_data.size() == 0 && exp_sizes.size() == 0, "all data packed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
