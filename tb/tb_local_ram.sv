// tb_local_ram: writes random bytes to random addresses of the packet RAM, keeps a model
// array, and checks reads (one clock latency) and that a read in the same clock as a write to
// another address is unaffected.
module tb_local_ram;
  localparam int unsigned SLOTS = 4;
  localparam int unsigned N = SLOTS * 1024;
  localparam int unsigned AW = $clog2(N);
  logic clk = 0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [7:0] model [N];

  local_ram #(.SLOTS(SLOTS), .PKT_BYTES(1024)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = 8'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 2000; k++) begin
      logic [AW-1:0] a;
      a = AW'($urandom_range(N-1));
      @(negedge clk);
      raddr = a;
      we = 1; waddr = AW'($urandom_range(N-1)); wdata = 8'($urandom);
      if (waddr == raddr) waddr = waddr + 1'b1;
      model[waddr] = wdata;
      @(posedge clk); #1;
      we = 0;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        if (failures < 5) $display("read %0d got %02x want %02x", a, rdata, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
