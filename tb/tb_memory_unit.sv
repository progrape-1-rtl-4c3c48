// tb_memory_unit: a 1K-word memory unit. Random 32-bit lane writes build
// 128-bit words in a scoreboard; reads of random addresses must show the
// whole 128-bit word on jdata one clock after the address.
module tb_memory_unit;
  import progrape1_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [9:0]         addr;
  logic [3:0]         we_lane;
  logic [31:0]        wdata;
  logic [JDATA_W-1:0] jdata;
  logic [JDATA_W-1:0] sb [1024];

  memory_unit #(.DEPTH(1024)) dut (.clk(clk), .addr(addr), .we_lane(we_lane), .wdata(wdata), .jdata(jdata));

  initial begin
    addr = 0; we_lane = 0; wdata = 0;
    for (int a = 0; a < 1024; a++)
      for (int l = 0; l < 4; l++) begin
        @(negedge clk);
        addr = 10'(a); we_lane = 4'(1 << l); wdata = $urandom; sb[a][32*l +: 32] = wdata;
      end
    for (int n = 0; n < 3000; n++) begin
      automatic logic [9:0] a;
      @(negedge clk);
      if ($urandom_range(3, 0) == 0) begin
        automatic int l = $urandom_range(3, 0);
        addr = 10'($urandom); we_lane = 4'(1 << l); wdata = $urandom;
        sb[addr][32*l +: 32] = wdata;
      end else begin
        addr = 10'($urandom); we_lane = 0;
        a = addr;
        @(negedge clk);
        we_lane = 0;
        check(jdata == sb[a], $sformatf("read %0d", a));
      end
    end
    @(negedge clk);
    we_lane = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
