// tb_sram_module: a 256-word SRAM module. Random writes and reads are
// mirrored in a scoreboard; the read is asynchronous, so data must be
// valid in the same clock as the address, and a write must be visible
// right after its clock edge.
module tb_sram_module;
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

  logic        we;
  logic [7:0]  addr;
  logic [31:0] din, dout;
  logic [31:0] sb [256];

  sram_module #(.DEPTH(256), .W(32)) dut (.clk(clk), .we(we), .addr(addr), .din(din), .dout(dout));

  initial begin
    we = 0; addr = 0; din = 0;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      we = 1; addr = 8'(a); din = $urandom; sb[a] = din;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = $urandom_range(2, 0) == 0; addr = 8'($urandom); din = $urandom;
      #1;
      check(dout == sb[addr], $sformatf("read %0d got %h exp %h", addr, dout, sb[addr]));
      if (we) sb[addr] = din;
      @(posedge clk); #1;
      check(dout == sb[addr], "read after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
