// tb_mi: random 128-bit words into the memory interface; each must come
// out exactly one clock later.
module tb_mi;
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
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [JDATA_W-1:0] i_jdata, jdata, prev;
  mi dut (.clk(clk), .i_jdata(i_jdata), .jdata(jdata));

  initial begin
    i_jdata = '0;
    @(negedge clk);
    for (int n = 0; n < 500; n++) begin
      prev    = i_jdata;
      i_jdata = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk); #1;
      check(jdata == i_jdata, "one-clock register");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
