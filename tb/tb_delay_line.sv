// tb_delay_line: random data into an 8-bit, 3-stage delay line; each
// output must equal the input of exactly three clocks earlier, and the
// initial contents must be zero.
module tb_delay_line;
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

  logic [7:0] d, q;
  logic [7:0] hist [$];
  delay_line #(.W(8), .DEPTH(3)) dut (.clk(clk), .d(d), .q(q));

  initial begin
    d = 8'h00;
    check(q == 8'h00, "initial zero");
    for (int n = 0; n < 500; n++) begin
      d = 8'($urandom);
      @(posedge clk);
      hist.push_back(d);
      #1;
      if (hist.size() > 3) void'(hist.pop_front());
      if (hist.size() == 3) check(q == hist[0], $sformatf("cycle %0d got %h exp %h", n, q, hist[0]));
      else check(q == 8'h00, "fill with zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
