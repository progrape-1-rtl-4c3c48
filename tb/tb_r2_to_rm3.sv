// tb_r2_to_rm3: sweeps every log value of R^2 and checks that R^-3 is
// -1.5 times it, rounded half up and saturated, with the flags right.
module tb_r2_to_rm3;
  import progrape1_pkg::*;
  import grav_model_pkg::*;
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

  lns_t r2, rm3;
  r2_to_rm3 dut (.r2(r2), .rm3(rm3));

  initial begin
    for (int v = -4096; v < 4096; v += 3) begin
      longint t;
      r2.sgn = 1'(v);
      r2.nz  = (v % 7) != 0;
      r2.lg  = LG_W'(v);
      @(posedge clk);
      t = -((3 * longint'(v) + 1) >>> 1);
      if (t > 4095) t = 4095;
      if (t < -4096) t = -4096;
      check(rm3.lg == LG_W'(t), $sformatf("lg %0d -> %0d exp %0d", v, rm3.lg, t));
      check(rm3.nz == r2.nz && rm3.sgn == 1'b0, "flags");
      check(rm3 == m_rm3(r2), "model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
