// tb_lns_l2f: drives the L->F converter (34-bit output, 32 fraction bits,
// and 48-bit output, 4 fraction bits) with random log words, including
// zero, saturating and underflowing ones, and compares with the
// reference model and, in range, with 2^(lg/32) to within 1%.
module tb_lns_l2f;
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

  lns_t        a;
  logic [33:0] ma;
  logic [47:0] mb;
  logic        sa, sb;

  lns_l2f #(.OUT_W(34), .OUT_FRAC(32)) dut_a (.a(a), .mag(ma), .sgn(sa));
  lns_l2f #(.OUT_W(48), .OUT_FRAC(4))  dut_b (.a(a), .mag(mb), .sgn(sb));

  initial begin
    for (int n = 0; n < 4000; n++) begin
      a.sgn = 1'($urandom);
      a.nz  = (n % 17) != 0;
      a.lg  = LG_W'($urandom_range(3000, 0) - 1500);
      @(posedge clk);
      check(ma == 34'(m_l2f(a, 34, 32)), $sformatf("a lg=%0d got %0d", $signed(a.lg), ma));
      check(mb == 48'(m_l2f(a, 48, 4)), $sformatf("b lg=%0d got %0d", $signed(a.lg), mb));
      check(sa == a.sgn && sb == a.sgn, "sign");
      if (a.nz && $signed(a.lg) > -800 && $signed(a.lg) < 32) begin
        automatic real t = $pow(2.0, real'($signed(a.lg)) / 32.0 + 32.0);
        check(rabs(real'(ma) - t) <= 0.01 * t + 1.0, $sformatf("accuracy lg=%0d", $signed(a.lg)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
