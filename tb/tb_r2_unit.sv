// tb_r2_unit: random coordinate differences (as log words) and eps^2
// into the R^2 unit; the output word is compared with the reference
// model and its value with the exact dx^2+dy^2+dz^2+eps^2 to within 8%.
module tb_r2_unit;
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

  lns_t dx, dy, dz, eps2, r2;
  r2_unit dut (.dx(dx), .dy(dy), .dz(dz), .eps2(eps2), .r2(r2));

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int d[3];
      real e2, exact;
      for (int k = 0; k < 3; k++) d[k] = rand_pos($urandom_range(21, 1)) ;
      if (n % 11 == 0) d[1] = 0;
      e2   = $pow(2.0, real'($urandom_range(24, 0)) - 4.0);
      eps2 = real_to_lns(e2);
      dx = m_f2l(64'(d[0] < 0 ? -d[0] : d[0]), 0, d[0] < 0);
      dy = m_f2l(64'(d[1] < 0 ? -d[1] : d[1]), 0, d[1] < 0);
      dz = m_f2l(64'(d[2] < 0 ? -d[2] : d[2]), 0, d[2] < 0);
      @(posedge clk);
      check(r2 == m_r2(dx, dy, dz, eps2), $sformatf("r2 got %h exp %h", r2, m_r2(dx, dy, dz, eps2)));
      exact = real'(d[0]) * d[0] + real'(d[1]) * d[1] + real'(d[2]) * d[2] + e2;
      check(rabs($pow(2.0, real'($signed(r2.lg)) / 32.0) / exact - 1.0) < 0.08,
            $sformatf("accuracy r2 lg=%0d exact=%f", $signed(r2.lg), exact));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
