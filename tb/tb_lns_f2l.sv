// tb_lns_f2l: drives two instances of the F->L converter (21-bit integer
// input and 48-bit input with 4 fraction bits) with random magnitudes of
// every length and compares each word with the reference model; also
// checks that the result is within 1/16 of the true log2 value.
module tb_lns_f2l;
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

  logic [20:0] mag_a;
  logic [47:0] mag_b;
  logic        sgn;
  lns_t        qa, qb;

  lns_f2l #(.IN_W(21), .IN_FRAC(0)) dut_a (.mag(mag_a), .sgn(sgn), .q(qa));
  lns_f2l #(.IN_W(48), .IN_FRAC(4)) dut_b (.mag(mag_b), .sgn(sgn), .q(qb));

  initial begin
    lns_t ea, eb;
    for (int n = 0; n < 3000; n++) begin
      automatic int len_a = $urandom_range(21, 0);
      automatic int len_b = $urandom_range(48, 0);
      mag_a = 21'({$urandom, $urandom}) & ((21'(1) << len_a) - 1);
      mag_b = 48'({$urandom, $urandom}) & ((48'(1) << len_b) - 1);
      if (n == 0) begin mag_a = 0; mag_b = 0; end
      if (n == 1) begin mag_a = 21'h100000; mag_b = '1; end
      sgn = 1'($urandom);
      @(posedge clk);
      ea = m_f2l(64'(mag_a), 0, sgn);
      eb = m_f2l(64'(mag_b), 4, sgn);
      check(qa == ea, $sformatf("a mag=%0d got %h exp %h", mag_a, qa, ea));
      check(qb == eb, $sformatf("b mag=%0d got %h exp %h", mag_b, qb, eb));
      if (mag_a != 0) begin
        automatic real t = $ln(real'(mag_a)) / $ln(2.0) * 32.0;
        check(rabs(real'($signed(qa.lg)) - t) <= 2.0, $sformatf("a accuracy mag=%0d lg=%0d", mag_a, qa.lg));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
