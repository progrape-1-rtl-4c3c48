// tb_progrape1_pkg: checks the shared constants: both conversion tables
// against their defining formulas, the log word layout and the host mode
// numbering (modes 1..5 in the order of the board's transfer types).
module tb_progrape1_pkg;
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
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 32; k++) begin
      check(int'(LOG2_TAB[k]) == log2tab(k), $sformatf("LOG2_TAB[%0d]=%0d", k, LOG2_TAB[k]));
      check(int'(EXP2_TAB[k]) == exptab(k), $sformatf("EXP2_TAB[%0d]=%0d", k, EXP2_TAB[k]));
    end
    check($bits(lns_t) == 15, "lns_t width");
    check(JDATA_W == 128 && IDATA_W == 32 && ADR_W == 10, "pin widths");
    check((1 << MEM_AW) == 16384 && N_SRAM == 4 && N_CHIPS == 2, "memory size");
    check(MODE_CMD == 3'd1 && MODE_MEM == 3'd2 && MODE_PIPE_WR == 3'd3 &&
          MODE_PIPE_RD == 3'd4 && MODE_CONFIG == 3'd5, "mode numbers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
