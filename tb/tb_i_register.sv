// tb_i_register: four virtual pipelines. Random writes to every field of
// every virtual pipeline (and to unused addresses, which must change
// nothing) are mirrored in a scoreboard; after each write the record of
// a random virtual pipeline is read through 'vp' and compared.
module tb_i_register;
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

  localparam int NVP = 4;
  logic               we;
  logic [ADR_W-1:0]   adr;
  logic [IDATA_W-1:0] datai;
  logic [1:0]         vp;
  ipart_t             idata;
  ipart_t             sb [NVP];

  i_register #(.NVP(NVP)) dut (.clk(clk), .we(we), .adr(adr), .datai(datai), .vp(vp), .idata(idata));

  initial begin
    we = 0; adr = '0; datai = '0; vp = '0;
    // fill every field first
    for (int v = 0; v < NVP; v++)
      for (int f = 0; f < 4; f++) begin
        @(negedge clk);
        we = 1; adr = ADR_W'({v, 3'(f)}); datai = $urandom;
        case (f)
          0: sb[v].x = datai[POS_W-1:0];
          1: sb[v].y = datai[POS_W-1:0];
          2: sb[v].z = datai[POS_W-1:0];
          default: sb[v].eps2 = datai[LNS_W-1:0];
        endcase
      end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we    = $urandom_range(3, 0) != 0;
      adr   = ADR_W'($urandom_range(63, 0));
      datai = $urandom;
      if (we && adr[9:3] < NVP)
        case (adr[2:0])
          3'd0: sb[adr[4:3]].x = datai[POS_W-1:0];
          3'd1: sb[adr[4:3]].y = datai[POS_W-1:0];
          3'd2: sb[adr[4:3]].z = datai[POS_W-1:0];
          3'd3: sb[adr[4:3]].eps2 = datai[LNS_W-1:0];
          default: ;
        endcase
      @(posedge clk);
      #1;
      we = 0;
      vp = 2'($urandom);
      #1;
      check(idata == sb[vp], $sformatf("vp %0d got %h exp %h", vp, idata, sb[vp]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
