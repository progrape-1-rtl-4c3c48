// tb_pipeline_top: one pipeline chip at its default size, driven only
// through its pins. Per pass: write xi, yi, zi and eps^2 with CS+WE,
// stream random j-particles on JDATA with RUN high throughout (a gap in
// RUN would start a new sum), wait, and read the six result words with CS+RE, sampling
// IDATA two clocks after RE while checking the output enable. Results
// must equal the reference model's sums. A read with CS low must leave
// IDATA undriven, and a write with CS low must not change the
// i-registers (checked by the next pass's results).
module tb_pipeline_top;
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [JDATA_W-1:0] i_jdata;
  logic [IDATA_W-1:0] i_data_in, i_data_out;
  logic               i_data_oe, i_cs, i_we, i_re, i_run;
  logic [ADR_W-1:0]   i_adr;

  pipeline_top dut (.i_clk(clk), .i_jdata(i_jdata), .i_data_in(i_data_in), .i_data_out(i_data_out),
                    .i_data_oe(i_data_oe), .i_adr(i_adr), .i_cs(i_cs), .i_we(i_we), .i_re(i_re),
                    .i_run(i_run));

  task automatic wr(input int a, input logic [31:0] d, input bit cs = 1);
    @(negedge clk);
    i_cs = cs; i_we = 1; i_adr = ADR_W'(a); i_data_in = d;
    @(negedge clk);
    i_cs = 0; i_we = 0; i_data_in = $urandom;
  endtask

  task automatic rd(input int a, output logic [31:0] d, input bit cs = 1);
    @(negedge clk);
    i_cs = cs; i_re = 1; i_adr = ADR_W'(a);
    @(negedge clk);
    i_cs = 0; i_re = 0;
    check(i_data_oe == 0, "no drive one clock after RE");
    @(negedge clk);
    check(i_data_oe == cs, "drive two clocks after RE");
    d = i_data_out;
    @(negedge clk);
    check(i_data_oe == 0, "drive lasts one clock");
  endtask

  initial begin
    int xi[3], xj[3], base[3];
    lns_t eps;
    longint sum[3];
    logic [31:0] d;
    i_cs = 0; i_we = 0; i_re = 0; i_run = 0; i_adr = '0; i_data_in = '0; i_jdata = '0;
    for (int pass = 0; pass < 4; pass++) begin
      automatic int nj = $urandom_range(300, 30);
      for (int k = 0; k < 3; k++) begin
        base[k] = rand_pos(18);
        xi[k] = base[k] + rand_pos(8);
        wr(k, 32'(xi[k]));
        wr(k, $urandom, 0);  // CS low: ignored
        sum[k] = 0;
      end
      eps = real_to_lns($pow(2.0, real'($urandom_range(10, 0))));
      wr(3, 32'(eps));
      for (int n = 0; n < nj; n++) begin
        automatic longint f[3];
        for (int k = 0; k < 3; k++) xj[k] = base[k] + rand_pos($urandom_range(11, 3));
        @(negedge clk);
        i_run = 1;
        i_jdata = {$urandom, $urandom, $urandom, $urandom};
        i_jdata[0 +: POS_W] = POS_W'(xj[0]);
        i_jdata[32 +: POS_W] = POS_W'(xj[1]);
        i_jdata[64 +: POS_W] = POS_W'(xj[2]);
        if (i_run) begin
          m_term(xj, xi, eps, f);
          for (int k = 0; k < 3; k++) sum[k] += f[k];
        end
      end
      @(negedge clk);
      i_run = 0;
      repeat (8) @(negedge clk);
      rd(0, d, 0);
      for (int w = 0; w < 6; w++) begin
        automatic logic [31:0] e = w[0] ? 32'(sum[w/2] >>> 32) : 32'(sum[w/2]);
        rd(w, d);
        check(d == e, $sformatf("pass %0d word %0d got %h exp %h", pass, w, d, e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
