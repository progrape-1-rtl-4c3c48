// tb_pu: a pipeline unit with two virtual pipelines. The testbench
// writes two i-particles into the i-registers, streams random
// j-particles with each j held for two clocks (one per virtual
// pipeline), and reads the six accumulator words of each virtual
// pipeline; the sums must equal the reference model's sum of terms.
// Three passes, so that restart and i-particle rewrite are covered.
// Latency: the term of the last run clock must be missing five clocks
// after it and present six clocks after it (6 pipeline stages, the
// accumulator adds on the edge where runr is seen).
module tb_pu;
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

  localparam int NVP = 2;
  logic [IDATA_W-1:0] datai, datao;
  logic [JDATA_W-1:0] jdata;
  logic               we, run;
  logic [ADR_W-1:0]   adr;

  pu #(.NVP(NVP)) dut (.clk(clk), .datai(datai), .jdata(jdata), .we(we), .adr(adr), .run(run), .datao(datao));

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk);
    we = 1; adr = ADR_W'(a); datai = d;
    @(negedge clk);
    we = 0;
  endtask

  initial begin
    int   xi[NVP][3], xj[3];
    lns_t eps[NVP];
    longint sum[NVP][3];
    longint last_f;
    int     base[3];
    we = 0; run = 0; adr = '0; datai = '0; jdata = '0;
    for (int pass = 0; pass < 3; pass++) begin
      automatic int nj = $urandom_range(150, 20);
      for (int k = 0; k < 3; k++) base[k] = rand_pos(18);
      for (int v = 0; v < NVP; v++) begin
        for (int k = 0; k < 3; k++) begin
          xi[v][k] = base[k] + rand_pos(10);
          wr(v * 8 + k, 32'(xi[v][k]));
          sum[v][k] = 0;
        end
        eps[v] = real_to_lns($pow(2.0, real'($urandom_range(12, 0))));
        wr(v * 8 + 3, 32'(eps[v]));
      end
      for (int n = 0; n < nj; n++) begin
        for (int k = 0; k < 3; k++) xj[k] = base[k] + rand_pos($urandom_range(12, 4));
        for (int v = 0; v < NVP; v++) begin
          automatic longint f[3];
          @(negedge clk);
          run = 1;
          jdata = '0;
          jdata[0 +: POS_W] = POS_W'(xj[0]);
          jdata[32 +: POS_W] = POS_W'(xj[1]);
          jdata[64 +: POS_W] = POS_W'(xj[2]);
          m_term(xj, xi[v], eps[v], f);
          for (int k = 0; k < 3; k++) sum[v][k] += f[k];
          last_f = f[0];
        end
      end
      @(negedge clk);
      run = 0;
      // The last run clock was sampled at edge P0; its term is added at
      // edge P6. Just after P5 the sums must still lack it.
      repeat (5) @(negedge clk);
      adr = ADR_W'(8 + 0);
      #1;
      if (last_f != 0) check(datao != 32'(sum[1][0]), "last term not before 6 clocks");
      @(negedge clk);
      for (int v = 0; v < NVP; v++)
        for (int w = 0; w < 6; w++) begin
          automatic logic [31:0] e = w[0] ? 32'(sum[v][w/2] >>> 32) : 32'(sum[v][w/2]);
          adr = ADR_W'(v * 8 + w);
          #1;
          check(datao == e, $sformatf("pass %0d vp %0d word %0d got %h exp %h", pass, v, w, datao, e));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
