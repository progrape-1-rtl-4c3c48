// tb_accumulators: two virtual pipelines. Several runs of random terms
// (interleaved between the virtual pipelines, with idle gaps inside and
// between runs) are summed in a scoreboard; after each run all six
// words of each virtual pipeline are read through 'adr' and compared,
// which also checks that a new run restarts from zero.
module tb_accumulators;
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

  localparam int NVP = 2;
  logic               run;
  logic [0:0]         vp;
  fterm_t             fdata;
  logic [ADR_W-1:0]   adr;
  logic [IDATA_W-1:0] datao;
  longint             sb [NVP][3];

  accumulators #(.NVP(NVP)) dut (.clk(clk), .run(run), .vp(vp), .fdata(fdata), .adr(adr), .datao(datao));

  function automatic logic signed [FTERM_W:0] rterm();
    return (FTERM_W+1)'(signed'({$urandom, $urandom})) >>> $urandom_range(30, 0);
  endfunction

  initial begin
    run = 0; vp = 0; fdata = '0; adr = '0;
    for (int r = 0; r < 20; r++) begin
      automatic int len = $urandom_range(200, 1);
      for (int v = 0; v < NVP; v++) for (int k = 0; k < 3; k++) sb[v][k] = 0;
      @(negedge clk);
      for (int n = 0; n < len * NVP; n++) begin
        run = 1;
        vp  = 1'(n % NVP);
        fdata.fx = rterm(); fdata.fy = rterm(); fdata.fz = rterm();
        if (r == 3 && n == 0) fdata.fx = {1'b0, {FTERM_W{1'b1}}};
        sb[vp][0] += longint'(fdata.fx);
        sb[vp][1] += longint'(fdata.fy);
        sb[vp][2] += longint'(fdata.fz);
        @(negedge clk);
      end
      run = 0;
      @(negedge clk);
      for (int v = 0; v < NVP; v++)
        for (int w = 0; w < 8; w++) begin
          automatic logic [31:0] e;
          adr = ADR_W'({v, 3'(w)});
          #1;
          e = (w >= 6) ? 32'd0 : (w[0] ? 32'(sb[v][w/2] >>> 32) : 32'(sb[v][w/2]));
          check(datao == e, $sformatf("run %0d vp %0d word %0d got %h exp %h", r, v, w, datao, e));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
