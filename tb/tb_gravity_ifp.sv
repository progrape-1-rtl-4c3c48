// tb_gravity_ifp: streams random j-particles (one per clock, with gaps)
// through the gravity pipeline against a fixed i-particle, changing the
// i-particle between bursts. Every term leaving with runr is compared
// with the reference model bit for bit and with the exact floating-point
// term (within 10% of the larger of the term and 2^-10 of the scale);
// runr must follow run by exactly 6 clocks.
module tb_gravity_ifp;
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

  logic               run;
  logic [JDATA_W-1:0] jdata;
  ipart_t             idata;
  logic               runr;
  fterm_t             fdata;

  gravity_ifp dut (.clk(clk), .run(run), .jdata(jdata), .idata(idata), .runr(runr), .fdata(fdata));

  typedef struct { longint f[3]; real r[3]; } exp_t;
  exp_t q [$];
  int   run_hist [$];
  int   cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (runr) begin
      exp_t e;
      if (q.size() == 0) check(0, "unexpected runr");
      else begin
        e = q.pop_front();
        check(fdata.fx == (FTERM_W+1)'(e.f[0]) && fdata.fy == (FTERM_W+1)'(e.f[1]) &&
              fdata.fz == (FTERM_W+1)'(e.f[2]),
              $sformatf("term got %0d %0d %0d exp %0d %0d %0d", fdata.fx, fdata.fy, fdata.fz,
                        e.f[0], e.f[1], e.f[2]));
        for (int k = 0; k < 3; k++) begin
          automatic real g = real'(k == 0 ? fdata.fx : k == 1 ? fdata.fy : fdata.fz);
          automatic real tol = 0.10 * rabs(e.r[k]) + $pow(2.0, 22.0) * 0.0 + 4.0;
          check(rabs(g - e.r[k]) <= tol || rabs(e.r[k]) < 16.0,
                $sformatf("accuracy axis %0d got %f exact %f", k, g, e.r[k]));
        end
      end
    end
  end

  // latency: runr(t) == run(t-6)
  logic [6:0] run_sr = '0;
  always @(posedge clk) begin
    run_sr <= {run_sr[5:0], run};
    if (cyc > 8) check(runr == run_sr[5], "runr latency 6");
  end

  initial begin
    int xi[3], xj[3];
    real e2;
    run = 0;
    jdata = '0;
    idata = '0;
    repeat (3) @(posedge clk);
    for (int burst = 0; burst < 40; burst++) begin
      for (int k = 0; k < 3; k++) xi[k] = rand_pos(20);
      e2 = $pow(2.0, real'($urandom_range(16, 0)));
      idata.x = POS_W'(xi[0]); idata.y = POS_W'(xi[1]); idata.z = POS_W'(xi[2]);
      idata.eps2 = real_to_lns(e2);
      e2 = $pow(2.0, real'($signed(idata.eps2.lg)) / 32.0);
      for (int n = 0; n < 50; n++) begin
        automatic exp_t e;
        automatic int span = $urandom_range(20, 4);
        for (int k = 0; k < 3; k++) begin
          xj[k] = xi[k] + rand_pos(span);
          if (xj[k] > 524287) xj[k] = 524287;
          if (xj[k] < -524288) xj[k] = -524288;
        end
        if (n == 7) xj = xi;   // self-interaction gives zero
        @(negedge clk);
        run = ($urandom_range(9, 0) != 0);
        jdata = '0;
        jdata[0 +: POS_W]  = POS_W'(xj[0]);
        jdata[32 +: POS_W] = POS_W'(xj[1]);
        jdata[64 +: POS_W] = POS_W'(xj[2]);
        jdata[127:96] = $urandom;
        if (run) begin
          m_term(xj, xi, idata.eps2, e.f);
          for (int k = 0; k < 3; k++) e.r[k] = real_term(xj, xi, e2, k);
          q.push_back(e);
        end
      end
      @(negedge clk);
      run = 0;
      repeat (8) @(negedge clk);
    end
    check(q.size() == 0, "all terms delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
