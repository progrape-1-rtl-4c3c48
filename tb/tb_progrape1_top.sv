// tb_progrape1_top: the whole board at its default size, driven only
// through the host link, as a host program would use it.
//
// Pass 1 sends configuration words to both chips. Each pass then loads
// NJ j-particles into the memory unit (four 32-bit words each: x, y, z
// and a spare word), writes one i-particle into each of the two chips,
// sets NJ, and starts the run. The host immediately asks for the first
// result word; that request stalls until the run is over. It then reads
// the six result words of each chip. Results must equal the reference
// model's sums bit for bit and the exact floating-point force to within
// 5% of its magnitude; the run must take NJ + 17 clocks of busy. The
// last pass fills all 16384 words of the memory.
//
// Mechanisms counted (each must occur): configuration strobes, memory
// writes, i-register writes, runs, host stalls during a run, result
// reads from each chip.
module tb_progrape1_top;
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic               rst_n, host_valid, host_ready, host_rvalid, busy;
  host_mode_e         host_mode;
  logic [15:0]        host_addr;
  logic [31:0]        host_wdata, host_rdata, cfg_data;
  logic [N_CHIPS-1:0] cfg_wr;

  progrape1_top dut (
    .clk(clk), .rst_n(rst_n), .host_valid(host_valid), .host_ready(host_ready),
    .host_mode(host_mode), .host_addr(host_addr), .host_wdata(host_wdata),
    .host_rvalid(host_rvalid), .host_rdata(host_rdata), .cfg_data(cfg_data), .cfg_wr(cfg_wr),
    .busy(busy));

  int n_cfg = 0, n_memwr = 0, n_iwr = 0, n_runs = 0, n_stall = 0, n_rd[2] = '{0, 0};
  int busy_cyc = 0;
  logic [31:0] cfg_exp [$];

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cyc++;
    if (host_valid && !host_ready && busy) n_stall++;
    if (cfg_wr != 0) begin
      n_cfg++;
      check(cfg_exp.size() > 0 && cfg_data == cfg_exp[0], "configuration word");
      if (cfg_exp.size() > 0) void'(cfg_exp.pop_front());
    end
  end

  task automatic host_put(input host_mode_e m, input int a, input logic [31:0] d);
    @(negedge clk);
    host_valid = 1; host_mode = m; host_addr = 16'(a); host_wdata = d;
    while (!host_ready) @(negedge clk);
    @(posedge clk); #1;
    host_valid = 0;
  endtask

  task automatic host_get(input int chip, input int adr, output logic [31:0] d);
    host_put(MODE_PIPE_RD, (chip << 10) | adr, 0);
    while (!host_rvalid) @(negedge clk);
    d = host_rdata;
    n_rd[chip]++;
    @(negedge clk);
  endtask

  initial begin
    int base[3], xi[2][3], xj[3];
    lns_t eps[2];
    real e2[2];
    longint sum[2][3];
    real fr[2][3];
    logic [31:0] d, w[6];
    rst_n = 0; host_valid = 0; host_mode = MODE_NONE; host_addr = 0; host_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int c = 0; c < 2; c++)
      for (int n = 0; n < 4; n++) begin
        automatic logic [31:0] v = $urandom;
        cfg_exp.push_back(v);
        host_put(MODE_CONFIG, c, v);
      end

    for (int pass = 0; pass < 3; pass++) begin
      automatic int nj = (pass == 0) ? 1 : (pass == 1) ? 300 : 16384;
      for (int k = 0; k < 3; k++) base[k] = rand_pos(18);
      for (int c = 0; c < 2; c++) begin
        for (int k = 0; k < 3; k++) begin
          xi[c][k] = base[k] + rand_pos(9);
          sum[c][k] = 0;
          fr[c][k] = 0.0;
        end
        e2[c]  = $pow(2.0, real'($urandom_range(8, 2)));
        eps[c] = real_to_lns(e2[c]);
        e2[c]  = $pow(2.0, real'($signed(eps[c].lg)) / 32.0);
      end
      for (int j = 0; j < nj; j++) begin
        for (int k = 0; k < 3; k++) xj[k] = base[k] + rand_pos(pass == 0 ? 6 : 11);
        for (int k = 0; k < 3; k++) begin
          host_put(MODE_MEM, j * 4 + k, 32'(xj[k]));
          n_memwr++;
        end
        host_put(MODE_MEM, j * 4 + 3, $urandom);  // spare lane (mass, unused)
        n_memwr++;
        for (int c = 0; c < 2; c++) begin
          automatic longint f[3];
          m_term(xj, xi[c], eps[c], f);
          for (int k = 0; k < 3; k++) begin
            sum[c][k] += f[k];
            fr[c][k]  += real_term(xj, xi[c], e2[c], k);
          end
        end
      end
      for (int c = 0; c < 2; c++) begin
        for (int k = 0; k < 3; k++) begin
          host_put(MODE_PIPE_WR, (c << 10) | k, 32'(xi[c][k]));
          n_iwr++;
        end
        host_put(MODE_PIPE_WR, (c << 10) | 3, 32'(eps[c]));
        n_iwr++;
      end
      host_put(MODE_CMD, CMD_NJ, 32'(nj));
      busy_cyc = 0;
      host_put(MODE_CMD, CMD_START, 0);
      n_runs++;
      for (int c = 0; c < 2; c++) begin
        real mag2 = 0.0, err2 = 0.0;
        for (int a = 0; a < 6; a++) begin
          host_get(c, a, w[a]);
          check(w[a] == (a[0] ? 32'(sum[c][a/2] >>> 32) : 32'(sum[c][a/2])),
                $sformatf("pass %0d chip %0d word %0d got %h", pass, c, a, w[a]));
        end
        for (int k = 0; k < 3; k++) begin
          automatic real g = real'(longint'({w[2*k+1], w[2*k]}));
          mag2 += fr[c][k] * fr[c][k];
          err2 += (g - fr[c][k]) * (g - fr[c][k]);
        end
        check(err2 <= 0.05 * 0.05 * mag2 || mag2 < 1.0e6,
              $sformatf("pass %0d chip %0d force error %f of %f", pass, c, $sqrt(err2), $sqrt(mag2)));
      end
      check(busy_cyc == nj + 16 + 1, $sformatf("run took %0d clocks, expected %0d", busy_cyc, nj + 17));
    end

    check(n_cfg == 8, "configuration strobes");
    check(n_memwr > 0, "memory writes");
    check(n_iwr > 0, "i-register writes");
    check(n_runs == 3, "runs");
    check(n_stall > 0, "host stalled during a run");
    check(n_rd[0] > 0 && n_rd[1] > 0, "results read from both chips");
    $display("mechanisms: config=%0d memwr=%0d iwr=%0d runs=%0d stalls=%0d reads=%0d/%0d",
             n_cfg, n_memwr, n_iwr, n_runs, n_stall, n_rd[0], n_rd[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
