// tb_progrape1_top_nvp: the board built with two virtual pipelines per
// chip (NVP = 2, memory reduced to 1K words), so that each chip holds two
// i-particles and the control unit presents every j-particle for two
// clocks (NHOLD = 2). Loads 200 j-particles, writes four i-particles
// (two per chip, at ADR 0..3 and 8..11), runs, and reads all 24 result
// words; each must equal the reference model's sum. The run must keep
// the board busy 2*NJ + 17 clocks, and every virtual pipeline of every
// chip must be read.
module tb_progrape1_top_nvp;
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

  progrape1_top #(.NVP(2), .DEPTH(1024)) dut (
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
    int base[3], xi[2][2][3], xj[3];
    lns_t eps[2][2];
    longint sum[2][2][3];
    logic [31:0] w;
    automatic int nj = 200;
    rst_n = 0; host_valid = 0; host_mode = MODE_NONE; host_addr = 0; host_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++) base[k] = rand_pos(18);
    for (int c = 0; c < 2; c++)
      for (int v = 0; v < 2; v++) begin
        for (int k = 0; k < 3; k++) begin
          xi[c][v][k] = base[k] + rand_pos(9);
          sum[c][v][k] = 0;
        end
        eps[c][v] = real_to_lns($pow(2.0, real'($urandom_range(8, 2))));
      end
    for (int j = 0; j < nj; j++) begin
      for (int k = 0; k < 3; k++) begin
        xj[k] = base[k] + rand_pos(10);
        host_put(MODE_MEM, j * 4 + k, 32'(xj[k]));
        n_memwr++;
      end
      for (int c = 0; c < 2; c++)
        for (int v = 0; v < 2; v++) begin
          automatic longint f[3];
          m_term(xj, xi[c][v], eps[c][v], f);
          for (int k = 0; k < 3; k++) sum[c][v][k] += f[k];
        end
    end
    for (int c = 0; c < 2; c++)
      for (int v = 0; v < 2; v++) begin
        for (int k = 0; k < 3; k++) begin
          host_put(MODE_PIPE_WR, (c << 10) | (v << 3) | k, 32'(xi[c][v][k]));
          n_iwr++;
        end
        host_put(MODE_PIPE_WR, (c << 10) | (v << 3) | 3, 32'(eps[c][v]));
        n_iwr++;
      end
    host_put(MODE_CMD, CMD_NJ, 32'(nj));
    host_put(MODE_CMD, CMD_NHOLD, 32'd2);
    busy_cyc = 0;
    host_put(MODE_CMD, CMD_START, 0);
    n_runs++;
    for (int c = 0; c < 2; c++)
      for (int v = 0; v < 2; v++)
        for (int a = 0; a < 6; a++) begin
          host_get(c, (v << 3) | a, w);
          check(w == (a[0] ? 32'(sum[c][v][a/2] >>> 32) : 32'(sum[c][v][a/2])),
                $sformatf("chip %0d vp %0d word %0d got %h", c, v, a, w));
        end
    check(busy_cyc == 2 * nj + 17, $sformatf("run took %0d clocks, expected %0d", busy_cyc, 2 * nj + 17));
    check(n_runs == 1 && n_stall > 0 && n_rd[0] == 12 && n_rd[1] == 12, "mechanisms");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
