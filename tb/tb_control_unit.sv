// tb_control_unit: a 1K-word control unit with DRAIN = 16. For each kind
// of host request it checks which strobe rises, for exactly one clock,
// with which address, and when the request is acknowledged; for reads,
// that rd_capture comes two clocks after CS+RE. For the j loop it checks
// the address sequence (0..NJ-1, each held NHOLD clocks), that RUN
// follows each address by one clock, that busy lasts NJ*NHOLD + DRAIN + 1
// clocks, and that a request made during a run is not served until busy
// falls (stall).
module tb_control_unit;
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int DRAIN = 16;
  logic               rst_n, req_valid, req_ack, rd_capture, pipe_we, pipe_re, pipe_run, busy;
  host_mode_e         req_mode;
  logic [15:0]        req_addr;
  logic [31:0]        req_wdata;
  logic [9:0]         mem_addr;
  logic [3:0]         mem_we;
  logic [1:0]         pipe_cs, cfg_wr;
  logic [ADR_W-1:0]   pipe_adr;

  control_unit #(.DEPTH(1024), .DRAIN(DRAIN)) dut (
    .clk(clk), .rst_n(rst_n), .req_valid(req_valid), .req_mode(req_mode), .req_addr(req_addr),
    .req_wdata(req_wdata), .req_ack(req_ack), .rd_capture(rd_capture), .mem_addr(mem_addr),
    .mem_we(mem_we), .pipe_cs(pipe_cs), .pipe_we(pipe_we), .pipe_re(pipe_re), .pipe_run(pipe_run),
    .pipe_adr(pipe_adr), .cfg_wr(cfg_wr), .busy(busy));

  typedef struct {
    logic ack, cap, we_p, re_p, run, busy;
    logic [3:0] mem_we;
    logic [9:0] mem_addr;
    logic [1:0] cs, cfg;
    logic [ADR_W-1:0] adr;
  } smp_t;

  function automatic smp_t sample();
    smp_t s;
    s.ack = req_ack; s.cap = rd_capture; s.we_p = pipe_we; s.re_p = pipe_re; s.run = pipe_run;
    s.busy = busy; s.mem_we = mem_we; s.mem_addr = mem_addr; s.cs = pipe_cs; s.cfg = cfg_wr;
    s.adr = pipe_adr;
    return s;
  endfunction

  // Issue one request; log every clock until it is acknowledged.
  task automatic req(input host_mode_e m, input logic [15:0] a, input logic [31:0] d,
                     output smp_t log[$]);
    log.delete();
    @(negedge clk);
    req_valid = 1; req_mode = m; req_addr = a; req_wdata = d;
    do begin
      @(negedge clk);
      log.push_back(sample());
    end while (!log[$].ack && log.size() < 5000);
    @(posedge clk); #1;
    req_valid = 0;
  endtask

  int stalls = 0;

  initial begin
    smp_t log[$];
    rst_n = 0; req_valid = 0; req_mode = MODE_NONE; req_addr = 0; req_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(busy == 0 && mem_we == 0 && pipe_cs == 0 && pipe_run == 0, "reset state");

    for (int n = 0; n < 40; n++) begin
      automatic logic [15:0] a = 16'($urandom);
      // memory write
      req(MODE_MEM, a, 0, log);
      check(log.size() == 1 && log[0].mem_we == 4'(1 << a[1:0]) && log[0].mem_addr == a[11:2],
            "memory write strobe");
      // pipeline write
      req(MODE_PIPE_WR, a, 0, log);
      check(log.size() == 1 && log[0].cs == 2'(1 << a[10]) && log[0].we_p && !log[0].re_p &&
            log[0].adr == a[9:0], "pipeline write strobe");
      // pipeline read
      req(MODE_PIPE_RD, a, 0, log);
      check(log.size() == 3 && log[0].cs == 2'(1 << a[10]) && log[0].re_p && log[0].adr == a[9:0] &&
            log[1].cs == 0 && !log[1].cap && log[2].cap && log[2].ack, "pipeline read timing");
      // configuration
      req(MODE_CONFIG, a, 0, log);
      check(log.size() == 1 && log[0].cfg == 2'(1 << a[0]) && log[0].cs == 0, "config strobe");
    end

    for (int r = 0; r < 6; r++) begin
      automatic int nj = (r == 0) ? 1 : $urandom_range(300, 2);
      automatic int nh = (r < 3) ? 1 : $urandom_range(4, 2);
      automatic int busy_cyc = 0, runs = 0;
      automatic int exp_addr[$];
      automatic logic [9:0] prev_addr = 0;
      automatic bit prev_issue = 0;
      req(MODE_CMD, 16'(CMD_NJ), 32'(nj), log);
      req(MODE_CMD, 16'(CMD_NHOLD), 32'(nh), log);
      req(MODE_CMD, 16'(CMD_START), 0, log);
      check(log.size() == 1 && log[0].busy, "start acknowledged, busy");
      busy_cyc = 1;
      for (int j = 0; j < nj; j++) for (int h = 0; h < nh; h++) exp_addr.push_back(j);
      // request during the run: must stall
      @(negedge clk);
      req_valid = 1; req_mode = MODE_MEM; req_addr = 16'h0004; req_wdata = 0;
      while (busy) begin
        automatic smp_t s = sample();
        busy_cyc++;
        if (s.ack) check(0, "request served during run");
        else stalls++;
        if (s.run) begin
          runs++;
          check(exp_addr.size() > 0 && prev_addr == 10'(exp_addr[0]),
                $sformatf("RUN follows address: prev %0d exp %0d", prev_addr, exp_addr[0]));
          if (exp_addr.size() > 0) void'(exp_addr.pop_front());
        end
        prev_addr = s.mem_addr;
        @(negedge clk);
      end
      check(runs == nj * nh, $sformatf("RUN clocks %0d exp %0d", runs, nj * nh));
      check(busy_cyc == nj * nh + DRAIN + 1, $sformatf("busy %0d clocks exp %0d", busy_cyc, nj * nh + DRAIN + 1));
      // the stalled request is served now
      do @(negedge clk); while (!req_ack);
      check(mem_we == 4'b0001 && mem_addr == 10'd1, "stalled request served after run");
      @(posedge clk); #1;
      req_valid = 0;
    end
    // start with NJ = 0 does nothing
    req(MODE_CMD, 16'(CMD_NJ), 0, log);
    req(MODE_CMD, 16'(CMD_START), 0, log);
    @(negedge clk);
    check(!busy, "NJ = 0 does not start");
    check(stalls > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
