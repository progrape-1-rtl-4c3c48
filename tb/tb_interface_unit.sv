// tb_interface_unit: the host side of the board against a testbench
// stand-in for the control unit that acknowledges after a random delay.
// The host offers random words in all five modes as fast as host_ready
// allows. Checked: each accepted word reaches req_* and the write bus
// unchanged, exactly once; host_ready stays low until the ack (stall);
// for reads, the word driven by the addressed chip (the other chip's
// output is garbage with its enable low) is returned on host_rdata with
// one host_rvalid.
module tb_interface_unit;
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

  logic               rst_n, host_valid, host_ready, host_rvalid, req_valid, req_ack, rd_capture;
  host_mode_e         host_mode, req_mode;
  logic [15:0]        host_addr, req_addr;
  logic [31:0]        host_wdata, host_rdata, req_wdata, wdata;
  logic [31:0]        pipe_rdata [N_CHIPS];
  logic [N_CHIPS-1:0] pipe_oe;

  interface_unit dut (
    .clk(clk), .rst_n(rst_n), .host_valid(host_valid), .host_ready(host_ready), .host_mode(host_mode),
    .host_addr(host_addr), .host_wdata(host_wdata), .host_rvalid(host_rvalid), .host_rdata(host_rdata),
    .req_valid(req_valid), .req_mode(req_mode), .req_addr(req_addr), .req_wdata(req_wdata),
    .req_ack(req_ack), .rd_capture(rd_capture), .wdata(wdata), .pipe_rdata(pipe_rdata), .pipe_oe(pipe_oe));

  typedef struct { host_mode_e m; logic [15:0] a; logic [31:0] d; } word_t;
  word_t sent [$];
  logic [31:0] rexp [$];
  int served = 0, stalls = 0, reads = 0;

  // control-unit stand-in
  initial begin
    req_ack = 0; rd_capture = 0; pipe_oe = 0; pipe_rdata[0] = 0; pipe_rdata[1] = 0;
    forever begin
      @(negedge clk);
      req_ack = 0; rd_capture = 0; pipe_oe = 0;
      pipe_rdata[0] = $urandom; pipe_rdata[1] = $urandom;
      if (req_valid) begin
        automatic word_t w = sent.pop_front();
        check(req_mode == w.m && req_addr == w.a && req_wdata == w.d && wdata == w.d,
              "request fields and write bus");
        repeat ($urandom_range(4, 0)) begin
          check(req_valid && !host_ready, "pending request holds host_ready low");
          stalls++;
          @(negedge clk);
          pipe_rdata[0] = $urandom; pipe_rdata[1] = $urandom;
        end
        if (w.m == MODE_PIPE_RD) begin
          pipe_oe[w.a[10]] = 1;
          rd_capture = 1;
          rexp.push_back(pipe_rdata[w.a[10]]);
        end
        req_ack = 1;
        served++;
      end
    end
  end

  always @(posedge clk) if (rst_n && host_rvalid) begin
    reads++;
    check(rexp.size() > 0 && host_rdata == rexp[0], "read data");
    if (rexp.size() > 0) void'(rexp.pop_front());
  end

  initial begin
    rst_n = 0; host_valid = 0; host_mode = MODE_NONE; host_addr = 0; host_wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      automatic word_t w;
      w.m = host_mode_e'($urandom_range(5, 1)); w.a = 16'($urandom); w.d = $urandom;
      @(negedge clk);
      host_valid = 1; host_mode = w.m; host_addr = w.a; host_wdata = w.d;
      while (!host_ready) @(negedge clk);
      sent.push_back(w);
      @(posedge clk); #1;
      host_valid = 0;
    end
    repeat (10) @(negedge clk);
    check(served == 1000, $sformatf("served %0d of 1000", served));
    check(rexp.size() == 0 && reads > 100, "all reads returned");
    check(stalls > 100, "stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
