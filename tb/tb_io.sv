// tb_io: drives the chip pins with random CS/WE/RE/RUN/ADR/IDATA and
// checks the registered outputs one clock later: we = CS&WE, run not
// gated by CS, address and data passed on. A read (CS&RE) must put the
// word the pipeline unit returns for that address on IDATA with the
// output enable exactly two clocks after RE, and nothing otherwise.
module tb_io;
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [IDATA_W-1:0] i_data_in, i_data_out, datai, datao;
  logic               i_data_oe, i_cs, i_we, i_re, i_run, run, we;
  logic [ADR_W-1:0]   i_adr, adr;

  io dut (.clk(clk), .i_data_in(i_data_in), .i_data_out(i_data_out), .i_data_oe(i_data_oe),
          .i_adr(i_adr), .i_cs(i_cs), .i_we(i_we), .i_re(i_re), .i_run(i_run),
          .datai(datai), .adr(adr), .run(run), .we(we), .datao(datao));

  // pipeline unit stand-in: the word for an address is a fixed hash of it
  assign datao = {22'(adr) * 22'd2654435, adr};

  typedef struct { logic cs, we, re, run; logic [ADR_W-1:0] adr; logic [31:0] d; } pins_t;
  pins_t h [$];
  int reads = 0;

  initial begin
    i_cs = 0; i_we = 0; i_re = 0; i_run = 0; i_adr = '0; i_data_in = '0;
    repeat (2) @(negedge clk);
    check(i_data_oe == 1'b0 && run == 1'b0 && we == 1'b0, "power-up state");
    for (int n = 0; n < 2000; n++) begin
      automatic pins_t p;
      i_cs = 1'($urandom); i_we = 1'($urandom); i_re = 1'($urandom); i_run = 1'($urandom);
      i_adr = ADR_W'($urandom); i_data_in = $urandom;
      p.cs = i_cs; p.we = i_we; p.re = i_re; p.run = i_run; p.adr = i_adr; p.d = i_data_in;
      h.push_front(p);
      @(posedge clk); #1;
      check(we == (h[0].cs & h[0].we) && run == h[0].run && adr == h[0].adr && datai == h[0].d,
            "registered pins");
      if (h.size() >= 2) begin
        automatic bit rd = h[1].cs & h[1].re;
        check(i_data_oe == rd, "read enable two clocks after RE");
        if (rd) begin
          reads++;
          check(i_data_out == {22'(h[1].adr) * 22'd2654435, h[1].adr}, "read data");
        end
      end
      if (h.size() > 3) void'(h.pop_back());
      @(negedge clk);
    end
    check(reads > 100, "reads exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
