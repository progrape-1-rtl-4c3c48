// delay_line: a W-bit shift register of DEPTH stages (the "wait" blocks
// of the gravity pipeline, and the run/index delays that go with it).
//
// The output is the input of DEPTH clocks earlier. Stages start at zero
// (the state a freshly configured FPGA would have). DEPTH must be >= 1.
module delay_line #(
  parameter int unsigned W     = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic [W-1:0] sr [DEPTH] = '{default: '0};

  always_ff @(posedge clk) begin
    sr[0] <= d;
    for (int unsigned k = 1; k < DEPTH; k++) sr[k] <= sr[k-1];
  end

  assign q = sr[DEPTH-1];

endmodule
