// pipe_delay - register delay line.
//
// Carries a bundle of WIDTH bits DEPTH clock cycles down the pipeline so that
// hits, constant addresses and valid bits arrive at each arithmetic stage in
// step with the values computed from them (the two "delay" boxes of the
// fitter's block diagram). DEPTH = 0 is a plain wire. With RESET = 1 the
// registers clear on rst_n (used for valid bits); otherwise the line has no
// reset, as a datapath shift register in fabric would.
// Timing: q(t) = d(t - DEPTH).
module pipe_delay #(
  parameter int WIDTH = 1,
  parameter int DEPTH = 13,
  parameter bit RESET = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [WIDTH-1:0] sr [DEPTH];
    always_ff @(posedge clk) begin
      if (RESET && !rst_n) begin
        for (int i = 0; i < DEPTH; i++) sr[i] <= '0;
      end else begin
        sr[0] <= d;
        for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[DEPTH-1];
  end
endmodule
