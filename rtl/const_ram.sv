// const_ram - constant store held in fabric registers (distributed-RAM style).
//
// Holds DEPTH constant sets of WORDS 18-bit constants each. Constants are
// written one at a time (we, wset, widx, wdata) on the clock edge; writes
// outside DEPTH or WORDS are ignored. Each of the N_RD read ports returns a
// whole set combinationally (asynchronous read), so a fit stage can use all
// its constants in the cycle its address arrives. Keeping the few thousand
// constants of the fitter in fabric next to the multipliers, rather than in
// block RAM, follows the published implementation; the one-constant write
// port is this design's choice, as loading is not described.
module const_ram import tf_pkg::*; #(
  parameter int DEPTH = N_SETS,
  parameter int WORDS = K_FIT,
  parameter int N_RD  = 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [SET_W-1:0] wset,
  input  logic [5:0]       widx,
  input  word_t            wdata,
  input  logic [SET_W-1:0] raddr [N_RD],
  output word_t            rdata [N_RD][WORDS]
);
  localparam int DAW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int WAW = (WORDS > 1) ? $clog2(WORDS) : 1;

  word_t mem [DEPTH][WORDS];

  always_ff @(posedge clk) begin
    if (we && (int'(wset) < DEPTH) && (int'(widx) < WORDS))
      mem[DAW'(wset)][WAW'(widx)] <= wdata;
  end

  always_comb begin
    for (int r = 0; r < N_RD; r++)
      for (int k = 0; k < WORDS; k++)
        rdata[r][k] = (int'(raddr[r]) < DEPTH) ? mem[DAW'(raddr[r])][k] : '0;
  end
endmodule
