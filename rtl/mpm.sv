// mpm: Membrane Potential Memory of one core.
//
// 64 words, each holding the 16-bit signed potentials of four postsynaptic
// neurons (word j = neurons 4j..4j+3, lane k in bits [16k+15:16k]).  Simple
// dual-port RAM with a registered read, valid one cycle after re; a read of
// the address written in the same cycle returns the old word.  Contents are
// not reset: the core's controller writes zeros over it on a clear.
module mpm #(
  parameter int DEPTH  = 64,
  parameter int WORD_W = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WORD_W-1:0]        wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WORD_W-1:0]        rdata
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
