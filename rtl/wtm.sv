// wtm: Weight Memory of one core.
//
// One word per (presynaptic neuron i, postsynaptic group j) at address
// i*64 + j, holding for the four channels 4j..4j+3 an 8-bit signed weight and
// a 4-bit synaptic delay: lane k sits in bits [12k+11:12k], weight low, delay
// high (the packing is this design's choice).  Simple dual-port RAM: one write
// port loaded by the SDMA, one read port with a registered output, valid one
// cycle after re.  Contents are not reset; the host loads them before use.
module wtm #(
  parameter int DEPTH  = 16384,
  parameter int WORD_W = 48
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
