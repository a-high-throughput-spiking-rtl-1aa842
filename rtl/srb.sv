// srb: Spiking Ring Buffer.
//
// Holds, for each of N_PRE presynaptic neurons, the spikes of the last DEPTH
// timesteps, so that a synapse with delay d can read the spike of timestep
// t-d without any per-synapse delay line.  All neurons share one head pointer.
// A push moves the head back by one slot (mod DEPTH) and writes the new spike
// vector into that column; slot (head + d) then holds the spike of d timesteps
// ago, which is the "delay + head pointer" addressing of the processor.  The
// window of one neuron (all DEPTH slots) is read with rd_en/rd_addr and is
// valid in rd_window one cycle later; it holds its value while rd_en is low,
// so it is read once per presynaptic neuron.  clear zeroes the history and the
// head.  The head direction, whole-vector push and clear are this design's
// choices; the sizes (256 neurons, 16 slots for delays 0..15) follow the paper.
module srb #(
  parameter int N_PRE = 256,
  parameter int DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     push,
  input  logic [N_PRE-1:0]         push_spikes,
  input  logic                     rd_en,
  input  logic [$clog2(N_PRE)-1:0] rd_addr,
  output logic [DEPTH-1:0]         rd_window,
  output logic [$clog2(DEPTH)-1:0] head
);
  logic [DEPTH-1:0] mem [N_PRE];
  logic [$clog2(DEPTH)-1:0] head_nx;

  assign head_nx = head - 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0;
      for (int i = 0; i < N_PRE; i++) mem[i] <= '0;
    end else if (clear) begin
      head <= '0;
      for (int i = 0; i < N_PRE; i++) mem[i] <= '0;
    end else if (push) begin
      head <= head_nx;
      for (int i = 0; i < N_PRE; i++) mem[i][head_nx] <= push_spikes[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      rd_window <= '0;
    else if (rd_en)  rd_window <= mem[rd_addr];
  end
endmodule
