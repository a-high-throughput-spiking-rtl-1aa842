// sdma: Spiking DMA engine of one core.
//
// Moves data in and out of the core's memory pool:
//  * input: a one-entry buffer for the spike vector of the next timestep,
//    filled from the upstream core (or the external interface) with a
//    valid/ready handshake and emptied by the controller's pop, which writes
//    it into the spiking ring buffer;
//  * weights: streamed WTM words (four weights and four delays) are written
//    in i-major order; an address generator turns the stream position into
//    address i*64 + j, with j counting 0..n_grp-1; wt_start rewinds it;
//  * output: a vector register collecting the four spikes per cycle that the
//    activation phase produces (group out_grp), offered downstream once the
//    controller pushes it, until the downstream side takes it.
// The paper only names this engine; buffering and handshakes here are this
// design's simplest choice.  All outputs are registered or direct.
module sdma
  import snn_pkg::*;
#(
  parameter int N_IN    = 256,
  parameter int N_GRP   = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic [$clog2(N_GRP):0]    n_grp,
  // upstream spikes
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [N_IN-1:0]        in_spikes,
  // to controller / SRB
  output logic                      buf_valid,
  output logic [N_IN-1:0]        buf_spikes,
  input  logic                      pop,
  // weight load
  input  logic                      wt_start,
  input  logic                      wt_valid,
  input  logic [WT_WORD_W-1:0]      wt_data,
  output logic                      wtm_we,
  output logic [$clog2(N_IN)+$clog2(N_GRP)-1:0] wtm_waddr,
  output logic [WT_WORD_W-1:0]      wtm_wdata,
  // spikes from the SCEs
  input  logic                      spk_wr,
  input  logic [$clog2(N_GRP)-1:0]  spk_grp,
  input  logic [LANES-1:0]          spk,
  input  logic                      done,
  // downstream spikes
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [N_GRP*LANES-1:0] out_spikes
);
  localparam int IW = $clog2(N_IN);
  localparam int JW = $clog2(N_GRP);

  logic [IW-1:0] wi;
  logic [JW-1:0] wj;

  // input buffer
  assign in_ready = !buf_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_valid  <= 1'b0;
      buf_spikes <= '0;
    end else if (clear) begin
      buf_valid  <= 1'b0;
    end else if (in_valid && in_ready) begin
      buf_valid  <= 1'b1;
      buf_spikes <= in_spikes;
    end else if (pop) begin
      buf_valid  <= 1'b0;
    end
  end

  // weight address generator
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wi <= '0;
      wj <= '0;
    end else if (wt_start) begin
      wi <= '0;
      wj <= '0;
    end else if (wt_valid) begin
      if ((JW+1)'(wj) == n_grp - 1'b1) begin
        wj <= '0;
        wi <= wi + 1'b1;
      end else begin
        wj <= wj + 1'b1;
      end
    end
  end
  assign wtm_we    = wt_valid && !wt_start;
  assign wtm_waddr = {wi, wj};
  assign wtm_wdata = wt_data;

  // output buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_spikes <= '0;
    end else if (clear) begin
      out_valid  <= 1'b0;
      out_spikes <= '0;
    end else begin
      if (pop) out_spikes <= '0;
      if (spk_wr) out_spikes[spk_grp*LANES +: LANES] <= spk;
      if (done) out_valid <= 1'b1;
      else if (out_valid && out_ready) out_valid <= 1'b0;
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n || clear)
    out_valid && !out_ready |=> out_valid && $stable(out_spikes));
  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n)
    pop |-> buf_valid);
endmodule
