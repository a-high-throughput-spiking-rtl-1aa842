// ext_if: external data interface (AXI4-Stream in and out).
//
// Input side (64-bit AXI4-Stream slave), in one of two modes set by the
// configuration unit:
//  * weights: each beat's low 48 bits are one weight-memory word (four 8-bit
//    weights, four 4-bit delays) passed to the selected core's SDMA;
//  * spikes: four beats (bit b of beat n is input neuron 64n+b) are gathered
//    into the 256-bit input spike vector of one timestep and offered to
//    core 0 with a valid/ready handshake; tlast is not required.
// Output side (64-bit AXI4-Stream master): the output spike vector of the
// last active core is sent as four beats, tlast on the fourth, and counted
// in tsteps.  Beat formats and the width are this design's choices; moving
// spikes, weights and results over the host's stream DMA follows the paper.
module ext_if
  import snn_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               stream_wt,
  input  logic [1:0]         stream_core,
  // AXI4-Stream slave
  input  logic [63:0]        s_tdata,
  input  logic               s_tvalid,
  output logic               s_tready,
  input  logic               s_tlast,   // accepted, not needed: vectors are 4 beats
  // weight words to the cores
  output logic [N_CORES-1:0] wt_valid,
  output logic [WT_WORD_W-1:0] wt_data,
  // input spike vector to core 0
  output logic               in_valid,
  input  logic               in_ready,
  output logic [N_MAX-1:0]   in_spikes,
  // result spike vector from the last active core
  input  logic               res_valid,
  output logic               res_ready,
  input  logic [N_MAX-1:0]   res_spikes,
  // AXI4-Stream master
  output logic [63:0]        m_tdata,
  output logic               m_tvalid,
  input  logic               m_tready,
  output logic               m_tlast,
  output logic [31:0]        tsteps
);
  localparam int BEATS = N_MAX / 64;

  logic [$clog2(BEATS)-1:0] ib, ob;
  logic [N_MAX-1:0]         ovec;
  logic                     obusy;
  logic                     s_fire;

  assign s_tready = stream_wt ? 1'b1 : !in_valid;
  assign s_fire   = s_tvalid && s_tready;

  // weights
  assign wt_data = s_tdata[WT_WORD_W-1:0];
  always_comb begin
    wt_valid = '0;
    wt_valid[stream_core] = s_fire && stream_wt;
  end

  // spike gather
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ib         <= '0;
      in_valid   <= 1'b0;
      in_spikes  <= '0;
    end else if (clear) begin
      ib       <= '0;
      in_valid <= 1'b0;
    end else begin
      if (in_valid && in_ready) in_valid <= 1'b0;
      if (s_fire && !stream_wt) begin
        in_spikes[ib*64 +: 64] <= s_tdata;
        ib         <= ib + 1'b1;
        if (ib == $clog2(BEATS)'(BEATS - 1)) in_valid <= 1'b1;
      end
    end
  end

  // result serialiser
  assign res_ready = !obusy;
  assign m_tvalid  = obusy;
  assign m_tdata   = ovec[ob*64 +: 64];
  assign m_tlast   = (ob == $clog2(BEATS)'(BEATS - 1));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      obusy  <= 1'b0;
      ob     <= '0;
      ovec   <= '0;
      tsteps <= '0;
    end else if (clear) begin
      obusy  <= 1'b0;
      ob     <= '0;
      tsteps <= '0;
    end else if (!obusy) begin
      if (res_valid) begin
        obusy <= 1'b1;
        ob    <= '0;
        ovec  <= res_spikes;
      end
    end else if (m_tready) begin
      ob <= ob + 1'b1;
      if (m_tlast) begin
        obusy  <= 1'b0;
        tsteps <= tsteps + 1'b1;
      end
    end
  end

  a_m_hold: assert property (@(posedge clk) disable iff (!rst_n || clear)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));
endmodule
