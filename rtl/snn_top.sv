// snn_top: synaptic-delay spiking neural network processor.
//
// Four homogeneous spiking computation cores are chained: core k computes
// network layer k for one timestep and passes its output spike vector to core
// k+1, so up to four layers run as a pipeline (core k works on timestep t
// while core k+1 works on t-1).  The host configures the model over
// AXI4-Lite (global configuration unit) and streams weights and input spikes
// over AXI4-Stream (external interface); the output spike vector of the last
// active layer (NLAYERS register) comes back over an AXI4-Stream master, one
// vector of four 64-bit beats per timestep.  The chain and the per-core
// organisation follow the paper; tapping the output after a configurable
// layer is this design's choice, so that a three-layer network can use
// cores 0..2.  A timestep of a 256x256 layer takes 16 518 cycles, about
// 0.13 ms at 125 MHz.
module snn_top
  import snn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite configuration
  input  logic [11:0] s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [11:0] s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4-Stream in: weights or input spikes
  input  logic [63:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  // AXI4-Stream out: output spikes
  output logic [63:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  // status
  output logic [N_CORES-1:0] core_busy,
  output logic [N_CORES-1:0] core_bubble
);
  core_cfg_t  core_cfg [N_CORES];
  logic [2:0] n_layers;
  logic [1:0] stream_core, last;
  logic       stream_wt, clear, wt_start;
  logic [31:0] tsteps;
  logic [N_CORES-1:0] wt_valid;
  logic [WT_WORD_W-1:0] wt_data;

  logic [N_CORES-1:0] c_in_valid, c_in_ready, c_out_valid, c_out_ready;
  logic [N_MAX-1:0]   c_in_spikes  [N_CORES];
  logic [N_MAX-1:0]   c_out_spikes [N_CORES];
  logic               x_in_valid, res_valid, res_ready;
  logic [N_MAX-1:0]   x_in_spikes, res_spikes;

  cfg_unit u_cfg (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid),
    .s_wready(s_axil_wready), .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid),
    .s_bready(s_axil_bready), .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid),
    .s_arready(s_axil_arready), .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .core_cfg, .n_layers, .stream_core, .stream_wt, .clear, .wt_start,
    .tsteps, .core_busy
  );

  ext_if u_ext (
    .clk, .rst_n, .clear, .stream_wt, .stream_core,
    .s_tdata(s_axis_tdata), .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready),
    .s_tlast(s_axis_tlast),
    .wt_valid, .wt_data,
    .in_valid(x_in_valid), .in_ready(c_in_ready[0]), .in_spikes(x_in_spikes),
    .res_valid, .res_ready, .res_spikes,
    .m_tdata(m_axis_tdata), .m_tvalid(m_axis_tvalid), .m_tready(m_axis_tready),
    .m_tlast(m_axis_tlast), .tsteps
  );

  // index of the last active core (NLAYERS 0 is read as 1, above 4 as 4)
  always_comb begin
    if (n_layers == 3'd0)      last = 2'd0;
    else if (n_layers > 3'd4)  last = 2'd3;
    else                       last = 2'(n_layers - 3'd1);
  end

  assign c_in_valid[0]  = x_in_valid;
  assign c_in_spikes[0] = x_in_spikes;
  for (genvar k = 1; k < N_CORES; k++) begin : g_chain
    assign c_in_valid[k]    = c_out_valid[k-1] && (2'(k-1) != last);
    assign c_in_spikes[k]   = c_out_spikes[k-1];
    assign c_out_ready[k-1] = (2'(k-1) == last) ? res_ready : c_in_ready[k];
  end
  assign c_out_ready[N_CORES-1] = res_ready;

  assign res_valid  = c_out_valid[last];
  assign res_spikes = c_out_spikes[last];

  for (genvar k = 0; k < N_CORES; k++) begin : g_core
    snn_core #(.N_PRE(N_MAX), .N_GRP(N_GRP_MAX)) u_core (
      .clk, .rst_n, .cfg(core_cfg[k]), .clear,
      .wt_start(wt_start && stream_core == 2'(k)),
      .wt_valid(wt_valid[k]), .wt_data,
      .in_valid(c_in_valid[k]), .in_ready(c_in_ready[k]), .in_spikes(c_in_spikes[k]),
      .out_valid(c_out_valid[k]), .out_ready(c_out_ready[k]), .out_spikes(c_out_spikes[k]),
      .busy(core_busy[k]), .bubble(core_bubble[k])
    );
  end
endmodule
