// snn_core: one spiking computation core (one network layer per timestep).
//
// Contains the memory pool -- spiking ring buffer (SRB) of presynaptic spike
// history, weight memory (WTM, 8-bit weights with 4-bit delays), membrane
// potential memory (MPM, 16-bit) -- four spiking computation engine (SCE)
// channels, the local controller and the SDMA engine.  Each timestep the
// core takes one input spike vector (valid/ready), leaks all potentials,
// adds w_ij * s_i[t - d_ij] for every synapse in axonal order (presynaptic
// i outer, groups of four postsynaptic neurons inner, four lanes per cycle),
// fires and resets, and offers the output spike vector (valid/ready).
// The composition follows the processor's core diagram; cfg (layer sizes,
// leak, threshold) is a run-time input from the configuration unit.
// Timing: max(n_grp,3)*(n_pre+2) + 5 cycles from accepting a vector to
// offering the result, i.e. 16 517 cycles for a 256 x 256 layer.
module snn_core
  import snn_pkg::*;
#(
  parameter int N_PRE = 256,
  parameter int N_GRP = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  core_cfg_t              cfg,
  input  logic                   clear,
  // weight load stream
  input  logic                   wt_start,
  input  logic                   wt_valid,
  input  logic [WT_WORD_W-1:0]   wt_data,
  // input spike vector
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [N_PRE-1:0]       in_spikes,
  // output spike vector
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [N_GRP*LANES-1:0] out_spikes,
  // status
  output logic                   busy,
  output logic                   bubble
);
  localparam int IW = $clog2(N_PRE);
  localparam int JW = $clog2(N_GRP);

  logic                 buf_valid, pop;
  logic [N_PRE-1:0]     buf_spikes;
  logic                 srb_clear, srb_rd_en;
  logic [IW-1:0]        srb_rd_addr;
  logic [SRB_DEPTH-1:0] window;
  logic [D_W-1:0]       head;
  logic                 wtm_we, wtm_re;
  logic [IW+JW-1:0]     wtm_waddr, wtm_raddr;
  logic [WT_WORD_W-1:0] wtm_wdata, wtm_rdata;
  logic                 mpm_re, mpm_we, mpm_wzero;
  logic [JW-1:0]        mpm_raddr, mpm_waddr;
  logic [MP_WORD_W-1:0] mpm_rdata, mpm_wdata, sce_word;
  logic                 sce_en;
  sce_mode_e            sce_mode;
  logic                 out_wr, done;
  logic [JW-1:0]        out_grp;
  logic [LANES-1:0]     spk;

  local_ctrl #(.N_PRE(N_PRE), .N_GRP(N_GRP)) u_ctrl (
    .clk, .rst_n, .cfg, .clear,
    .in_valid(buf_valid), .out_busy(out_valid),
    .in_pop(pop), .srb_clear, .srb_rd_en, .srb_rd_addr,
    .wtm_re, .wtm_raddr, .mpm_re, .mpm_raddr,
    .mpm_we, .mpm_wzero, .mpm_waddr,
    .sce_en, .sce_mode, .out_wr, .out_grp, .out_push(done),
    .busy, .bubble
  );

  srb #(.N_PRE(N_PRE), .DEPTH(SRB_DEPTH)) u_srb (
    .clk, .rst_n, .clear(srb_clear), .push(pop), .push_spikes(buf_spikes),
    .rd_en(srb_rd_en), .rd_addr(srb_rd_addr), .rd_window(window), .head
  );

  wtm #(.DEPTH(N_PRE*N_GRP), .WORD_W(WT_WORD_W)) u_wtm (
    .clk, .we(wtm_we), .waddr(wtm_waddr), .wdata(wtm_wdata),
    .re(wtm_re), .raddr(wtm_raddr), .rdata(wtm_rdata)
  );

  assign mpm_wdata = mpm_wzero ? '0 : sce_word;
  mpm #(.DEPTH(N_GRP), .WORD_W(MP_WORD_W)) u_mpm (
    .clk, .we(mpm_we), .waddr(mpm_waddr), .wdata(mpm_wdata),
    .re(mpm_re), .raddr(mpm_raddr), .rdata(mpm_rdata)
  );

  for (genvar k = 0; k < LANES; k++) begin : g_sce
    sce u_sce (
      .clk, .rst_n, .en(sce_en), .mode(sce_mode),
      .u     (mpm_rdata[k*U_W +: U_W]),
      .w     (wtm_rdata[k*SYN_W +: W_W]),
      .d     (wtm_rdata[k*SYN_W + W_W +: D_W]),
      .window, .head,
      .lambda(cfg.lambda), .vth(cfg.vth),
      .r     (sce_word[k*U_W +: U_W]),
      .spike (spk[k])
    );
  end

  sdma #(.N_IN(N_PRE), .N_GRP(N_GRP)) u_sdma (
    .clk, .rst_n, .clear, .n_grp(cfg.n_grp),
    .in_valid, .in_ready, .in_spikes,
    .buf_valid, .buf_spikes, .pop,
    .wt_start, .wt_valid, .wt_data,
    .wtm_we, .wtm_waddr, .wtm_wdata,
    .spk_wr(out_wr), .spk_grp(out_grp), .spk, .done,
    .out_valid, .out_ready, .out_spikes
  );
endmodule
