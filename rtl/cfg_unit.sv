// cfg_unit: global configuration unit, an AXI4-Lite slave.
//
// Holds the network model configuration written by the host: for each core
// (layer) the number of presynaptic neurons, the number of postsynaptic
// groups of four, the leak factor and the firing threshold; the number of
// active layers; the external stream's mode and target core; and two command
// pulses (clear all state, rewind the weight-load address).  Register map
// (byte addresses, 32-bit registers; the map is this design's choice):
//   0x000 CTRL     W   bit0 clear, bit1 weight-load start (self-clearing)
//   0x004 STREAM   RW  bits[1:0] target core, bit8 mode (1 weights, 0 spikes)
//   0x008 NLAYERS  RW  bits[2:0] active layers 1..4 (output tapped after the last)
//   0x00C TSTEPS   R   output spike vectors sent so far
//   0x010 BUSY     R   bits[3:0] core busy flags
//   0x100 + 16k    RW  core k: +0 n_pre, +4 n_grp, +8 lambda, +C vth
// Write address and data are taken together when both are valid (one
// transaction at a time, response OKAY); a read answers one cycle after
// the address is taken.
module cfg_unit
  import snn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite
  input  logic [11:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [11:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // configuration outputs
  output core_cfg_t   core_cfg [N_CORES],
  output logic [2:0]  n_layers,
  output logic [1:0]  stream_core,
  output logic        stream_wt,
  output logic        clear,
  output logic        wt_start,
  // status inputs
  input  logic [31:0] tsteps,
  input  logic [N_CORES-1:0] core_busy
);
  logic wr_fire, rd_fire;
  logic [31:0] rd_val;
  logic [1:0]  wk, rk;

  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_bresp   = 2'b00;
  assign rd_fire   = s_arvalid && !s_rvalid;
  assign s_arready = rd_fire;
  assign s_rresp   = 2'b00;
  assign wk        = s_awaddr[5:4];
  assign rk        = s_araddr[5:4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_CORES; k++) begin
        core_cfg[k].n_pre  <= (PRE_AW+1)'(N_MAX);
        core_cfg[k].n_grp  <= (GRP_AW+1)'(N_GRP_MAX);
        core_cfg[k].lambda <= '0;
        core_cfg[k].vth    <= 16'sh7fff;
      end
      n_layers    <= 3'd4;
      stream_core <= '0;
      stream_wt   <= 1'b0;
      clear       <= 1'b0;
      wt_start    <= 1'b0;
      s_bvalid    <= 1'b0;
    end else begin
      clear    <= 1'b0;
      wt_start <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        if (s_awaddr[11:8] == 4'h1 && s_awaddr[7:6] == 2'b00) begin
          unique case (s_awaddr[3:2])
            2'd0: core_cfg[wk].n_pre  <= s_wdata[PRE_AW:0];
            2'd1: core_cfg[wk].n_grp  <= s_wdata[GRP_AW:0];
            2'd2: core_cfg[wk].lambda <= s_wdata[W_W-1:0];
            default: core_cfg[wk].vth <= s_wdata[U_W-1:0];
          endcase
        end else if (s_awaddr[11:8] == 4'h0) begin
          unique case (s_awaddr[7:0])
            8'h00: begin clear <= s_wdata[0]; wt_start <= s_wdata[1]; end
            8'h04: begin stream_core <= s_wdata[1:0]; stream_wt <= s_wdata[8]; end
            8'h08: n_layers <= s_wdata[2:0];
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    rd_val = '0;
    if (s_araddr[11:8] == 4'h1 && s_araddr[7:6] == 2'b00) begin
      unique case (s_araddr[3:2])
        2'd0: rd_val = 32'(core_cfg[rk].n_pre);
        2'd1: rd_val = 32'(core_cfg[rk].n_grp);
        2'd2: rd_val = 32'(core_cfg[rk].lambda);
        default: rd_val = 32'($unsigned(core_cfg[rk].vth));
      endcase
    end else if (s_araddr[11:8] == 4'h0) begin
      unique case (s_araddr[7:0])
        8'h04: rd_val = {23'd0, stream_wt, 6'd0, stream_core};
        8'h08: rd_val = 32'(n_layers);
        8'h0C: rd_val = tsteps;
        8'h10: rd_val = 32'(core_busy);
        default: rd_val = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_val;
      end
    end
  end

  // AXI: a response stays until it is taken
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
