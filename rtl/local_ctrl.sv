// local_ctrl: local controller of one spiking computation core.
//
// Runs one network timestep for the core's layer as a sequence of phases:
//   PUSH  : the input spike vector held by the SDMA is written into the
//           spiking ring buffer (the head pointer moves) and the output
//           spike buffer is emptied;
//   LEAK  : for every postsynaptic group j, U <- U * lambda;
//   INTEG : axonal order, outer loop over presynaptic neurons i, inner loop
//           over groups j; the SRB window of i is read once at j = 0 and the
//           WTM word at address i*64 + j supplies four weights and delays;
//   FIRE  : for every group j, compare with the threshold, reset, and emit
//           the four spikes into the SDMA output buffer;
//   DRAIN/DONE: the pipeline empties and the output vector is handed over.
// Every issued element goes through a three-stage pipeline: stage A issues
// the WTM/MPM/SRB reads, stage B (data one cycle later) is the SCE, stage C
// writes the SCE result back to MPM two cycles after the MPM read, as in the
// processor's timing diagram.  One element (four synapses or four neurons)
// is issued per cycle.  A row of fewer than three groups would read a word
// before its write-back lands, so each row lasts at least three cycles
// (bubbles); this padding, the start condition (input present and output
// buffer empty) and the clear sequence (zeros written over MPM, 64 cycles)
// are this design's choices.  Cycles per timestep:
//   max(n_grp,3) * (n_pre + 2) + 5 from the SDMA accepting the input vector
//   to the output vector being offered (16 517 for a 256 x 256 layer).
module local_ctrl
  import snn_pkg::*;
#(
  parameter int N_PRE = 256,
  parameter int N_GRP = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  core_cfg_t                 cfg,
  input  logic                      clear,      // start a clear sequence
  input  logic                      in_valid,   // SDMA holds an input vector
  input  logic                      out_busy,   // SDMA output buffer full
  output logic                      in_pop,     // push SRB, consume input
  output logic                      srb_clear,
  output logic                      srb_rd_en,
  output logic [$clog2(N_PRE)-1:0]  srb_rd_addr,
  output logic                      wtm_re,
  output logic [$clog2(N_PRE)+$clog2(N_GRP)-1:0] wtm_raddr,
  output logic                      mpm_re,
  output logic [$clog2(N_GRP)-1:0]  mpm_raddr,
  output logic                      mpm_we,
  output logic                      mpm_wzero,  // write zeros (clear)
  output logic [$clog2(N_GRP)-1:0]  mpm_waddr,
  output logic                      sce_en,
  output sce_mode_e                 sce_mode,
  output logic                      out_wr,     // stage-C spikes are valid
  output logic [$clog2(N_GRP)-1:0]  out_grp,
  output logic                      out_push,   // timestep finished
  output logic                      busy,
  output logic                      bubble      // a padding cycle was issued
);
  localparam int IW = $clog2(N_PRE);
  localparam int JW = $clog2(N_GRP);

  typedef enum logic [2:0] {
    S_CLEAR, S_IDLE, S_PUSH, S_RUN, S_DRAIN, S_DONE
  } state_e;

  state_e    state;
  sce_mode_e phase;
  logic [IW:0]   i;        // one extra bit: N_PRE itself is reachable
  logic [JW:0]   j;
  logic [JW:0]   jmax;
  logic [1:0]    drain_cnt;
  logic          issue;
  logic          row_end;

  // stage B / stage C pipeline registers
  logic          v1, v2;
  sce_mode_e     m1, m2;
  logic [JW-1:0] j1, j2;

  assign jmax    = (cfg.n_grp < 3) ? (JW+1)'(2) : cfg.n_grp - 1'b1;
  assign issue   = (state == S_RUN) && (j < cfg.n_grp);
  assign row_end = (j == jmax);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_CLEAR;
      phase     <= SCE_LEAK;
      i         <= '0;
      j         <= '0;
      drain_cnt <= '0;
    end else if (clear) begin
      state <= S_CLEAR;
      j     <= '0;
    end else begin
      unique case (state)
        S_CLEAR: begin
          j <= j + 1'b1;
          if (j == (JW+1)'(N_GRP - 1)) begin
            j     <= '0;
            state <= S_IDLE;
          end
        end
        S_IDLE:
          if (in_valid && !out_busy) state <= S_PUSH;
        S_PUSH: begin
          state <= S_RUN;
          phase <= SCE_LEAK;
          i     <= '0;
          j     <= '0;
        end
        S_RUN: begin
          j <= j + 1'b1;
          if (row_end) begin
            j <= '0;
            unique case (phase)
              SCE_LEAK:  begin phase <= SCE_INTEG; i <= '0; end
              SCE_INTEG: begin
                i <= i + 1'b1;
                if (i == cfg.n_pre - 1'b1) phase <= SCE_FIRE;
              end
              default: begin state <= S_DRAIN; drain_cnt <= '0; end
            endcase
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 2'd1) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0;
      m1 <= SCE_LEAK; m2 <= SCE_LEAK;
      j1 <= '0; j2 <= '0;
    end else if (clear) begin
      v1 <= 1'b0; v2 <= 1'b0;
    end else begin
      v1 <= issue;
      m1 <= phase;
      j1 <= j[JW-1:0];
      v2 <= v1;
      m2 <= m1;
      j2 <= j1;
    end
  end

  // stage A
  assign in_pop      = (state == S_PUSH);
  assign srb_clear   = clear;
  assign srb_rd_en   = issue && (phase == SCE_INTEG) && (j == '0);
  assign srb_rd_addr = i[IW-1:0];
  assign wtm_re      = issue && (phase == SCE_INTEG);
  assign wtm_raddr   = {i[IW-1:0], j[JW-1:0]};
  assign mpm_re      = issue;
  assign mpm_raddr   = j[JW-1:0];
  assign bubble      = (state == S_RUN) && !issue;
  // stage B
  assign sce_en      = v1;
  assign sce_mode    = m1;
  // stage C
  assign mpm_we      = v2 || (state == S_CLEAR);
  assign mpm_wzero   = (state == S_CLEAR);
  assign mpm_waddr   = (state == S_CLEAR) ? j[JW-1:0] : j2;
  assign out_wr      = v2 && (m2 == SCE_FIRE);
  assign out_grp     = j2;
  assign out_push    = (state == S_DONE);
  assign busy        = (state != S_IDLE);

  // the controller relies on cfg being inside the core's capacity
  a_cfg_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN) |-> (cfg.n_pre >= 1 && 32'(cfg.n_pre) <= N_PRE &&
                          cfg.n_grp >= 1 && 32'(cfg.n_grp) <= N_GRP));
endmodule
