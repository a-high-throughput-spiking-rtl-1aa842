// tb_snn_core: end-to-end test of one spiking computation core against the
// reference layer model.  Two configurations are run, separated by a clear:
// a full-width one (every group used) and a narrow one with two groups,
// which needs padding bubbles.  Weights and delays are random, input spikes
// are random, and the output port is randomly stalled.  Every output spike
// vector is compared with the model, and the cycles from accepting an input
// vector to offering its output must equal max(n_grp,3)*(n_pre+2) + 5.
module tb_snn_core;
  import snn_pkg::*;
  import snn_ref_pkg::*;
  localparam int NP = 16, NG = 4;

  logic clk = 0, rst_n = 0, clear = 0;
  core_cfg_t cfg;
  logic wt_start = 0, wt_valid = 0;
  logic [WT_WORD_W-1:0] wt_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [NP-1:0] in_spikes = '0;
  logic [NG*LANES-1:0] out_spikes;
  logic busy, bubble;
  int checks = 0, failures = 0;
  int n_bubble = 0, n_stall = 0, n_spk = 0;
  longint cyc = 0, t_acc;

  snn_core #(.N_PRE(NP), .N_GRP(NG)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (bubble) n_bubble++;
    if (out_valid && !out_ready) n_stall++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_cfg(int np, int ng, int lam, int th, int steps);
    lif_layer ref_l = new(np, ng * LANES);
    bit ins [256], outs [256];
    int lat_exp = ((ng < 3) ? 3 : ng) * (np + 2) + 5;
    ref_l.lambda = lam; ref_l.vth = th;
    cfg.n_pre = 9'(np); cfg.n_grp = 7'(ng); cfg.lambda = 8'(lam); cfg.vth = 16'(th);
    clear = 1; @(posedge clk); #1; clear = 0;
    repeat (NG + 2) @(posedge clk); #1;
    // weights
    wt_start = 1; @(posedge clk); #1; wt_start = 0;
    for (int i = 0; i < np; i++)
      for (int g = 0; g < ng; g++) begin
        for (int k = 0; k < LANES; k++) begin
          int w = $urandom_range(0, 90) - 35;
          int dl = $urandom_range(0, 15);
          ref_l.w[i][g*LANES+k] = w;
          ref_l.d[i][g*LANES+k] = dl;
          wt_data[k*SYN_W +: SYN_W] = {4'(dl), 8'(w)};
        end
        wt_valid = 1; @(posedge clk); #1;
      end
    wt_valid = 0;
    for (int t = 0; t < steps; t++) begin
      for (int i = 0; i < 256; i++) ins[i] = (i < np) ? ($urandom_range(0, 99) < 35) : 0;
      for (int i = 0; i < NP; i++) in_spikes[i] = ins[i];
      ref_l.step(ins, outs);
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      #1 t_acc = cyc;
      in_valid = 0;
      while (!out_valid) begin @(posedge clk); #1; end
      checks++;
      if (cyc - t_acc != lat_exp) begin
        failures++;
        $display("FAIL latency %0d expected %0d", cyc - t_acc, lat_exp);
      end
      // random stall of the output
      out_ready = 0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1 out_ready = 1;
      for (int j = 0; j < NG*LANES; j++) begin
        checks++;
        n_spk += out_spikes[j];
        if (out_spikes[j] !== outs[j]) begin
          failures++;
          if (failures < 20) $display("FAIL t=%0d neuron %0d: got %0b expected %0b", t, j, out_spikes[j], outs[j]);
        end
      end
      @(posedge clk); #1 out_ready = 0;
    end
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    repeat (NG + 2) @(posedge clk); #1;
    run_cfg(NP, NG, 220, 60, 40);
    run_cfg(12, 2, 180, 50, 30);
    run_cfg(NP, NG, 256 - 1, 20, 20);
    $display("spikes=%0d bubbles=%0d stalls=%0d", n_spk, n_bubble, n_stall);
    checks++;
    if (n_spk == 0 || n_bubble == 0 || n_stall == 0) begin
      failures++;
      $display("FAIL a mechanism was not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
