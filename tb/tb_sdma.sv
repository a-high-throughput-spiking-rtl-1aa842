// tb_sdma: checks the SDMA's three paths.  Input: a vector offered upstream
// is held (in_ready low) until the controller pops it.  Weights: a stream of
// n_pre * n_grp words lands at addresses i*N_GRP + j, and wt_start rewinds
// the generator.  Output: spikes written per group appear in the output
// vector, are offered after done and held under back-pressure, and pop
// empties the vector for the next timestep.
module tb_sdma;
  import snn_pkg::*;
  localparam int NI = 16, NG = 4;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [2:0] n_grp;
  logic in_valid = 0, in_ready, buf_valid, pop = 0;
  logic [NI-1:0] in_spikes = '0, buf_spikes;
  logic wt_start = 0, wt_valid = 0;
  logic [WT_WORD_W-1:0] wt_data = '0, wtm_wdata;
  logic wtm_we;
  logic [5:0] wtm_waddr;
  logic spk_wr = 0, done = 0, out_valid, out_ready = 0;
  logic [1:0] spk_grp = '0;
  logic [LANES-1:0] spk = '0;
  logic [NG*LANES-1:0] out_spikes;
  int checks = 0, failures = 0;

  sdma #(.N_IN(NI), .N_GRP(NG)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    n_grp = 3'd4;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    // input buffer
    expect_eq(in_ready, 1, "in_ready when empty");
    in_valid = 1; in_spikes = 16'hbeef;
    @(posedge clk); #1;
    in_spikes = 16'h1234;
    expect_eq(buf_valid, 1, "buf_valid");
    expect_eq(in_ready, 0, "in_ready when full");
    @(posedge clk); #1;
    expect_eq(buf_spikes, 16'hbeef, "held vector");
    pop = 1; @(posedge clk); #1; pop = 0;
    expect_eq(buf_valid, 0, "buffer empty after pop");
    @(posedge clk); #1;
    expect_eq(buf_spikes, 16'h1234, "second vector");
    in_valid = 0;
    pop = 1; @(posedge clk); #1; pop = 0;
    // weights, two group counts
    for (int ng = 4; ng >= 3; ng--) begin
      n_grp = 3'(ng);
      wt_start = 1; @(posedge clk); #1; wt_start = 0;
      for (int i = 0; i < NI; i++)
        for (int j = 0; j < ng; j++) begin
          wt_valid = 1; wt_data = 48'(i * 1000 + j);
          #1;
          expect_eq(wtm_we, 1, "wtm_we");
          expect_eq(wtm_waddr, i * NG + j, "weight address");
          expect_eq(wtm_wdata, i * 1000 + j, "weight data");
          @(posedge clk); #1;
        end
      wt_valid = 0;
      #1 expect_eq(wtm_we, 0, "no write without valid");
    end
    // output vector
    for (int g = 0; g < NG; g++) begin
      spk_wr = 1; spk_grp = 2'(g); spk = 4'(g * 5 + 1);
      @(posedge clk); #1;
    end
    spk_wr = 0;
    expect_eq(out_valid, 0, "no output before done");
    done = 1; @(posedge clk); #1; done = 0;
    expect_eq(out_valid, 1, "output offered");
    expect_eq(out_spikes, 16'h0b61, "output vector");
    repeat (3) @(posedge clk); #1;
    expect_eq(out_valid, 1, "output held under back-pressure");
    out_ready = 1; @(posedge clk); #1; out_ready = 0;
    expect_eq(out_valid, 0, "output taken");
    in_valid = 1; in_spikes = 16'h0f0f; @(posedge clk); #1; in_valid = 0;
    pop = 1; @(posedge clk); #1; pop = 0;
    expect_eq(out_spikes, 0, "vector emptied by pop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
