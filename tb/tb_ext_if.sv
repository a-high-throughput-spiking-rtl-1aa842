// tb_ext_if: checks the external stream interface.  Weight mode: every beat
// reaches only the selected core's weight port, with the low 48 bits.  Spike
// mode: four beats form one 256-bit vector (beat n = neurons 64n..64n+63),
// input is held off (tready low) while core 0 has not taken the vector.
// Output: a result vector leaves as four beats, tlast on the fourth, held
// under back-pressure, and is counted in tsteps.
module tb_ext_if;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, stream_wt = 0;
  logic [1:0] stream_core = '0;
  logic [63:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic [N_CORES-1:0] wt_valid;
  logic [WT_WORD_W-1:0] wt_data;
  logic in_valid, in_ready = 0;
  logic [N_MAX-1:0] in_spikes, res_spikes = '0;
  logic res_valid = 0, res_ready;
  logic m_tvalid, m_tready = 0, m_tlast;
  logic [31:0] tsteps;
  int checks = 0, failures = 0;

  ext_if dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(logic [255:0] got, logic [255:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    logic [255:0] v, r;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    // weights
    stream_wt = 1;
    for (int c = 0; c < N_CORES; c++) begin
      stream_core = 2'(c);
      for (int n = 0; n < 5; n++) begin
        s_tvalid = 1; s_tdata = {16'hdead, 48'(c * 100 + n)};
        #1;
        expect_eq(s_tready, 1, "tready in weight mode");
        expect_eq(256'(wt_valid), 256'(4'b0001 << c), "weight target");
        expect_eq(wt_data, c * 100 + n, "weight word");
        @(posedge clk); #1;
      end
    end
    s_tvalid = 0; #1;
    expect_eq(wt_valid, 0, "no weight without tvalid");
    // spikes: two vectors, the second waits for the first to be taken
    stream_wt = 0;
    for (int t = 0; t < 2; t++) begin
      v = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int b = 0; b < 4; b++) begin
        s_tvalid = 1; s_tdata = v[b*64 +: 64]; s_tlast = (b == 3);
        @(negedge clk);
        while (!s_tready) @(negedge clk);
        @(posedge clk); #1;
      end
      s_tvalid = 0;
      expect_eq(in_valid, 1, "vector complete");
      expect_eq(in_spikes, v, "input vector");
      s_tvalid = 1; #1;
      expect_eq(s_tready, 0, "held off while core 0 has not taken it");
      s_tvalid = 0;
      repeat (2) @(posedge clk); #1;
      in_ready = 1; @(posedge clk); #1; in_ready = 0;
      expect_eq(in_valid, 0, "vector taken");
    end
    // result
    for (int t = 0; t < 3; t++) begin
      r = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      res_spikes = r; res_valid = 1;
      @(negedge clk);
      while (!res_ready) @(negedge clk);
      @(posedge clk); #1 res_valid = 0; res_spikes = '0;
      for (int b = 0; b < 4; b++) begin
        expect_eq(m_tvalid, 1, "tvalid");
        m_tready = 0; repeat (t) @(posedge clk); #1;
        expect_eq(m_tdata, r[b*64 +: 64], "output beat");
        expect_eq(m_tlast, b == 3, "tlast");
        m_tready = 1; @(posedge clk); #1; m_tready = 0;
      end
      expect_eq(m_tvalid, 0, "output done");
      expect_eq(tsteps, t + 1, "tsteps");
    end
    clear = 1; @(posedge clk); #1; clear = 0;
    expect_eq(tsteps, 0, "tsteps cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
