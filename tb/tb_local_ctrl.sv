// tb_local_ctrl: checks the controller's schedule.  For each timestep the
// issued reads must be exactly: LEAK j = 0..n_grp-1, then INTEG (i, j) in
// axonal order with WTM address i*64 + j (i*N_GRP + j) and one SRB read per i
// at j = 0, then FIRE j = 0..n_grp-1; every MPM read must be written back two
// cycles later at the same address with the SCE enabled in between; the
// timestep must take max(n_grp,3)*(n_pre+2) + 5 cycles from input to
// out_push; rows shorter than three groups must contain bubbles; and a clear
// must write all N_GRP MPM words.
module tb_local_ctrl;
  import snn_pkg::*;
  localparam int NP = 8, NG = 4;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, out_busy = 0;
  core_cfg_t cfg;
  logic in_pop, srb_clear, srb_rd_en, wtm_re, mpm_re, mpm_we, mpm_wzero, sce_en, out_wr, out_push, busy, bubble;
  logic [2:0] srb_rd_addr;
  logic [4:0] wtm_raddr;
  logic [1:0] mpm_raddr, mpm_waddr, out_grp;
  sce_mode_e sce_mode;
  int checks = 0, failures = 0, n_bubble = 0, n_clear_wr = 0;
  int exp_q [$];      // expected issue codes
  int rd_hist [$];    // MPM read address history, for the write-back check
  logic [2:0] re_d;
  logic [1:0] ra_d [3];

  local_ctrl #(.N_PRE(NP), .N_GRP(NG)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string m);
    failures++;
    if (failures < 20) $display("FAIL %s", m);
  endtask

  // code = mode*10000 + i*100 + j
  always @(posedge clk) if (rst_n) begin
    re_d  <= {re_d[1:0], mpm_re};
    ra_d[0] <= mpm_raddr; ra_d[1] <= ra_d[0]; ra_d[2] <= ra_d[1];
    if (bubble) n_bubble++;
    if (mpm_we && mpm_wzero) n_clear_wr++;
    if (mpm_re) begin
      checks++;
      if (exp_q.size() == 0) fail("unexpected issue");
      else begin
        int e;
        e = exp_q.pop_front();
        if (e / 10000 == 1 && !wtm_re) fail($sformatf("expected INTEG issue %0d", e));
        if (e / 10000 != 1 && wtm_re)  fail($sformatf("unexpected WTM read, expected %0d", e));
        if (int'(mpm_raddr) != e % 100) fail($sformatf("MPM addr %0d expected %0d", mpm_raddr, e % 100));
        if (e / 10000 == 1) begin
          if (int'(wtm_raddr) != ((e / 100) % 100) * NG + e % 100) fail($sformatf("WTM addr %0d for code %0d", wtm_raddr, e));
          if ((e % 100 == 0) != srb_rd_en) fail("SRB read not exactly at j = 0");
          if (srb_rd_en && int'(srb_rd_addr) != (e / 100) % 100) fail("SRB address");
        end
      end
    end
    if (re_d[0] !== sce_en) fail("SCE enable not one cycle after the read");
    if (!mpm_wzero) begin
      checks++;
      if (re_d[1] !== mpm_we) fail("MPM write not two cycles after the read");
      else if (mpm_we && mpm_waddr !== ra_d[1]) fail("write-back address");
    end
  end

  task automatic step(int np, int ng);
    longint t0;
    int n;
    int jm = (ng < 3) ? 3 : ng;
    for (int j = 0; j < ng; j++) exp_q.push_back(j);
    for (int i = 0; i < np; i++) for (int j = 0; j < ng; j++) exp_q.push_back(10000 + i*100 + j);
    for (int j = 0; j < ng; j++) exp_q.push_back(20000 + j);
    cfg.n_pre = 9'(np); cfg.n_grp = 7'(ng);
    in_valid = 1;
    @(posedge clk); #1;
    n = 1;
    while (!in_pop) begin @(posedge clk); #1; end
    in_valid = 0;
    while (!out_push) begin @(posedge clk); #1; n++; end
    checks++;
    // input seen one cycle after the SDMA accepted it, hence +1
    if (n + 1 != jm * (np + 2) + 5) fail($sformatf("timestep took %0d cycles, expected %0d", n + 1, jm * (np + 2) + 5));
    checks++;
    if (exp_q.size() != 0) fail($sformatf("%0d issues missing", exp_q.size()));
    exp_q.delete();
  endtask

  initial begin
    cfg = '0; cfg.n_pre = 9'(NP); cfg.n_grp = 7'(NG);
    re_d = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    while (busy) begin @(posedge clk); #1; end
    checks++;
    if (n_clear_wr != NG) fail($sformatf("reset clear wrote %0d words", n_clear_wr));
    // the output buffer is full: no start
    out_busy = 1; in_valid = 1;
    repeat (5) @(posedge clk); #1;
    checks++;
    if (busy) fail("started while the output buffer was full");
    out_busy = 0; in_valid = 0;
    step(NP, NG);
    step(NP, NG);
    step(5, 2);
    step(3, 1);
    step(NP, 3);
    n_clear_wr = 0;
    clear = 1; @(posedge clk); #1; clear = 0;
    while (busy) begin @(posedge clk); #1; end
    checks++;
    if (n_clear_wr != NG) fail($sformatf("clear wrote %0d words", n_clear_wr));
    checks++;
    if (n_bubble == 0) fail("no bubbles");
    $display("bubbles=%0d", n_bubble);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
