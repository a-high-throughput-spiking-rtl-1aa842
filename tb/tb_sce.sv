// tb_sce: self-checking test of one SCE channel in its three modes against
// arithmetic written out in the testbench (random operands plus corner cases
// for saturation, the threshold boundary and every delay/head pair).
module tb_sce;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, en;
  sce_mode_e mode;
  logic signed [15:0] u, vth, r;
  logic signed [7:0]  w;
  logic [3:0] d, head;
  logic [15:0] window;
  logic [7:0] lambda;
  logic spike;
  int checks = 0, failures = 0;
  int n_sat = 0, n_fire = 0;

  sce dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply_check(sce_mode_e m, int eu, int es);
    mode = m; en = 1;
    @(posedge clk); #1;
    checks++;
    if (r !== 16'(eu) || spike !== es[0]) begin
      failures++;
      $display("FAIL mode=%0d u=%0d w=%0d d=%0d head=%0d win=%h lambda=%0d vth=%0d : r=%0d spike=%0b, expected %0d %0d",
               m, u, w, d, head, window, lambda, vth, r, spike, eu, es);
    end
  endtask

  function automatic int satf(int x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction

  initial begin
    en = 0; mode = SCE_LEAK; u = 0; w = 0; d = 0; head = 0; window = 0; lambda = 0; vth = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // leak
    for (int n = 0; n < 300; n++) begin
      u = 16'($urandom); lambda = 8'($urandom);
      if (n == 0) begin u = -32768; lambda = 255; end
      if (n == 1) begin u = 32767;  lambda = 255; end
      apply_check(SCE_LEAK, int'((longint'(u) * lambda) >>> 8), 0);
    end
    // integrate: every head/delay pair, random window and weight
    for (int h = 0; h < 16; h++)
      for (int dd = 0; dd < 16; dd++) begin
        int s, e;
        head = 4'(h); d = 4'(dd); window = 16'($urandom); w = 8'($urandom);
        u = 16'($urandom);
        if (dd == 3) u = 32760 + h;  // near the top: saturation
        s = window[(h + dd) % 16];
        e = satf(int'(u) + (s ? int'(w) : 0));
        if (s && (int'(u) + int'(w) > 32767 || int'(u) + int'(w) < -32768)) n_sat++;
        apply_check(SCE_INTEG, e, 0);
      end
    // fire
    for (int n = 0; n < 300; n++) begin
      int f;
      u = 16'($urandom_range(0, 4000) - 2000); vth = 16'($urandom_range(0, 1500));
      if (n % 7 == 0) vth = u;          // boundary: u == vth must not fire
      if (n % 11 == 0) vth = u - 1;     // just above
      f = (int'(u) > int'(vth));
      n_fire += f;
      apply_check(SCE_FIRE, f ? satf(int'(u) - int'(vth)) : int'(u), f);
    end
    // enable low holds the output
    begin
      logic signed [15:0] keep;
      keep = r; en = 0; u = 123; mode = SCE_INTEG;
      @(posedge clk); #1;
      checks++;
      if (r !== keep) begin failures++; $display("FAIL output changed with en low"); end
    end
    if (n_sat == 0 || n_fire == 0) begin failures++; $display("FAIL saturation or firing not exercised"); end
    $display("saturations=%0d fires=%0d", n_sat, n_fire);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
