// tb_mpm: fills the membrane potential memory, checks read-back, the
// one-cycle read latency and that a same-cycle read/write returns the old
// word (the write lands for the next read).
module tb_mpm;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [63:0] wdata = '0, rdata;
  logic [63:0] model [64];
  int checks = 0, failures = 0;

  mpm #(.DEPTH(64), .WORD_W(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk); #1;
    for (int a = 0; a < 64; a++) begin
      we = 1; waddr = 6'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int n = 0; n < 2000; n++) begin
      int a, b;
      logic [63:0] old;
      a = $urandom_range(0, 63);
      b = $urandom_range(0, 63);
      old = model[a];
      re = 1; raddr = 6'(a);
      we = 1; waddr = 6'(b); wdata = {$urandom, $urandom};
      @(posedge clk); #1;
      model[b] = wdata;
      we = 0; re = 0;
      checks++;
      if (rdata !== old) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d: %h expected %h", a, rdata, old);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
