// tb_wtm: writes the weight memory with values generated from the address,
// reads them back in a different order and checks the one-cycle read latency
// and that a word is read only when re is high.
module tb_wtm;
  localparam int DEPTH = 16384;
  logic clk = 0, we = 0, re = 0;
  logic [13:0] waddr = '0, raddr = '0;
  logic [47:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  wtm #(.DEPTH(DEPTH), .WORD_W(48)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [47:0] pat(int a);
    return {16'(a * 7 + 3), 16'(a ^ 16'h5a5a), 16'(a * 40503)};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk); #1;
    we = 1;
    for (int a = 0; a < DEPTH; a++) begin
      waddr = 14'(a); wdata = pat(a);
      @(posedge clk); #1;
    end
    we = 0;
    for (int n = 0; n < 4000; n++) begin
      int a;
      a = (n * 4099 + 17) % DEPTH;
      re = 1; raddr = 14'(a);
      @(posedge clk); #1;
      re = 0; raddr = 14'(a + 1);
      checks++;
      if (rdata !== pat(a)) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d: %h expected %h", a, rdata, pat(a));
      end
      @(posedge clk); #1;
      checks++;
      if (rdata !== pat(a)) begin failures++; $display("FAIL rdata changed with re low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
