// tb_cfg_unit: AXI4-Lite register test of the configuration unit.  Checks the
// reset values, write/read-back of every per-core register and of the global
// registers, the one-cycle command pulses, the status inputs, and that a
// write response and a read response are held until taken.
module tb_cfg_unit;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [11:0] s_awaddr = '0, s_araddr = '0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [3:0] s_wstrb = 4'hf;
  logic [1:0] s_bresp, s_rresp;
  core_cfg_t core_cfg [N_CORES];
  logic [2:0] n_layers;
  logic [1:0] stream_core;
  logic stream_wt, clear, wt_start;
  logic [31:0] tsteps = 32'd77;
  logic [N_CORES-1:0] core_busy = 4'b1010;
  int checks = 0, failures = 0, n_clear = 0, n_wts = 0;

  cfg_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (clear) n_clear++;
    if (wt_start) n_wts++;
  end

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

  task automatic axil_write(logic [11:0] a, logic [31:0] d, int bdelay = 0);
    s_awaddr = a; s_wdata = d; s_awvalid = 1; s_wvalid = 1;
    @(negedge clk);
    while (!(s_awready && s_wready)) @(negedge clk);
    @(posedge clk); #1 s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) begin @(posedge clk); #1; end
    repeat (bdelay) begin @(posedge clk); #1; expect_eq(s_bvalid, 1, "bvalid held"); end
    s_bready = 1; @(posedge clk); #1; s_bready = 0;
  endtask

  task automatic axil_read(logic [11:0] a, output logic [31:0] d, input int rdelay = 0);
    s_araddr = a; s_arvalid = 1;
    @(negedge clk);
    while (!s_arready) @(negedge clk);
    @(posedge clk); #1 s_arvalid = 0;
    while (!s_rvalid) begin @(posedge clk); #1; end
    d = s_rdata;
    repeat (rdelay) begin @(posedge clk); #1; expect_eq(s_rdata, d, "rdata held"); end
    s_rready = 1; @(posedge clk); #1; s_rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    for (int k = 0; k < N_CORES; k++) begin
      expect_eq(core_cfg[k].n_pre, 256, "reset n_pre");
      expect_eq(core_cfg[k].n_grp, 64, "reset n_grp");
    end
    expect_eq(n_layers, 4, "reset n_layers");
    for (int k = 0; k < N_CORES; k++) begin
      axil_write(12'h100 + 12'(16*k), 32'(100 + k), k);
      axil_write(12'h104 + 12'(16*k), 32'(10 + k));
      axil_write(12'h108 + 12'(16*k), 32'(200 + k));
      axil_write(12'h10C + 12'(16*k), 32'hffff_ff00 + 32'(k));  // vth = -256 + k
    end
    for (int k = 0; k < N_CORES; k++) begin
      expect_eq(core_cfg[k].n_pre, 100 + k, "n_pre");
      expect_eq(core_cfg[k].n_grp, 10 + k, "n_grp");
      expect_eq(core_cfg[k].lambda, 200 + k, "lambda");
      expect_eq(longint'($unsigned(core_cfg[k].vth)), 16'hff00 + 16'(k), "vth");
      axil_read(12'h100 + 12'(16*k), d, k); expect_eq(d, 100 + k, "read n_pre");
      axil_read(12'h104 + 12'(16*k), d);    expect_eq(d, 10 + k, "read n_grp");
      axil_read(12'h108 + 12'(16*k), d);    expect_eq(d, 200 + k, "read lambda");
      axil_read(12'h10C + 12'(16*k), d);    expect_eq(d, 32'h0000ff00 + 32'(k), "read vth");
    end
    axil_write(12'h004, 32'h0000_0102);
    expect_eq(stream_wt, 1, "stream mode"); expect_eq(stream_core, 2, "stream core");
    axil_read(12'h004, d); expect_eq(d, 32'h102, "read stream");
    axil_write(12'h008, 32'd3);
    expect_eq(n_layers, 3, "n_layers");
    axil_read(12'h008, d); expect_eq(d, 3, "read n_layers");
    axil_read(12'h00C, d); expect_eq(d, 77, "tsteps status");
    axil_read(12'h010, d); expect_eq(d, 4'b1010, "busy status");
    axil_write(12'h000, 32'h1);
    axil_write(12'h000, 32'h2);
    axil_write(12'h000, 32'h3);
    expect_eq(n_clear, 2, "clear pulses");
    expect_eq(n_wts, 2, "weight-start pulses");
    expect_eq(s_bresp, 0, "bresp OKAY");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
