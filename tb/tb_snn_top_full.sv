// tb_snn_top_full: the processor at its full size running the keyword-
// spotting network shape (140 inputs, 256, 256 and 20 neurons, synaptic
// delays 0..15) on cores 0..2, driven through its AXI ports.  Weights and
// input spikes are pseudo-random (the benchmark recordings are not part of
// this test); every output vector is compared with a chain of reference
// layer models.  It also measures the steady-state time between output
// vectors, which must stay within 16 750 cycles (0.134 ms at 125 MHz), and
// reports the time for the whole 72-timestep sample.
module tb_snn_top_full;
  import snn_pkg::*;
  import snn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [11:0] awaddr = '0, araddr = '0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic arvalid = 0, arready, rvalid, rready = 0;
  logic [31:0] wdata = '0, rdata;
  logic [1:0] bresp, rresp;
  logic [63:0] s_tdata = '0, m_tdata;
  logic s_tvalid = 0, s_tready, s_tlast = 0, m_tvalid, m_tready = 0, m_tlast;
  logic [N_CORES-1:0] core_busy, core_bubble;
  int checks = 0, failures = 0;
  longint cyc = 0, t_last = 0, t_first = 0;
  int n_out = 0;
  int n_bubble = 0, n_stall = 0, n_overlap = 0, n_tapsw = 0, n_clear = 0, n_modesw = 0, n_spk = 0;

  snn_top dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(4'hf), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready), .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .m_axis_tlast(m_tlast),
    .core_busy, .core_bubble
  );
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (m_tvalid && m_tready && m_tlast) begin
      n_out++;
      if (n_out == 2) t_first = cyc;
      t_last = cyc;
    end
    if (|core_bubble) n_bubble++;
    if (m_tvalid && !m_tready) n_stall++;
    if ($countones(core_busy) >= 2) n_overlap++;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axil_write(logic [11:0] a, logic [31:0] d);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    @(negedge clk);
    while (!(awready && wready)) @(negedge clk);
    @(posedge clk); #1 awvalid = 0; wvalid = 0;
    while (!bvalid) begin @(posedge clk); #1; end
    bready = 1; @(posedge clk); #1 bready = 0;
  endtask

  task automatic axil_read(logic [11:0] a, output logic [31:0] d);
    araddr = a; arvalid = 1;
    @(negedge clk);
    while (!arready) @(negedge clk);
    @(posedge clk); #1 arvalid = 0;
    while (!rvalid) begin @(posedge clk); #1; end
    d = rdata;
    rready = 1; @(posedge clk); #1 rready = 0;
  endtask

  task automatic send_beat(logic [63:0] d, logic last);
    s_tdata = d; s_tlast = last; s_tvalid = 1;
    @(negedge clk);
    while (!s_tready) @(negedge clk);
    @(posedge clk); #1 s_tvalid = 0;
  endtask

  task automatic expect_eq(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // configure, load and run a network of nl layers, sizes[0] inputs
  task automatic run_net(int sizes [5], int nl, int steps, int lam, int th);
    lif_layer L [4];
    bit v [256], o [256];
    logic [31:0] d;
    logic [255:0] got;
    logic [255:0] exp_q [$];
    logic [255:0] in_q [$];
    axil_write(12'h000, 32'h1);                        // clear
    n_clear++;
    axil_write(12'h008, 32'(nl));
    for (int k = 0; k < nl; k++) begin
      int ng = sizes[k+1] / LANES;
      L[k] = new(sizes[k], sizes[k+1]);
      L[k].lambda = lam; L[k].vth = th;
      axil_write(12'h100 + 12'(16*k), 32'(sizes[k]));
      axil_write(12'h104 + 12'(16*k), 32'(ng));
      axil_write(12'h108 + 12'(16*k), 32'(lam));
      axil_write(12'h10C + 12'(16*k), 32'(th));
      axil_write(12'h004, 32'h100 | 32'(k));          // weights to core k
      axil_write(12'h000, 32'h2);                      // rewind load address
      for (int i = 0; i < sizes[k]; i++)
        for (int g = 0; g < ng; g++) begin
          logic [63:0] beat = '0;
          for (int l = 0; l < LANES; l++) begin
            int w = $urandom_range(0, 100) - 30;
            int dl = $urandom_range(0, 15);
            L[k].w[i][g*LANES+l] = w; L[k].d[i][g*LANES+l] = dl;
            beat[l*SYN_W +: SYN_W] = {4'(dl), 8'(w)};
          end
          send_beat(beat, 1'b0);
        end
    end
    axil_write(12'h004, 32'h0);                        // spikes
    n_modesw++;
    axil_read(12'h008, d); expect_eq(d, nl, "NLAYERS read-back");
    // stimulus and expected outputs
    for (int t = 0; t < steps; t++) begin
      logic [255:0] iv = '0;
      for (int i = 0; i < 256; i++) v[i] = (i < sizes[0]) ? ($urandom_range(0, 99) < 30) : 0;
      for (int i = 0; i < 256; i++) iv[i] = v[i];
      for (int k = 0; k < nl; k++) begin
        L[k].step(v, o);
        v = o;
      end
      got = '0;
      for (int i = 0; i < 256; i++) got[i] = v[i];
      exp_q.push_back(got);
      in_q.push_back(iv);
    end
    fork
      begin
        foreach (in_q[t])
          for (int b = 0; b < 4; b++) send_beat(in_q[t][b*64 +: 64], b == 3);
      end
    join_none
    // collect outputs in order while the input side is still feeding
    for (int t = 0; t < steps; t++) begin
      logic [255:0] e;
      for (int b = 0; b < 4; b++) begin
        while (!m_tvalid) begin @(posedge clk); #1; end
        repeat ($urandom_range(0, 2)) begin @(posedge clk); #1; end
        got[b*64 +: 64] = m_tdata;
        expect_eq(m_tlast, b == 3, "tlast");
        m_tready = 1; @(posedge clk); #1 m_tready = 0;
      end
      e = exp_q.pop_front();
      for (int j = 0; j < 256; j++) begin
        n_spk += got[j];
        checks++;
        if (got[j] !== e[j]) begin
          failures++;
          if (failures < 20) $display("FAIL layers=%0d t=%0d neuron %0d: got %0b expected %0b", nl, t, j, got[j], e[j]);
        end
      end
    end
    axil_read(12'h00C, d); expect_eq(d, steps, "TSTEPS");
  endtask

  initial begin
    localparam int STEPS = 72;
    real per_step;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    repeat (70) @(posedge clk); #1;
    run_net('{140, 256, 256, 20, 0}, 3, STEPS, 235, 60);
    per_step = real'(t_last - t_first) / real'(STEPS - 2);
    $display("steady-state cycles per timestep = %0.1f (%0.3f ms at 125 MHz), 72 timesteps = %0.2f ms",
             per_step, per_step / 125000.0, 72.0 * per_step / 125000.0);
    $display("stalls=%0d overlap=%0d spikes=%0d", n_stall, n_overlap, n_spk);
    checks++;
    if (per_step > 16750.0 || per_step < 16000.0) begin failures++; $display("FAIL timestep rate"); end
    checks++;
    if (n_overlap == 0 || n_spk == 0) begin failures++; $display("FAIL pipeline overlap or spikes missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
