// tb_srb: checks the spiking ring buffer against a model that stores every
// pushed vector by its absolute timestep: after each push, slot (head + d)
// of every neuron's window must equal that neuron's spike d pushes ago
// (zero before the first push and after clear), for every d in 0..15.
module tb_srb;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, rd_en = 0;
  logic [N-1:0] push_spikes = '0;
  logic [4:0]  rd_addr = '0;
  logic [15:0] rd_window;
  logic [3:0]  head;
  logic [N-1:0] hist [$];
  int checks = 0, failures = 0, wraps = 0;

  srb #(.N_PRE(N), .DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int i = 0; i < N; i++) begin
      rd_en = 1; rd_addr = 5'(i);
      @(posedge clk); #1;
      rd_en = 0;
      for (int dd = 0; dd < 16; dd++) begin
        bit e;
        e = (dd < hist.size()) ? hist[hist.size()-1-dd][i] : 1'b0;
        checks++;
        if (rd_window[4'(head + 4'(dd))] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL neuron %0d delay %0d: got %0b expected %0b", i, dd, rd_window[4'(head + 4'(dd))], e);
        end
      end
    end
    // window holds while rd_en is low
    begin
      logic [15:0] keep;
      keep = rd_window;
      rd_addr = 5'(rd_addr + 1);
      @(posedge clk); #1;
      checks++;
      if (rd_window !== keep) begin failures++; $display("FAIL window changed without rd_en"); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    check_all();
    for (int t = 0; t < 40; t++) begin
      push_spikes = {$urandom, $urandom};
      push = 1;
      @(posedge clk); #1;
      push = 0;
      hist.push_back(push_spikes);
      if (head == 0) wraps++;
      check_all();
      if (t == 25) begin
        clear = 1; @(posedge clk); #1; clear = 0;
        hist.delete();
        checks++;
        if (head !== 0) begin failures++; $display("FAIL head not reset by clear"); end
        check_all();
      end
    end
    if (wraps < 1) begin failures++; $display("FAIL head never wrapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
