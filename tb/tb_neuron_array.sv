// tb_neuron_array: self-checking testbench of the leaky integrate-and-fire layer.
//
// Drives random input currents for many timesteps and compares the membrane potentials
// and spikes with an integer model (leak by V/2^LEAK_SH, threshold TH, reset to 0,
// clamp at 0). Neuron 1 is silenced: it must integrate like the others but never spike.
// Checks the one-edge latency of done.
module tb_neuron_array;
  import astro_pkg::*;

  localparam int N = 8, AW = 16, LEAK = 2, TH = 8;

  logic clk = 0, rst_n = 0, step = 0;
  logic signed [AW-1:0] cur [N];
  logic [N-1:0] silence = 8'b0000_0010;
  logic [N-1:0] spikes;
  logic done;
  logic signed [15:0] vmem [N];
  int checks = 0, failures = 0, fired = 0;
  int v [N];

  neuron_array #(.N(N), .ACC_W(AW), .LEAK_SH(LEAK), .TH(TH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int n = 0; n < N; n++) begin cur[n] = '0; v[n] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic [N-1:0] es;
      @(negedge clk);
      for (int n = 0; n < N; n++) cur[n] = AW'(int'($urandom_range(6)) - 2);
      step = 1;
      for (int n = 0; n < N; n++) begin
        automatic int nv = v[n] - (v[n] >>> LEAK) + int'(cur[n]);
        if (nv >= TH) begin v[n] = 0; es[n] = !silence[n]; end
        else begin v[n] = (nv < 0) ? 0 : nv; es[n] = 1'b0; end
      end
      @(negedge clk);
      step = 0;
      checks++;
      if (!done) begin failures++; $display("FAIL: done missing"); end
      checks++;
      if (spikes !== es) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d spikes %b expected %b", t, spikes, es);
      end
      for (int n = 0; n < N; n++) begin
        checks++;
        if (int'(vmem[n]) != v[n]) begin
          failures++;
          if (failures < 10) $display("FAIL v[%0d]=%0d expected %0d", n, vmem[n], v[n]);
        end
      end
      fired += $countones(spikes);
    end
    checks++;
    if (fired == 0) begin failures++; $display("FAIL: no neuron fired"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
