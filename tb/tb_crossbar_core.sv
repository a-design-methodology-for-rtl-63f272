// tb_crossbar_core: self-checking testbench of the astrocyte-enclosed crossbar core, at a
// reduced size (16 x 16, two astrocytes on the output layer).
//
// Random 2-bit weights are written to the crossbar; many timesteps with random input
// spikes are run and the output sites are compared with a model made of the reference
// astrocyte layers, weight sums and LIF neurons. Part way through, an input neuron and an
// output neuron are silenced. Checks the latency N/NA1 + N + N/NA2 + 11 and that the
// silenced output neuron's site still releases spikes (astrocyte repair).
// The firing threshold is lowered to 4 to keep the small network active.
module tb_crossbar_core;
  import astro_pkg::*;
  import astro_ref_pkg::*;

  localparam int N = 16, NA1 = 1, NA2 = 2;
  localparam logic [15:0] SEED = 16'h0BAD;

  logic clk = 0, rst_n = 0, step = 0, we = 0;
  logic [N-1:0] in_spikes = '0, silence_i = '0, silence_o = '0;
  logic [$clog2(N)-1:0] waddr = '0;
  logic [N*W_BITS-1:0] wdata = '0;
  logic [N-1:0] out_sites;
  logic done, busy;
  int checks = 0, failures = 0, out_count = 0, repaired = 0;
  int w [N][N];

  crossbar_core #(.N(N), .NA1(NA1), .NA2(NA2), .TH(4), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  astro_layer_model a1, a2;
  lif_model lo;

  initial begin
    a1 = new(N, NA1, SEED);
    a2 = new(N, NA2, SEED ^ 16'h3C3C);
    lo = new(N, 4);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      we = 1; waddr = r[$clog2(N)-1:0];
      for (int c = 0; c < N; c++) begin
        w[r][c] = ($urandom_range(3) == 0) ? -1 : (($urandom_range(2) == 0) ? 0 : 1);
        wdata[c*2 +: 2] = 2'(w[r][c]);
      end
    end
    @(negedge clk);
    we = 0;

    for (int t = 0; t < 200; t++) begin
      bit si[], sa[], so[], soa[], fo[];
      int co[];
      automatic int lat = 0;
      logic [N-1:0] inp;
      for (int i = 0; i < N; i++) inp[i] = ($urandom_range(1) == 0);
      if (t == 100) begin silence_i[3] = 1'b1; silence_o[6] = 1'b1; end
      @(negedge clk);
      in_spikes = inp; step = 1;
      @(negedge clk);
      step = 0;
      while (!done) begin @(negedge clk); lat++; end
      si = new[N]; co = new[N]; fo = new[N];
      for (int i = 0; i < N; i++) si[i] = inp[i] && !silence_i[i];
      a1.step(si, sa);
      for (int c = 0; c < N; c++) begin
        co[c] = 0;
        for (int r = 0; r < N; r++) if (sa[r]) co[c] += w[r][c];
        fo[c] = silence_o[c];
      end
      lo.step(co, fo, so);
      a2.step(so, soa);
      checks++;
      if (lat != N/NA1 + N + N/NA2 + 11) begin failures++; $display("FAIL latency %0d", lat); end
      for (int c = 0; c < N; c++) begin
        checks++;
        if (out_sites[c] != soa[c]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d out[%0d]=%b expected %b", t, c, out_sites[c], soa[c]);
        end
        out_count += soa[c];
      end
      if (silence_o[6] && out_sites[6]) repaired++;
    end
    checks++;
    if (out_count == 0) begin failures++; $display("FAIL: no output spikes"); end
    checks++;
    if (repaired == 0) begin failures++; $display("FAIL: silenced neuron's site never released"); end
    $display("crossbar_core: %0d output spikes, %0d repair releases", out_count, repaired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
