// tb_ubrain_core: self-checking testbench of the astrocyte-enclosed uBrain core, at a
// reduced size (16-8-4 neurons, two astrocytes on the input layer).
//
// Random 2-bit weights are written to both synapse arrays. The testbench runs many
// timesteps with random input spikes and compares the core's output sites with a model
// made of the reference astrocyte layers, weight sums and LIF layers. Part way through a
// hidden neuron and an input neuron are silenced (fault injection). It checks the
// timestep latency N/NA1 + N + M/NA2 + M + P/NA3 + 19 and that output spikes occur.
// The firing threshold is lowered to 4 to keep the small network active.
module tb_ubrain_core;
  import astro_pkg::*;
  import astro_ref_pkg::*;

  localparam int N = 16, M = 8, P = 4, NA1 = 2, NA2 = 1, NA3 = 1;
  localparam logic [15:0] SEED = 16'h1234;

  logic clk = 0, rst_n = 0, step = 0, we1 = 0, we2 = 0;
  logic [N-1:0] in_spikes = '0, silence_i = '0;
  logic [M-1:0] silence_h = '0;
  logic [P-1:0] silence_o = '0;
  logic [$clog2(N)-1:0] waddr = '0;
  logic [M*W_BITS-1:0] wdata = '0;
  logic [P-1:0] out_sites;
  logic done, busy;
  int checks = 0, failures = 0, out_count = 0;
  int w1 [N][M];
  int w2 [M][P];

  ubrain_core #(.N(N), .M(M), .P(P), .NA1(NA1), .NA2(NA2), .NA3(NA3), .TH(4), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  astro_layer_model a1, a2, a3;
  lif_model lh, lo;

  initial begin
    a1 = new(N, NA1, SEED);
    a2 = new(M, NA2, SEED ^ 16'h5A5A);
    a3 = new(P, NA3, SEED ^ 16'h3C3C);
    lh = new(M, 4);
    lo = new(P, 4);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      we1 = 1; waddr = r[$clog2(N)-1:0];
      for (int c = 0; c < M; c++) begin
        w1[r][c] = ($urandom_range(3) == 0) ? -1 : (($urandom_range(2) == 0) ? 0 : 1);
        wdata[c*2 +: 2] = 2'(w1[r][c]);
      end
    end
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      we1 = 0; we2 = 1; waddr = r[$clog2(N)-1:0]; wdata = '0;
      for (int c = 0; c < P; c++) begin
        w2[r][c] = (int'($urandom_range(3)) == 0) ? -1 : 1;
        wdata[c*2 +: 2] = 2'(w2[r][c]);
      end
    end
    @(negedge clk);
    we2 = 0;

    for (int t = 0; t < 150; t++) begin
      bit si[], sa[], sh[], sha[], so[], soa[];
      bit fh[], fo[];
      int ch[], co[];
      automatic int lat = 0;
      logic [N-1:0] inp;
      for (int i = 0; i < N; i++) inp[i] = ($urandom_range(1) == 0);
      if (t == 75) begin silence_h[2] = 1'b1; silence_i[5] = 1'b1; end
      @(negedge clk);
      in_spikes = inp; step = 1;
      @(negedge clk);
      step = 0;
      while (!done) begin @(negedge clk); lat++; end
      // model
      si = new[N]; fh = new[M]; fo = new[P]; ch = new[M]; co = new[P];
      for (int i = 0; i < N; i++) si[i] = inp[i] && !silence_i[i];
      a1.step(si, sa);
      for (int c = 0; c < M; c++) begin
        ch[c] = 0;
        for (int r = 0; r < N; r++) if (sa[r]) ch[c] += w1[r][c];
        fh[c] = silence_h[c];
      end
      lh.step(ch, fh, sh);
      a2.step(sh, sha);
      for (int c = 0; c < P; c++) begin
        co[c] = 0;
        for (int r = 0; r < M; r++) if (sha[r]) co[c] += w2[r][c];
        fo[c] = 0;
      end
      lo.step(co, fo, so);
      a3.step(so, soa);
      checks++;
      if (lat != N/NA1 + N + M/NA2 + M + P/NA3 + 19) begin
        failures++; $display("FAIL latency %0d", lat);
      end
      for (int c = 0; c < P; c++) begin
        checks++;
        if (out_sites[c] != soa[c]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d out[%0d]=%b expected %b", t, c, out_sites[c], soa[c]);
        end
        out_count += soa[c];
      end
    end
    checks++;
    if (out_count == 0) begin failures++; $display("FAIL: no output spikes"); end
    $display("ubrain_core: %0d output spikes in 150 timesteps", out_count);
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
