// tb_astrocyte: self-checking testbench of the astrocyte.
//
// A behavioural model written with plain integer arithmetic repeats the astrocyte's
// equations (2-AG, DSE, PR, the calcium compartments, Glu and e-SP) and its random
// source, and every timestep the testbench compares the gated site spikes, Ca_cyt, Glu and
// e-SP with it. It also checks the latency (done G+1 edges after step) and the repair
// mechanism: after neuron 0 is made silent, its synaptic site keeps releasing spikes
// because the astrocyte is still driven by the other neurons.
module tb_astrocyte;
  import astro_pkg::*;

  localparam int G      = 8;
  localparam int IN_SH  = $clog2(G) + 2;
  localparam int PR0    = 32768;
  localparam int CA_TH  = 512;

  logic clk = 0, rst_n = 0, step = 0;
  logic [G-1:0] spikes = '0, sites;
  logic done, busy;
  state_t ca_cyt, glu;
  pct_t esp;
  int checks = 0, failures = 0;

  astrocyte #(.G(G)) dut (.*);

  always #5 clk = ~clk;

  // ---- reference model ----
  longint m_ag [G];
  longint m_cyt, m_ip3, m_er, m_glu, m_esp;
  int unsigned m_rnd = 16'hACE1;

  function automatic longint clampu(longint v);
    return (v < 0) ? 0 : (v > 65535) ? 65535 : v;
  endfunction
  function automatic longint clamps(longint v);
    return (v < -32768) ? -32768 : (v > 32767) ? 32767 : v;
  endfunction

  function automatic logic [G-1:0] model_step(logic [G-1:0] s);
    logic [G-1:0] out;
    longint sum = 0, serca, cicr, n_cyt, n_ip3, n_er, n_glu, n_esp;
    for (int j = 0; j < G; j++) begin
      longint dse, delta, pr;
      m_ag[j] = clampu(m_ag[j] - (m_ag[j] / 16) + (s[j] ? 256 : 0));
      dse     = clamps(-((1600 * m_ag[j]) / 256));
      delta   = ((longint'(PR0) * (dse + m_esp)) * 655) >>> 24;
      pr      = clampu(PR0 + delta);
      if (s[j]) out[j] = (m_rnd < pr);
      else      out[j] = (pr > PR0) && (m_rnd < pr - PR0);
      m_rnd   = (m_rnd & 1) ? ((m_rnd >> 1) ^ 16'hB400) : (m_rnd >> 1);
      sum    += m_ag[j];
    end
    serca = m_cyt / 8;
    cicr  = (m_ip3 * m_er) / 65536;
    n_cyt = clampu(m_cyt - m_cyt / 8 - serca + sum / (1 << IN_SH) + cicr);
    n_ip3 = clampu(m_ip3 - m_ip3 / 8 + m_cyt / 4);
    n_er  = clampu(m_er + serca - cicr);
    n_glu = clampu(m_glu - m_glu / 16 + ((m_cyt >= CA_TH) ? 256 : 0));
    n_esp = clamps(m_esp + ((((400 * m_glu) / 256) - m_esp) >>> 3));
    m_cyt = n_cyt; m_ip3 = n_ip3; m_er = n_er; m_glu = n_glu; m_esp = n_esp;
    return out;
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int restored = 0, passed_healthy = 0;

  task automatic run_step(logic [G-1:0] s, int tstep);
    logic [G-1:0] exp;
    int lat = 0;
    @(negedge clk);
    spikes = s; step = 1;
    @(negedge clk);
    step = 0;
    lat = 0;   // rising edges after the one that sampled step
    while (!done) begin @(negedge clk); lat++; end
    exp = model_step(s);
    check($sformatf("sites t=%0d", tstep), sites, exp);
    check("ca_cyt", ca_cyt, m_cyt);
    check("glu", glu, m_glu);
    check("esp", esp, m_esp);
    check("latency", lat, G + 1);
    if (!s[0] && sites[0]) restored++;
    if (s[1] && sites[1]) passed_healthy++;
  endtask

  initial begin
    for (int j = 0; j < G; j++) m_ag[j] = 0;
    m_cyt = 0; m_ip3 = 0; m_er = 0; m_glu = 0; m_esp = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // healthy phase: every neuron fires with probability 1/4
    for (int t = 0; t < 200; t++) begin
      logic [G-1:0] s;
      for (int j = 0; j < G; j++) s[j] = ($urandom_range(3) == 0);
      run_step(s, t);
    end
    // the astrocyte is active: glutamate and e-SP have built up
    checks++; if (!(esp > 0)) begin failures++; $display("FAIL: e-SP did not rise"); end
    // fault phase: neuron 0 stops firing
    for (int t = 200; t < 500; t++) begin
      logic [G-1:0] s;
      for (int j = 0; j < G; j++) s[j] = ($urandom_range(3) == 0);
      s[0] = 1'b0;
      run_step(s, t);
    end
    $display("astrocyte: site 0 released %0d spikes while neuron 0 was silent", restored);
    checks++; if (restored == 0) begin failures++; $display("FAIL: no repair release"); end
    checks++; if (passed_healthy == 0) begin failures++; $display("FAIL: no healthy spike passed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
