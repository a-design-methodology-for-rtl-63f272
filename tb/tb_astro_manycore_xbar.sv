// tb_astro_manycore_xbar: end-to-end testbench of the many-core chip built from crossbar
// cores: 4 x 4 tiles of 128 x 128 crossbar cores, every parameter but the core kind at
// its default.
//
// Every core gets random 2-bit weights and a routing table that sends most output
// neurons to input neurons of other cores across the mesh (a few entries point back to
// the same core, a few are disabled, and every third converges on core 0 so that the
// mesh links towards it congest). The testbench then runs timesteps with random
// external spikes. For each timestep it works out every core's input (external spikes
// plus the spikes routed to it in the previous timestep) and its output with the
// reference models, and compares all output spikes of all cores. Faults are injected
// part way through (one input, hidden and output neuron of every core is silenced).
// It counts, and requires, each mechanism at least once: spikes routed to another core,
// spikes routed to the same core, stochastic release failures at a synaptic site,
// astrocyte repair releases at the site of a silenced neuron, and stalled mesh links.
module tb_astro_manycore_xbar;
  import astro_pkg::*;
  import astro_ref_pkg::*;

  localparam int MX = 4, MY = 4, T = MX * MY;
  localparam int KIND = 1;
  localparam int UB_N = 256, UB_M = 64, UB_P = 16, XB_N = 128;
  localparam int N_IN  = (KIND == 0) ? UB_N : XB_N;
  localparam int N_MID = (KIND == 0) ? UB_M : 1;
  localparam int N_OUT = (KIND == 0) ? UB_P : XB_N;
  localparam int COLS1 = (KIND == 0) ? UB_M : XB_N;
  localparam int CFG_W = COLS1 * W_BITS;
  localparam int STEPS = 64, FAULT_AT = 12;
  localparam int IN_PCT = 25;     // external spike probability, percent

  logic clk = 0, rst_n = 0, step = 0, busy;
  logic [N_IN-1:0]  ext_spikes [T];
  logic [N_IN-1:0]  fault_in   [T];
  logic [N_MID-1:0] fault_mid  [T];
  logic [N_OUT-1:0] fault_out  [T];
  logic cfg_we = 0;
  logic [7:0] cfg_tile = '0;
  cfg_target_e cfg_target = CFG_W1;
  logic [7:0] cfg_addr = '0;
  logic [CFG_W-1:0] cfg_data = '0;
  logic [N_OUT-1:0] out_spikes [T];

  astro_manycore #(.KIND(1)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int remote = 0, local_r = 0, drops = 0, repairs = 0, stalls = 0, out_total = 0;
  byte    w1 [T][N_IN][COLS1];
  byte    w2 [T][UB_M][UB_P];
  route_t rt [T][N_OUT];
  logic [N_IN-1:0] next_in [T];

  astro_layer_model a1 [T];
  astro_layer_model a2 [T];
  astro_layer_model a3 [T];
  lif_model         lm [T];
  lif_model         lo [T];

  // stalled mesh links: a router output holding a packet its neighbour cannot take
  for (genvar y = 0; y < MY; y++) begin : g_py
    for (genvar x = 0; x < MX; x++) begin : g_px
      always @(posedge clk) if (rst_n)
        for (int p = 1; p < 5; p++)
          if (dut.g_y[y].g_x[x].u_tile.r_out_valid[p] && !dut.g_y[y].g_x[x].u_tile.r_out_ready[p])
            stalls++;
    end
  end

  task automatic cfg(int tile, cfg_target_e tg, int addr, logic [CFG_W-1:0] data);
    @(negedge clk);
    cfg_we = 1; cfg_tile = 8'(tile); cfg_target = tg; cfg_addr = 8'(addr); cfg_data = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // reference model of one core for one timestep
  function automatic void model_core(int t, logic [N_IN-1:0] cin, output bit res[]);
    bit si[], sa[], sm[], sma[], so[], fm[], fo[];
    int cm[], co[];
    si = new[N_IN];
    for (int i = 0; i < N_IN; i++) si[i] = cin[i] && !fault_in[t][i];
    a1[t].step(si, sa);
    if (KIND == 0) begin
      cm = new[UB_M]; fm = new[UB_M];
      for (int c = 0; c < UB_M; c++) begin
        cm[c] = 0;
        for (int r = 0; r < N_IN; r++) if (sa[r]) cm[c] += w1[t][r][c];
        fm[c] = fault_mid[t][c];
      end
      lm[t].step(cm, fm, sm);
      a2[t].step(sm, sma);
      co = new[N_OUT]; fo = new[N_OUT];
      for (int c = 0; c < N_OUT; c++) begin
        co[c] = 0;
        for (int r = 0; r < UB_M; r++) if (sma[r]) co[c] += w2[t][r][c];
        fo[c] = fault_out[t][c];
      end
      lo[t].step(co, fo, so);
      a3[t].step(so, res);
    end else begin
      co = new[N_OUT]; fo = new[N_OUT];
      for (int c = 0; c < N_OUT; c++) begin
        co[c] = 0;
        for (int r = 0; r < N_IN; r++) if (sa[r]) co[c] += w1[t][r][c];
        fo[c] = fault_out[t][c];
      end
      lo[t].step(co, fo, so);
      a2[t].step(so, res);
    end
    for (int j = 0; j < N_OUT; j++) begin
      if (so[j] && !res[j]) drops++;
      if (fault_out[t][j] && res[j]) repairs++;
    end
  endfunction

  initial begin
    for (int t = 0; t < T; t++) begin
      automatic logic [15:0] seed = 16'(16'hACE1 + 16'(t) * 16'd977);
      ext_spikes[t] = '0; fault_in[t] = '0; fault_mid[t] = '0; fault_out[t] = '0;
      next_in[t] = '0;
      a1[t] = new(N_IN, 1, seed);
      if (KIND == 0) begin
        lm[t] = new(UB_M);
        a2[t] = new(UB_M, 1, seed ^ 16'h5A5A);
        a3[t] = new(UB_P, 1, seed ^ 16'h3C3C);
      end else begin
        a2[t] = new(N_OUT, 1, seed ^ 16'h3C3C);
      end
      lo[t] = new(N_OUT);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // configuration
    for (int t = 0; t < T; t++) begin
      for (int r = 0; r < N_IN; r++) begin
        logic [CFG_W-1:0] d = '0;
        for (int c = 0; c < COLS1; c++) begin
          w1[t][r][c] = ($urandom_range(3) == 0) ? -1 : (($urandom_range(2) == 0) ? 0 : 1);
          d[c*2 +: 2] = 2'(w1[t][r][c]);
        end
        cfg(t, CFG_W1, r, d);
      end
      if (KIND == 0) begin
        for (int r = 0; r < UB_M; r++) begin
          logic [CFG_W-1:0] d = '0;
          for (int c = 0; c < UB_P; c++) begin
            w2[t][r][c] = ($urandom_range(3) == 0) ? -1 : 1;
            d[c*2 +: 2] = 2'(w2[t][r][c]);
          end
          cfg(t, CFG_W2, r, d);
        end
      end
      for (int j = 0; j < N_OUT; j++) begin
        automatic int dt = (j % 7 == 6) ? t : (j % 3 == 0) ? 0 : (t * 5 + j + 1) % T;
        rt[t][j] = '{en: (j % 5 != 4), dx: 2'(dt % MX), dy: 2'(dt / MX),
                     idx: 8'((j * 37 + t * 11) % N_IN)};
        cfg(t, CFG_ROUTE, j, CFG_W'(rt[t][j]));
      end
    end

    // timesteps
    for (int s = 0; s < STEPS; s++) begin
      logic [N_IN-1:0] cin [T];
      logic [N_IN-1:0] nxt [T];
      if (s == FAULT_AT)
        for (int t = 0; t < T; t++) begin
          fault_in[t][2] = 1'b1; fault_mid[t][N_MID-1] = 1'b1; fault_out[t][0] = 1'b1;
        end
      @(negedge clk);
      for (int t = 0; t < T; t++) begin
        for (int i = 0; i < N_IN; i++) ext_spikes[t][i] = ($urandom_range(99) < IN_PCT);
        cin[t] = ext_spikes[t] | next_in[t];
        nxt[t] = '0;
      end
      step = 1;
      @(negedge clk);
      step = 0;
      while (busy) @(negedge clk);
      for (int t = 0; t < T; t++) begin
        bit res[];
        model_core(t, cin[t], res);
        for (int j = 0; j < N_OUT; j++) begin
          checks++;
          out_total += res[j];
          if (out_spikes[t][j] != res[j]) begin
            failures++;
            if (failures < 10)
              $display("FAIL step %0d core %0d out[%0d]=%b expected %b", s, t, j, out_spikes[t][j], res[j]);
          end
          if (res[j] && rt[t][j].en) begin
            automatic int dt = int'(rt[t][j].dy) * MX + int'(rt[t][j].dx);
            nxt[dt][rt[t][j].idx] = 1'b1;
            if (dt == t) local_r++; else remote++;
          end
        end
      end
      for (int t = 0; t < T; t++) next_in[t] = nxt[t];
    end

    $display("manycore: %0d output spikes, %0d spikes to other cores, %0d to the same core",
             out_total, remote, local_r);
    $display("manycore: %0d release failures, %0d repair releases, %0d stalled link cycles",
             drops, repairs, stalls);
    checks++; if (remote  == 0) begin failures++; $display("FAIL: no spike crossed the mesh"); end
    checks++; if (local_r == 0) begin failures++; $display("FAIL: no spike routed to its own core"); end
    checks++; if (drops   == 0) begin failures++; $display("FAIL: no release failure"); end
    checks++; if (repairs == 0) begin failures++; $display("FAIL: no astrocyte repair release"); end
    checks++; if (stalls  == 0) begin failures++; $display("FAIL: no stalled mesh link"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
