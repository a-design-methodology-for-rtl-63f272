// tb_core_tile: self-checking testbench of one tile (at X=1, Y=1) with a reduced uBrain
// core (16-8-4).
//
// The routing table sends even output neurons back to this tile and odd ones to the
// tile to the east. The testbench checks, timestep by timestep, that the core's outputs
// match the reference model, that every routed spike of an even neuron arrives in the
// input of the next timestep (together with the external spikes), and that every spike
// of an odd neuron leaves on the east link with the right packet. A packet that arrives
// from the north link for this tile must also land in the next input. A disabled routing
// entry must send nothing.
// The firing threshold is lowered to 4 to keep the small network active.
module tb_core_tile;
  import astro_pkg::*;
  import astro_ref_pkg::*;

  localparam int N = 16, M = 8, P = 4, X = 1, Y = 1;
  localparam logic [15:0] SEED = 16'(16'hACE1 + 16'(Y * 4 + X) * 16'd977);

  logic clk = 0, rst_n = 0, step = 0;
  logic [N-1:0] ext_spikes = '0, fault_in = '0;
  logic [M-1:0] fault_mid = '0;
  logic [P-1:0] fault_out = '0;
  logic cfg_we = 0;
  cfg_target_e cfg_target = CFG_W1;
  logic [7:0] cfg_addr = '0;
  logic [M*W_BITS-1:0] cfg_data = '0;
  logic       link_in_valid  [5];
  spike_pkt_t link_in_pkt    [5];
  logic       link_in_ready  [5];
  logic       link_out_valid [5];
  spike_pkt_t link_out_pkt   [5];
  logic       link_out_ready [5];
  logic [P-1:0] out_spikes;
  logic busy, router_busy;
  int checks = 0, failures = 0, east_pkts = 0, self_pkts = 0, north_pkts = 0;
  int w1 [N][M];
  int w2 [M][P];
  route_t rt [P];
  spike_pkt_t east_q [$];

  core_tile #(.KIND(0), .X(X), .Y(Y), .UB_N(N), .UB_M(M), .UB_P(P), .TH(4)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && link_out_valid[2] && link_out_ready[2]) begin
    checks++;
    east_pkts++;
    if (east_q.size() == 0 || east_q[0] != link_out_pkt[2]) begin
      failures++; $display("FAIL: unexpected east packet %h", link_out_pkt[2]);
    end else void'(east_q.pop_front());
  end
  always @(posedge clk)
    for (int p = 1; p < 5; p++) if (rst_n && p != 2 && link_out_valid[p]) begin
      checks++; failures++; $display("FAIL: packet on link %0d", p);
    end

  task automatic cfg(cfg_target_e tg, int addr, logic [M*W_BITS-1:0] data);
    @(negedge clk);
    cfg_we = 1; cfg_target = tg; cfg_addr = 8'(addr); cfg_data = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  astro_layer_model a1, a2, a3;
  lif_model lh, lo;

  initial begin
    logic [N-1:0] next_in = '0;
    for (int p = 0; p < 5; p++) begin
      link_in_valid[p] = 0; link_in_pkt[p] = '0; link_out_ready[p] = 1;
    end
    a1 = new(N, 1, SEED); a2 = new(M, 1, SEED ^ 16'h5A5A); a3 = new(P, 1, SEED ^ 16'h3C3C);
    lh = new(M, 4); lo = new(P, 4);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
      logic [M*W_BITS-1:0] d = '0;
      for (int c = 0; c < M; c++) begin
        w1[r][c] = ($urandom_range(3) == 0) ? -1 : (($urandom_range(2) == 0) ? 0 : 1);
        d[c*2 +: 2] = 2'(w1[r][c]);
      end
      cfg(CFG_W1, r, d);
    end
    for (int r = 0; r < M; r++) begin
      logic [M*W_BITS-1:0] d = '0;
      for (int c = 0; c < P; c++) begin
        w2[r][c] = ($urandom_range(3) == 0) ? -1 : 1;
        d[c*2 +: 2] = 2'(w2[r][c]);
      end
      cfg(CFG_W2, r, d);
    end
    for (int j = 0; j < P; j++) begin
      rt[j] = '{en: (j != 3), dx: (j % 2 == 0) ? 2'(X) : 2'(X + 1), dy: 2'(Y), idx: 8'((j * 5 + 1) % N)};
      cfg(CFG_ROUTE, j, (M*W_BITS)'(rt[j]));
    end

    for (int t = 0; t < 120; t++) begin
      bit si[], sa[], sh[], sha[], so[], soa[], fh[], fo[];
      int ch[], co[];
      logic [N-1:0] ext, cin;
      for (int i = 0; i < N; i++) ext[i] = ($urandom_range(1) == 0);
      @(negedge clk);
      ext_spikes = ext; step = 1;
      cin = ext | next_in;
      next_in = '0;
      @(negedge clk);
      step = 0;
      // a packet for this tile from the north neighbour, during the timestep
      if (t % 10 == 5) begin
        link_in_valid[1] = 1;
        link_in_pkt[1] = '{dx: 2'(X), dy: 2'(Y), idx: 8'(t % N)};
        next_in[t % N] = 1'b1;
        north_pkts++;
        do @(negedge clk); while (!link_in_ready[1]);
        @(negedge clk);
        link_in_valid[1] = 0;
      end
      while (busy || router_busy) @(negedge clk);
      // model
      si = new[N]; fh = new[M]; fo = new[P]; ch = new[M]; co = new[P];
      for (int i = 0; i < N; i++) si[i] = cin[i];
      a1.step(si, sa);
      for (int c = 0; c < M; c++) begin
        ch[c] = 0;
        for (int r = 0; r < N; r++) if (sa[r]) ch[c] += w1[r][c];
        fh[c] = 0;
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
      for (int c = 0; c < P; c++) begin
        checks++;
        if (out_spikes[c] != soa[c]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d out[%0d]=%b expected %b", t, c, out_spikes[c], soa[c]);
        end
      end
      checks++;
      if (dut.core_in !== cin) begin
        failures++; $display("FAIL t=%0d core input %h expected %h", t, dut.core_in, cin);
      end
      // routed spikes of this timestep, in scan order
      for (int j = 0; j < P; j++) if (out_spikes[j] && rt[j].en) begin
        if (j % 2 == 0) begin next_in[rt[j].idx] = 1'b1; self_pkts++; end
      end
    end
    checks++;
    if (east_q.size() != 0) begin failures++; $display("FAIL: %0d east packets missing", east_q.size()); end
    checks++;
    if (east_pkts == 0 || self_pkts == 0) begin failures++; $display("FAIL: no routed spikes"); end
    $display("core_tile: %0d packets east, %0d to itself, %0d from north", east_pkts, self_pkts, north_pkts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected east packets, recorded when the core finishes a timestep
  always @(negedge clk) if (rst_n && dut.core_done) begin
    for (int j = 0; j < P; j++)
      if (dut.core_out[j] && rt[j].en && j % 2 == 1)
        east_q.push_back('{dx: rt[j].dx, dy: rt[j].dy, idx: rt[j].idx});
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
