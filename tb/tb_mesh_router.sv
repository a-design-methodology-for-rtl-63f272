// tb_mesh_router: self-checking testbench of one mesh router (at X=1, Y=2).
//
// All five inputs offer random packets to random destinations while every output
// applies random back-pressure. Each packet carries its input port and a sequence number
// in its neuron-index field. A scoreboard checks that every packet leaves by the port
// dimension-order routing gives (x first, then y), that none is lost or duplicated, and
// that packets from one input to one output keep their order. It also counts output
// stalls and cycles in which several inputs compete for one output (arbitration).
module tb_mesh_router;
  import astro_pkg::*;

  localparam int X = 1, Y = 2, NPKT = 60;   // packets per input

  logic clk = 0, rst_n = 0;
  logic       in_valid  [5];
  spike_pkt_t in_pkt    [5];
  logic       in_ready  [5];
  logic       out_valid [5];
  spike_pkt_t out_pkt   [5];
  logic       out_ready [5];
  logic       busy;
  int checks = 0, failures = 0, stalls = 0, contention = 0, received = 0;
  int sent [5];
  spike_pkt_t q [5][5][$];

  mesh_router #(.X(X), .Y(Y)) dut (.*);

  always #5 clk = ~clk;

  function automatic int exp_port(spike_pkt_t p);
    if (int'(p.dx) > X) return 2;
    if (int'(p.dx) < X) return 4;
    if (int'(p.dy) > Y) return 3;
    if (int'(p.dy) < Y) return 1;
    return 0;
  endfunction

  function automatic spike_pkt_t new_pkt(int i, int n);
    spike_pkt_t p;
    p.dx  = 2'($urandom_range(3));
    p.dy  = 2'($urandom_range(3));
    p.idx = {3'(i), 5'(n)};
    return p;
  endfunction

  // handshakes are sampled on the rising edge, stimulus changes on the falling edge
  logic acc_in [5];
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 5; i++) begin
      acc_in[i] = in_valid[i] && in_ready[i];
      if (acc_in[i]) begin
        q[i][exp_port(in_pkt[i])].push_back(in_pkt[i]);
        sent[i]++;
      end
    end
  end

  // sources: hold valid and packet until accepted
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < 5; i++) begin
      if (acc_in[i]) begin
        in_valid[i] = 1'b0;
        acc_in[i]   = 1'b0;
      end
      if (!in_valid[i] && sent[i] < NPKT && $urandom_range(2) != 0) begin
        in_pkt[i]   = new_pkt(i, sent[i]);
        in_valid[i] = 1'b1;
      end
    end
  end

  // sinks: scoreboard on the rising edge
  always @(posedge clk) if (rst_n) begin
    int want [5];
    for (int o = 0; o < 5; o++) want[o] = 0;
    for (int i = 0; i < 5; i++) if (dut.count[i] != 0) want[dut.dir[i]]++;
    for (int o = 0; o < 5; o++) if (want[o] > 1) contention++;
    for (int o = 0; o < 5; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        automatic int i = int'(out_pkt[o].idx[7:5]);
        checks++;
        received++;
        if (i > 4 || q[i][o].size() == 0) begin
          failures++;
          if (failures < 10) $display("FAIL: unexpected packet %h on port %0d", out_pkt[o], o);
        end else begin
          automatic spike_pkt_t e = q[i][o].pop_front();
          if (e != out_pkt[o]) begin
            failures++;
            if (failures < 10) $display("FAIL: port %0d got %h expected %h", o, out_pkt[o], e);
          end
        end
      end
      if (out_valid[o] && !out_ready[o]) stalls++;
    end
  end

  // random ready for the next cycle
  always @(negedge clk) if (rst_n)
    for (int o = 0; o < 5; o++) out_ready[o] = ($urandom_range(3) != 0);

  initial begin
    for (int i = 0; i < 5; i++) begin
      in_valid[i] = 0; in_pkt[i] = '0; out_ready[i] = 1; sent[i] = 0; acc_in[i] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (sent[0] == NPKT && sent[1] == NPKT && sent[2] == NPKT && sent[3] == NPKT
          && sent[4] == NPKT);
    repeat (10) @(negedge clk);
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (received != 5 * NPKT) begin
      failures++; $display("FAIL: received %0d of %0d packets", received, 5 * NPKT);
    end
    checks++;
    if (stalls == 0 || contention == 0) begin
      failures++; $display("FAIL: no back-pressure or no contention seen");
    end
    $display("mesh_router: %0d packets, %0d stall cycles, %0d contended cycles",
             received, stalls, contention);
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
