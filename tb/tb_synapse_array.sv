// tb_synapse_array: self-checking testbench of the synaptic weight array.
//
// Writes random 2-bit weights into a 16 x 12 array, keeps its own copy, and for many
// random spike vectors compares every accumulator with the sum of the weights of the
// rows whose neuron spiked. Also checks the latency (done N_IN+1 edges after start),
// the all-zero spike vector and the largest negative sum (all weights -2, all spiking).
module tb_synapse_array;
  import astro_pkg::*;

  localparam int NI = 16, NO = 12, AW = 16;

  logic clk = 0, rst_n = 0, we = 0, start = 0;
  logic [$clog2(NI)-1:0] waddr = '0;
  logic [NO*W_BITS-1:0]  wdata = '0;
  logic [NI-1:0]         spikes = '0;
  logic signed [AW-1:0]  acc [NO];
  logic done, busy;
  int checks = 0, failures = 0;
  int w [NI][NO];

  synapse_array #(.N_IN(NI), .N_OUT(NO), .ACC_W(AW)) dut (.*);

  always #5 clk = ~clk;

  task automatic write_row(int r);
    @(negedge clk);
    we = 1; waddr = r[$clog2(NI)-1:0];
    for (int c = 0; c < NO; c++) wdata[c*2 +: 2] = 2'(w[r][c]);
    @(negedge clk);
    we = 0;
  endtask

  task automatic pass(logic [NI-1:0] s);
    int lat = 0;
    @(negedge clk);
    spikes = s; start = 1;
    @(negedge clk);
    start = 0; spikes = '0;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (lat != NI + 1) begin failures++; $display("FAIL latency %0d", lat); end
    for (int c = 0; c < NO; c++) begin
      int e = 0;
      for (int r = 0; r < NI; r++) if (s[r]) e += w[r][c];
      checks++;
      if (acc[c] != e) begin
        failures++;
        if (failures < 10) $display("FAIL acc[%0d]=%0d expected %0d", c, acc[c], e);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NI; r++) begin
      for (int c = 0; c < NO; c++) w[r][c] = int'($urandom_range(3)) - 2;
      write_row(r);
    end
    pass('0);
    pass('1);
    for (int t = 0; t < 50; t++) pass(NI'($urandom));
    for (int r = 0; r < NI; r++) begin
      for (int c = 0; c < NO; c++) w[r][c] = -2;
      write_row(r);
    end
    pass('1);
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
