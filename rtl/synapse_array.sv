// synapse_array: the synaptic connections of one layer pair, i.e. the "crossbar
// connections" of a crossbar core or one set of "uBrain connections" of a uBrain core.
//
// The N_IN x N_OUT synaptic weights are 2-bit two's complement numbers held in a memory of
// N_IN rows, one row per pre-synaptic neuron (a block RAM on an FPGA). On a `start` pulse
// the array latches the pre-synaptic spike vector, clears its N_OUT accumulators and reads
// the rows one per cycle; for every row whose neuron spiked it adds the row's weights to
// the accumulators. `acc` then holds the synaptic input current of every post-synaptic
// neuron for this timestep.
//
// The paper gives the sizes (128 x 128 crossbar; 256 x 64 and 64 x 16 in uBrain) and the
// 2-bit weights; the row-serial organisation, the weight encoding and the accumulator
// width are this design's choice.
//
// Timing: the memory read is registered. A `start` seen on a rising edge gives a one-cycle
// `done` pulse N_IN+1 edges later, with `acc` valid from then until the next `start`.
// Weights are written a row at a time through `we`/`waddr`/`wdata` (row column c in bits
// [2c+1:2c]); writes should not overlap a pass.
module synapse_array
  import astro_pkg::*;
#(
  parameter int unsigned N_IN  = 128,
  parameter int unsigned N_OUT = 128,
  parameter int unsigned ACC_W = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          we,
  input  logic [$clog2(N_IN)-1:0]       waddr,
  input  logic [N_OUT*W_BITS-1:0]       wdata,
  input  logic                          start,
  input  logic [N_IN-1:0]               spikes,
  output logic signed [ACC_W-1:0]       acc [N_OUT],
  output logic                          done,
  output logic                          busy
);
  localparam int unsigned AW = $clog2(N_IN);

  logic [N_OUT*W_BITS-1:0] mem [N_IN];
  logic [N_OUT*W_BITS-1:0] rdata;
  logic [N_IN-1:0]         spk;
  logic [AW-1:0]           raddr, rrow;
  logic                    reading, rvalid;

  // weight memory: one write port, one registered read port
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reading <= 1'b0;
      rvalid  <= 1'b0;
      raddr   <= '0;
      rrow    <= '0;
      spk     <= '0;
      done    <= 1'b0;
      for (int c = 0; c < int'(N_OUT); c++) acc[c] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        spk     <= spikes;
        raddr   <= '0;
        reading <= 1'b1;
        for (int c = 0; c < int'(N_OUT); c++) acc[c] <= '0;
      end else begin
        if (reading) begin
          rrow <= raddr;
          if (raddr == AW'(N_IN - 1)) reading <= 1'b0;
          else                        raddr   <= raddr + 1'b1;
        end
        if (rvalid && spk[rrow]) begin
          for (int c = 0; c < int'(N_OUT); c++)
            acc[c] <= acc[c] + ACC_W'(signed'(rdata[c*W_BITS +: W_BITS]));
        end
        if (rvalid && !reading) done <= 1'b1;
      end
      rvalid <= reading && !(start && !busy);
    end
  end

  assign busy = reading || rvalid;

endmodule
