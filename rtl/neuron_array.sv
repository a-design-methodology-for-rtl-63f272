// neuron_array: a layer of N spiking neurons (the h and o neurons of a core).
//
// The paper uses spiking neurons without naming a neuron model; this design uses a
// leaky integrate-and-fire neuron, updated once per timestep:
//   V <= V - V/2^LEAK_SH + I   (defaults: leak V/4, TH 8)
//   if V >= TH: emit a spike and reset V to 0;   if V < 0: clamp V to 0.
// `silence` models a failed neuron: a silenced neuron keeps integrating but its spike
// never leaves it (the neuron "fails to fire"). This fault input is used to inject
// faults and is this design's addition.
//
// Timing: on a `step` pulse all N neurons update in parallel; `spikes` and a one-cycle
// `done` pulse appear one edge later and `spikes` holds until the next step.
module neuron_array
  import astro_pkg::*;
#(
  parameter int unsigned N       = 64,
  parameter int unsigned ACC_W   = 16,
  parameter int unsigned V_W     = 16,
  parameter int unsigned LEAK_SH = 2,
  parameter int          TH      = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    step,
  input  logic signed [ACC_W-1:0] cur [N],
  input  logic [N-1:0]            silence,
  output logic [N-1:0]            spikes,
  output logic                    done,
  output logic signed [V_W-1:0]   vmem [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spikes <= '0;
      done   <= 1'b0;
      for (int n = 0; n < int'(N); n++) vmem[n] <= '0;
    end else begin
      done <= step;
      if (step) begin
        for (int n = 0; n < int'(N); n++) begin
          automatic logic signed [V_W+1:0] v;
          v = (V_W+2)'(vmem[n]) - (V_W+2)'(vmem[n] >>> LEAK_SH) + (V_W+2)'(cur[n]);
          if (v >= (V_W+2)'(TH)) begin
            vmem[n]   <= '0;
            spikes[n] <= !silence[n];
          end else begin
            vmem[n]   <= (v < 0) ? '0 : V_W'(v);
            spikes[n] <= 1'b0;
          end
        end
      end
    end
  end
endmodule
