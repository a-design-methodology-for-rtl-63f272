// crossbar_core: the proposed fault-tolerant crossbar core. N input neurons (i) connect
// to N output neurons (o) through an N x N synaptic crossbar; astrocytes enclose both
// the input and the output neurons, and their gated synaptic sites (circle-plus nodes),
// not the raw spikes, drive the crossbar and the core's outputs:
//   in -> i -> astrocytes -> [N x N crossbar] -> o -> astrocytes -> out
// The structure and the 128 x 128 size follow the paper's proposed crossbar design.
//
// The input neurons pass on the spikes that arrive for them; the output neurons are
// leaky integrate-and-fire neurons. `silence_i`/`silence_o` make neurons fail to fire,
// for fault injection. These, the sequential schedule and the weight port are this
// design's choices.
//
// Timing: one timestep per `step` pulse (ignored while busy); `done` pulses
//   N/NA1 + N + N/NA2 + 11
// edges after the edge that samples `step` (395 cycles at the default size), and `out_sites` then holds the N output spikes of the timestep.
// Weight row r (the N 2-bit weights from input neuron r) is written with we/waddr/wdata.
module crossbar_core
  import astro_pkg::*;
#(
  parameter int unsigned N     = 128,
  parameter int unsigned NA1   = 1,
  parameter int unsigned NA2   = 1,
  parameter int unsigned ACC_W = 16,
  parameter int          TH    = 8,
  parameter logic [15:0] SEED  = 16'hACE1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   step,
  input  logic [N-1:0]           in_spikes,
  input  logic [N-1:0]           silence_i,
  input  logic [N-1:0]           silence_o,
  input  logic                   we,
  input  logic [$clog2(N)-1:0]   waddr,
  input  logic [N*W_BITS-1:0]    wdata,
  output logic [N-1:0]           out_sites,
  output logic                   done,
  output logic                   busy
);
  typedef enum logic [2:0] {S_IDLE, S_A1, S_S1, S_N1, S_A2} st_e;
  st_e  st;
  logic go;

  logic [N-1:0] sites_i, spk_o, sites_o;
  logic         d_a1, d_s1, d_n1, d_a2;
  logic signed [ACC_W-1:0] cur_o [N];

  astro_layer #(.N(N), .NA(NA1), .SEED(SEED)) u_astro_i (
    .clk, .rst_n, .step(go && st == S_A1), .spikes(in_spikes & ~silence_i),
    .sites(sites_i), .done(d_a1), .busy(), .esp());

  synapse_array #(.N_IN(N), .N_OUT(N), .ACC_W(ACC_W)) u_xbar (
    .clk, .rst_n, .we, .waddr, .wdata,
    .start(go && st == S_S1), .spikes(sites_i), .acc(cur_o), .done(d_s1), .busy());

  neuron_array #(.N(N), .ACC_W(ACC_W), .TH(TH)) u_neur_o (
    .clk, .rst_n, .step(go && st == S_N1), .cur(cur_o), .silence(silence_o),
    .spikes(spk_o), .done(d_n1), .vmem());

  astro_layer #(.N(N), .NA(NA2), .SEED(SEED ^ 16'h3C3C)) u_astro_o (
    .clk, .rst_n, .step(go && st == S_A2), .spikes(spk_o),
    .sites(sites_o), .done(d_a2), .busy(), .esp());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      go        <= 1'b0;
      done      <= 1'b0;
      out_sites <= '0;
    end else begin
      go   <= 1'b0;
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (step) begin st <= S_A1; go <= 1'b1; end
        S_A1:   if (d_a1) begin st <= S_S1; go <= 1'b1; end
        S_S1:   if (d_s1) begin st <= S_N1; go <= 1'b1; end
        S_N1:   if (d_n1) begin st <= S_A2; go <= 1'b1; end
        S_A2:   if (d_a2) begin
          st        <= S_IDLE;
          out_sites <= sites_o;
          done      <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

endmodule
