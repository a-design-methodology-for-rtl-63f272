// ubrain_core: the proposed fault-tolerant uBrain core. Its neurons form three layers,
// N input neurons (i), M hidden neurons (h) and P output neurons (o), with all-to-all
// synapses from i to h and from h to o. Every layer is enclosed by astrocytes whose
// gated synaptic sites, not the raw neuron spikes, feed the next set of connections:
//   in -> i -> astrocytes -> [N x M synapses] -> h -> astrocytes -> [M x P synapses]
//      -> o -> astrocytes -> out
// This follows the proposed uBrain design (astrocyte after i, h and o, circle-plus nodes
// feeding the uBrain connections); the sizes 256/64/16 are the paper's.
//
// The input neurons pass on the spikes that arrive for them (from other cores or from
// outside); h and o are leaky integrate-and-fire neurons (neuron_array). The `silence_*`
// masks make individual neurons fail to fire, for fault injection. These, the
// sequential layer-by-layer schedule and the weight-programming port are this design's
// choices.
//
// Timing: one timestep per `step` pulse (ignored while busy). The layers are processed
// one after the other; `done` pulses
//   N/NA1 + N + M/NA2 + M + P/NA3 + 19
// edges after the edge that samples `step` (675 cycles, 6.75 us at 100 MHz, at the
// default sizes), and `out_sites` then holds the P output spikes of the timestep.
// Weight rows are written with we1 (row r of the i->h array, M 2-bit weights) or we2
// (row r of the h->o array, P weights; the low P*2 bits of wdata).
module ubrain_core
  import astro_pkg::*;
#(
  parameter int unsigned N     = 256,
  parameter int unsigned M     = 64,
  parameter int unsigned P     = 16,
  parameter int unsigned NA1   = 1,
  parameter int unsigned NA2   = 1,
  parameter int unsigned NA3   = 1,
  parameter int unsigned ACC_W = 16,
  parameter int          TH    = 8,
  parameter logic [15:0] SEED  = 16'hACE1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   step,
  input  logic [N-1:0]           in_spikes,
  input  logic [N-1:0]           silence_i,
  input  logic [M-1:0]           silence_h,
  input  logic [P-1:0]           silence_o,
  input  logic                   we1,
  input  logic                   we2,
  input  logic [$clog2(N)-1:0]   waddr,
  input  logic [M*W_BITS-1:0]    wdata,
  output logic [P-1:0]           out_sites,
  output logic                   done,
  output logic                   busy
);
  typedef enum logic [2:0] {S_IDLE, S_A1, S_S1, S_N1, S_A2, S_S2, S_N2, S_A3} st_e;
  st_e  st;
  logic go;

  logic [N-1:0] sites_i;
  logic [M-1:0] spk_h, sites_h;
  logic [P-1:0] spk_o, sites_o;
  logic         d_a1, d_s1, d_n1, d_a2, d_s2, d_n2, d_a3;
  logic signed [ACC_W-1:0] cur_h [M];
  logic signed [ACC_W-1:0] cur_o [P];

  astro_layer #(.N(N), .NA(NA1), .SEED(SEED)) u_astro_i (
    .clk, .rst_n, .step(go && st == S_A1), .spikes(in_spikes & ~silence_i),
    .sites(sites_i), .done(d_a1), .busy(), .esp());

  synapse_array #(.N_IN(N), .N_OUT(M), .ACC_W(ACC_W)) u_syn_ih (
    .clk, .rst_n, .we(we1), .waddr(waddr), .wdata(wdata),
    .start(go && st == S_S1), .spikes(sites_i), .acc(cur_h), .done(d_s1), .busy());

  neuron_array #(.N(M), .ACC_W(ACC_W), .TH(TH)) u_neur_h (
    .clk, .rst_n, .step(go && st == S_N1), .cur(cur_h), .silence(silence_h),
    .spikes(spk_h), .done(d_n1), .vmem());

  astro_layer #(.N(M), .NA(NA2), .SEED(SEED ^ 16'h5A5A)) u_astro_h (
    .clk, .rst_n, .step(go && st == S_A2), .spikes(spk_h),
    .sites(sites_h), .done(d_a2), .busy(), .esp());

  synapse_array #(.N_IN(M), .N_OUT(P), .ACC_W(ACC_W)) u_syn_ho (
    .clk, .rst_n, .we(we2), .waddr(waddr[$clog2(M)-1:0]), .wdata(wdata[P*W_BITS-1:0]),
    .start(go && st == S_S2), .spikes(sites_h), .acc(cur_o), .done(d_s2), .busy());

  neuron_array #(.N(P), .ACC_W(ACC_W), .TH(TH)) u_neur_o (
    .clk, .rst_n, .step(go && st == S_N2), .cur(cur_o), .silence(silence_o),
    .spikes(spk_o), .done(d_n2), .vmem());

  astro_layer #(.N(P), .NA(NA3), .SEED(SEED ^ 16'h3C3C)) u_astro_o (
    .clk, .rst_n, .step(go && st == S_A3), .spikes(spk_o),
    .sites(sites_o), .done(d_a3), .busy(), .esp());

  // layer sequencer
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
        S_A2:   if (d_a2) begin st <= S_S2; go <= 1'b1; end
        S_S2:   if (d_s2) begin st <= S_N2; go <= 1'b1; end
        S_N2:   if (d_n2) begin st <= S_A3; go <= 1'b1; end
        S_A3:   if (d_a3) begin
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
