// astro_layer: the astrocytes that enclose one layer of N neurons.
//
// The layer's neurons are divided equally among NA astrocytes (NA must divide N); the
// astrocyte k encloses neurons k*N/NA .. (k+1)*N/NA-1 and their synaptic sites. The
// astrocyte-insertion step of the mapping flow adds astrocytes to a layer until the
// layer meets its accuracy target and shares the neurons equally among them; NA is the
// result of that step. The figures of the proposed cores show one astrocyte per layer,
// the default here. All astrocytes run in parallel and finish together, so the layer has
// the timing of one astrocyte of N/NA neurons: `done` N/NA+1 edges after `step`.
// Each astrocyte gets its own random seed derived from SEED.
module astro_layer
  import astro_pkg::*;
#(
  parameter int unsigned N    = 16,
  parameter int unsigned NA   = 1,
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  input  logic [N-1:0] spikes,
  output logic [N-1:0] sites,
  output logic         done,
  output logic         busy,
  output pct_t         esp [NA]
);
  localparam int unsigned G = N / NA;

  logic [NA-1:0] done_a, busy_a;

  for (genvar k = 0; k < int'(NA); k++) begin : g_astro
    state_t ca_k, glu_k;
    astrocyte #(.G(G), .SEED(SEED ^ 16'(k * 16'h1F35))) u_astro (
      .clk, .rst_n, .step,
      .spikes (spikes[k*G +: G]),
      .sites  (sites[k*G +: G]),
      .done   (done_a[k]),
      .busy   (busy_a[k]),
      .ca_cyt (ca_k),
      .glu    (glu_k),
      .esp    (esp[k])
    );
  end

  assign done = done_a[0];
  assign busy = |busy_a;

  initial assert (NA > 0 && N % NA == 0) else $error("astro_layer: NA must divide N");
endmodule
