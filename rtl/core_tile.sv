// core_tile: one core of the many-core chip together with its spike routing.
//
// A tile holds an astrocyte-enclosed core (a uBrain core when KIND is 0, a crossbar
// core when KIND is 1), the router of its mesh position, a routing table with one entry
// per output neuron of the core, and a double-buffered input spike vector:
//   * packets that the router delivers to the local port set the bit of their input
//     neuron in `in_buf`, which collects the spikes for the next timestep;
//   * on a `step` pulse the tile hands `in_buf | ext_spikes` to the core, clears `in_buf`
//     and starts the core's timestep;
//   * when the core is done, the tile scans its output spikes, one neuron per cycle, and
//     for every spike whose routing-table entry is enabled it offers a packet (destination
//     tile and input neuron) to the router's local input, waiting while the router is full.
// The routing table is what the mapping software produces when it places the clusters of a
// network on cores: one output neuron's spikes go to one input neuron of one core.
// The paper describes the mapping but not the tile hardware; everything in this file is
// this design's realisation of it.
//
// The link port arrays are indexed like the router's ports (1 N, 2 E, 3 S, 4 W) so that
// the top can wire them by direction. Entry 0 is the local port, which stays inside the
// tile: its link_in_ready and link_out_valid outputs are tied low on purpose, and a
// synthesis report lists them as constant.
//
// Configuration (cfg_we with cfg_target): CFG_W1 / CFG_W2 write weight row cfg_addr of the
// first / second synapse array, CFG_ROUTE writes the routing entry of output neuron
// cfg_addr from the low bits of cfg_data (a route_t).
// Timing: `busy` is high from `step` until the core is done and all of its packets have
// entered the router; the mesh may still be carrying them (see the router's `busy`).
module core_tile
  import astro_pkg::*;
#(
  parameter int unsigned KIND  = 0,       // 0: uBrain core, 1: crossbar core
  parameter int unsigned X     = 0,
  parameter int unsigned Y     = 0,
  parameter int unsigned UB_N  = 256,
  parameter int unsigned UB_M  = 64,
  parameter int unsigned UB_P  = 16,
  parameter int unsigned XB_N  = 128,
  parameter int unsigned NA1   = 1,
  parameter int unsigned NA2   = 1,
  parameter int unsigned NA3   = 1,
  parameter int          TH    = 8,
  // derived sizes, not meant to be overridden
  parameter int unsigned N_IN  = (KIND == 0) ? UB_N : XB_N,
  parameter int unsigned N_MID = (KIND == 0) ? UB_M : 1,
  parameter int unsigned N_OUT = (KIND == 0) ? UB_P : XB_N,
  parameter int unsigned CFG_W = ((KIND == 0) ? UB_M : XB_N) * W_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     step,
  input  logic [N_IN-1:0]          ext_spikes,
  input  logic [N_IN-1:0]          fault_in,
  input  logic [N_MID-1:0]         fault_mid,
  input  logic [N_OUT-1:0]         fault_out,
  input  logic                     cfg_we,
  input  cfg_target_e              cfg_target,
  input  logic [7:0]               cfg_addr,
  input  logic [CFG_W-1:0]         cfg_data,
  // mesh links, router port order: 0 local (unused here), 1 N, 2 E, 3 S, 4 W
  input  logic                     link_in_valid  [5],
  input  spike_pkt_t               link_in_pkt    [5],
  output logic                     link_in_ready  [5],
  output logic                     link_out_valid [5],
  output spike_pkt_t               link_out_pkt   [5],
  input  logic                     link_out_ready [5],
  output logic [N_OUT-1:0]         out_spikes,
  output logic                     busy,
  output logic                     router_busy
);
  localparam int unsigned OW = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  route_t          rtab [N_OUT];
  logic [N_IN-1:0] in_buf, core_in;
  logic [N_OUT-1:0] pend;
  logic [OW-1:0]   scan;
  logic            scanning, core_step, core_done, core_busy;
  logic [N_OUT-1:0] core_out;

  // router local port wiring
  logic       r_in_valid  [5];
  spike_pkt_t r_in_pkt    [5];
  logic       r_in_ready  [5];
  logic       r_out_valid [5];
  spike_pkt_t r_out_pkt   [5];
  logic       r_out_ready [5];

  logic       inj_valid;
  spike_pkt_t inj_pkt;

  always_comb begin
    inj_valid = scanning && pend[scan] && rtab[scan].en;
    inj_pkt   = '{dx: rtab[scan].dx, dy: rtab[scan].dy, idx: rtab[scan].idx};
    for (int p = 0; p < 5; p++) begin
      r_in_valid[p]     = (p == 0) ? inj_valid : link_in_valid[p];
      r_in_pkt[p]       = (p == 0) ? inj_pkt   : link_in_pkt[p];
      link_in_ready[p]  = (p == 0) ? 1'b0      : r_in_ready[p];
      link_out_valid[p] = (p == 0) ? 1'b0      : r_out_valid[p];
      link_out_pkt[p]   = r_out_pkt[p];
      r_out_ready[p]    = (p == 0) ? 1'b1      : link_out_ready[p];
    end
  end

  mesh_router #(.X(X), .Y(Y)) u_router (
    .clk, .rst_n,
    .in_valid(r_in_valid), .in_pkt(r_in_pkt), .in_ready(r_in_ready),
    .out_valid(r_out_valid), .out_pkt(r_out_pkt), .out_ready(r_out_ready),
    .busy(router_busy));

  // the core
  if (KIND == 0) begin : g_ubrain
    ubrain_core #(.N(UB_N), .M(UB_M), .P(UB_P), .NA1(NA1), .NA2(NA2), .NA3(NA3), .TH(TH),
                  .SEED(16'(16'hACE1 + 16'(Y * 4 + X) * 16'd977))) u_core (
      .clk, .rst_n, .step(core_step), .in_spikes(core_in),
      .silence_i(fault_in), .silence_h(fault_mid), .silence_o(fault_out),
      .we1(cfg_we && cfg_target == CFG_W1), .we2(cfg_we && cfg_target == CFG_W2),
      .waddr(cfg_addr[$clog2(UB_N)-1:0]), .wdata(cfg_data),
      .out_sites(core_out), .done(core_done), .busy(core_busy));
  end else begin : g_xbar
    logic unused_mid;
    assign unused_mid = |fault_mid;
    crossbar_core #(.N(XB_N), .NA1(NA1), .NA2(NA2), .TH(TH),
                    .SEED(16'(16'hACE1 + 16'(Y * 4 + X) * 16'd977))) u_core (
      .clk, .rst_n, .step(core_step), .in_spikes(core_in),
      .silence_i(fault_in), .silence_o(fault_out),
      .we(cfg_we && cfg_target == CFG_W1),
      .waddr(cfg_addr[$clog2(XB_N)-1:0]), .wdata(cfg_data),
      .out_sites(core_out), .done(core_done), .busy(core_busy));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_buf    <= '0;
      core_in   <= '0;
      core_step <= 1'b0;
      pend      <= '0;
      scan      <= '0;
      scanning  <= 1'b0;
      for (int j = 0; j < int'(N_OUT); j++) rtab[j] <= '0;
    end else begin
      core_step <= 1'b0;
      // routing-table writes
      if (cfg_we && cfg_target == CFG_ROUTE && int'(cfg_addr) < int'(N_OUT))
        rtab[cfg_addr[OW-1:0]] <= route_t'(cfg_data[$bits(route_t)-1:0]);
      // start of a timestep; spikes arriving in the same cycle go to the next one
      if (step && !busy) begin
        core_in   <= in_buf | ext_spikes;
        core_step <= 1'b1;
        in_buf    <= '0;
      end
      if (r_out_valid[0]) in_buf[r_out_pkt[0].idx] <= 1'b1;
      // packet injection after the core's timestep
      if (core_done) begin
        pend     <= core_out;
        scan     <= '0;
        scanning <= 1'b1;
      end else if (scanning && (!inj_valid || r_in_ready[0])) begin
        if (scan == OW'(N_OUT - 1)) scanning <= 1'b0;
        else                        scan     <= scan + 1'b1;
      end
    end
  end

  assign out_spikes = core_out;
  assign busy       = core_step || core_busy || core_done || scanning;

endmodule
