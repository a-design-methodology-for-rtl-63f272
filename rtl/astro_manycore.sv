// astro_manycore: the fault-tolerant many-core neuromorphic chip.
//
// MESH_X x MESH_Y tiles (4 x 4 by default, cores C0..C15 numbered row by row, C0 in the
// north-west corner) are linked by a 2-D mesh of routers. Every tile holds one
// astrocyte-enclosed core: uBrain cores (256-64-16 neurons) when KIND is 0, the default,
// or 128 x 128 crossbar cores when KIND is 1. A network is split into clusters, one per
// core; the weights and the routing tables that carry spikes from the output neurons of
// one cluster to the input neurons of another are written through the configuration
// port before the network runs.
//
// Operation is timestep by timestep. The host raises `step` for one cycle while `busy` is
// low; every tile then runs its core on the spikes it has collected (plus `ext_spikes`),
// and sends the resulting output spikes through the mesh to the input buffers used by the
// next timestep. `busy` stays high until every core is done and the mesh is empty.
// `out_spikes` holds each core's output spikes from its last timestep, and the `fault_*`
// masks make chosen neurons fail to fire. The tile of a write is chosen with cfg_tile
// (y*MESH_X + x); cfg_target, cfg_addr and cfg_data are described in core_tile.
// The mesh of cores and the astrocyte-enclosed cores follow the paper; the host
// interface, the timestep protocol and the packet network are this design's choices.
module astro_manycore
  import astro_pkg::*;
#(
  parameter int unsigned MESH_X = 4,
  parameter int unsigned MESH_Y = 4,
  parameter int unsigned KIND   = 0,     // 0: uBrain cores, 1: crossbar cores
  parameter int unsigned UB_N   = 256,
  parameter int unsigned UB_M   = 64,
  parameter int unsigned UB_P   = 16,
  parameter int unsigned XB_N   = 128,
  parameter int unsigned NA1    = 1,
  parameter int unsigned NA2    = 1,
  parameter int unsigned NA3    = 1,
  parameter int          TH     = 8,
  // derived sizes, not meant to be overridden
  parameter int unsigned T      = MESH_X * MESH_Y,
  parameter int unsigned N_IN   = (KIND == 0) ? UB_N : XB_N,
  parameter int unsigned N_MID  = (KIND == 0) ? UB_M : 1,
  parameter int unsigned N_OUT  = (KIND == 0) ? UB_P : XB_N,
  parameter int unsigned CFG_W  = ((KIND == 0) ? UB_M : XB_N) * W_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  step,
  output logic                  busy,
  input  logic [N_IN-1:0]       ext_spikes [T],
  input  logic [N_IN-1:0]       fault_in   [T],
  input  logic [N_MID-1:0]      fault_mid  [T],
  input  logic [N_OUT-1:0]      fault_out  [T],
  input  logic                  cfg_we,
  input  logic [7:0]            cfg_tile,
  input  cfg_target_e           cfg_target,
  input  logic [7:0]            cfg_addr,
  input  logic [CFG_W-1:0]      cfg_data,
  output logic [N_OUT-1:0]      out_spikes [T]
);
  localparam int unsigned P_N = 1, P_E = 2, P_S = 3, P_W = 4;

  logic       in_valid  [T][5];
  spike_pkt_t in_pkt    [T][5];
  logic       in_ready  [T][5];
  logic       out_valid [T][5];
  spike_pkt_t out_pkt   [T][5];
  logic       out_ready [T][5];
  logic [T-1:0] tile_busy, rtr_busy;

  for (genvar y = 0; y < int'(MESH_Y); y++) begin : g_y
    for (genvar x = 0; x < int'(MESH_X); x++) begin : g_x
      localparam int unsigned ID = y * MESH_X + x;

      core_tile #(.KIND(KIND), .X(x), .Y(y), .UB_N(UB_N), .UB_M(UB_M), .UB_P(UB_P),
                  .XB_N(XB_N), .NA1(NA1), .NA2(NA2), .NA3(NA3), .TH(TH)) u_tile (
        .clk, .rst_n, .step,
        .ext_spikes(ext_spikes[ID]), .fault_in(fault_in[ID]),
        .fault_mid(fault_mid[ID]), .fault_out(fault_out[ID]),
        .cfg_we(cfg_we && cfg_tile == 8'(ID)), .cfg_target, .cfg_addr, .cfg_data,
        .link_in_valid(in_valid[ID]), .link_in_pkt(in_pkt[ID]), .link_in_ready(in_ready[ID]),
        .link_out_valid(out_valid[ID]), .link_out_pkt(out_pkt[ID]),
        .link_out_ready(out_ready[ID]),
        .out_spikes(out_spikes[ID]), .busy(tile_busy[ID]), .router_busy(rtr_busy[ID]));

      // incoming links: from the neighbour's opposite port, or nothing at the edge
      always_comb begin
        in_valid[ID][0] = 1'b0;
        in_pkt[ID][0]   = '0;
        out_ready[ID][0] = 1'b1;
        // north input <- south output of (x, y-1)
        if (y > 0) begin
          in_valid[ID][P_N]  = out_valid[ID - MESH_X][P_S];
          in_pkt[ID][P_N]    = out_pkt[ID - MESH_X][P_S];
          out_ready[ID][P_N] = in_ready[ID - MESH_X][P_S];
        end else begin
          in_valid[ID][P_N]  = 1'b0;
          in_pkt[ID][P_N]    = '0;
          out_ready[ID][P_N] = 1'b1;
        end
        // south input <- north output of (x, y+1)
        if (y < int'(MESH_Y) - 1) begin
          in_valid[ID][P_S]  = out_valid[ID + MESH_X][P_N];
          in_pkt[ID][P_S]    = out_pkt[ID + MESH_X][P_N];
          out_ready[ID][P_S] = in_ready[ID + MESH_X][P_N];
        end else begin
          in_valid[ID][P_S]  = 1'b0;
          in_pkt[ID][P_S]    = '0;
          out_ready[ID][P_S] = 1'b1;
        end
        // west input <- east output of (x-1, y)
        if (x > 0) begin
          in_valid[ID][P_W]  = out_valid[ID - 1][P_E];
          in_pkt[ID][P_W]    = out_pkt[ID - 1][P_E];
          out_ready[ID][P_W] = in_ready[ID - 1][P_E];
        end else begin
          in_valid[ID][P_W]  = 1'b0;
          in_pkt[ID][P_W]    = '0;
          out_ready[ID][P_W] = 1'b1;
        end
        // east input <- west output of (x+1, y)
        if (x < int'(MESH_X) - 1) begin
          in_valid[ID][P_E]  = out_valid[ID + 1][P_W];
          in_pkt[ID][P_E]    = out_pkt[ID + 1][P_W];
          out_ready[ID][P_E] = in_ready[ID + 1][P_W];
        end else begin
          in_valid[ID][P_E]  = 1'b0;
          in_pkt[ID][P_E]    = '0;
          out_ready[ID][P_E] = 1'b1;
        end
      end
    end
  end

  assign busy = (|tile_busy) || (|rtr_busy) || step;

endmodule
