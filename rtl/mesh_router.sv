// mesh_router: one router of the 2-D mesh that links the cores of the many-core chip.
//
// The many-core chip places its cores on a grid in which every core is linked to its
// horizontal and vertical neighbours; the routers realise those links. A router has five
// ports (0 local core, 1 north, 2 east, 3 south, 4 west), each with an input FIFO of
// DEPTH single-flit spike packets and a registered output. A packet goes first along x
// (east when its destination column is larger than this router's X, west when smaller),
// then along y (south when the destination row is larger, north when smaller), and to
// the local port when both match (dimension-order routing, which cannot deadlock on a
// mesh). Every output has a round-robin arbiter over the inputs that want it.
// The mesh itself is the paper's; packet format, routing, buffering and arbitration are
// this design's choices.
//
// Handshake on every port: a packet moves when valid and ready are both high; a sender
// holds valid and the packet steady until ready. Latency: a packet accepted into an input
// FIFO on one edge can be in the output register on the next edge, so one hop costs two
// edges when there is no contention. `busy` is high while any packet is held.
module mesh_router
  import astro_pkg::*;
#(
  parameter int unsigned X     = 0,
  parameter int unsigned Y     = 0,
  parameter int unsigned DEPTH = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid  [5],
  input  spike_pkt_t in_pkt    [5],
  output logic       in_ready  [5],
  output logic       out_valid [5],
  output spike_pkt_t out_pkt   [5],
  input  logic       out_ready [5],
  output logic       busy
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  spike_pkt_t      fifo   [5][DEPTH];
  logic [PW-1:0]   rd_ptr [5];
  logic [PW-1:0]   wr_ptr [5];
  logic [CW-1:0]   count  [5];
  logic [2:0]      rr     [5];

  spike_pkt_t head  [5];
  logic [2:0] dir   [5];
  logic       req   [5];
  logic       pop   [5];
  logic       grant_v [5];
  logic [2:0] grant_i [5];
  logic       can_send [5];

  function automatic logic [2:0] route(input spike_pkt_t p);
    if      (int'(p.dx) > int'(X)) return 3'd2;
    else if (int'(p.dx) < int'(X)) return 3'd4;
    else if (int'(p.dy) > int'(Y)) return 3'd3;
    else if (int'(p.dy) < int'(Y)) return 3'd1;
    else                           return 3'd0;
  endfunction

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      head[i]     = fifo[i][rd_ptr[i]];
      req[i]      = (count[i] != '0);
      dir[i]      = route(head[i]);
      in_ready[i] = (count[i] != CW'(DEPTH));
      pop[i]      = 1'b0;
    end
    for (int o = 0; o < 5; o++) begin
      can_send[o] = !out_valid[o] || out_ready[o];
      grant_v[o]  = 1'b0;
      grant_i[o]  = '0;
      for (int k = 0; k < 5; k++) begin
        automatic int i = (int'(rr[o]) + k) % 5;
        if (!grant_v[o] && can_send[o] && req[i] && dir[i] == 3'(o)) begin
          grant_v[o] = 1'b1;
          grant_i[o] = 3'(i);
        end
      end
      if (grant_v[o]) pop[grant_i[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        rd_ptr[i]    <= '0;
        wr_ptr[i]    <= '0;
        count[i]     <= '0;
        rr[i]        <= '0;
        out_valid[i] <= 1'b0;
        out_pkt[i]   <= '0;
        for (int d = 0; d < int'(DEPTH); d++) fifo[i][d] <= '0;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        automatic logic push = in_valid[i] && in_ready[i];
        if (push) begin
          fifo[i][wr_ptr[i]] <= in_pkt[i];
          wr_ptr[i] <= (wr_ptr[i] == PW'(DEPTH - 1)) ? '0 : wr_ptr[i] + 1'b1;
        end
        if (pop[i])
          rd_ptr[i] <= (rd_ptr[i] == PW'(DEPTH - 1)) ? '0 : rd_ptr[i] + 1'b1;
        count[i] <= count[i] + CW'(push) - CW'(pop[i]);
      end
      for (int o = 0; o < 5; o++) begin
        if (grant_v[o]) begin
          out_valid[o] <= 1'b1;
          out_pkt[o]   <= head[grant_i[o]];
          rr[o]        <= (grant_i[o] == 3'd4) ? 3'd0 : grant_i[o] + 3'd1;
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
    end
  end

  always_comb begin
    busy = 1'b0;
    for (int i = 0; i < 5; i++) busy = busy || (count[i] != '0) || out_valid[i];
  end

  // A packet offered on an output stays, unchanged, until it is taken.
  for (genvar o = 0; o < 5; o++) begin : g_hs
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_pkt[o]));
  end

endmodule
