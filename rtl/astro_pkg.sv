// astro_pkg: types and constants shared by the astrocyte-enclosed neuromorphic cores.
//
// Number formats (this design's choice; the paper gives the equations but no bit widths):
//   * synaptic weights are 2-bit two's complement, because the models are trained as 2-bit
//     quantized networks;
//   * astrocyte state variables (2-AG, Ca2+, IP3, Glu) are unsigned Q8.8;
//   * DSE and e-SP are signed Q8.8 values in percent, so that they enter the release
//     probability equation PR = PR0 + PR0*(DSE+eSP)/100 directly;
//   * release probabilities are unsigned Q0.16 (65535 is almost 1).
// A spike packet on the mesh carries the destination tile coordinates and the index of the
// input neuron it excites in that tile.
package astro_pkg;

  localparam int unsigned W_BITS   = 2;   // synaptic weight width
  localparam int unsigned ST_W     = 16;  // astrocyte state width (Q8.8)
  localparam int unsigned PR_W     = 16;  // probability width (Q0.16)
  localparam int unsigned COORD_W  = 2;   // mesh coordinate width (4 x 4 mesh)
  localparam int unsigned NIDX_W   = 8;   // input neuron index in a packet (up to 256)
  localparam int unsigned RECIP100 = 655; // round(2^16/100), used to divide by 100

  typedef logic [ST_W-1:0]         state_t;
  typedef logic signed [ST_W-1:0]  pct_t;    // percent, Q8.8
  typedef logic [PR_W-1:0]         prob_t;

  // Spike packet carried by the mesh.
  typedef struct packed {
    logic [COORD_W-1:0] dx;    // destination column
    logic [COORD_W-1:0] dy;    // destination row
    logic [NIDX_W-1:0]  idx;   // input neuron in the destination core
  } spike_pkt_t;

  // Configuration write targets inside a tile.
  typedef enum logic [1:0] {
    CFG_W1    = 2'd0,  // first synapse array (crossbar, or uBrain layer 1 -> 2)
    CFG_W2    = 2'd1,  // second synapse array (uBrain layer 2 -> 3)
    CFG_ROUTE = 2'd2   // routing table entry of one output neuron
  } cfg_target_e;

  // One routing-table entry: where the spike of an output neuron is delivered.
  typedef struct packed {
    logic               en;
    logic [COORD_W-1:0] dx;
    logic [COORD_W-1:0] dy;
    logic [NIDX_W-1:0]  idx;
  } route_t;

  // Saturate a signed value to the unsigned range of a state variable.
  function automatic state_t sat_state(input logic signed [39:0] v);
    if (v < 0)                         return '0;
    else if (v > 40'sd65535)           return 16'hFFFF;
    else                               return v[ST_W-1:0];
  endfunction

  // Saturate a signed value to the signed Q8.8 percent range.
  function automatic pct_t sat_pct(input logic signed [39:0] v);
    if (v < -40'sd32768)               return 16'sh8000;
    else if (v > 40'sd32767)           return 16'sh7FFF;
    else                               return v[ST_W-1:0];
  endfunction

endpackage
