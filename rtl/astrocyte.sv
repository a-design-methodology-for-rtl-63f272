// astrocyte: an astrocyte circuit that encloses a group of G neurons and the synaptic
// sites they drive (the grey/blue astrocyte blocks and the circle-plus nodes of the
// proposed crossbar and uBrain cores).
//
// Once per network timestep (a `step` pulse with the G spikes of the enclosed neurons)
// it performs a forward-Euler update of the astrocyte equations:
//   per neuron j   AG_j  += -AG_j/tau_AG + r_AG*spike_j                    (2-AG)
//                  DSE_j  = -K_AG*AG_j                                      (direct path)
//                  PR_j   = PR0 + PR0*(DSE_j + eSP)/100                     (release prob.)
//   shared         Ca_cyt += in(sum AG) - Ca_cyt/tau_Ca - SERCA + CICR
//                  IP3    += -IP3/tau_IP3 + PLC(Ca_cyt)
//                  Ca_ER  += SERCA - CICR,  CICR = IP3*Ca_ER/2^16
//                  Glu    += -Glu/tau_Glu + r_Glu*[Ca_cyt >= CA_TH]
//                  eSP    += (m_eSP*Glu - eSP)/tau_eSP
// The 2-AG, Glu, e-SP, DSE and PR equations are the paper's. The paper names the
// calcium pathways (PLC, SERCA, CICR, ER store) but gives no equations for them, so the
// linear-compartment form above is this design's choice, as are all constants; every
// time constant is a power of two so that a division becomes a shift. The paper's
// glutamate source r_Glu(t - t_Ca) is read as production at rate r_Glu for as long as
// Ca_cyt stays above the release threshold.
//
// Synaptic site (circle-plus) of neuron j: a spike of neuron j is passed on with
// probability PR_j. When neuron j is silent, the site still releases with probability
// max(PR_j - PR0, 0). While neuron j fires, its own 2-AG keeps DSE_j negative and
// cancels the e-SP raise, so the site stays near PR0. When neuron j fails, DSE_j
// relaxes towards zero, PR_j rises to PR0*(1+eSP/100), and the astrocyte, still driven
// by the other neurons it encloses, partly restores the site's firing. This reading of
// the circle-plus is this design's choice.
//
// Timing: the neurons are processed one per clock cycle (one 2-AG word and its products
// by constants), then the shared state is updated in one more cycle. A `step` seen on a
// rising edge gives a one-cycle `done` pulse G+1 edges later, and `sites` then holds the
// G gated spikes. `step` is ignored while `busy`.
module astrocyte
  import astro_pkg::*;
#(
  parameter int unsigned G          = 16,       // neurons enclosed
  parameter int unsigned TAU_AG_SH  = 4,        // tau_AG  = 16 steps
  parameter int unsigned R_AG       = 256,      // r_AG    = 1.0 per spike
  parameter int unsigned K_AG       = 1600,     // K_AG    = 6.25 %/unit (Q8.8)
  parameter int unsigned PR0        = 32768,    // PR(0)   = 0.5
  parameter int unsigned TAU_CA_SH  = 3,
  parameter int unsigned SERCA_SH   = 3,
  parameter int unsigned TAU_IP3_SH = 3,
  parameter int unsigned PLC_SH     = 2,
  parameter int unsigned CA_TH      = 512,      // Ca release threshold (2.0)
  parameter int unsigned TAU_GLU_SH = 4,
  parameter int unsigned R_GLU      = 256,
  parameter int unsigned TAU_ESP_SH = 3,
  parameter int unsigned M_ESP      = 400,      // m_eSP (Q8.8, %/unit)
  parameter logic [15:0] SEED       = 16'hACE1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  input  logic [G-1:0] spikes,
  output logic [G-1:0] sites,
  output logic         done,
  output logic         busy,
  // observation of the shared state
  output state_t       ca_cyt,
  output state_t       glu,
  output pct_t         esp
);
  localparam int unsigned IDX_W = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned IN_SH = $clog2(G) + 2;   // Ca input: mean 2-AG / 4
  // signed copies of the constants used in signed arithmetic
  localparam logic signed [47:0] PR0_S   = 48'(PR0);
  localparam logic signed [47:0] RECIP_S = 48'(RECIP100);
  localparam logic signed [39:0] M_ESP_S = 40'(M_ESP);

  typedef enum logic [1:0] {S_IDLE, S_SWEEP, S_SHARED} st_e;
  st_e st;

  state_t           ag [G];
  logic [G-1:0]     spk;
  logic [IDX_W-1:0] idx;
  logic [31:0]      sum_ag;
  state_t           ip3, ca_er;
  logic [15:0]      rnd;

  lfsr16 #(.SEED(SEED)) u_rng (.clk, .rst_n, .adv(st == S_SWEEP), .rnd);

  // ---- per-neuron datapath (combinational, for neuron idx) ----
  state_t             ag_old, ag_new;
  pct_t               dse;
  logic signed [47:0] prod, delta, pr_full;
  prob_t              pr;
  logic               fire;

  always_comb begin
    ag_old  = ag[idx];
    ag_new  = sat_state(40'(ag_old) - 40'(ag_old >> TAU_AG_SH)
                        + (spk[idx] ? 40'(R_AG) : 40'sd0));
    dse     = sat_pct(-((40'(K_AG) * 40'(ag_new)) >>> 8));
    prod    = PR0_S * (48'(dse) + 48'(esp));
    delta   = (prod * RECIP_S) >>> 24;
    pr_full = PR0_S + delta;
    if (pr_full < 0)               pr = '0;
    else if (pr_full > 48'sd65535) pr = 16'hFFFF;
    else                           pr = pr_full[15:0];
    if (spk[idx]) fire = (rnd < pr);
    else          fire = (pr > prob_t'(PR0)) && (rnd < (pr - prob_t'(PR0)));
  end

  // ---- shared-state update (combinational, used in S_SHARED) ----
  state_t             serca, cicr;
  logic signed [39:0] ca_in, esp_s, esp_tgt;
  always_comb begin
    esp_s   = 40'(esp);                                  // sign-extended
    esp_tgt = (M_ESP_S * signed'({24'd0, glu})) >>> 8;   // m_eSP * Glu
    serca = ca_cyt >> SERCA_SH;
    cicr  = state_t'((32'(ip3) * 32'(ca_er)) >> 16);
    ca_in = 40'(sum_ag >> IN_SH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      idx    <= '0;
      spk    <= '0;
      sites  <= '0;
      done   <= 1'b0;
      sum_ag <= '0;
      ca_cyt <= '0;
      ip3    <= '0;
      ca_er  <= '0;
      glu    <= '0;
      esp    <= '0;
      for (int i = 0; i < int'(G); i++) ag[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (step) begin
          spk    <= spikes;
          sites  <= '0;
          idx    <= '0;
          sum_ag <= '0;
          st     <= S_SWEEP;
        end
        S_SWEEP: begin
          ag[idx]    <= ag_new;
          sites[idx] <= fire;
          sum_ag     <= sum_ag + 32'(ag_new);
          if (idx == IDX_W'(G - 1)) st <= S_SHARED;
          else                      idx <= idx + 1'b1;
        end
        S_SHARED: begin
          ca_cyt <= sat_state(40'(ca_cyt) - 40'(ca_cyt >> TAU_CA_SH) - 40'(serca)
                              + ca_in + 40'(cicr));
          ip3    <= sat_state(40'(ip3) - 40'(ip3 >> TAU_IP3_SH) + 40'(ca_cyt >> PLC_SH));
          ca_er  <= sat_state(40'(ca_er) + 40'(serca) - 40'(cicr));
          glu    <= sat_state(40'(glu) - 40'(glu >> TAU_GLU_SH)
                              + ((ca_cyt >= state_t'(CA_TH)) ? 40'(R_GLU) : 40'sd0));
          esp    <= sat_pct(esp_s + ((esp_tgt - esp_s) >>> TAU_ESP_SH));
          done   <= 1'b1;
          st     <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

endmodule
