// neuron_array: the neurons and synapses of one core, as arrays.
//
// Holds, for N_NEURONS neurons of N_SYN synapses each, every synapse's
// latches (weight, delay bits, STP select, dendrite) and pulse-extender
// state, and every neuron's latches and state (dendrite currents, I_mem,
// adaptation, calcium, gain, handshake). Each clock all of them advance by
// one step of the behavioural rules in the package (syn_next, nrn_next):
// a CAM match starts a synapse's delayed pulse, the pulses are summed per
// dendrite for each neuron, and each soma integrates the current the core
// routes to it (its own or, with DE_MUX, that of its group).
//
// Interface: `match` has one bit per synapse (index neuron * N_SYN +
// synapse), as from the CAM. `i_dend` / `i_som` are each neuron's
// dendritic and shunting output, `d_in` / `s_in` what reaches each soma.
// `req` / `ack` are the spike handshake with the core encoder. Latch
// writes address one synapse (`syn_addr`) or one neuron (`nrn_addr`).
// `syn_drop` is high the clock after a neuron lost a match because the
// synapse was still busy; `dly_pulse` shows the delay phase of synapse 0 of
// each neuron. All latches and states reset to 0 (disabled), gain to 128.
//
// Timing: one clock is one time step of the model. Using arrays and loops
// rather than one instance per neuron keeps a full core (16,384 synapses)
// a single block of logic for the tools; the behaviour is identical to
// neuron_model and synapse_model, which apply the same functions to one
// neuron and one synapse.
//
// From the paper: what each synapse and neuron holds and does (see the
// package). This design's own: the discrete-time rules and the arrays.
module neuron_array
  import dynapse2_pkg::*;
#(
  parameter int unsigned N_NEURONS = NEURONS_PER_CORE,
  parameter int unsigned N_SYN     = SYN_PER_NEURON
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     syn_we,
  input  logic [$clog2(N_NEURONS*N_SYN)-1:0] syn_addr,
  input  syn_cfg_t                 syn_cfg,
  input  logic                     nrn_we,
  input  logic [(N_NEURONS > 1 ? $clog2(N_NEURONS) : 1)-1:0] nrn_addr,
  input  nrn_cfg_t                 nrn_cfg,
  input  nrn_param_t               prm,
  input  logic [N_NEURONS*N_SYN-1:0] match,
  output logic signed [CUR_W+1:0]  i_dend [N_NEURONS],
  output logic [CUR_W-1:0]         i_som  [N_NEURONS],
  input  logic signed [CUR_W+3:0]  d_in   [N_NEURONS],
  input  logic [CUR_W+1:0]         s_in   [N_NEURONS],
  output logic [N_NEURONS-1:0]     req,
  input  logic [N_NEURONS-1:0]     ack,
  output logic [CUR_W-1:0]         imem   [N_NEURONS],
  output logic [N_NEURONS-1:0]     ho_dir,
  output logic [N_NEURONS-1:0]     syn_drop,
  output logic [N_NEURONS-1:0]     dly_pulse
);
  localparam int unsigned N  = N_NEURONS;
  localparam int unsigned NS = N * N_SYN;

  syn_cfg_t   scfg [NS];
  syn_state_t sst  [NS];
  nrn_cfg_t   ncfg [N];
  nrn_state_t nst  [N];

  // synaptic input of this tick, per neuron and dendrite, and lost matches
  logic [3:0][CUR_W+7:0] psc [N];
  logic [N-1:0]          drop;
  always_comb begin
    for (int unsigned n = 0; n < N; n++) begin
      psc[n]  = '0;
      drop[n] = 1'b0;
      for (int unsigned s = 0; s < N_SYN; s++) begin
        logic [CUR_W+1:0] p;
        p = syn_psc(sst[n*N_SYN+s], scfg[n*N_SYN+s], prm);
        for (int d = 0; d < 4; d++)
          if (scfg[n*N_SYN+s].dendrite[d]) psc[n][d] = psc[n][d] + (CUR_W+8)'(p);
        if (match[n*N_SYN+s] && sst[n*N_SYN+s].phase != PX_IDLE) drop[n] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NS; i++) begin
        scfg[i] <= '0;
        sst[i]  <= '0;
      end
    end else begin
      for (int unsigned i = 0; i < NS; i++) sst[i] <= syn_next(sst[i], scfg[i], prm, match[i]);
      if (syn_we) scfg[syn_addr] <= syn_cfg;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned n = 0; n < N; n++) begin
        ncfg[n] <= '0;
        nst[n]  <= NRN_RESET;
      end
      syn_drop <= '0;
    end else begin
      for (int unsigned n = 0; n < N; n++) nst[n] <= nrn_next(nst[n], ncfg[n], prm, psc[n], d_in[n], s_in[n], ack[n]);
      if (nrn_we) ncfg[nrn_addr] <= nrn_cfg;
      syn_drop <= drop;
    end
  end

  always_comb begin
    for (int unsigned n = 0; n < N; n++) begin
      i_dend[n]    = nrn_i_dend(nst[n], ncfg[n], prm);
      i_som[n]     = nst[n].dend[DEND_GABA_A];
      req[n]       = (nst[n].so == SO_REQ);
      imem[n]      = nst[n].imem;
      ho_dir[n]    = ncfg[n].ho_enable && (nst[n].i_ca < prm.ho_ref);
      dly_pulse[n] = (sst[n*N_SYN].phase == PX_DELAY);
    end
  end
endmodule
