// neuron_model: behavioural model of one DYNAP-SE2 silicon neuron.
//
// The neuron is analog on the chip; this is a discrete-time model, one
// clock = one time step, with currents as integers (units as in
// param_gen). It keeps what the digital fabric sees and what the paper
// describes as rules, and approximates the analog dynamics.
//
// Synapses (64). Each holds its digital latches: a 4-bit weight, the
// precise_delay / mismatched_delay bits of the delay DAC, the STP select
// and a one-hot dendrite select. A `match` pulse from the CAM starts the
// delayed pulse extender: a delay of dly[{precise, mismatched}] ticks (the
// core derives it from I_dly0 + precise*I_dly1 + mismatched*I_dly2), then
// a pulse of `pw` ticks during which the weight current flows into the
// selected dendrite(s). A match that arrives while the synapse is still in
// its delay or pulse is lost, as in the circuit, and is reported on
// `syn_drop`. The weight is the flexible DAC sum x0*Iw0 + ... + x3*Iw3, or,
// with STP set, a per-synapse value that falls by `stp_str` at each pulse
// and recovers exponentially towards `stp_w`.
//
// Dendrites (AMPA, NMDA, GABA_B, GABA_A) are first-order low-pass filters
// (DPI in its linear regime). AMPA + NMDA - GABA_B is the dendritic output
// `i_dend`; NMDA counts only while the membrane is above `nmrev` if the
// DENM_NMDA latch is set. GABA_A is the shunting `i_som`. The core routes
// these to this neuron's soma, or with DE_MUX to another neuron's soma, and
// returns what this soma gets on `i_dend_in` / `i_som_in`.
//
// Soma: I_mem integrates max(I_dend + DC - I_adapt, 0) * gain/128 minus the
// leak and the shunting current (the DPI's high-gain regime), clamped at 0.
// The thresholded type fires when I_mem exceeds `thr`; the exponential
// type adds a positive feedback of I_mem/8 once I_mem is past thr/2. On
// firing it raises `req` and waits for `ack` from the encoder; then I_mem
// is reset, and after `ack` falls it is held at 0 for `refr` ticks
// (refractory period). Each spike adds `ad_w` to the adaptation current
// and `ca_w` to the calcium current. With homeostasis enabled and active,
// every `ho_period` ticks the gain moves one step up if calcium is below
// `ho_ref` and down otherwise (`ho_dir` shows the direction); with
// HO_ACTIVE = 0 the gain is held at its reset value 128. SOIF_KILL stops
// the neuron. All latches reset to 0, i.e. disabled.
//
// This module is one neuron of neuron_array (the core's arrays), so the
// rules tested on it are the ones every neuron of a core follows.
//
// Not modelled: AMPA diffusion grid, alpha-function (double DPI) EPSCs,
// conductance dendrites, mismatch, the non-linear DPI regimes.

module neuron_model
  import dynapse2_pkg::*;
#(
  parameter int unsigned N_SYN = SYN_PER_NEURON
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // latch configuration
  input  logic                     syn_we,
  input  logic [$clog2(N_SYN)-1:0] syn_idx,
  input  syn_cfg_t                 syn_cfg,
  input  logic                     nrn_we,
  input  nrn_cfg_t                 nrn_cfg,
  input  nrn_param_t               prm,
  // synaptic input
  input  logic [N_SYN-1:0]         match,
  // dendritic output and somatic input (DE_MUX routing in the core)
  output logic signed [CUR_W+1:0]  i_dend,
  output logic [CUR_W-1:0]         i_som,
  input  logic signed [CUR_W+3:0]  i_dend_in,
  input  logic [CUR_W+1:0]         i_som_in,
  // spike handshake with the core encoder
  output logic                     req,
  input  logic                     ack,
  // monitoring
  output logic [CUR_W-1:0]         imem,
  output logic                     ho_dir,
  output logic                     syn_drop,
  output logic                     dly_pulse   // synapse 0 delay-phase pulse
);

  logic signed [CUR_W+1:0] i_dend_a [1];
  logic [CUR_W-1:0]        i_som_a  [1];
  logic [CUR_W-1:0]        imem_a   [1];
  neuron_array #(.N_NEURONS(1), .N_SYN(N_SYN)) u_arr (.clk, .rst_n,
    .syn_we, .syn_addr(syn_idx), .syn_cfg, .nrn_we, .nrn_addr(1'b0), .nrn_cfg, .prm, .match,
    .i_dend(i_dend_a), .i_som(i_som_a), .d_in('{i_dend_in}), .s_in('{i_som_in}),
    .req, .ack, .imem(imem_a), .ho_dir, .syn_drop, .dly_pulse);
  assign i_dend = i_dend_a[0];
  assign i_som  = i_som_a[0];
  assign imem   = imem_a[0];
endmodule
