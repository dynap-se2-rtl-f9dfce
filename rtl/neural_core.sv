// neural_core: one of the four neural cores (16 x 16 = 256 neurons).
//
// Event path: a tag broadcast from the top-level router enters the synapse
// CAM; every matching synapse gets a pulse the next clock and its neuron
// (behavioural model) integrates it. A neuron that fires handshakes with
// the core encoder, which reads the neuron's four source-mapping words and
// sends them as events back to the router.
//
// Per-core state: the parameter generator (biases shared by all neurons
// of the core), the DE_MUX latch and the monitor selection. The core turns
// the bias currents into the shared values every neuron uses (delays and
// pulse widths proportional to 1/I, decay shifts, weights). With DE_MUX set,
// the dendritic and shunting currents of neurons (r, c), (r, c+1),
// (r+1, c), (r+1, c+1), r and c even, all go to the soma of neuron
// (r, c): e.g. neurons 0, 1, 16, 17 feed neuron 0, giving 64 neurons of
// 256 synapses each; the other three somas get no input.
//
// Direct monitoring: one neuron per core, chosen by `mon_neuron`, has its
// membrane current and homeostasis direction brought out, and the delay
// pulse of synapse 0 of that neuron is brought out too.
//
// Configuration arrives as decoded 40-bit words (see the package); the
// core acts on those whose core field equals CORE_ID.
//
// From the paper: the 16 x 16 array, 64 synapses and 4 source words per
// neuron, tag CAM, DE_MUX grouping, per-core parameter generator, one
// monitored neuron per core. This design's own: the clocked timing, the
// register map, which synapse gives the monitored delay pulse.
module neural_core
  import dynapse2_pkg::*;
#(
  parameter int unsigned CORE_ID   = 0,
  parameter int unsigned N_NEURONS = NEURONS_PER_CORE,
  parameter int unsigned N_SYN     = SYN_PER_NEURON
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_valid,
  input  cfg_word_t         cfg,
  input  logic              tag_valid,
  input  logic [TAG_W-1:0]  tag,
  output logic              ev_valid,
  output aer_word_t         ev_data,
  input  logic              ev_ready,
  // monitoring
  output logic [CUR_W-1:0]  mon_imem,
  output logic              mon_ho_dir,
  output logic              mon_dly_pulse,
  output logic [15:0]       n_spikes,
  output logic [15:0]       n_syn_drop
);
  localparam int unsigned N  = N_NEURONS;
  localparam int unsigned NW = $clog2(N);
  localparam int unsigned ROW = 16;     // neurons per grid row
  localparam int unsigned SW = $clog2(N_SYN);

  logic sel;
  assign sel = cfg_valid && (cfg.arg[35:34] == 2'(CORE_ID));

  // ---- per-core latches ----
  logic       de_mux;
  logic [7:0] mon_neuron;
  logic [NW-1:0] mon_idx;
  assign mon_idx = mon_neuron[NW-1:0];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      de_mux     <= 1'b0;
      mon_neuron <= '0;
    end else if (sel && cfg.op == OP_CORE) begin
      de_mux     <= cfg.arg[0];
      mon_neuron <= cfg.arg[8:1];
    end
  end

  // ---- parameter generator and shared neuron values ----
  logic [CUR_W-1:0] cur [NUM_BIAS];
  param_gen u_pg (.clk, .rst_n, .we(sel && cfg.op == OP_BIAS),
    .idx(cfg.arg[20:16]), .code(bias_code_t'(cfg.arg[10:0])), .cur);

  nrn_param_t prm;
  always_comb begin
    for (int k = 0; k < 4; k++)
      prm.dly[k] = inv_time((CUR_W+1)'(cur[B_SYPD_DLY0]) +
                            (k[1] ? (CUR_W+1)'(cur[B_SYPD_DLY1]) : '0) +
                            (k[0] ? (CUR_W+1)'(cur[B_SYPD_DLY2]) : '0));
    prm.pw        = inv_time({1'b0, cur[B_SYPD_EXT]});
    prm.refr      = inv_time({1'b0, cur[B_SOIF_REFR]});
    prm.ho_period = inv_time({1'b0, cur[B_SOHO_RATE]});
    prm.w_base[0] = cur[B_SYAW_W0];
    prm.w_base[1] = cur[B_SYAW_W1];
    prm.w_base[2] = cur[B_SYAW_W2];
    prm.w_base[3] = cur[B_SYAW_W3];
    prm.stp_w     = cur[B_SYAN_STDW];
    prm.stp_str   = cur[B_SYAN_STDSTR];
    prm.leak      = cur[B_SOIF_LEAK];
    prm.dc        = cur[B_SOIF_DC];
    prm.thr       = cur[B_SOIF_SPKTHR];
    prm.ad_w      = cur[B_SOAD_W];
    prm.ca_w      = cur[B_SOCA_W];
    prm.ho_ref    = cur[B_SOHO_VREF];
    prm.nmrev     = cur[B_DENM_NMREV];
    prm.sh_dend[DEND_AMPA]   = tau_shift(cur[B_DEAM_ITAU]);
    prm.sh_dend[DEND_NMDA]   = tau_shift(cur[B_DENM_ITAU]);
    prm.sh_dend[DEND_GABA_B] = tau_shift(cur[B_DEGB_ITAU]);
    prm.sh_dend[DEND_GABA_A] = tau_shift(cur[B_DEGA_ITAU]);
    prm.sh_ad     = tau_shift(cur[B_SOAD_TAU]);
    prm.sh_ca     = tau_shift(cur[B_SOCA_TAU]);
  end

  // ---- destination mapping ----
  logic [N*N_SYN-1:0] match;
  synapse_cam #(.N_NEURONS(N), .N_SYN(N_SYN)) u_cam (.clk, .rst_n,
    .cfg_we(sel && cfg.op == OP_CAM), .cfg_addr({cfg.arg[26 +: NW], cfg.arg[20 +: SW]}),
    .cfg_tag(cfg.arg[10:0]), .tag_valid, .tag, .match);

  // ---- neurons ----
  logic [N-1:0]            req, ack, ho_dir, drop, dlyp;
  logic signed [CUR_W+1:0] i_dend [N];
  logic [CUR_W-1:0]        i_som  [N];
  logic signed [CUR_W+3:0] d_in   [N];
  logic [CUR_W+1:0]        s_in   [N];
  logic [CUR_W-1:0]        imem   [N];

  neuron_array #(.N_NEURONS(N), .N_SYN(N_SYN)) u_nrn (.clk, .rst_n,
    .syn_we(sel && cfg.op == OP_SYN), .syn_addr({cfg.arg[26 +: NW], cfg.arg[20 +: SW]}),
    .syn_cfg(syn_cfg_t'(cfg.arg[10:0])),
    .nrn_we(sel && cfg.op == OP_NRN), .nrn_addr(cfg.arg[26 +: NW]),
    .nrn_cfg(nrn_cfg_t'(cfg.arg[6:0])), .prm, .match,
    .i_dend, .i_som, .d_in, .s_in, .req, .ack, .imem, .ho_dir,
    .syn_drop(drop), .dly_pulse(dlyp));

  // ---- DE_MUX: merge the dendrites of four neurons ----
  always_comb begin
    for (int n = 0; n < int'(N); n++) begin
      if (!de_mux) begin
        d_in[n] = (CUR_W+4)'(i_dend[n]);
        s_in[n] = (CUR_W+2)'(i_som[n]);
      end else if ((n % 2) == 0 && ((n / ROW) % 2) == 0 && n + ROW + 1 < int'(N)) begin
        d_in[n] = (CUR_W+4)'(i_dend[n]) + (CUR_W+4)'(i_dend[n+1]) +
                  (CUR_W+4)'(i_dend[n+ROW]) + (CUR_W+4)'(i_dend[n+ROW+1]);
        s_in[n] = (CUR_W+2)'(i_som[n]) + (CUR_W+2)'(i_som[n+1]) +
                  (CUR_W+2)'(i_som[n+ROW]) + (CUR_W+2)'(i_som[n+ROW+1]);
      end else begin
        d_in[n] = '0;
        s_in[n] = '0;
      end
    end
  end

  // ---- source mapping ----
  core_encoder #(.N_NEURONS(N)) u_enc (.clk, .rst_n, .req, .ack,
    .cfg_we(sel && cfg.op == OP_SRAM), .cfg_neuron(cfg.arg[26 +: NW]), .cfg_slot(cfg.arg[25:24]),
    .cfg_data(cfg.arg[22:0]), .out_valid(ev_valid), .out_data(ev_data), .out_ready(ev_ready));

  // ---- monitoring and counters ----
  assign mon_imem      = imem[mon_idx];
  assign mon_ho_dir    = ho_dir[mon_idx];
  assign mon_dly_pulse = dlyp[mon_idx];

  logic [N-1:0] ack_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_q      <= '0;
      n_spikes   <= '0;
      n_syn_drop <= '0;
    end else begin
      ack_q <= ack;
      if (|(ack & ~ack_q)) n_spikes <= n_spikes + 1'b1;
      if (|drop) n_syn_drop <= n_syn_drop + 1'b1;
    end
  end
endmodule
