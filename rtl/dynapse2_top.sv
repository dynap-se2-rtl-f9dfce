// dynapse2_top: the digital fabric of one DYNAP-SE2 chip.
//
// Four neural cores (256 neurons of 64 synapses each; neurons and synapses
// are behavioural models of the analog circuits) sit behind one top-level
// router. Every event source of the chip feeds one round-robin arbiter in
// front of the router: the encoders of the four cores, the sensor
// pipeline (mapped events and cloned sensor events), host events from the
// input interface and the four grid buses from the neighbouring chips.
// The router keeps an event for this chip when dx = dy = 0, broadcasting
// the tag to the cores of its mask (neuron event) or handing it to the
// sensor pipeline (sensor event), and otherwise forwards it on the west,
// east, south or north bus.
//
// Configuration comes only through the split-parallel input interface:
// each decoded 40-bit word reaches the cores and the sensor pipeline,
// which pick the ones addressed to them.
//
// Direct monitoring outputs per core: membrane current, homeostasis
// direction and a synapse delay pulse of the selected neuron. The analog
// front-end, the sADC monitors and the analog pads have no model here.
//
// Timing: a neuron spike leaves the encoder 3 clocks after its request,
// reaches the router 1 clock later and a destination synapse 2 clocks
// after that (arbiter, router, CAM); on a grid bus a word takes the
// synchronisers' 2+2 clocks plus capture at each end.
module dynapse2_top
  import dynapse2_pkg::*;
#(
  parameter int unsigned N_NEURONS = NEURONS_PER_CORE,
  parameter int unsigned N_SYN     = SYN_PER_NEURON
) (
  input  logic              clk,
  input  logic              rst_n,
  // multi-purpose input interface (split-parallel AER, 21 bits)
  input  logic              ii_req,
  input  logic [20:0]       ii_data,
  output logic              ii_ack,
  // 2D sensor, parallel AER
  input  logic              s_req,
  input  logic [18:0]       s_data,
  output logic              s_ack,
  // grid buses, index 0..3 = west, east, south, north
  input  logic [3:0]        gin_req,
  input  aer_word_t         gin_data [4],
  output logic [3:0]        gin_ack,
  output logic [3:0]        gout_req,
  output aer_word_t         gout_data [4],
  input  logic [3:0]        gout_ack,
  // direct monitoring, per core
  output logic [CUR_W-1:0]  mon_imem [4],
  output logic [3:0]        mon_ho_dir,
  output logic [3:0]        mon_dly_pulse,
  // activity counters
  output logic [15:0]       n_spikes [4],
  output logic [15:0]       n_syn_drop [4],
  output logic [15:0]       n_rt_local,
  output logic [15:0]       n_rt_dropped,
  output logic [15:0]       n_rt_forward,
  output logic [15:0]       n_ii_orphan,
  output logic [15:0]       n_pix_drop,
  output logic [15:0]       n_cut_drop,
  output logic [15:0]       n_pol_drop,
  output logic [15:0]       n_dup
);
  // ---- input interface ----
  logic      cfg_valid;
  cfg_word_t cfg;
  logic      hev_valid, hev_ready;
  aer_word_t hev_data;
  input_interface u_ii (.clk, .rst_n, .ii_req, .ii_data, .ii_ack,
    .ev_valid(hev_valid), .ev_data(hev_data), .ev_ready(hev_ready),
    .cfg_valid, .cfg, .n_orphan(n_ii_orphan));

  // ---- arbiter inputs: 0..3 cores, 4 map, 5 copy, 6 host, 7..10 grid ----
  localparam int unsigned NSRC = 11;
  logic [NSRC-1:0] src_valid, src_ready;
  aer_word_t       src_data [NSRC];
  logic            arb_valid, arb_ready;
  aer_word_t       arb_data;

  stream_arb #(.N(NSRC), .WIDTH(WORD_W)) u_arb (.clk, .rst_n,
    .in_valid(src_valid), .in_data(src_data), .in_ready(src_ready),
    .out_valid(arb_valid), .out_data(arb_data), .out_ready(arb_ready));

  // ---- top-level router ----
  logic [3:0]       core_valid;
  logic [TAG_W-1:0] core_tag;
  logic             sens_valid, sens_ready;
  sev_t             sens_data;
  logic [3:0]       gtx_valid, gtx_ready;
  aer_word_t        gtx_data [4];

  top_router u_rt (.clk, .rst_n, .in_valid(arb_valid), .in_data(arb_data), .in_ready(arb_ready),
    .core_valid, .core_tag, .sens_valid, .sens_data, .sens_ready,
    .grid_valid(gtx_valid), .grid_data(gtx_data), .grid_ready(gtx_ready),
    .n_local(n_rt_local), .n_dropped(n_rt_dropped), .n_forward(n_rt_forward));

  // ---- neural cores ----
  for (genvar c = 0; c < 4; c++) begin : g_core
    neural_core #(.CORE_ID(c), .N_NEURONS(N_NEURONS), .N_SYN(N_SYN)) u_core (.clk, .rst_n,
      .cfg_valid, .cfg, .tag_valid(core_valid[c]), .tag(core_tag),
      .ev_valid(src_valid[c]), .ev_data(src_data[c]), .ev_ready(src_ready[c]),
      .mon_imem(mon_imem[c]), .mon_ho_dir(mon_ho_dir[c]), .mon_dly_pulse(mon_dly_pulse[c]),
      .n_spikes(n_spikes[c]), .n_syn_drop(n_syn_drop[c]));
  end

  // ---- sensor pipeline ----
  sensor_pipeline u_sp (.clk, .rst_n, .cfg_valid, .cfg, .s_req, .s_data, .s_ack,
    .rtr_valid(sens_valid), .rtr_data(sens_data), .rtr_ready(sens_ready),
    .map_valid(src_valid[4]), .map_data(src_data[4]), .map_ready(src_ready[4]),
    .copy_valid(src_valid[5]), .copy_data(src_data[5]), .copy_ready(src_ready[5]),
    .n_pix_drop, .n_cut_drop, .n_pol_drop, .n_dup);

  assign src_valid[6] = hev_valid;
  assign src_data[6]  = hev_data;
  assign hev_ready    = src_ready[6];

  // ---- grid links ----
  for (genvar g = 0; g < 4; g++) begin : g_grid
    grid_link u_gl (.clk, .rst_n,
      .bus_in_req(gin_req[g]), .bus_in_data(gin_data[g]), .bus_in_ack(gin_ack[g]),
      .bus_out_req(gout_req[g]), .bus_out_data(gout_data[g]), .bus_out_ack(gout_ack[g]),
      .rx_valid(src_valid[7+g]), .rx_data(src_data[7+g]), .rx_ready(src_ready[7+g]),
      .tx_valid(gtx_valid[g]), .tx_data(gtx_data[g]), .tx_ready(gtx_ready[g]));
  end
endmodule
