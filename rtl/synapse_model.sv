// synapse_model: behavioural model of one synapse's pulse circuitry.
//
// Holds the synapse's digital latches (syn_cfg_t) and models its delayed
// pulse extender and short-term depression. A `match` pulse from the CAM
// starts a delay of dly[{precise_delay, mismatched_delay}] ticks, then an
// output pulse of `pw` ticks; `psc` carries the weight current during the
// pulse and is 0 otherwise. A match during the delay or the pulse is lost
// (`drop` for one tick), as in the circuit, where the C-element ignores an
// input while the extender is busy. The weight is the flexible DAC sum
// x0*Iw0 + x1*Iw1 + x2*Iw2 + x3*Iw3, or with STP set a state that falls by
// `stp_str` at each pulse and recovers towards `stp_w` by 1/64 of the
// difference per tick. `dly_phase` is high during the delay.
//
// The rules are the package's syn_next / syn_psc, which neuron_array
// applies to every synapse of a core.
//
// The drop rule, the delay table and the DAC sum follow the paper; the
// discrete-time recovery law of the STP state is this design's own.
module synapse_model
  import dynapse2_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  syn_cfg_t         cfg_in,
  input  nrn_param_t       prm,
  input  logic             match,
  output syn_cfg_t         cfg,
  output logic [CUR_W+1:0] psc,
  output logic             drop,
  output logic             dly_phase
);
  syn_state_t st;
  assign psc       = syn_psc(st, cfg, prm);
  assign drop      = match && (st.phase != PX_IDLE);
  assign dly_phase = (st.phase == PX_DELAY);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0;
      st  <= '0;
    end else begin
      if (we) cfg <= cfg_in;
      st <= syn_next(st, cfg, prm, match);
    end
  end
endmodule
