// dynapse2_pkg: types and constants shared by the DYNAP-SE2 routing fabric.
//
// Event words are 24 bits. Bit 23 tells the two formats apart:
//   inter-neuron event (bit 23 = 0): tag[22:12] dy[11:8] dx[7:4] cores[3:0]
//   sensor event       (bit 23 = 1): pol[22] pixel_y[21:13] pixel_x[12:4] dy[3:2] dx[1:0]
// These positions follow the published word-format table. The encoding of
// the displacement fields is this design's choice: the 4-bit dx/dy of a
// neuron event are sign-magnitude (bit 3 = sign, bits 2:0 = hops, so +-7 chips
// are reachable) and the 2-bit dx/dy of a sensor event are 00 = 0,
// 01 = +1, 11 = -1 (10 reads as 0).
//
// The 40-bit configuration word of the input interface (opcode in bits
// 39:36) and the list of per-core biases are likewise this design's own
// layout; the chip's real map is not published.
package dynapse2_pkg;

  localparam int unsigned NUM_CORES       = 4;
  localparam int unsigned NEURONS_PER_CORE = 256;   // 16 x 16 grid
  localparam int unsigned SYN_PER_NEURON  = 64;
  localparam int unsigned SRAM_PER_NEURON = 4;      // four axon entries
  localparam int unsigned TAG_W           = 11;
  localparam int unsigned WORD_W          = 24;
  localparam int unsigned SRAM_W          = 23;     // {tag, dy, dx, cores}
  localparam int unsigned PIX_W           = 9;
  localparam int unsigned PATCH           = 64;     // sensor source-map patch edge
  localparam int unsigned PIXFILT_ENTRIES = 64;

  typedef logic [WORD_W-1:0] aer_word_t;

  typedef struct packed {
    logic             fmt;     // 0
    logic [TAG_W-1:0] tag;
    logic [3:0]       dy;
    logic [3:0]       dx;
    logic [3:0]       cores;
  } nev_t;

  typedef struct packed {
    logic             fmt;     // 1
    logic             pol;
    logic [PIX_W-1:0] y;
    logic [PIX_W-1:0] x;
    logic [1:0]       dy;
    logic [1:0]       dx;
  } sev_t;

  // A pixel event inside the sensor pipeline, before or after mapping.
  typedef struct packed {
    logic             pol;
    logic [PIX_W-1:0] y;
    logic [PIX_W-1:0] x;
  } pix_t;

  // Routing directions of the top-level router.
  typedef enum logic [2:0] {
    DIR_LOCAL = 3'd0, DIR_WEST = 3'd1, DIR_EAST = 3'd2,
    DIR_SOUTH = 3'd3, DIR_NORTH = 3'd4, DIR_DROP = 3'd5
  } dir_e;

  // ---- displacement helpers ------------------------------------------------
  function automatic logic d4_zero(logic [3:0] d);
    return d[2:0] == 3'd0;
  endfunction
  function automatic logic d4_neg(logic [3:0] d);
    return d[3] && d[2:0] != 3'd0;
  endfunction
  // one hop towards zero
  function automatic logic [3:0] d4_step(logic [3:0] d);
    logic [2:0] m;
    m = d[2:0] - 3'd1;
    return (m == 3'd0) ? 4'd0 : {d[3], m};
  endfunction
  function automatic logic d2_zero(logic [1:0] d);
    return d == 2'b00 || d == 2'b10;
  endfunction
  function automatic logic d2_neg(logic [1:0] d);
    return d == 2'b11;
  endfunction

  // ---- per-synapse latches ------------------------------------------------
  typedef struct packed {
    logic [3:0] weight;            // x0..x3 of the 4-bit flexible DAC
    logic       precise_delay;     // x1 of the delay DAC
    logic       mismatched_delay;  // x2 of the delay DAC
    logic       stp;               // 0 = DAC weight, 1 = STP weight
    logic [3:0] dendrite;          // one-hot: {GABA_A, GABA_B, NMDA, AMPA}
  } syn_cfg_t;

  localparam int unsigned DEND_AMPA = 0, DEND_NMDA = 1, DEND_GABA_B = 2, DEND_GABA_A = 3;

  // ---- per-neuron latches (all 0 = disabled after reset) -------------------
  typedef struct packed {
    logic so_dc;          // SO_DC: DC injection
    logic kill;           // SOIF_KILL
    logic soif_type;      // 0 = thresholded, 1 = exponential
    logic so_adaptation;  // SO_ADAPTATION
    logic ho_enable;      // HO_ENABLE: calcium / homeostasis
    logic ho_active;      // HO_ACTIVE: 0 = gain held at reset value
    logic denm_nmda;      // DENM_NMDA: membrane-gated NMDA
  } nrn_cfg_t;

  // ---- per-core biases of the parameter generator --------------------------
  typedef enum logic [4:0] {
    B_SOIF_LEAK, B_SOIF_GAIN, B_SOIF_DC, B_SOIF_SPKTHR, B_SOIF_REFR,
    B_SOAD_W, B_SOAD_TAU, B_SOCA_W, B_SOCA_TAU, B_SOHO_VREF,
    B_SYPD_EXT, B_SYPD_DLY0, B_SYPD_DLY1, B_SYPD_DLY2,
    B_SYAW_W0, B_SYAW_W1, B_SYAW_W2, B_SYAW_W3,
    B_SYAN_STDW, B_SYAN_STDSTR,
    B_DEAM_ITAU, B_DENM_ITAU, B_DEGB_ITAU, B_DEGA_ITAU, B_DENM_NMREV,
    B_SOHO_RATE
  } bias_e;
  localparam int unsigned NUM_BIAS = 32;   // address space per core
  localparam int unsigned CUR_W    = 24;   // width of a current code

  typedef struct packed {
    logic [2:0] coarse;   // n_coarse, 0..5
    logic [7:0] fine;     // n_fine, 0..255
  } bias_code_t;

  // Nominal current of a bias in units of I_coarse(0)/255 (about 0.27 pA):
  // the coarse steps of the published table grow by about 8x each.
  function automatic logic [CUR_W-1:0] bias_current(bias_code_t b);
    logic [2:0] c;
    c = (b.coarse > 3'd5) ? 3'd5 : b.coarse;
    return CUR_W'(b.fine) << (3 * c);
  endfunction

  // Time (in clock ticks) of a pulse extender discharged by current i:
  // T proportional to 1/I, clamped to 16 bits.
  localparam int unsigned TIME_K = 1 << 20;
  function automatic logic [15:0] inv_time(logic [CUR_W:0] i);
    logic [CUR_W:0] t;
    t = (CUR_W+1)'(TIME_K) / (i + 1'b1);
    return (t > 65535) ? 16'hFFFF : (t == 0 ? 16'd1 : t[15:0]);
  endfunction

  // ---- 40-bit input-interface words ---------------------------------------
  typedef enum logic [3:0] {
    OP_EVENT      = 4'h0,   // [23:0] event word injected into the router
    OP_CAM        = 4'h1,   // core[35:34] neuron[33:26] syn[25:20] tag[10:0]
    OP_SRAM       = 4'h2,   // core[35:34] neuron[33:26] slot[25:24] data[22:0]
    OP_SYN        = 4'h3,   // core[35:34] neuron[33:26] syn[25:20] syn_cfg_t[10:0]
    OP_NRN        = 4'h4,   // core[35:34] neuron[33:26] nrn_cfg_t[6:0]
    OP_CORE       = 4'h5,   // core[35:34] mon_neuron[8:1] de_mux[0]
    OP_BIAS       = 4'h6,   // core[35:34] index[20:16] coarse[10:8] fine[7:0]
    OP_SENSOR     = 4'h7,   // sensor pipeline register: index[35:32] value[17:0]
    OP_PIXFILT    = 4'h8,   // entry[35:30] valid[18] y[17:9] x[8:0]
    OP_SENSOR_MAP = 4'h9    // addr[35:24] data[22:0]
  } cfg_op_e;

  typedef struct packed {
    cfg_op_e     op;
    logic [35:0] arg;
  } cfg_word_t;

  // Sensor-pipeline register indices (OP_SENSOR)
  localparam logic [3:0] SR_IF_MODE   = 4'd0;  // [1:0] sensor format
  localparam logic [3:0] SR_DUP       = 4'd1;  // [0] duplicate enable, [4:1] {dy,dx} of the copy
  localparam logic [3:0] SR_POOL      = 4'd2;  // [1:0] x shift, [3:2] y shift
  localparam logic [3:0] SR_CUT_ORG   = 4'd3;  // [8:0] x origin, [17:9] y origin
  localparam logic [3:0] SR_CUT_SIZE  = 4'd4;  // [5:0] width-1, [11:6] height-1
  localparam logic [3:0] SR_POL       = 4'd5;  // [1:0] 01 = pol 0, 10 = pol 1, 11 = both

  // Per-core values that the analog circuits of every neuron of a core
  // share, derived from the parameter-generator currents by neural_core.
  typedef struct packed {
    logic [3:0][15:0]      dly;      // delay ticks, index {precise, mismatched}
    logic [15:0]           pw;       // synaptic pulse width ticks (SYPD_EXT)
    logic [15:0]           refr;     // refractory ticks (SOIF_REFR)
    logic [15:0]           ho_period;// ticks between homeostatic gain steps
    logic [3:0][CUR_W-1:0] w_base;   // base currents of the 4-bit weight DAC
    logic [CUR_W-1:0]      stp_w;    // STP steady-state weight (SYAN_STDW)
    logic [CUR_W-1:0]      stp_str;  // STP step per spike (SYAN_STDSTR)
    logic [CUR_W-1:0]      leak;     // SOIF_LEAK
    logic [CUR_W-1:0]      dc;       // SOIF_DC
    logic [CUR_W-1:0]      thr;      // SOIF_SPKTHR
    logic [CUR_W-1:0]      ad_w;     // SOAD_W
    logic [CUR_W-1:0]      ca_w;     // SOCA_W
    logic [CUR_W-1:0]      ho_ref;   // SOHO_VREF
    logic [CUR_W-1:0]      nmrev;    // DENM_NMREV, NMDA gating level
    logic [3:0][4:0]       sh_dend;  // decay shifts of the four dendrite DPIs
    logic [4:0]            sh_ad;    // decay shift of the adaptation DPI
    logic [4:0]            sh_ca;    // decay shift of the calcium DPI
  } nrn_param_t;

  // Decay shift of a DPI from its tau current: tau is proportional to
  // 1/I_tau, so each doubling of the current removes one bit of shift.
  function automatic logic [4:0] tau_shift(logic [CUR_W-1:0] i);
    int b;
    b = 0;
    for (int k = 0; k < CUR_W; k++) if (i[k]) b = k + 1;
    b = 22 - b;
    if (b < 1) b = 1;
    if (b > 20) b = 20;
    return 5'(b);
  endfunction

  // ---- behavioural state of a synapse and a neuron -------------------------
  // The next-state rules live here as functions so that a single synapse or
  // neuron (synapse_model, neuron_model) and the arrays of a core
  // (neuron_array) share one definition.
  typedef enum logic [1:0] {PX_IDLE, PX_DELAY, PX_PULSE} px_e;
  typedef struct packed {
    px_e              phase;   // pulse extender: idle, delay, pulse
    logic [15:0]      cnt;     // ticks left in the phase
    logic [CUR_W-1:0] stpv;    // short-term-depression weight
  } syn_state_t;

  // Weight current of a synapse while its pulse lasts, else 0: the flexible
  // DAC sum x0*Iw0 + ... + x3*Iw3, or the STP weight.
  function automatic logic [CUR_W+1:0] syn_psc(syn_state_t st, syn_cfg_t c, nrn_param_t p);
    logic [CUR_W+1:0] w;
    w = '0;
    if (c.stp) w = (CUR_W+2)'(st.stpv);
    else for (int b = 0; b < 4; b++) if (c.weight[b]) w = w + (CUR_W+2)'(p.w_base[b]);
    return (st.phase == PX_PULSE) ? w : '0;
  endfunction

  // One tick of a synapse. A match starts the delay dly[{precise,
  // mismatched}], then a pulse of pw ticks; a match while busy is lost.
  // The STP weight falls by stp_str at each pulse start and recovers by
  // 1/64 of its distance to stp_w (at least 1) per tick.
  function automatic syn_state_t syn_next(syn_state_t st, syn_cfg_t c, nrn_param_t p, logic match);
    syn_state_t n;
    logic start;
    n = st;
    start = (st.phase == PX_DELAY) && (st.cnt <= 16'd1);
    unique case (st.phase)
      PX_IDLE: if (match) begin
        n.phase = PX_DELAY;
        n.cnt   = p.dly[{c.precise_delay, c.mismatched_delay}];
      end
      PX_DELAY: if (start) begin
        n.phase = PX_PULSE;
        n.cnt   = p.pw;
      end else n.cnt = st.cnt - 16'd1;
      PX_PULSE: if (st.cnt <= 16'd1) n.phase = PX_IDLE;
                else n.cnt = st.cnt - 16'd1;
      default: n.phase = PX_IDLE;
    endcase
    if (start && c.stp)
      n.stpv = (st.stpv > p.stp_str) ? st.stpv - p.stp_str : '0;
    else if (st.stpv < p.stp_w)
      n.stpv = st.stpv + ((p.stp_w - st.stpv) >> 6) + CUR_W'(1);
    else if (st.stpv > p.stp_w)
      n.stpv = p.stp_w;
    return n;
  endfunction

  typedef enum logic [1:0] {SO_INTEG, SO_REQ, SO_REL, SO_REFR} so_e;
  typedef struct packed {
    logic [3:0][CUR_W-1:0] dend;     // AMPA, NMDA, GABA_B, GABA_A currents
    logic [CUR_W-1:0]      imem;     // membrane current
    logic [CUR_W-1:0]      i_ad;     // adaptation current
    logic [CUR_W-1:0]      i_ca;     // calcium current
    logic [7:0]            gain;     // soma gain, 128 = 1.0
    logic [15:0]           ho_cnt;   // ticks to the next homeostatic step
    logic [15:0]           refr_cnt; // refractory ticks left
    so_e                   so;       // integrate, request, release, refractory
  } nrn_state_t;
  localparam nrn_state_t NRN_RESET = '{dend: '0, imem: '0, i_ad: '0, i_ca: '0, gain: 8'd128,
                                       ho_cnt: '0, refr_cnt: '0, so: SO_INTEG};

  function automatic logic [CUR_W-1:0] sat_cur(longint v);
    if (v < 0) return '0;
    if (v > longint'((64'd1 << CUR_W) - 1)) return '1;
    return CUR_W'(v);
  endfunction

  // Dendritic output of a neuron: AMPA + NMDA - GABA_B, NMDA only while
  // I_mem is above nmrev if DENM_NMDA is set.
  function automatic logic signed [CUR_W+1:0] nrn_i_dend(nrn_state_t st, nrn_cfg_t c, nrn_param_t p);
    logic nmda_on;
    nmda_on = !c.denm_nmda || (st.imem > p.nmrev);
    return (CUR_W+2)'(signed'({2'b00, st.dend[DEND_AMPA]}) +
                      (nmda_on ? signed'({2'b00, st.dend[DEND_NMDA]}) : '0) -
                      signed'({2'b00, st.dend[DEND_GABA_B]}));
  endfunction

  // One tick of a neuron. psc: this tick's synaptic input per dendrite;
  // d_in / s_in: dendritic and shunting current reaching this soma; ack:
  // the encoder's handshake answer.
  function automatic nrn_state_t nrn_next(nrn_state_t st, nrn_cfg_t c, nrn_param_t p,
                                          logic [3:0][CUR_W+7:0] psc,
                                          logic signed [CUR_W+3:0] d_in, logic [CUR_W+1:0] s_in,
                                          logic ack);
    nrn_state_t n;
    longint vin, vmem;
    n = st;
    // dendrites: first-order low-pass
    for (int d = 0; d < 4; d++)
      n.dend[d] = sat_cur(longint'(st.dend[d]) - longint'({40'd0, st.dend[d]} >> p.sh_dend[d]) +
                          longint'({32'd0, psc[d]} >> 4));
    // adaptation and calcium: decay
    n.i_ad = st.i_ad - (st.i_ad >> p.sh_ad);
    n.i_ca = st.i_ca - (st.i_ca >> p.sh_ca);
    // homeostasis
    if (!c.ho_active || !c.ho_enable) begin
      n.gain   = 8'd128;
      n.ho_cnt = '0;
    end else if (st.ho_cnt >= p.ho_period) begin
      n.ho_cnt = '0;
      if (st.i_ca < p.ho_ref) begin if (st.gain != 8'd255) n.gain = st.gain + 8'd1; end
      else if (st.gain != 8'd1) n.gain = st.gain - 8'd1;
    end else n.ho_cnt = st.ho_cnt + 16'd1;
    // soma
    vin = longint'(d_in) + (c.so_dc ? longint'(p.dc) : 0) - (c.so_adaptation ? longint'(st.i_ad) : 0);
    if (vin < 0) vin = 0;
    vin  = (vin * longint'(st.gain)) >>> 7;
    vmem = longint'(st.imem) + ((vin - longint'(p.leak) - longint'(s_in)) >>> 4);
    if (c.soif_type && st.imem > (p.thr >> 1)) vmem += longint'({40'd0, st.imem} >> 3);
    unique case (st.so)
      SO_INTEG: begin
        if (c.kill) n.imem = '0;
        else begin
          n.imem = sat_cur(vmem);
          if (vmem > longint'(p.thr)) n.so = SO_REQ;
        end
      end
      SO_REQ: if (ack) begin
        n.imem = '0;
        n.so   = SO_REL;
        n.i_ad = sat_cur(longint'(st.i_ad) + longint'(p.ad_w));
        if (c.ho_enable) n.i_ca = sat_cur(longint'(st.i_ca) + longint'(p.ca_w));
      end
      SO_REL: if (!ack) begin
        n.so       = SO_REFR;
        n.refr_cnt = p.refr;
      end
      SO_REFR: begin
        n.imem = '0;
        if (st.refr_cnt <= 16'd1) n.so = SO_INTEG;
        else n.refr_cnt = st.refr_cnt - 16'd1;
      end
      default: n.so = SO_INTEG;
    endcase
    return n;
  endfunction

endpackage
