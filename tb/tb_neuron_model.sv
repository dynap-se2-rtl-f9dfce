// tb_neuron_model: self-checking test of the behavioural neuron (8 synapses).
//
// The testbench plays the core: it loops i_dend back to i_dend_in and i_som
// to i_som_in (no DE_MUX), and acts as the encoder on the req/ack handshake
// with a random delay before each ack. Every experiment resets the neuron,
// programs its latches and counts spikes over a fixed window. Checked:
//  - DC injection makes it fire; without DC or input it stays silent;
//  - SOIF_KILL silences it;
//  - I_mem is 0 throughout the refractory period, the inter-spike interval
//    is longer than the refractory time, and a longer refractory time gives
//    fewer spikes;
//  - req stays high until ack, falls after it, and never rises again
//    before ack has fallen;
//  - spike-frequency adaptation lowers the rate;
//  - the exponential soma fires faster than the thresholded one;
//  - AMPA input alone drives firing; GABA_B and shunting GABA_A inputs
//    lower the DC-driven rate;
//  - NMDA input is blocked while DENM_NMDA is set and I_mem is below the
//    gating level, and passes when the latch is clear;
//  - homeostasis: with a high calcium target the gain rises (ho_dir = 1,
//    higher rate than with HO_ACTIVE = 0), with a zero target it falls;
//  - matches arriving faster than the pulse extender recovers are dropped.
module tb_neuron_model;
  import dynapse2_pkg::*;
  localparam int NS = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic syn_we = 0; logic [2:0] syn_idx = 0; syn_cfg_t syn_cfg = '0;
  logic nrn_we = 0; nrn_cfg_t nrn_cfg = '0; nrn_param_t prm;
  logic [NS-1:0] match = '0;
  logic signed [CUR_W+1:0] i_dend; logic [CUR_W-1:0] i_som;
  logic req, ack = 0, ho_dir, syn_drop, dly_pulse;
  logic [CUR_W-1:0] imem;
  neuron_model #(.N_SYN(NS)) dut (.clk, .rst_n, .syn_we, .syn_idx, .syn_cfg, .nrn_we, .nrn_cfg,
    .prm, .match, .i_dend, .i_som, .i_dend_in((CUR_W+4)'(i_dend)), .i_som_in((CUR_W+2)'(i_som)),
    .req, .ack, .imem, .ho_dir, .syn_drop, .dly_pulse);

  // encoder side of the handshake
  int ack_wait = 0;
  always @(posedge clk) begin
    if (!rst_n) begin ack <= 0; ack_wait <= 0; end
    else if (req && !ack) begin
      if (ack_wait >= 3) begin ack <= 1; ack_wait <= 0; end else ack_wait <= ack_wait + $urandom_range(0, 2);
    end else if (ack && !req) ack <= 0;
  end

  // handshake and refractory monitors
  logic req_q = 0, ack_q = 0;
  int spikes = 0, drops = 0, refr_left = 0, since_rel = 0, min_isi_gap = 1 << 30;
  logic ho_seen = 0;
  always @(posedge clk) if (rst_n) begin
    req_q <= req; ack_q <= ack;
    if (req && !req_q) begin
      spikes++;
      checks++;
      if (ack) begin failures++; $display("FAIL: req rose while ack high"); end
      if (since_rel < min_isi_gap) min_isi_gap = since_rel;
    end
    if (req_q && !req && !ack_q) begin failures++; checks++; $display("FAIL: req fell before ack"); end
    if (ack_q && !ack) begin refr_left = int'(prm.refr) - 1; since_rel = 0; end
    else begin
      since_rel++;
      if (refr_left > 0) begin
        checks++;
        if (imem != 0) begin failures++; $display("FAIL: I_mem %0d in refractory period", imem); end
        refr_left--;
      end
    end
    if (syn_drop) drops++;
    if (ho_dir) ho_seen = 1;
  end

  task automatic base_params();
    prm = '0;
    for (int g = 0; g < 4; g++) prm.dly[g] = 16'(2 + g);
    prm.pw = 16'd4;
    prm.refr = 16'd20;
    prm.ho_period = 16'd40;
    for (int b = 0; b < 4; b++) prm.w_base[b] = CUR_W'(250 << b);
    prm.stp_w = CUR_W'(1000);
    prm.leak = CUR_W'(10);
    prm.dc = CUR_W'(2000);
    prm.thr = CUR_W'(20000);
    prm.ad_w = CUR_W'(800);
    prm.ca_w = CUR_W'(100);
    prm.ho_ref = CUR_W'(0);
    prm.nmrev = CUR_W'(1 << 22);
    for (int d = 0; d < 4; d++) prm.sh_dend[d] = 5'd4;
    prm.sh_ad = 5'd8;
    prm.sh_ca = 5'd8;
  endtask

  // one experiment: reset, set neuron latches, put synapse 0 on `dend`
  // (none if dend < 0), drive a match every `period` clocks, count spikes
  task automatic run(input nrn_cfg_t nc, input int dend, input int period, input int len, output int n);
    @(negedge clk); rst_n = 0;
    @(negedge clk); rst_n = 1;
    nrn_we = 1; nrn_cfg = nc;
    @(negedge clk); nrn_we = 0;
    if (dend >= 0) begin
      syn_we = 1; syn_idx = 0; syn_cfg = '0; syn_cfg.weight = 4'hF; syn_cfg.dendrite = 4'b0001 << dend;
      @(negedge clk); syn_we = 0;
    end
    spikes = 0; drops = 0; ho_seen = 0; since_rel = 1 << 20; min_isi_gap = 1 << 30;
    for (int t = 0; t < len; t++) begin
      match[0] = (period > 0) && (t % period == 0);
      @(negedge clk);
    end
    match = '0;
    n = spikes;
  endtask

  task automatic expect_true(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    nrn_cfg_t c;
    int n_dc, n_none, n_kill, n_refr, n_adapt, n_exp, n_ampa, n_gb, n_ga, n_nmda_blk, n_nmda, n_ho_up, n_ho_dn;
    base_params();
    repeat (3) @(negedge clk);
    rst_n = 1;
    c = '0; c.so_dc = 1;
    run(c, -1, 0, 20000, n_dc);
    expect_true(n_dc > 20, "DC injection does not fire");
    expect_true(min_isi_gap >= int'(prm.refr), "spike inside the refractory period");
    c = '0;
    run(c, -1, 0, 5000, n_none);
    expect_true(n_none == 0, "fires without input");
    c = '0; c.so_dc = 1; c.kill = 1;
    run(c, -1, 0, 5000, n_kill);
    expect_true(n_kill == 0 && imem == 0, "SOIF_KILL does not silence");
    prm.refr = 16'd400;
    c = '0; c.so_dc = 1;
    run(c, -1, 0, 20000, n_refr);
    expect_true(n_refr < n_dc, "longer refractory period does not lower the rate");
    expect_true(min_isi_gap >= 400, "spike inside the long refractory period");
    prm.refr = 16'd20;
    c = '0; c.so_dc = 1; c.so_adaptation = 1;
    run(c, -1, 0, 20000, n_adapt);
    expect_true(n_adapt < n_dc && n_adapt > 0, "adaptation does not lower the rate");
    c = '0; c.so_dc = 1; c.soif_type = 1;
    run(c, -1, 0, 20000, n_exp);
    expect_true(n_exp > n_dc, "exponential soma not faster");
    c = '0;
    run(c, DEND_AMPA, 10, 20000, n_ampa);
    expect_true(n_ampa > 10, "AMPA input does not drive firing");
    c = '0; c.so_dc = 1;
    run(c, DEND_GABA_B, 10, 20000, n_gb);
    expect_true(n_gb < n_dc, "GABA_B does not inhibit");
    run(c, DEND_GABA_A, 10, 20000, n_ga);
    expect_true(n_ga < n_dc, "GABA_A shunt does not inhibit");
    c = '0; c.denm_nmda = 1;
    run(c, DEND_NMDA, 10, 20000, n_nmda_blk);
    expect_true(n_nmda_blk == 0, "NMDA not gated by the membrane");
    c = '0;
    run(c, DEND_NMDA, 10, 20000, n_nmda);
    expect_true(n_nmda > 10, "ungated NMDA does not drive firing");
    prm.ho_ref = CUR_W'(1 << 20);
    c = '0; c.so_dc = 1; c.ho_enable = 1; c.ho_active = 1;
    run(c, -1, 0, 20000, n_ho_up);
    expect_true(ho_seen && n_ho_up > n_dc, "homeostasis does not raise a low rate");
    prm.ho_ref = CUR_W'(0);
    run(c, -1, 0, 20000, n_ho_dn);
    expect_true(!ho_seen && n_ho_dn < n_dc, "homeostasis does not lower a high rate");
    c = '0;
    run(c, DEND_AMPA, 3, 3000, n_ampa);
    expect_true(drops > 100, "fast matches are not dropped");
    $display("spikes: dc %0d none %0d kill %0d refr %0d adapt %0d exp %0d ampa %0d gabaB %0d gabaA %0d nmda-blocked %0d nmda %0d ho-up %0d ho-down %0d drops %0d",
      n_dc, n_none, n_kill, n_refr, n_adapt, n_exp, n_ampa, n_gb, n_ga, n_nmda_blk, n_nmda, n_ho_up, n_ho_dn, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
