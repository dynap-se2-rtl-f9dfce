// tb_dynapse2_top: end-to-end test of one chip (4 cores of 32 neurons).
//
// The testbench is the chip's environment: a host on the split-parallel
// input interface, a 2D sensor on the sensor bus and four neighbouring
// chips on the grid buses (each answers the chip's output bus with a
// 4-phase handshake and can drive words into the chip). Everything is set
// up through host configuration words. The network:
//  - core 0 neuron 5 listens to tag 0x100 (host events and a word arriving
//    on the west bus); its four source words go to core 1 (tag 0x200), to
//    nowhere (cores = 0, dropped), east (dx = +2) and south (dy = -1);
//  - core 1 neuron 7 listens to 0x200 and sends one word west (dx = -3);
//  - core 2 neuron 9 listens to 0x400, which the sensor mapping produces for
//    the pixels x, y < 8; it sends one word north (dy = +1);
//  - core 3 neuron 1 listens to 0x500; with DE_MUX set, neuron 0 fires for
//    it; after DE_MUX is cleared neuron 1 fires itself (mode switch). Core 3
//    has a long synaptic pulse, so repeated events are dropped.
// Sensor events use a pixel filter entry, the cutting window, the polarity
// filter and duplication towards east; sensor events arriving from the
// west neighbour are kept and mapped.
// Each word leaving on a grid bus must be one the network predicts, with
// its displacement stepped one hop; their numbers must match the spike
// counters. The test counts every mechanism (local delivery, drop, forward
// on each bus, arbitration contention, router stall on a slow neighbour,
// sensor mapping of local and router events, pixel/cut/polarity drops,
// duplication, synapse drop, DE_MUX on and off, orphan half-word) and fails
// on any that never happens.
module tb_dynapse2_top;
  import dynapse2_pkg::*;
  localparam int NN = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ii_req = 0, ii_ack; logic [20:0] ii_data = '0;
  logic s_req = 0, s_ack; logic [18:0] s_data = '0;
  logic [3:0] gin_req = '0, gin_ack, gout_req, gout_ack = '0;
  aer_word_t gin_data [4], gout_data [4];
  logic [CUR_W-1:0] mon_imem [4];
  logic [3:0] mon_ho_dir, mon_dly_pulse;
  logic [15:0] n_spikes [4], n_syn_drop [4];
  logic [15:0] n_rt_local, n_rt_dropped, n_rt_forward, n_ii_orphan, n_pix_drop, n_cut_drop, n_pol_drop, n_dup;

  dynapse2_top #(.N_NEURONS(NN), .N_SYN(8)) dut (.clk, .rst_n, .ii_req, .ii_data, .ii_ack, .s_req, .s_data, .s_ack,
    .gin_req, .gin_data, .gin_ack, .gout_req, .gout_data, .gout_ack, .mon_imem, .mon_ho_dir,
    .mon_dly_pulse, .n_spikes, .n_syn_drop, .n_rt_local, .n_rt_dropped, .n_rt_forward, .n_ii_orphan,
    .n_pix_drop, .n_cut_drop, .n_pol_drop, .n_dup);

  function automatic logic [22:0] nw(int tag, logic [3:0] dy, logic [3:0] dx, logic [3:0] cores);
    return {11'(tag), dy, dx, cores};
  endfunction

  // ---- host ----
  semaphore host = new(1);
  task automatic send_half(logic [20:0] h);
    @(negedge clk); ii_data = h; ii_req = 1;
    wait (ii_ack); @(negedge clk); ii_req = 0;
    wait (!ii_ack);
  endtask
  task automatic send_word(logic [39:0] w);
    host.get(1);
    send_half({1'b1, w[39:20]});
    send_half({1'b0, w[19:0]});
    host.put(1);
  endtask
  task automatic cfgw(input logic [3:0] op, input logic [35:0] arg);
    send_word({op, arg});
  endtask
  task automatic bias(input int core, input bias_e b, input int coarse, input int fine);
    cfgw(OP_BIAS, {2'(core), 13'd0, 5'(b), 5'd0, 3'(coarse), 8'(fine)});
  endtask
  task automatic cam(input int core, input int n, input int s, input int t);
    cfgw(OP_CAM, {2'(core), 8'(n), 6'(s), 9'd0, 11'(t)});
  endtask
  task automatic syn(input int core, input int n, input int s, input syn_cfg_t c);
    cfgw(OP_SYN, {2'(core), 8'(n), 6'(s), 9'd0, 11'(c)});
  endtask
  task automatic sram(input int core, input int n, input int s, input logic [22:0] d);
    cfgw(OP_SRAM, {2'(core), 8'(n), 2'(s), 1'b0, d});
  endtask
  task automatic core_reg(input int core, input int mon, input logic dm);
    cfgw(OP_CORE, {2'(core), 25'd0, 8'(mon), dm});
  endtask
  task automatic host_event(input logic [23:0] ev);
    cfgw(OP_EVENT, {12'd0, ev});
  endtask

  // ---- sensor ----
  int exp_copies [aer_word_t];
  logic dup_on = 0;
  logic [17:0] filt_pix = {9'd3, 9'd3};
  task automatic sensor_event(input logic pol, input int y, input int x);
    @(negedge clk); s_data = {pol, 9'(y), 9'(x)}; s_req = 1;
    if (dup_on && {9'(y), 9'(x)} != filt_pix) begin
      aer_word_t w;
      w = aer_word_t'(sev_t'{fmt: 1'b1, pol: pol, y: 9'(y), x: 9'(x), dy: 2'b00, dx: 2'b00});
      if (exp_copies.exists(w)) exp_copies[w]++; else exp_copies[w] = 1;
    end
    wait (s_ack); @(negedge clk); s_req = 0;
    wait (!s_ack);
  endtask

  // ---- neighbours ----
  int slow_east = 0;
  aer_word_t got [4][$];
  for (genvar g = 0; g < 4; g++) begin : g_nb
    initial begin
      forever begin
        @(posedge clk);
        if (gout_req[g]) begin
          repeat ((g == 1 && slow_east != 0) ? 150 : $urandom_range(0, 3)) @(posedge clk);
          got[g].push_back(gout_data[g]);
          gout_ack[g] <= 1;
          wait (!gout_req[g]);
          @(posedge clk); gout_ack[g] <= 0;
        end
      end
    end
  end
  task automatic grid_send(input int g, input aer_word_t w);
    @(negedge clk); gin_data[g] = w; gin_req[g] = 1;
    wait (gin_ack[g]); @(negedge clk); gin_req[g] = 0;
    wait (!gin_ack[g]);
  endtask

  // ---- mechanism counters ----
  int m_contention = 0, m_stall = 0, m_fwd [4] = '{0, 0, 0, 0};
  logic [NN-1:0] ack3_q = '0;
  int c3_fired [NN];
  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.src_valid) > 1) m_contention++;
    if (dut.arb_valid && !dut.arb_ready) m_stall++;
    ack3_q <= dut.g_core[3].u_core.ack;
    for (int n = 0; n < NN; n++) if (dut.g_core[3].u_core.ack[n] && !ack3_q[n]) c3_fired[n]++;
  end

  task automatic expect_true(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  aer_word_t e_east, e_south, e_west, e_north, e_gnorth, e_gwest;
  initial begin
    syn_cfg_t sc;
    int s0, s1, s2, n_north_in, n_west_in;
    for (int g = 0; g < 4; g++) gin_data[g] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // an orphan low half first
    send_half({1'b0, 20'h12345});
    // biases of all four cores
    for (int c = 0; c < 4; c++) begin
      bias(c, B_SYPD_DLY0, 5, 8);
      bias(c, B_SYPD_EXT, (c == 3) ? 2 : 5, (c == 3) ? 80 : 8);
      bias(c, B_SOIF_REFR, 4, 13);
      bias(c, B_SYAW_W0, 2, 31);
      bias(c, B_SYAW_W1, 2, 62);
      bias(c, B_SYAW_W2, 2, 124);
      bias(c, B_SYAW_W3, 2, 248);
      bias(c, B_SOIF_LEAK, 0, 10);
      bias(c, B_SOIF_SPKTHR, 2, 39);
      for (int d = 0; d < 4; d++) bias(c, bias_e'(B_DEAM_ITAU + d), 5, 4);
    end
    sc = '0; sc.weight = 4'hF; sc.dendrite = 4'b0001;
    cam(0, 5, 0, 11'h100); syn(0, 5, 0, sc);
    cam(1, 7, 6, 11'h200); syn(1, 7, 6, sc);
    cam(2, 9, 3, 11'h400); syn(2, 9, 3, sc);
    cam(3, 1, 2, 11'h500); syn(3, 1, 2, sc);
    sram(0, 5, 0, nw(11'h200, 4'd0, 4'd0, 4'b0010));
    sram(0, 5, 1, nw(11'h201, 4'd0, 4'd0, 4'b0000));
    sram(0, 5, 2, nw(11'h202, 4'd0, 4'b0010, 4'b0001));
    sram(0, 5, 3, nw(11'h203, 4'b1001, 4'd0, 4'b0001));
    sram(1, 7, 0, nw(11'h300, 4'd0, 4'b1011, 4'b0001));
    sram(2, 9, 0, nw(11'h401, 4'b0001, 4'd0, 4'b0001));
    for (int s = 1; s < 4; s++) begin
      sram(1, 7, s, nw(11'h000, 4'd0, 4'd0, 4'b0000));
      sram(2, 9, s, nw(11'h000, 4'd0, 4'd0, 4'b0000));
    end
    for (int n = 0; n < 2; n++) for (int s = 0; s < 4; s++) sram(3, n, s, nw(11'h000, 4'd0, 4'd0, 4'b0000));
    core_reg(3, 0, 1'b1);
    // sensor: map the pixels x, y < 8 to tag 0x400 on core 2; filter pixel (3, 3)
    for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++)
      cfgw(OP_SENSOR_MAP, {12'({6'(y), 6'(x)}), 1'b0, nw(11'h400, 4'd0, 4'd0, 4'b0100)});
    cfgw(OP_PIXFILT, {6'd0, 11'd0, 1'b1, filt_pix});
    e_east   = {1'b0, nw(11'h202, 4'd0, d4_step(4'b0010), 4'b0001)};
    e_south  = {1'b0, nw(11'h203, d4_step(4'b1001), 4'd0, 4'b0001)};
    e_west   = {1'b0, nw(11'h300, 4'd0, d4_step(4'b1011), 4'b0001)};
    e_north  = {1'b0, nw(11'h401, d4_step(4'b0001), 4'd0, 4'b0001)};
    e_gnorth = {1'b0, nw(11'h600, 4'b0001, 4'd0, 4'b0001)};
    e_gwest  = {1'b0, nw(11'h601, 4'd0, 4'b1001, 4'b0001)};
    n_north_in = 0; n_west_in = 0;

    // phase 1: host and west-neighbour events to tag 0x100 and 0x500,
    // words passing through from south and east, sensor traffic
    fork
      for (int k = 0; k < 150; k++) begin
        host_event({1'b0, 11'h100, 4'd0, 4'd0, 4'b0001});
        if (k % 3 == 0) host_event({1'b0, 11'h500, 4'd0, 4'd0, 4'b1000});
      end
      for (int k = 0; k < 150; k++) begin
        grid_send(0, {1'b0, 11'h100, 4'd0, 4'd0, 4'b0001});
        repeat (30) @(negedge clk);
      end
      for (int k = 0; k < 60; k++) begin
        grid_send(2, {1'b0, nw(11'h600, 4'b0010, 4'd0, 4'b0001)}); n_north_in++;
        grid_send(1, {1'b0, nw(11'h601, 4'd0, 4'b1010, 4'b0001)}); n_west_in++;
        repeat (50) @(negedge clk);
      end
      for (int k = 0; k < 300; k++) begin
        if (k % 2 == 0) sensor_event(1'($urandom), $urandom_range(0, 7), $urandom_range(0, 7));
        else if (k % 6 == 1) sensor_event(1'b0, 3, 3);                     // filtered pixel
        else if (k % 6 == 3) sensor_event(1'b1, 2, 100);                   // outside the window
        else begin                                                         // from the west neighbour
          grid_send(0, aer_word_t'(sev_t'{fmt: 1'b1, pol: 1'b0, y: 9'($urandom_range(0, 7)),
                                          x: 9'($urandom_range(0, 7)), dy: 2'b00, dx: 2'b00}));
        end
        repeat (20) @(negedge clk);
      end
    join
    // phase 2: duplication east, polarity 0 only, slow east neighbour
    cfgw(OP_SENSOR, {SR_DUP, 14'd0, 18'({2'b00, 2'b01, 1'b1})});
    cfgw(OP_SENSOR, {SR_POL, 14'd0, 18'd1});
    repeat (20) @(negedge clk);
    dup_on = 1;
    slow_east = 1;
    fork
      for (int k = 0; k < 60; k++) sensor_event(1'($urandom), $urandom_range(0, 7), $urandom_range(0, 7));
      for (int k = 0; k < 30; k++) host_event({1'b0, 11'h100, 4'd0, 4'd0, 4'b0001});
    join
    repeat (3000) @(negedge clk);
    slow_east = 0;
    dup_on = 0;
    // phase 3: DE_MUX off, neuron 1 of core 3 fires by itself
    s0 = c3_fired[0]; s1 = c3_fired[1];
    core_reg(3, 1, 1'b0);
    for (int k = 0; k < 60; k++) host_event({1'b0, 11'h500, 4'd0, 4'd0, 4'b1000});
    repeat (3000) @(negedge clk);

    // ---- results ----
    begin
      int cnt [4];
      int copies_left;
      copies_left = 0;
      for (int g = 0; g < 4; g++) cnt[g] = 0;
      foreach (got[1][i]) begin
        if (got[1][i] == e_east) cnt[1]++;
        else if (exp_copies.exists(got[1][i]) && exp_copies[got[1][i]] > 0) exp_copies[got[1][i]]--;
        else begin failures++; $display("FAIL: unexpected east word %h", got[1][i]); end
        checks++;
      end
      foreach (exp_copies[w]) copies_left += exp_copies[w];
      expect_true(copies_left == 0, "duplicated sensor events missing on the east bus");
      foreach (got[2][i]) begin
        checks++;
        if (got[2][i] == e_south) cnt[2]++;
        else begin failures++; $display("FAIL: unexpected south word %h", got[2][i]); end
      end
      foreach (got[0][i]) begin
        checks++;
        if (got[0][i] == e_west) cnt[0]++;
        else if (got[0][i] == e_gwest) m_fwd[0]++;
        else begin failures++; $display("FAIL: unexpected west word %h", got[0][i]); end
      end
      foreach (got[3][i]) begin
        checks++;
        if (got[3][i] == e_north) cnt[3]++;
        else if (got[3][i] == e_gnorth) m_fwd[3]++;
        else begin failures++; $display("FAIL: unexpected north word %h", got[3][i]); end
      end
      expect_true(cnt[1] == int'(n_spikes[0]), "east words != core 0 spikes");
      expect_true(cnt[2] == int'(n_spikes[0]), "south words != core 0 spikes");
      expect_true(cnt[0] == int'(n_spikes[1]), "west words != core 1 spikes");
      expect_true(cnt[3] == int'(n_spikes[2]), "north words != core 2 spikes");
      expect_true(m_fwd[3] == n_north_in, "pass-through words lost going north");
      expect_true(m_fwd[0] == n_west_in, "pass-through words lost going west");
      // every mechanism must have happened
      expect_true(n_spikes[0] > 0, "core 0 never fired (local delivery of host and grid events)");
      expect_true(n_spikes[1] > 0, "core 1 never fired (chip-internal event)");
      expect_true(n_spikes[2] > 0, "core 2 never fired (sensor mapping)");
      expect_true(n_rt_local > 0 && n_rt_dropped > 0 && n_rt_forward > 0, "router local/drop/forward");
      for (int g = 0; g < 4; g++) expect_true(cnt[g] > 0, "a grid bus never carried a neuron's word");
      expect_true(m_contention > 0, "no arbitration contention");
      expect_true(m_stall > 0, "router never stalled");
      expect_true(n_pix_drop > 0 && n_cut_drop > 0 && n_pol_drop > 0, "sensor drops");
      expect_true(n_dup > 0, "no duplication");
      expect_true(n_syn_drop[3] > 0, "no synapse drop");
      expect_true(s0 > 0 && s1 == 0, "DE_MUX on: neuron 0 must fire for neuron 1's input");
      expect_true(c3_fired[1] > 0, "DE_MUX off: neuron 1 never fired");
      expect_true(n_ii_orphan == 1, "orphan half-word not counted");
      $display("spikes %0d %0d %0d %0d; east %0d south %0d west %0d north %0d; pass-through N %0d W %0d",
        n_spikes[0], n_spikes[1], n_spikes[2], n_spikes[3], cnt[1], cnt[2], cnt[0], cnt[3], m_fwd[3], m_fwd[0]);
      $display("router local %0d dropped %0d forward %0d; contention %0d stall %0d; pix %0d cut %0d pol %0d dup %0d; syn drop %0d; demux n0 %0d n1 %0d -> n1 %0d; orphan %0d",
        n_rt_local, n_rt_dropped, n_rt_forward, m_contention, m_stall, n_pix_drop, n_cut_drop, n_pol_drop,
        n_dup, n_syn_drop[3], s0, s1, c3_fired[1], n_ii_orphan);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
