// tb_dynapse2_full: test of the chip at its full size (4 cores of 256
// neurons with 64 synapses each, no parameter changed).
//
// Through the host interface it programs the last neuron of core 3
// (neuron 255, synapse 63: the highest addresses) and neuron 0 of core 0,
// then sends host events with the tag of core 3's synapse. Each spike of
// neuron 255 sends its four source words: one to core 0's neuron 0 (a
// chip-internal event), one dropped, one east (dx = +1) and one north
// (dy = +7, the largest displacement). Neuron 0 of core 0 sends one word
// west. Checked: both neurons fire, every word on the grid buses is the
// predicted one with its displacement stepped by one hop, their numbers
// equal the spike counters, and the router counts local, dropped and
// forwarded events.
module tb_dynapse2_full;
  import dynapse2_pkg::*;
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

  dynapse2_top dut (.clk, .rst_n, .ii_req, .ii_data, .ii_ack, .s_req, .s_data, .s_ack,
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


  task automatic expect_true(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    syn_cfg_t sc;
    aer_word_t e_east, e_north, e_west;
    int ce, cn, cw;
    for (int g = 0; g < 4; g++) gin_data[g] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 4; c += 3) begin
      bias(c, B_SYPD_DLY0, 5, 8);
      bias(c, B_SYPD_EXT, 5, 8);
      bias(c, B_SOIF_REFR, 4, 13);
      bias(c, B_SYAW_W0, 2, 31);
      bias(c, B_SYAW_W1, 2, 62);
      bias(c, B_SYAW_W2, 2, 124);
      bias(c, B_SYAW_W3, 2, 248);
      bias(c, B_SOIF_LEAK, 0, 10);
      bias(c, B_SOIF_SPKTHR, 2, 39);
      bias(c, B_DEAM_ITAU, 5, 4);
    end
    sc = '0; sc.weight = 4'hF; sc.dendrite = 4'b0001;
    cam(3, 255, 63, 11'h7a5); syn(3, 255, 63, sc);
    cam(0, 0, 0, 11'h0c3); syn(0, 0, 0, sc);
    sram(3, 255, 0, nw(11'h0c3, 4'd0, 4'd0, 4'b0001));
    sram(3, 255, 1, nw(11'h111, 4'd0, 4'd0, 4'b0000));
    sram(3, 255, 2, nw(11'h222, 4'd0, 4'b0001, 4'b1111));
    sram(3, 255, 3, nw(11'h333, 4'b0111, 4'd0, 4'b0010));
    sram(0, 0, 0, nw(11'h444, 4'd0, 4'b1001, 4'b0100));
    for (int s = 1; s < 4; s++) sram(0, 0, s, nw(11'h000, 4'd0, 4'd0, 4'b0000));
    e_east  = {1'b0, nw(11'h222, 4'd0, d4_step(4'b0001), 4'b1111)};
    e_north = {1'b0, nw(11'h333, d4_step(4'b0111), 4'd0, 4'b0010)};
    e_west  = {1'b0, nw(11'h444, 4'd0, d4_step(4'b1001), 4'b0100)};
    for (int k = 0; k < 80; k++) host_event({1'b0, 11'h7a5, 4'd0, 4'd0, 4'b1000});
    repeat (2000) @(negedge clk);
    ce = 0; cn = 0; cw = 0;
    foreach (got[1][i]) begin checks++; if (got[1][i] == e_east) ce++; else begin failures++; $display("FAIL: east %h", got[1][i]); end end
    foreach (got[3][i]) begin checks++; if (got[3][i] == e_north) cn++; else begin failures++; $display("FAIL: north %h", got[3][i]); end end
    foreach (got[0][i]) begin checks++; if (got[0][i] == e_west) cw++; else begin failures++; $display("FAIL: west %h", got[0][i]); end end
    checks++;
    if (got[2].size() != 0) begin failures++; $display("FAIL: words on the south bus"); end
    expect_true(n_spikes[3] > 0, "neuron 255 of core 3 never fired");
    expect_true(n_spikes[0] > 0, "neuron 0 of core 0 never fired");
    expect_true(ce == int'(n_spikes[3]) && cn == int'(n_spikes[3]), "east/north words != core 3 spikes");
    expect_true(cw == int'(n_spikes[0]), "west words != core 0 spikes");
    expect_true(n_rt_local > 0 && n_rt_dropped > 0 && n_rt_forward > 0, "router local/drop/forward");
    $display("spikes core3 %0d core0 %0d; east %0d north %0d west %0d; local %0d dropped %0d forward %0d",
      n_spikes[3], n_spikes[0], ce, cn, cw, n_rt_local, n_rt_dropped, n_rt_forward);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
