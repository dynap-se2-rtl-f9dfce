// tb_neural_core: self-checking test of one neural core (32 neurons x 64
// synapses, core id 2).
//
// All set-up goes through 40-bit configuration words, as the input
// interface would deliver them: biases (delays, pulse width, weights,
// threshold, leak, time constants), CAM tags, synapse latches, source
// words, the DE_MUX latch and the monitor selection. Words for another core
// id are sent too and must have no effect. The test then broadcasts tags and
// watches the encoder output, whose ready is random. Each spike must appear
// as exactly the four source words of one neuron; the neuron is identified
// from the first word. Checked:
//  - a tag stored in several synapses of different neurons makes all of
//    them fire; neurons without that tag stay silent;
//  - a second tag reaches only its own neuron;
//  - with DE_MUX set, input to neurons 1 and 17 makes neuron 0 fire and not
//    themselves, and input to neuron 20 makes neuron 4 fire;
//  - after DE_MUX is cleared neuron 1 fires on its own input again;
//  - the monitored membrane current follows the selected neuron;
//  - the spike counter equals the spikes seen at the output.
module tb_neural_core;
  import dynapse2_pkg::*;
  localparam int NN = 32, CID = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cfg_valid = 0; cfg_word_t cfg = '0;
  logic tag_valid = 0; logic [10:0] tag = 0;
  logic ev_valid, ev_ready = 0; aer_word_t ev_data;
  logic [CUR_W-1:0] mon_imem; logic mon_ho_dir, mon_dly_pulse;
  logic [15:0] n_spikes, n_syn_drop;
  neural_core #(.CORE_ID(CID), .N_NEURONS(NN)) dut (.clk, .rst_n, .cfg_valid, .cfg, .tag_valid, .tag,
    .ev_valid, .ev_data, .ev_ready, .mon_imem, .mon_ho_dir, .mon_dly_pulse, .n_spikes, .n_syn_drop);

  function automatic logic [22:0] word(int n, int s);
    return {11'(n * 37 + 1), 4'(s), 4'(n), 4'(s + 1)};
  endfunction

  task automatic send(input logic [3:0] op, input logic [35:0] arg);
    @(negedge clk); cfg_valid = 1; cfg.op = cfg_op_e'(op); cfg.arg = arg;
    @(negedge clk); cfg_valid = 0;
  endtask
  task automatic bias(input int core, input bias_e b, input int coarse, input int fine);
    send(OP_BIAS, {2'(core), 13'd0, 5'(b), 5'd0, 3'(coarse), 8'(fine)});
  endtask
  task automatic cam(input int core, input int n, input int s, input int t);
    send(OP_CAM, {2'(core), 8'(n), 6'(s), 9'd0, 11'(t)});
  endtask
  task automatic syn(input int core, input int n, input int s, input syn_cfg_t c);
    send(OP_SYN, {2'(core), 8'(n), 6'(s), 9'd0, 11'(c)});
  endtask
  task automatic sram(input int core, input int n, input int s, input logic [22:0] d);
    send(OP_SRAM, {2'(core), 8'(n), 2'(s), 1'b0, d});
  endtask
  task automatic core_reg(input int core, input int mon, input logic dm);
    send(OP_CORE, {2'(core), 25'd0, 8'(mon), dm});
  endtask

  // output checker
  int fired [NN];
  int wcount = 0, cur_n = -1, groups = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_valid && ev_ready) begin
      checks++;
      if (wcount == 0) begin
        cur_n = -1;
        for (int n = 0; n < NN; n++) if (ev_data == {1'b0, word(n, 0)}) cur_n = n;
        if (cur_n < 0) begin failures++; $display("FAIL: unknown first word %h", ev_data); end
        else fired[cur_n]++;
      end else if (cur_n >= 0 && ev_data !== {1'b0, word(cur_n, wcount)}) begin
        failures++; $display("FAIL: word %0d of neuron %0d = %h", wcount, cur_n, ev_data);
      end
      wcount = (wcount + 1) % 4;
      if (wcount == 0) groups++;
    end
    ev_ready <= ($urandom_range(0, 2) != 0);
  end

  task automatic clear_counts();
    for (int n = 0; n < NN; n++) fired[n] = 0;
  endtask

  task automatic drive(input int t1, input int t2, input int len);
    for (int k = 0; k < len; k++) begin
      @(negedge clk);
      tag_valid = (k % 8 == 0) || (t2 >= 0 && k % 8 == 4);
      tag = (k % 8 == 0) ? 11'(t1) : 11'(t2);
    end
    @(negedge clk); tag_valid = 0;
    repeat (400) @(negedge clk);   // let pending spikes drain
  endtask

  task automatic expect_fired(input int n, input logic yes, input string what);
    checks++;
    if ((fired[n] > 0) != yes) begin
      failures++; $display("FAIL: %s: neuron %0d fired %0d times", what, n, fired[n]);
    end
  endtask

  int mon_checks = 0;
  always @(negedge clk) if (rst_n) begin
    checks++; mon_checks++;
    if (mon_imem !== dut.imem[dut.mon_idx]) begin failures++; $display("FAIL: monitor"); end
  end

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    syn_cfg_t sc;
    int total;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // biases: delays and pulse width about 4 ticks, refractory about 19,
    // weights 248..1984, leak 10, threshold 19968, dendrite shift 4
    bias(CID, B_SYPD_DLY0, 5, 8);
    bias(CID, B_SYPD_EXT, 5, 8);
    bias(CID, B_SOIF_REFR, 4, 13);
    bias(CID, B_SYAW_W0, 1, 31);
    bias(CID, B_SYAW_W1, 1, 62);
    bias(CID, B_SYAW_W2, 1, 124);
    bias(CID, B_SYAW_W3, 1, 248);
    bias(CID, B_SOIF_LEAK, 0, 10);
    bias(CID, B_SOIF_SPKTHR, 3, 39);
    for (int d = 0; d < 4; d++) bias(CID, bias_e'(B_DEAM_ITAU + d), 5, 4);
    // the other core's words must be ignored
    bias(1, B_SOIF_SPKTHR, 0, 1);
    for (int n = 0; n < NN; n++) for (int s = 0; s < 4; s++) sram(CID, n, s, word(n, s));
    sram(0, 3, 0, 23'h7fffff);
    // CAM: tag 0x123 on neuron 3 syn 5 and neuron 9 syn 0; 0x456 on neuron 20
    // syn 63; 0x777 on neuron 1 syn 2; 0x778 on neuron 17 syn 1. Every other
    // synapse keeps tag 0x7ff, which is never broadcast.
    for (int n = 0; n < NN; n++) for (int s = 0; s < 64; s++) cam(CID, n, s, 11'h7ff);
    cam(CID, 3, 5, 11'h123); cam(CID, 9, 0, 11'h123); cam(CID, 20, 63, 11'h456);
    cam(CID, 1, 2, 11'h777); cam(CID, 17, 1, 11'h778);
    cam(3, 4, 4, 11'h123);
    sc = '0; sc.weight = 4'hF; sc.dendrite = 4'b0001;
    syn(CID, 3, 5, sc); syn(CID, 9, 0, sc); syn(CID, 20, 63, sc); syn(CID, 1, 2, sc); syn(CID, 17, 1, sc);
    syn(0, 4, 4, sc);
    core_reg(CID, 3, 1'b0);
    core_reg(1, 0, 1'b1);

    clear_counts();
    drive(11'h123, -1, 3000);
    for (int n = 0; n < NN; n++) expect_fired(n, n == 3 || n == 9, "shared tag 0x123");
    clear_counts();
    drive(11'h456, -1, 3000);
    for (int n = 0; n < NN; n++) expect_fired(n, n == 20, "tag 0x456");
    // DE_MUX
    core_reg(CID, 0, 1'b1);
    clear_counts();
    drive(11'h777, 11'h778, 3000);
    for (int n = 0; n < NN; n++) expect_fired(n, n == 0, "DE_MUX group of neuron 0");
    clear_counts();
    drive(11'h456, -1, 3000);
    for (int n = 0; n < NN; n++) expect_fired(n, n == 4, "DE_MUX group of neuron 4");
    core_reg(CID, 1, 1'b0);
    clear_counts();
    drive(11'h777, -1, 3000);
    for (int n = 0; n < NN; n++) expect_fired(n, n == 1, "DE_MUX cleared");
    checks++;
    if (groups != int'(n_spikes) || wcount != 0) begin
      failures++; $display("FAIL: spike counter %0d, groups %0d", n_spikes, groups);
    end
    $display("spikes %0d, synapse drops %0d, monitor checks %0d", groups, n_syn_drop, mon_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
