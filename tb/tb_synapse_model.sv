// tb_synapse_model: self-checking test of the synapse pulse model.
//
// A reference written as a per-clock state description (idle -> delay ->
// pulse) runs beside the model and predicts psc, dly_phase and drop every
// clock. Random matches arrive with random gaps, with all four delay groups
// {precise_delay, mismatched_delay}, random pulse widths and random DAC
// weight bits; the configuration and the shared parameters change while the
// synapse is idle. It counts drops and pulses of every delay group and
// fails if any never happens. The short-term-depression mode is checked
// separately: from rest the first pulse carries stp_w - stp_str, pulses in
// quick succession carry less and less, and after a long pause the weight is
// back at stp_w.
module tb_synapse_model;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0; syn_cfg_t cfg_in = '0, cfg; nrn_param_t prm = '0;
  logic match = 0, drop, dly_phase;
  logic [CUR_W+1:0] psc;
  synapse_model dut (.clk, .rst_n, .we, .cfg_in, .prm, .match, .cfg, .psc, .drop, .dly_phase);

  // reference
  int r_phase = 0;   // 0 idle, 1 delay, 2 pulse
  int r_left = 0;    // clocks left in the current phase
  int n_drop = 0, n_pulse[4] = '{0, 0, 0, 0};
  logic [1:0] r_grp;

  function automatic longint dac(syn_cfg_t c, nrn_param_t p);
    longint s = 0;
    for (int b = 0; b < 4; b++) if (c.weight[b]) s += longint'(p.w_base[b]);
    return s;
  endfunction

  task automatic check_now();
    longint exp_psc;
    exp_psc = (r_phase == 2) ? dac(cfg, prm) : 0;
    checks++;
    if (longint'(psc) != exp_psc || dly_phase != (r_phase == 1) || drop != (match && r_phase != 0)) begin
      failures++;
      $display("FAIL t=%0t: psc %0d/%0d dly %b/%0d drop %b", $time, psc, exp_psc, dly_phase, r_phase, drop);
    end
  endtask

  task automatic step_ref();
    // called at a clock edge with the values sampled just before it
    if (r_phase == 0) begin
      if (match) begin
        r_grp = {cfg.precise_delay, cfg.mismatched_delay};
        r_phase = 1; r_left = (prm.dly[r_grp] == 0) ? 1 : int'(prm.dly[r_grp]);
      end
    end else if (r_phase == 1) begin
      r_left--;
      if (r_left == 0) begin r_phase = 2; r_left = (prm.pw == 0) ? 1 : int'(prm.pw); n_pulse[r_grp]++; end
    end else begin
      r_left--;
      if (r_left == 0) r_phase = 0;
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 40000; k++) begin
      @(negedge clk);
      if (r_phase == 0 && $urandom_range(0, 30) == 0) begin
        // reconfigure while idle
        we = 1;
        cfg_in = '0;
        cfg_in.weight = 4'($urandom);
        cfg_in.precise_delay = 1'($urandom);
        cfg_in.mismatched_delay = 1'($urandom);
        cfg_in.dendrite = 4'b0001 << $urandom_range(0, 3);
        for (int g = 0; g < 4; g++) prm.dly[g] = 16'($urandom_range(0, 12) + 4 * g);
        prm.pw = 16'($urandom_range(0, 8));
        for (int b = 0; b < 4; b++) prm.w_base[b] = CUR_W'($urandom_range(0, 5000) << b);
      end else we = 0;
      match = ($urandom_range(0, 12) == 0);
      #1 check_now();
      @(posedge clk);
      step_ref();
    end
    @(negedge clk); match = 0; we = 0;
    repeat (60) @(negedge clk);
    // short-term depression
    @(negedge clk);
    we = 1; cfg_in = '0; cfg_in.stp = 1; cfg_in.dendrite = 4'b0001;
    prm.dly = '{16'd2, 16'd2, 16'd2, 16'd2}; prm.pw = 16'd3;
    prm.stp_w = CUR_W'(40000); prm.stp_str = CUR_W'(9000);
    @(negedge clk); we = 0;
    repeat (3000) @(negedge clk);           // let the state settle at stp_w
    begin
      longint amp [4];
      for (int p = 0; p < 4; p++) begin
        @(negedge clk); match = 1;
        @(negedge clk); match = 0;
        while (psc == 0) @(negedge clk);
        amp[p] = longint'(psc);
        repeat (6) @(negedge clk);
      end
      checks++;
      if (amp[0] != 40000 - 9000) begin failures++; $display("FAIL: rested STP pulse %0d", amp[0]); end
      for (int p = 1; p < 4; p++) begin
        checks++;
        if (amp[p] >= amp[p-1]) begin failures++; $display("FAIL: STP no depression %0d -> %0d", amp[p-1], amp[p]); end
      end
      repeat (3000) @(negedge clk);
      match = 1;
      @(negedge clk); match = 0;
      while (psc == 0) @(negedge clk);
      checks++;
      if (longint'(psc) != 40000 - 9000) begin failures++; $display("FAIL: STP no recovery %0d", psc); end
      $display("STP pulses %0d %0d %0d %0d", amp[0], amp[1], amp[2], amp[3]);
    end
    checks++;
    if (n_drop == 0) begin failures++; $display("FAIL: no drop"); end
    for (int g = 0; g < 4; g++) begin
      checks++;
      if (n_pulse[g] == 0) begin failures++; $display("FAIL: no pulse in delay group %0d", g); end
    end
    $display("drops %0d, pulses per delay group %0d %0d %0d %0d", n_drop, n_pulse[0], n_pulse[1], n_pulse[2], n_pulse[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (rst_n && drop) n_drop++;
endmodule
