// tb_sensor_pipeline: self-checking test of the complete sensor pipeline.
//
// The testbench drives the sensor pins with the 4-phase handshake and,
// at the same time, sends sensor events on the router input; both outputs
// have random ready. All set-up goes through configuration words: the 4096
// mapping words, pixel-filter entries, pooling shifts, cutting window,
// polarity selection and duplication. A reference model (filter -> pool ->
// cut -> polarity -> map) predicts every mapped word; because local and
// router events merge, the mapped words are compared as a multiset, while
// the cloned words (local events only) must come out in sensor order.
// Three phases use different settings; after each, the drop and duplicate
// counters must equal the model's counts and nothing may be left over.
module tb_sensor_pipeline;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cfg_valid = 0; cfg_word_t cfg = '0;
  logic s_req = 0, s_ack; logic [18:0] s_data = '0;
  logic rtr_valid = 0, rtr_ready; sev_t rtr_data = '0;
  logic map_valid, map_ready = 0, copy_valid, copy_ready = 0;
  aer_word_t map_data, copy_data;
  logic [15:0] n_pix_drop, n_cut_drop, n_pol_drop, n_dup;
  sensor_pipeline dut (.clk, .rst_n, .cfg_valid, .cfg, .s_req, .s_data, .s_ack,
    .rtr_valid, .rtr_data, .rtr_ready, .map_valid, .map_data, .map_ready,
    .copy_valid, .copy_data, .copy_ready, .n_pix_drop, .n_cut_drop, .n_pol_drop, .n_dup);

  // model state
  logic [22:0] mem [4096];
  logic [17:0] filt [$];
  int sx, sy, ox, oy, w1, h1, dup_on, ddx, ddy;
  logic [1:0] pol_en;
  int m_pix = 0, m_cut = 0, m_pol = 0, m_dup = 0;
  int exp_map [aer_word_t];
  int n_exp_map = 0;
  aer_word_t exp_copy [$];

  function automatic logic [22:0] mword(int a);
    return 23'(a * 2654435 + 17);
  endfunction

  task automatic send(input logic [3:0] op, input logic [35:0] arg);
    @(negedge clk); cfg_valid = 1; cfg.op = cfg_op_e'(op); cfg.arg = arg;
    @(negedge clk); cfg_valid = 0;
  endtask

  // model of the main path, for a pixel that passed the filter (or came
  // from the router)
  task automatic model_main(input pix_t p);
    int x, y, rx, ry;
    x = int'(p.x) >> sx; y = int'(p.y) >> sy;
    rx = x - ox; ry = y - oy;
    if (rx < 0 || ry < 0 || rx > w1 || ry > h1) begin m_cut++; return; end
    if (!pol_en[p.pol]) begin m_pol++; return; end
    begin
      aer_word_t wd;
      wd = {1'b0, mem[{ry[5:0], rx[5:0]}]};
      if (exp_map.exists(wd)) exp_map[wd]++; else exp_map[wd] = 1;
      n_exp_map++;
    end
  endtask

  task automatic model_local(input pix_t p);
    foreach (filt[i]) if (filt[i] == {p.y, p.x}) begin m_pix++; return; end
    if (dup_on != 0) begin
      sev_t s;
      s = '{fmt: 1'b1, pol: p.pol, y: p.y, x: p.x, dy: 2'(ddy), dx: 2'(ddx)};
      exp_copy.push_back(aer_word_t'(s));
      m_dup++;
    end
    model_main(p);
  endtask

  // output checkers
  int got_map = 0, got_copy = 0;
  always @(posedge clk) if (rst_n) begin
    if (map_valid && map_ready) begin
      checks++; got_map++;
      if (!exp_map.exists(map_data) || exp_map[map_data] == 0) begin
        failures++; $display("FAIL: unexpected mapped word %h", map_data);
      end else exp_map[map_data]--;
    end
    if (copy_valid && copy_ready) begin
      checks++; got_copy++;
      if (exp_copy.size() == 0 || exp_copy[0] !== copy_data) begin
        failures++; $display("FAIL: copy %h", copy_data);
      end
      if (exp_copy.size() != 0) void'(exp_copy.pop_front());
    end
    map_ready <= ($urandom_range(0, 3) != 0);
    copy_ready <= ($urandom_range(0, 2) != 0);
  end

  int n_local, n_router;
  logic run_rtr = 0;
  pix_t rq [$];
  // router-side source
  always @(negedge clk) begin
    if (rtr_valid && rtr_ready_q) rtr_valid = 0;
    if (!rtr_valid && run_rtr && $urandom_range(0, 3) == 0) begin
      pix_t p;
      p.pol = 1'($urandom); p.x = 9'($urandom_range(0, 127)); p.y = 9'($urandom_range(0, 127));
      rtr_data = '{fmt: 1'b1, pol: p.pol, y: p.y, x: p.x, dy: 2'b00, dx: 2'b00};
      rtr_valid = 1;
      model_main(p);
      n_router++;
    end
  end
  logic rtr_ready_q;
  always @(posedge clk) rtr_ready_q <= rtr_ready;

  task automatic sensor_event(input pix_t p);
    @(negedge clk);
    s_data = {p.pol, p.y, p.x};
    model_local(p);
    s_req = 1;
    wait (s_ack); @(negedge clk);
    s_req = 0;
    wait (!s_ack);
    n_local++;
  endtask

  task automatic phase(input int events, input logic with_router);
    run_rtr = with_router;
    for (int k = 0; k < events; k++) begin
      pix_t p;
      p.pol = 1'($urandom);
      if ($urandom_range(0, 9) == 0 && filt.size() != 0) {p.y, p.x} = filt[$urandom_range(0, filt.size() - 1)];
      else begin p.x = 9'($urandom_range(0, 127)); p.y = 9'($urandom_range(0, 127)); end
      sensor_event(p);
    end
    run_rtr = 0;
    repeat (200) @(negedge clk);
    begin
      int left = 0;
      foreach (exp_map[k]) left += exp_map[k];
      checks++;
      if (left != 0 || exp_copy.size() != 0) begin
        failures++; $display("FAIL: %0d mapped and %0d copies missing", left, exp_copy.size());
      end
    end
    checks++;
    if (int'(n_pix_drop) != m_pix || int'(n_cut_drop) != m_cut || int'(n_pol_drop) != m_pol || int'(n_dup) != m_dup) begin
      failures++;
      $display("FAIL: counters pix %0d/%0d cut %0d/%0d pol %0d/%0d dup %0d/%0d",
        n_pix_drop, m_pix, n_cut_drop, m_cut, n_pol_drop, m_pol, n_dup, m_dup);
    end
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 4096; a++) begin
      mem[a] = mword(a);
      send(OP_SENSOR_MAP, {12'(a), 1'b0, mem[a]});
    end
    // reset values: no pooling, window 64 x 64 at 0, both polarities, no duplication
    sx = 0; sy = 0; ox = 0; oy = 0; w1 = 63; h1 = 63; pol_en = 2'b11; dup_on = 0; ddx = 0; ddy = 0;
    phase(400, 0);
    // phase 2: filter 5 pixels, pool x by 2, window at (10, 4) of 32 x 48, pol 0 only
    for (int i = 0; i < 5; i++) begin
      logic [8:0] fx, fy;
      fx = 9'($urandom_range(0, 127)); fy = 9'($urandom_range(0, 127));
      filt.push_back({fy, fx});
      send(OP_PIXFILT, {6'(i), 11'd0, 1'b1, fy, fx});
    end
    sx = 1; sy = 0; send(OP_SENSOR, {SR_POOL, 14'd0, 18'({2'(sy), 2'(sx)})});
    ox = 10; oy = 4; send(OP_SENSOR, {SR_CUT_ORG, 14'd0, 18'({9'(oy), 9'(ox)})});
    w1 = 31; h1 = 47; send(OP_SENSOR, {SR_CUT_SIZE, 14'd0, 18'({6'(h1), 6'(w1)})});
    pol_en = 2'b01; send(OP_SENSOR, {SR_POL, 14'd0, 18'(pol_en)});
    phase(600, 1);
    // phase 3: duplicate to dx = +1, dy = -1; pool both by 4; pol 1 only;
    // one filter entry invalidated
    dup_on = 1; ddx = 1; ddy = 3; send(OP_SENSOR, {SR_DUP, 14'd0, 18'({2'(ddy), 2'(ddx), 1'b1})});
    sx = 2; sy = 2; send(OP_SENSOR, {SR_POOL, 14'd0, 18'({2'(sy), 2'(sx)})});
    ox = 0; oy = 0; send(OP_SENSOR, {SR_CUT_ORG, 14'd0, 18'd0});
    pol_en = 2'b10; send(OP_SENSOR, {SR_POL, 14'd0, 18'(pol_en)});
    send(OP_PIXFILT, {6'd0, 11'd0, 1'b0, 18'd0});
    void'(filt.pop_front());
    phase(600, 1);
    checks++;
    if (m_pix == 0 || m_cut == 0 || m_pol == 0 || m_dup == 0 || n_router == 0) begin
      failures++; $display("FAIL: a mechanism never happened");
    end
    $display("local %0d router %0d mapped %0d copies %0d pix-drop %0d cut-drop %0d pol-drop %0d",
      n_local, n_router, got_map, got_copy, m_pix, m_cut, m_pol);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
