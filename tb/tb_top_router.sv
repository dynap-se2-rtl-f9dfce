// tb_top_router: self-checking test of top_router.
//
// Random neuron and sensor event words, with displacements spread over all
// cases, are offered while the sensor and grid outputs stall at random. A
// reference model written here decides for each accepted word where it
// must go and what it must look like there: cores broadcast (tag and
// mask, the clock after acceptance), drop when cores = 0, the sensor
// output, or the west/east/south/north output with one hop taken off the
// displacement. All outputs are compared in order, and the three counters
// at the end.
module tb_top_router;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready; aer_word_t in_data = '0;
  logic [3:0] core_valid; logic [TAG_W-1:0] core_tag;
  logic sens_valid, sens_ready = 0; sev_t sens_data;
  logic [3:0] grid_valid, grid_ready = 0; aer_word_t grid_data [4];
  logic [15:0] n_local, n_dropped, n_forward;
  top_router dut (.clk, .rst_n, .in_valid, .in_data, .in_ready, .core_valid, .core_tag,
    .sens_valid, .sens_data, .sens_ready, .grid_valid, .grid_data, .grid_ready,
    .n_local, .n_dropped, .n_forward);

  aer_word_t gq [4][$];
  aer_word_t sq [$];
  logic [14:0] cexp; logic cpend = 0;
  int nl = 0, nd = 0, nf = 0;

  // signed value of a sign-magnitude field
  function automatic int sm(logic [3:0] d);
    return d[3] ? -int'(d[2:0]) : int'(d[2:0]);
  endfunction
  function automatic logic [3:0] tosm(int v);
    return (v < 0) ? {1'b1, 3'(-v)} : {1'b0, 3'(v)};
  endfunction
  function automatic int s2(logic [1:0] d);
    return (d == 2'b01) ? 1 : (d == 2'b11 ? -1 : 0);
  endfunction

  always @(posedge clk) if (rst_n) begin
    // core broadcast is due one clock after acceptance
    checks++;
    if (cpend) begin
      if (core_valid !== cexp[14:11] || core_tag !== cexp[10:0]) begin
        failures++; $display("FAIL core %b %h exp %h", core_valid, core_tag, cexp);
      end
    end else if (core_valid != 0) begin failures++; $display("FAIL spurious core broadcast"); end
    cpend = 0;
    if (in_valid && in_ready) begin
      if (!in_data[23]) begin
        int dx, dy;
        nev_t e;
        e = nev_t'(in_data);
        dx = sm(e.dx); dy = sm(e.dy);
        if (dx < 0) begin gq[0].push_back({1'b0, e.tag, e.dy, tosm(dx + 1), e.cores}); nf++; end
        else if (dx > 0) begin gq[1].push_back({1'b0, e.tag, e.dy, tosm(dx - 1), e.cores}); nf++; end
        else if (dy < 0) begin gq[2].push_back({1'b0, e.tag, tosm(dy + 1), 4'd0, e.cores}); nf++; end
        else if (dy > 0) begin gq[3].push_back({1'b0, e.tag, tosm(dy - 1), 4'd0, e.cores}); nf++; end
        else if (e.cores == 0) nd++;
        else begin cexp = {e.cores, e.tag}; cpend = 1; nl++; end
      end else begin
        sev_t s;
        s = sev_t'(in_data);
        if (s2(s.dx) < 0) begin gq[0].push_back({in_data[23:4], s.dy, 2'b00}); nf++; end
        else if (s2(s.dx) > 0) begin gq[1].push_back({in_data[23:4], s.dy, 2'b00}); nf++; end
        else if (s2(s.dy) < 0) begin gq[2].push_back({in_data[23:4], 4'b0000}); nf++; end
        else if (s2(s.dy) > 0) begin gq[3].push_back({in_data[23:4], 4'b0000}); nf++; end
        else sq.push_back(in_data);
      end
    end
    for (int g = 0; g < 4; g++) if (grid_valid[g] && grid_ready[g]) begin
      checks++;
      if (gq[g].size() == 0 || gq[g][0] !== grid_data[g]) begin failures++; $display("FAIL grid%0d %h", g, grid_data[g]); end
      if (gq[g].size() != 0) void'(gq[g].pop_front());
    end
    if (sens_valid && sens_ready) begin
      checks++;
      if (sq.size() == 0 || sq[0] !== aer_word_t'(sens_data)) begin failures++; $display("FAIL sens %h", sens_data); end
      if (sq.size() != 0) void'(sq.pop_front());
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 6000; k++) begin
      @(negedge clk);
      grid_ready = 4'($urandom); sens_ready = 1'($urandom);
      if (!in_valid || in_ready) begin
        in_valid = ($urandom_range(0, 3) != 0);
        in_data = aer_word_t'($urandom);
        if ($urandom_range(0, 2) == 0) in_data[11:4] = 8'h00;           // keep local
        if ($urandom_range(0, 3) == 0) in_data[7:4] = 4'h0;             // only dy
        if (in_data[23] && $urandom_range(0, 1) == 0) in_data[3:0] = 4'h0;
        if (!in_data[23] && $urandom_range(0, 7) == 0) in_data[3:0] = 4'h0;
      end
    end
    @(negedge clk); in_valid = 0; grid_ready = '1; sens_ready = 1;
    repeat (4) @(negedge clk);
    checks++;
    if (sq.size() != 0 || gq[0].size() + gq[1].size() + gq[2].size() + gq[3].size() != 0) begin
      failures++; $display("FAIL: words lost");
    end
    checks++;
    if (n_local != 16'(nl) || n_dropped != 16'(nd) || n_forward != 16'(nf) || nd == 0) begin
      failures++; $display("FAIL counters %0d/%0d/%0d exp %0d/%0d/%0d", n_local, n_dropped, n_forward, nl, nd, nf);
    end
    $display("local %0d dropped %0d forwarded %0d", nl, nd, nf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
