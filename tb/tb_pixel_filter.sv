// tb_pixel_filter: self-checking test of pixel_filter.
//
// Loads a random set of blocked pixel addresses (some entries left
// invalid, one entry overwritten), then sends events from a small pixel
// range so that blocked and free pixels both occur, with random output
// stalls. A reference set kept here decides which events must come out;
// the outputs and the drop counter are compared with it. Also checks that
// an event is filtered in one clock (one output per clock when not stalled).
module tb_pixel_filter;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0, cfg_v = 0; logic [5:0] cfg_idx = 0; logic [8:0] cfg_y = 0, cfg_x = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  pix_t in_data = '0, out_data;
  logic [15:0] n_drop;
  pixel_filter dut (.clk, .rst_n, .cfg_we, .cfg_idx, .cfg_entry_valid(cfg_v), .cfg_y, .cfg_x,
    .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready, .n_drop);

  logic        ref_v [64];
  logic [17:0] ref_a [64];
  pix_t exp_q [$];
  int n_blocked = 0, n_passed = 0;

  function automatic logic blocked(pix_t p);
    for (int i = 0; i < 64; i++) if (ref_v[i] && ref_a[i] == {p.y, p.x}) return 1'b1;
    return 1'b0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (blocked(in_data)) n_blocked++;
      else begin exp_q.push_back(in_data); n_passed++; end
    end
    if (out_valid && out_ready) begin
      pix_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected %h", out_data); end
      else begin
        e = exp_q.pop_front();
        if (e !== out_data) begin failures++; $display("FAIL: got %h exp %h", out_data, e); end
      end
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin ref_v[i] = 0; ref_a[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // program entries
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      cfg_we = 1; cfg_idx = 6'(i); cfg_v = ($urandom_range(0, 3) != 0);
      cfg_y = 9'($urandom_range(0, 15)); cfg_x = 9'($urandom_range(0, 15));
      ref_v[i] = cfg_v; ref_a[i] = {cfg_y, cfg_x};
    end
    @(negedge clk);
    cfg_we = 1; cfg_idx = 6'd5; cfg_v = 1; cfg_y = 9'd300; cfg_x = 9'd301;   // overwrite
    ref_v[5] = 1; ref_a[5] = {9'd300, 9'd301};
    @(negedge clk); cfg_we = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      if (!in_valid || in_ready) begin
        in_valid = ($urandom_range(0, 3) != 0);
        in_data.pol = 1'($urandom);
        in_data.y = 9'($urandom_range(0, 15)); in_data.x = 9'($urandom_range(0, 15));
        if (k % 97 == 0) begin in_data.y = 9'd300; in_data.x = 9'd301; end
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (4) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d lost", exp_q.size()); end
    checks++;
    if (n_drop != 16'(n_blocked)) begin failures++; $display("FAIL: n_drop %0d exp %0d", n_drop, n_blocked); end
    checks++;
    if (n_blocked == 0 || n_passed == 0) begin failures++; $display("FAIL: need both cases"); end
    // throughput: 20 free events back to back, output ready: 20 outputs in 21 clocks
    begin
      int outs;
      outs = 0;
      for (int i = 0; i < 64; i++) ref_v[i] = 0;
      @(negedge clk); cfg_we = 1;
      for (int i = 0; i < 64; i++) begin cfg_idx = 6'(i); cfg_v = 0; @(negedge clk); end
      cfg_we = 0;
      fork
        begin
          for (int i = 0; i < 20; i++) begin
            in_valid = 1; in_data = '{pol: 1'b0, y: 9'd400, x: 9'(i)}; @(negedge clk);
          end
          in_valid = 0;
        end
        begin
          repeat (21) begin @(posedge clk); if (out_valid) outs++; end
        end
      join
      checks++;
      if (outs != 20) begin failures++; $display("FAIL: throughput %0d in 21 clocks", outs); end
    end
    $display("passed %0d blocked %0d", n_passed, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
