// tb_sensor_source_mapping: self-checking test of sensor_source_mapping.
//
// Fills the whole 64 x 64 table with words computed from the address
// (a hash, so every entry differs), then sends random patch pixels with
// random output stalls. Each output must be {0, table word of {y, x}}, in
// order. Also checks the rate: with the output ready, one mapped event per
// clock, and the latency of one clock from input to output valid.
module tb_sensor_source_mapping;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cfg_we = 0; logic [11:0] cfg_addr = 0; logic [22:0] cfg_data = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  pix_t in_data = '0;
  aer_word_t out_data;
  sensor_source_mapping dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .in_valid, .in_data,
    .in_ready, .out_valid, .out_data, .out_ready);

  function automatic logic [22:0] entry(logic [11:0] a);
    return 23'((a * 32'd2654435761) >> 5) ^ 23'(a);
  endfunction

  aer_word_t q [$];
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) q.push_back({1'b0, entry({in_data.y[5:0], in_data.x[5:0]})});
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || q[0] !== out_data) begin failures++; $display("FAIL %h", out_data); end
      if (q.size() != 0) void'(q.pop_front());
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
    for (int a = 0; a < 4096; a++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 12'(a); cfg_data = entry(12'(a));
    end
    @(negedge clk); cfg_we = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      if (!in_valid || in_ready) begin
        in_valid = 1'($urandom);
        in_data = '{pol: 1'($urandom), y: 9'($urandom_range(0, 63)), x: 9'($urandom_range(0, 63))};
      end
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL lost %0d", q.size()); end
    // rate and latency
    begin
      int outs, first;
      outs = 0; first = -1;
      fork
        begin
          for (int i = 0; i < 32; i++) begin in_valid = 1; in_data = '{pol: 1'b0, y: 9'd3, x: 9'(i)}; @(negedge clk); end
          in_valid = 0;
        end
        for (int c = 0; c < 34; c++) begin
          @(posedge clk); #1;
          if (out_valid) begin outs++; if (first < 0) first = c; end
        end
      join
      checks++;
      if (outs != 32 || first != 0) begin failures++; $display("FAIL: %0d outputs, first at clock %0d", outs, first); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
