// tb_destination_append: self-checking test of destination_append.
//
// Pixel events with random stalls; every output must be the sensor event
// word {1, pol, y, x, dy, dx} built here from the input and the configured
// displacement, in order, with nothing lost.
module tb_destination_append;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] dy = 0, dx = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  pix_t in_data = '0;
  aer_word_t out_data;
  destination_append dut (.clk, .rst_n, .cfg_dy(dy), .cfg_dx(dx), .in_valid, .in_data, .in_ready,
    .out_valid, .out_data, .out_ready);
  aer_word_t q [$];
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) q.push_back({1'b1, in_data.pol, in_data.y, in_data.x, dy, dx});
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || q[0] !== out_data) begin failures++; $display("FAIL %h", out_data); end
      if (q.size() != 0) void'(q.pop_front());
    end
  end
  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      @(negedge clk); in_valid = 0;
      repeat (3) @(negedge clk);   // drain before the displacement changes
      dy = (r == 1) ? 2'b01 : (r == 3 ? 2'b11 : 2'b00);
      dx = (r == 0) ? 2'b01 : (r == 2 ? 2'b11 : 2'b00);
      out_ready = 1; @(negedge clk);
      for (int k = 0; k < 500; k++) begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 3) != 0);
        if (!in_valid || in_ready) begin in_valid = 1'($urandom); in_data = pix_t'($urandom); end
      end
      @(negedge clk); in_valid = 0; out_ready = 1;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL lost %0d", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
