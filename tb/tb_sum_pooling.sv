// tb_sum_pooling: self-checking test of sum_pooling.
//
// Random pixel events are offered with random gaps while the output is
// stalled at random; every accepted event is run through a reference model
// written here, and the outputs are compared in order with what the model
// expects. Configuration is re-randomised between rounds. Pooling never drops an event, so all of them must come out.
module tb_sum_pooling;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] sx = 0, sy = 0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  pix_t in_data = '0, out_data;
  sum_pooling dut (.clk, .rst_n, .shift_x(sx), .shift_y(sy), .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready);
  pix_t exp_q [$];
  int   n_pass = 0, n_block = 0;

  // reference model, applied at every accepted input
  function automatic logic model(pix_t i, output pix_t o);
    o = i;
    o.x = i.x / (9'd1 << sx);
    o.y = i.y / (9'd1 << sy);
    return 1'b1;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      pix_t o;
      if (model(in_data, o)) begin exp_q.push_back(o); n_pass++; end
      else n_block++;
    end
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected output %h", out_data); end
      else begin
        pix_t e;
        e = exp_q.pop_front();
        if (e !== out_data) begin failures++; $display("FAIL: got %h expected %h", out_data, e); end
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 8; round++) begin
      sx = 2'(round); sy = 2'($urandom);
      for (int k = 0; k < 300; k++) begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 3) != 0);
        if (!in_valid || in_ready) begin
          in_valid = ($urandom_range(0, 2) != 0);
          in_data  = pix_t'($urandom);
          if (round < 2) begin in_data.x = PIX_W'($urandom_range(0, 80)); in_data.y = PIX_W'($urandom_range(0, 80)); end
        end
      end
      @(negedge clk);
      in_valid = 1'b0; out_ready = 1'b1;
      repeat (5) @(negedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d events lost", exp_q.size()); end
      exp_q.delete();
    end
    checks++;
    if (n_pass < 1000 || n_block != 0) begin failures++; $display("FAIL: pass=%0d block=%0d, both cases needed", n_pass, n_block); end
    $display("passed %0d blocked %0d", n_pass, n_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
