// tb_cutting: self-checking test of cutting.
//
// Random pixel events are offered with random gaps while the output is
// stalled at random; every accepted event is run through a reference model
// written here, and the outputs are compared in order with what the model
// expects. Configuration is re-randomised between rounds. 
module tb_cutting;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [8:0] ox = 0, oy = 0; logic [5:0] w = 0, h = 0; logic [15:0] n_drop;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  pix_t in_data = '0, out_data;
  cutting dut (.clk, .rst_n, .org_x(ox), .org_y(oy), .size_x(w), .size_y(h), .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready, .n_drop);
  pix_t exp_q [$];
  int   n_pass = 0, n_block = 0;

  // reference model, applied at every accepted input
  function automatic logic model(pix_t i, output pix_t o);
    int rx, ry;
    rx = int'(i.x) - int'(ox);
    ry = int'(i.y) - int'(oy);
    o.pol = i.pol;
    o.x = 9'(rx);
    o.y = 9'(ry);
    return rx >= 0 && ry >= 0 && rx <= int'(w) && ry <= int'(h);
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
      ox = 9'($urandom_range(0, 40)); oy = 9'($urandom_range(0, 40)); w = 6'($urandom); h = 6'($urandom);
      if (round == 0) begin w = 0; h = 0; ox = 5; oy = 7; end
      if (round == 1) begin w = 63; h = 63; ox = 0; oy = 0; end
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
    if (n_pass == 0 || n_block == 0) begin failures++; $display("FAIL: pass=%0d block=%0d, both cases needed", n_pass, n_block); end
    $display("passed %0d blocked %0d", n_pass, n_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
