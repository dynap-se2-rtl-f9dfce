// tb_input_interface: self-checking test of input_interface.
//
// A host model sends random 40-bit words as two 21-bit transfers (high
// half with bit 20 = 1, then low half with bit 20 = 0) over the 4-phase
// handshake, and now and then a stray low half. Words with opcode 0 must
// come out as events (bits 23:0) in order, even while the event output
// stalls; all others as one-clock configuration writes with the whole
// word. Stray halves must be counted and produce nothing.
module tb_input_interface;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic ii_req = 0, ii_ack; logic [20:0] ii_data = 0;
  logic ev_valid, ev_ready = 0, cfg_valid; aer_word_t ev_data; cfg_word_t cfg;
  logic [15:0] n_orphan;
  input_interface dut (.clk, .rst_n, .ii_req, .ii_data, .ii_ack, .ev_valid, .ev_data, .ev_ready,
    .cfg_valid, .cfg, .n_orphan);

  aer_word_t evq [$];
  logic [39:0] cfq [$];
  int orphans = 0;

  always @(posedge clk) if (rst_n) begin
    ev_ready <= ($urandom_range(0, 3) != 0);
    if (ev_valid && ev_ready) begin
      checks++;
      if (evq.size() == 0 || evq[0] !== ev_data) begin failures++; $display("FAIL ev %h", ev_data); end
      if (evq.size() != 0) void'(evq.pop_front());
    end
    if (cfg_valid) begin
      checks++;
      if (cfq.size() == 0 || cfq[0] !== 40'(cfg)) begin failures++; $display("FAIL cfg %h", cfg); end
      if (cfq.size() != 0) void'(cfq.pop_front());
    end
  end

  task automatic send_half(logic [20:0] h);
    ii_data = h;
    @(posedge clk);
    ii_req = 1;
    wait (ii_ack);
    @(posedge clk);
    ii_req = 0;
    wait (!ii_ack);
    @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      logic [39:0] w;
      w = {8'($urandom), 32'($urandom)};
      if ($urandom_range(0, 1) == 0) w[39:36] = 4'h0;
      if (k % 37 == 5) begin send_half({1'b0, 20'($urandom)}); orphans++; end
      if (w[39:36] == 4'h0) evq.push_back(w[23:0]); else cfq.push_back(w);
      send_half({1'b1, w[39:20]});
      send_half({1'b0, w[19:0]});
    end
    repeat (20) @(posedge clk);
    checks++;
    if (evq.size() != 0 || cfq.size() != 0) begin failures++; $display("FAIL lost %0d %0d", evq.size(), cfq.size()); end
    checks++;
    if (n_orphan != 16'(orphans)) begin failures++; $display("FAIL orphans %0d exp %0d", n_orphan, orphans); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
