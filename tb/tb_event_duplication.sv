// tb_event_duplication: self-checking test of event_duplication.
//
// Local and router-side pixel events are offered at random while both
// outputs stall at random. Expected: every local event and every router
// event leaves on the main output in the order accepted; with dup_en set,
// every local event (and no router event) also leaves on the copy output.
// The duplicate counter is compared with the number of clones.
module tb_event_duplication;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dup_en = 0;
  logic loc_valid = 0, loc_ready, rtr_valid = 0, rtr_ready;
  pix_t loc_data = '0, rtr_data = '0, main_data, copy_data;
  logic main_valid, main_ready = 0, copy_valid, copy_ready = 0;
  logic [15:0] n_dup;
  event_duplication dut (.clk, .rst_n, .dup_en, .loc_valid, .loc_data, .loc_ready,
    .rtr_valid, .rtr_data, .rtr_ready, .main_valid, .main_data, .main_ready,
    .copy_valid, .copy_data, .copy_ready, .n_dup);

  pix_t mq [$], cq [$];
  int clones = 0, from_rtr = 0;

  always @(posedge clk) if (rst_n) begin
    if (loc_valid && loc_ready) begin
      mq.push_back(loc_data);
      if (dup_en) begin cq.push_back(loc_data); clones++; end
    end
    if (rtr_valid && rtr_ready) begin mq.push_back(rtr_data); from_rtr++; end
    if (main_valid && main_ready) begin
      checks++;
      if (mq.size() == 0 || mq[0] !== main_data) begin failures++; $display("FAIL main %h", main_data); end
      if (mq.size() != 0) void'(mq.pop_front());
    end
    if (copy_valid && copy_ready) begin
      checks++;
      if (cq.size() == 0 || cq[0] !== copy_data) begin failures++; $display("FAIL copy %h", copy_data); end
      if (cq.size() != 0) void'(cq.pop_front());
    end
    // both local and router valid in one clock: at most one accepted
    if (loc_ready && rtr_ready && loc_valid) begin failures++; $display("FAIL: both accepted"); end
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
    for (int round = 0; round < 4; round++) begin
      dup_en = round[0];
      for (int k = 0; k < 1000; k++) begin
        @(negedge clk);
        main_ready = ($urandom_range(0, 3) != 0);
        copy_ready = ($urandom_range(0, 2) != 0);
        if (!loc_valid || loc_ready) begin loc_valid = 1'($urandom); loc_data = pix_t'($urandom); end
        if (!rtr_valid || rtr_ready) begin rtr_valid = 1'($urandom); rtr_data = pix_t'($urandom); end
      end
      @(negedge clk); loc_valid = 0; rtr_valid = 0; main_ready = 1; copy_ready = 1;
      repeat (4) @(negedge clk);
      checks++;
      if (mq.size() != 0 || cq.size() != 0) begin failures++; $display("FAIL: lost %0d/%0d", mq.size(), cq.size()); end
    end
    checks++;
    if (n_dup != 16'(clones) || clones == 0 || from_rtr == 0) begin
      failures++; $display("FAIL: n_dup %0d clones %0d rtr %0d", n_dup, clones, from_rtr);
    end
    $display("clones %0d router events %0d", clones, from_rtr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
