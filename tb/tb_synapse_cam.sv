// tb_synapse_cam: self-checking test of synapse_cam (8 neurons x 8 synapses).
//
// Loads random tags drawn from a small set, so that many synapses share a
// tag, keeps a shadow copy, then broadcasts random tags (one per clock,
// sometimes idle) and compares the whole match vector one clock later with
// the shadow. Checks that an idle clock gives no match, that several
// synapses match one tag, that one differing bit is enough to miss, and that
// rewriting a word mid-stream takes effect on the next broadcast.
module tb_synapse_cam;
  import dynapse2_pkg::*;
  localparam int NN = 8, NS = 8, N = NN * NS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cfg_we = 0; logic [5:0] cfg_addr = 0; logic [10:0] cfg_tag = 0;
  logic tag_valid = 0; logic [10:0] tag = 0;
  logic [N-1:0] match;
  synapse_cam #(.N_NEURONS(NN), .N_SYN(NS)) dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_tag,
    .tag_valid, .tag, .match);

  logic [10:0] shadow [N];
  logic [10:0] pool [4] = '{11'h000, 11'h7ff, 11'h2a5, 11'h2a4};
  int multi = 0;

  function automatic logic [N-1:0] expect_match(logic v, logic [10:0] t);
    logic [N-1:0] m;
    for (int i = 0; i < N; i++) m[i] = v && shadow[i] == t;
    return m;
  endfunction

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [N-1:0] exp_m;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 6'(i); cfg_tag = pool[$urandom_range(0, 3)];
      shadow[i] = cfg_tag;
    end
    @(negedge clk); cfg_we = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      // occasional rewrite; takes effect from the next clock on
      cfg_we = ($urandom_range(0, 9) == 0);
      cfg_addr = 6'($urandom_range(0, N - 1));
      cfg_tag = ($urandom_range(0, 3) == 0) ? 11'($urandom) : pool[$urandom_range(0, 3)];
      tag_valid = ($urandom_range(0, 4) != 0);
      tag = ($urandom_range(0, 5) == 0) ? 11'($urandom) : pool[$urandom_range(0, 3)];
      exp_m = expect_match(tag_valid, tag);
      @(posedge clk);
      if (cfg_we) shadow[cfg_addr] = cfg_tag;
      #1;
      checks++;
      if (match !== exp_m) begin failures++; $display("FAIL: tag %h v%b match %h exp %h", tag, tag_valid, match, exp_m); end
      if ($countones(match) > 1) multi++;
    end
    // match lasts one clock only
    @(negedge clk); cfg_we = 0; tag_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (match !== '0) begin failures++; $display("FAIL: match not a single pulse"); end
    // one differing bit misses
    @(negedge clk); cfg_we = 1; cfg_addr = 6'd5; cfg_tag = 11'h155;
    @(negedge clk); cfg_we = 0; tag_valid = 1; tag = 11'h154;
    @(posedge clk); #1;
    checks++;
    if (match[5]) begin failures++; $display("FAIL: one-bit-different tag matched"); end
    @(negedge clk); tag = 11'h155;
    @(posedge clk); #1;
    checks++;
    if (!match[5]) begin failures++; $display("FAIL: exact tag missed"); end
    checks++;
    if (multi < 100) begin failures++; $display("FAIL: only %0d multi-matches", multi); end
    $display("multi-synapse matches %0d", multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
