// tb_core_encoder: self-checking test of core_encoder (16 neurons).
//
// Fills the source-mapping SRAM with words computed from {neuron, slot}.
// Neuron models in the testbench raise `req` at random, hold it until
// `ack`, drop it, and stay quiet until `ack` falls (the refractory
// handshake). For every grant the four words of that neuron must come out
// in slot order; each output word is checked against the granted neuron.
// Also checks: ack is never given to a neuron that is not requesting,
// every spike is served with exactly four words, and the rate of 4 words in 6 clocks per spike
// with the output always ready.
module tb_core_encoder;
  import dynapse2_pkg::*;
  localparam int N = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [N-1:0] req = '0, ack;
  logic cfg_we = 0; logic [3:0] cfg_neuron = 0; logic [1:0] cfg_slot = 0; logic [22:0] cfg_data = 0;
  logic out_valid, out_ready = 0; aer_word_t out_data;
  core_encoder #(.N_NEURONS(N)) dut (.clk, .rst_n, .req, .ack, .cfg_we, .cfg_neuron, .cfg_slot,
    .cfg_data, .out_valid, .out_data, .out_ready);

  function automatic logic [22:0] word(int n, int s);
    return 23'(n * 977 + s * 131 + 5) ^ (23'(s) << 20);
  endfunction

  int spikes = 0, served = 0, words = 0;
  logic [N-1:0] ack_q = '0, req_q = '0;
  logic random_mode = 1;
  int exp_n = -1, wcount = 0;

  always @(posedge clk) if (rst_n) begin
    ack_q <= ack;
    req_q <= req;
    for (int n = 0; n < N; n++) begin
      if (ack[n] && !ack_q[n]) begin
        served++;
        checks++;
        if (!req_q[n] || n != exp_n || wcount != 4) begin
          failures++; $display("FAIL: ack %0d (req %b, expected %0d after %0d words)", n, req_q[n], exp_n, wcount);
        end
        wcount = 0;
      end
    end
    if (out_valid && out_ready) begin
      checks++;
      words++;
      if (wcount == 0) begin
        exp_n = -1;
        for (int n = 0; n < N; n++) if (req[n] && out_data == {1'b0, word(n, 0)}) exp_n = n;
        if (exp_n < 0) begin failures++; $display("FAIL: first word %h of no requesting neuron", out_data); end
      end else if (exp_n >= 0 && out_data !== {1'b0, word(exp_n, wcount)}) begin
        failures++; $display("FAIL: word %0d of neuron %0d = %h", wcount, exp_n, out_data);
      end
      wcount = wcount + 1;
    end
    if (random_mode) out_ready <= ($urandom_range(0, 3) != 0);
  end

  // neuron side of the handshake
  for (genvar n = 0; n < N; n++) begin : g_n
    initial begin
      wait (rst_n);
      forever begin
        repeat ($urandom_range(5, 60)) @(posedge clk);
        if (!random_mode) break;
        req[n] = 1; spikes++;
        wait (ack[n]);
        @(posedge clk); req[n] = 0;
        wait (!ack[n]);
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
    repeat (3) @(posedge clk);
    for (int n = 0; n < N; n++) for (int s = 0; s < 4; s++) begin
      @(negedge clk); cfg_we = 1; cfg_neuron = 4'(n); cfg_slot = 2'(s); cfg_data = word(n, s);
    end
    @(negedge clk); cfg_we = 0;
    rst_n = 1;
    repeat (4000) @(posedge clk);
    random_mode = 0;
    out_ready = 1;
    repeat (200) @(posedge clk);
    checks++;
    if (words != 4 * spikes || served != spikes || req != 0) begin
      failures++; $display("FAIL: %0d words, served %0d of %0d", words, served, spikes);
    end
    // rate: one neuron, output ready: words at clocks 3..6 after the request
    begin
      int first, last, outs;
      first = -1; last = -1; outs = 0;
      @(negedge clk); req[7] = 1;
      for (int c = 1; c <= 12; c++) begin
        @(posedge clk); #1;
        if (out_valid) begin outs++; if (first < 0) first = c; last = c; end
        if (ack[7]) req[7] = 0;
      end
      checks++;
      if (outs != 4 || first != 3 || last != 6) begin failures++; $display("FAIL: rate outs=%0d first=%0d last=%0d", outs, first, last); end
    end
    $display("spikes %0d served %0d", spikes, served);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
