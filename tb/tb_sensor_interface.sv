// tb_sensor_interface: self-checking test of sensor_interface.
//
// A sensor model drives 19-bit addresses with the 4-phase handshake,
// holding each address stable while req is high, with random delays on
// its side; the output stream stalls at random. Every address must come
// out once, in order, as {pol, y, x}, and `s_ack` must follow the protocol
// (never high while no request was seen, released only after req falls).
module tb_sensor_interface;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic s_req = 0, s_ack; logic [18:0] s_data = 0;
  logic out_valid, out_ready = 0; pix_t out_data;
  sensor_interface dut (.clk, .rst_n, .s_req, .s_data, .s_ack, .out_valid, .out_data, .out_ready);
  logic [18:0] q [$];
  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || q[0] !== 19'(out_data)) begin failures++; $display("FAIL %h", out_data); end
      if (q.size() != 0) void'(q.pop_front());
    end
  end
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int latency;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    checks++;
    if (s_ack) begin failures++; $display("FAIL: ack without req"); end
    for (int k = 0; k < 500; k++) begin
      s_data = 19'($urandom);
      q.push_back(s_data);
      repeat ($urandom_range(0, 2)) @(posedge clk);
      s_req = 1;
      wait (s_ack);
      @(posedge clk);
      s_req = 0;
      s_data = 19'($urandom);     // data may change once req is low
      wait (!s_ack);
      @(posedge clk);
    end
    repeat (20) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL lost %0d", q.size()); end
    // latency with output ready: req at a clock edge -> out_valid 3 clocks later
    force out_ready = 1'b1;
    @(negedge clk); s_data = 19'h12345; q.push_back(s_data); s_req = 1;
    latency = 0;
    while (!out_valid) begin @(posedge clk); #1; latency++; end
    checks++;
    if (latency != 3) begin failures++; $display("FAIL: latency %0d", latency); end
    wait (s_ack); @(posedge clk); s_req = 0; wait (!s_ack);
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
