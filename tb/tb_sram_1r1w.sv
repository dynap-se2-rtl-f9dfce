// tb_sram_1r1w: self-checking test of sram_1r1w.
//
// Random writes and reads against a reference array; a read returns the
// word written before it, one clock after `re`, and holds it while `re`
// stays low. Uses the 1024 x 23 size of one core's source-mapping memory.
module tb_sram_1r1w;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, re = 0; logic [9:0] waddr = 0, raddr = 0; logic [22:0] wdata = 0, rdata;
  sram_1r1w #(.DEPTH(1024), .WIDTH(23)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  logic [22:0] refm [1024];
  logic [22:0] expd;
  logic pend = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); we = 1; waddr = 10'(a); wdata = 23'($urandom); refm[a] = wdata;
    end
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== expd) begin failures++; $display("FAIL rd %h exp %h", rdata, expd); end
      end
      we = 1'($urandom); waddr = 10'($urandom); wdata = 23'($urandom);
      re = 1'($urandom); raddr = 10'($urandom);
      if (re) begin expd = refm[raddr]; pend = 1; end
      if (we) refm[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
