// tb_param_gen: self-checking test of the parameter-generator model.
//
// Writes random coarse/fine codes to random biases and checks every output
// current against I = fine * 8^coarse with coarse clamped to 5 (an
// independent reference written with multiplication, not shifts). Also
// checks the reset value 0, that a write changes only the addressed bias,
// and that the coarse steps are monotonic: at equal fine, a higher coarse
// range never gives less current.
module tb_param_gen;
  import dynapse2_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0; logic [4:0] idx = 0; bias_code_t code = '0;
  logic [CUR_W-1:0] cur [NUM_BIAS];
  param_gen dut (.clk, .rst_n, .we, .idx, .code, .cur);

  longint ref_cur [NUM_BIAS];
  function automatic longint model(bias_code_t c);
    longint m = 1;
    int cc = (c.coarse > 5) ? 5 : int'(c.coarse);
    for (int k = 0; k < cc; k++) m = m * 8;
    return longint'(c.fine) * m;
  endfunction

  task automatic compare_all();
    for (int i = 0; i < NUM_BIAS; i++) begin
      checks++;
      if (longint'(cur[i]) != ref_cur[i]) begin
        failures++; $display("FAIL: bias %0d cur %0d exp %0d", i, cur[i], ref_cur[i]);
      end
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < NUM_BIAS; i++) ref_cur[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 compare_all();
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      we = ($urandom_range(0, 3) != 0);
      idx = 5'($urandom_range(0, NUM_BIAS - 1));
      code.coarse = 3'($urandom);
      code.fine = 8'($urandom);
      @(posedge clk);
      if (we) ref_cur[idx] = model(code);
      #1 compare_all();
    end
    // monotonic in coarse at equal fine
    @(negedge clk); we = 1; idx = 0;
    for (int f = 1; f < 256; f += 17) begin
      longint prev;
      prev = 0;
      for (int c = 0; c < 8; c++) begin
        @(negedge clk); code.coarse = 3'(c); code.fine = 8'(f);
        @(posedge clk); #1;
        checks++;
        if (longint'(cur[0]) < prev) begin failures++; $display("FAIL: not monotonic f=%0d c=%0d", f, c); end
        prev = longint'(cur[0]);
      end
    end
    @(negedge clk); we = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
