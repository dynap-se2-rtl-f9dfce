// tb_grid_link: self-checking test of grid_link.
//
// Two chips' links are wired face to face (A's out bus to B's in bus and
// back), each in its own clock domain of a different period. Random words
// are pushed into both transmit streams while both receive streams stall
// at random. Every word must arrive on the far side once, unchanged and in
// order. The bundled-data rule (data stable while req is high) is checked
// by the assertion in aer_tx and here.
module tb_grid_link;
  import dynapse2_pkg::*;
  logic clka = 0, clkb = 0, rst_n = 0;
  always #5 clka = ~clka;
  always #7 clkb = ~clkb;
  int checks = 0, failures = 0;

  logic ab_req, ab_ack, ba_req, ba_ack;
  aer_word_t ab_data, ba_data;
  logic arx_v, arx_r, atx_v, atx_r, brx_v, brx_r, btx_v, btx_r;
  aer_word_t arx_d, atx_d, brx_d, btx_d;

  grid_link ua (.clk(clka), .rst_n, .bus_in_req(ba_req), .bus_in_data(ba_data), .bus_in_ack(ba_ack),
    .bus_out_req(ab_req), .bus_out_data(ab_data), .bus_out_ack(ab_ack),
    .rx_valid(arx_v), .rx_data(arx_d), .rx_ready(arx_r), .tx_valid(atx_v), .tx_data(atx_d), .tx_ready(atx_r));
  grid_link ub (.clk(clkb), .rst_n, .bus_in_req(ab_req), .bus_in_data(ab_data), .bus_in_ack(ab_ack),
    .bus_out_req(ba_req), .bus_out_data(ba_data), .bus_out_ack(ba_ack),
    .rx_valid(brx_v), .rx_data(brx_d), .rx_ready(brx_r), .tx_valid(btx_v), .tx_data(btx_d), .tx_ready(btx_r));

  aer_word_t qab [$], qba [$];
  int nab = 0, nba = 0;
  initial begin atx_v = 0; atx_d = '0; btx_v = 0; btx_d = '0; arx_r = 0; brx_r = 0; end

  always @(posedge clka) if (rst_n) begin
    if (atx_v && atx_r) begin qab.push_back(atx_d); atx_v <= 0; end
    if (!atx_v || atx_r) if ($urandom_range(0, 1) != 0 && nab < 300) begin atx_v <= 1; atx_d <= aer_word_t'($urandom); nab++; end
    arx_r <= ($urandom_range(0, 2) != 0);
    if (arx_v && arx_r) begin
      checks++;
      if (qba.size() == 0 || qba[0] !== arx_d) begin failures++; $display("FAIL A rx %h", arx_d); end
      if (qba.size() != 0) void'(qba.pop_front());
    end
  end
  always @(posedge clkb) if (rst_n) begin
    if (btx_v && btx_r) begin qba.push_back(btx_d); btx_v <= 0; end
    if (!btx_v || btx_r) if ($urandom_range(0, 1) != 0 && nba < 300) begin btx_v <= 1; btx_d <= aer_word_t'($urandom); nba++; end
    brx_r <= ($urandom_range(0, 2) != 0);
    if (brx_v && brx_r) begin
      checks++;
      if (qab.size() == 0 || qab[0] !== brx_d) begin failures++; $display("FAIL B rx %h", brx_d); end
      if (qab.size() != 0) void'(qab.pop_front());
    end
  end
  // bundled data: the bus word must not change while req is high
  aer_word_t hold;
  always @(posedge ab_req) hold = ab_data;
  always @(ab_data) if (ab_req && ab_data !== hold) begin failures++; $display("FAIL: data changed under req"); end

  initial begin : watchdog
    repeat (100000) @(posedge clka);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3) @(posedge clkb);
    rst_n = 1;
    wait (nab == 300 && nba == 300);
    repeat (400) @(posedge clkb);
    checks++;
    if (qab.size() != 0 || qba.size() != 0) begin failures++; $display("FAIL lost %0d %0d", qab.size(), qba.size()); end
    checks++;
    if (checks < 600) begin failures++; $display("FAIL: only %0d words", checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
