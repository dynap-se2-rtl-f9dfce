// sensor_interface: parallel AER input from an event-based vision sensor.
//
// The sensor drives a 19-bit address {pol, y[8:0], x[8:0]} and a request;
// the chip answers with an acknowledge (4-phase handshake). Each address
// becomes one pixel event on the `out_*` stream towards the pixel filter.
//
// The paper names three sensors whose formats the chip reads directly
// (DAVIS346, DAVIS240, DVS128 over parallel AER) but not those formats;
// this block reads one generic layout only, chosen here. Latency 3 clocks.
module sensor_interface
  import dynapse2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_req,
  input  logic [18:0] s_data,
  output logic        s_ack,
  output logic        out_valid,
  output pix_t        out_data,
  input  logic        out_ready
);
  logic [18:0] w;
  aer_rx #(.WIDTH(19)) u_rx (
    .clk, .rst_n, .req(s_req), .data(s_data), .ack(s_ack),
    .out_valid, .out_data(w), .out_ready
  );
  assign out_data = pix_t'(w);
endmodule
