// grid_link: one side (west, east, south or north) of the chip's 2D grid.
//
// Each side has an asynchronous AER bus into the chip and one out of it,
// placed so that neighbouring chips connect pin to pin. Both carry 24-bit
// event words, inter-neuron or sensor format, with a 4-phase bundled-data
// handshake: the sender sets `data`, raises `req`, the receiver answers
// `ack`, then both return to zero. Inside the chip the two buses become
// valid/ready streams: `rx_*` towards the top-level router's arbiter and
// `tx_*` from the router.
//
// The paper gives the four buses and their purpose; the handshake details,
// synchronisers and the stream side are this design's own choices.
// Latency: 3 clocks in (synchroniser + capture), 2 clocks out to `req`.
module grid_link
  import dynapse2_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // bus from the neighbour
  input  logic      bus_in_req,
  input  aer_word_t bus_in_data,
  output logic      bus_in_ack,
  // bus to the neighbour
  output logic      bus_out_req,
  output aer_word_t bus_out_data,
  input  logic      bus_out_ack,
  // internal streams
  output logic      rx_valid,
  output aer_word_t rx_data,
  input  logic      rx_ready,
  input  logic      tx_valid,
  input  aer_word_t tx_data,
  output logic      tx_ready
);
  aer_rx #(.WIDTH(WORD_W)) u_rx (
    .clk, .rst_n, .req(bus_in_req), .data(bus_in_data), .ack(bus_in_ack),
    .out_valid(rx_valid), .out_data(rx_data), .out_ready(rx_ready)
  );
  aer_tx #(.WIDTH(WORD_W)) u_tx (
    .clk, .rst_n, .in_valid(tx_valid), .in_data(tx_data), .in_ready(tx_ready),
    .req(bus_out_req), .data(bus_out_data), .ack(bus_out_ack)
  );
endmodule
