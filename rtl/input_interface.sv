// input_interface: the chip's multi-purpose split-parallel AER input.
//
// A host presents notional 40-bit words in two transfers of 21 bits over
// one asynchronous bus (4-phase req/ack): bit 20 of a transfer says which
// half it carries (1 = most significant 20 bits, 0 = least significant 20
// bits), bits 19:0 carry the half. A high half is held; the low half that
// follows completes the word. A low half with no high half before it is
// discarded and counted in `n_orphan`.
//
// The complete word is decoded by its opcode (bits 39:36, see the package):
// OP_EVENT puts the 24-bit event in bits 23:0 on `ev_*`, towards the
// top-level router; every other opcode is a configuration write, offered
// on `cfg_*` for one clock (`cfg_valid`) to the memory or latch it names.
//
// From the paper: the 40-bit word, the two 20+1-bit cycles, the extra bit
// that tells the halves apart, and that events and all configuration come
// in this way. Which value of the extra bit marks which half, and the whole
// opcode layout, are this design's own choices.
module input_interface
  import dynapse2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ii_req,
  input  logic [20:0] ii_data,
  output logic        ii_ack,
  output logic        ev_valid,
  output aer_word_t   ev_data,
  input  logic        ev_ready,
  output logic        cfg_valid,
  output cfg_word_t   cfg,
  output logic [15:0] n_orphan
);
  logic        hw_valid, hw_ready;
  logic [20:0] hw;
  logic        have_hi;
  logic [19:0] hi;

  aer_rx #(.WIDTH(21)) u_rx (
    .clk, .rst_n, .req(ii_req), .data(ii_data), .ack(ii_ack),
    .out_valid(hw_valid), .out_data(hw), .out_ready(hw_ready)
  );

  // an event waits for the router; configuration is never stalled
  assign hw_ready = !ev_valid || ev_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_hi   <= 1'b0;
      hi        <= '0;
      ev_valid  <= 1'b0;
      ev_data   <= '0;
      cfg_valid <= 1'b0;
      cfg       <= '0;
      n_orphan  <= '0;
    end else begin
      cfg_valid <= 1'b0;
      if (ev_valid && ev_ready) ev_valid <= 1'b0;
      if (hw_valid && hw_ready) begin
        if (hw[20]) begin
          hi      <= hw[19:0];
          have_hi <= 1'b1;
        end else if (have_hi) begin
          have_hi <= 1'b0;
          if (cfg_op_e'(hi[19:16]) == OP_EVENT) begin
            ev_valid <= 1'b1;
            ev_data  <= {hi[3:0], hw[19:0]};
          end else begin
            cfg_valid <= 1'b1;
            cfg       <= cfg_word_t'({hi, hw[19:0]});
          end
        end else begin
          n_orphan <= n_orphan + 1'b1;
        end
      end
    end
  end
endmodule
