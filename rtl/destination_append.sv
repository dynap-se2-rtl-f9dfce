// destination_append: addresses a cloned sensor event to a neighbour chip.
//
// Takes a pixel event from Event Duplication and writes the sensor event
// word: bit 23 = 1, polarity, pixel_y, pixel_x and the 2-bit chip
// displacements dy, dx taken from configuration. The top-level router then
// sends it to the chosen one of the four surrounding chips. One clock.
//
// From the paper: the block's place and that it supplies the target
// coordinates. The 2-bit code (00 = 0, 01 = +1, 11 = -1) is this design's.
module destination_append
  import dynapse2_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] cfg_dy,
  input  logic [1:0] cfg_dx,
  input  logic       in_valid,
  input  pix_t       in_data,
  output logic       in_ready,
  output logic       out_valid,
  output aer_word_t  out_data,
  input  logic       out_ready
);
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid <= 1'b1;
        out_data  <= aer_word_t'(sev_t'{fmt: 1'b1, pol: in_data.pol, y: in_data.y,
                                       x: in_data.x, dy: cfg_dy, dx: cfg_dx});
      end
    end
  end
endmodule
