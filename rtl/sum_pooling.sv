// sum_pooling: scales the 2D input space down by 1, 2, 4 or 8 per axis.
//
// Each event's x is shifted right by `shift_x` and its y by `shift_y`
// (0..3), so all pixels of a 2^sx x 2^sy block land on one output pixel:
// the events of the block are summed onto one target. Polarity is kept.
// One clock, one-word output register.
//
// From the paper: ratios 1:1, 1:2, 1:4, 1:8 for x and y separately. The
// shift implementation is the plain way to get these ratios.
module sum_pooling
  import dynapse2_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] shift_x,
  input  logic [1:0] shift_y,
  input  logic       in_valid,
  input  pix_t       in_data,
  output logic       in_ready,
  output logic       out_valid,
  output pix_t       out_data,
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
        out_valid  <= 1'b1;
        out_data.pol <= in_data.pol;
        out_data.x <= in_data.x >> shift_x;
        out_data.y <= in_data.y >> shift_y;
      end
    end
  end
endmodule
