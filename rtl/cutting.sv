// cutting: cuts a rectangular patch out of the (pooled) input space.
//
// The patch starts at (org_x, org_y) and is size_x+1 wide and size_y+1
// high, 1 to 64 pixels each way. Events in_patch it leave with coordinates
// relative to the patch corner (0..63); events outside are dropped and
// counted in `n_drop`. One clock, one-word output register.
//
// From the paper: a 1x1 up to 64x64 patch is cut out and forwarded to
// source mapping. Origin-plus-size configuration is this design's choice.
module cutting
  import dynapse2_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [PIX_W-1:0] org_x,
  input  logic [PIX_W-1:0] org_y,
  input  logic [5:0]       size_x,   // width - 1
  input  logic [5:0]       size_y,   // height - 1
  input  logic             in_valid,
  input  pix_t             in_data,
  output logic             in_ready,
  output logic             out_valid,
  output pix_t             out_data,
  input  logic             out_ready,
  output logic [15:0]      n_drop
);
  logic [PIX_W:0] rx, ry;
  logic           in_patch;

  assign rx = {1'b0, in_data.x} - {1'b0, org_x};
  assign ry = {1'b0, in_data.y} - {1'b0, org_y};
  assign in_patch = !rx[PIX_W] && !ry[PIX_W] &&
                  rx[PIX_W-1:0] <= PIX_W'(size_x) && ry[PIX_W-1:0] <= PIX_W'(size_y);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      n_drop    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_patch) begin
          out_valid <= 1'b1;
          out_data  <= '{pol: in_data.pol, y: ry[PIX_W-1:0], x: rx[PIX_W-1:0]};
        end else n_drop <= n_drop + 1'b1;
      end
    end
  end
endmodule
