// sensor_source_mapping: maps each pixel of the 64 x 64 patch to an event.
//
// A 4096-word SRAM, addressed by {y[5:0], x[5:0]} of the patch-relative
// pixel, holds one 23-bit {tag, dy, dx, cores} word per pixel. A pixel
// event reads its word and leaves as a standard inter-neuron event (bit 23
// = 0) towards the top-level router, which routes it like a neuron's spike.
// Polarity is not part of the address. Pipelined: one event per clock,
// two clocks of latency; a stalled output holds the read word.
//
// From the paper: 64 x 64 pixels mapped one to one, each to tag, dx, dy and
// cores. This design's own: the address order and ignoring polarity.
module sensor_source_mapping
  import dynapse2_pkg::*;
#(
  parameter int unsigned EDGE = PATCH
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cfg_we,
  input  logic [2*$clog2(EDGE)-1:0] cfg_addr,
  input  logic [SRAM_W-1:0] cfg_data,
  input  logic            in_valid,
  input  pix_t            in_data,
  output logic            in_ready,
  output logic            out_valid,
  output aer_word_t       out_data,
  input  logic            out_ready
);
  localparam int unsigned EW = $clog2(EDGE);
  logic [SRAM_W-1:0] rdata;
  logic              fire;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;

  sram_1r1w #(.DEPTH(EDGE * EDGE), .WIDTH(SRAM_W)) u_map (
    .clk, .we(cfg_we), .waddr(cfg_addr), .wdata(cfg_data),
    .re(fire), .raddr({in_data.y[EW-1:0], in_data.x[EW-1:0]}), .rdata
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (fire) out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end
  assign out_data = {1'b0, rdata};
endmodule
