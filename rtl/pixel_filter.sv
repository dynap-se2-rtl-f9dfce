// pixel_filter: discards events from up to 64 chosen pixel addresses.
//
// A 64-entry content-addressable memory holds {valid, y, x} pixel
// addresses. Each incoming event is compared with all entries in one step;
// if any valid entry equals its (y, x) the event is dropped (counted in
// `n_drop`), otherwise it is passed on. Both polarities of a listed pixel
// are dropped. Entries reset to invalid.
//
// From the paper: 64 arbitrary addresses, one-step CAM lookup. This
// design's own: the address is {y, x} without polarity, the reset state,
// one clock of latency with a one-word output register.
module pixel_filter
  import dynapse2_pkg::*;
#(
  parameter int unsigned ENTRIES = PIXFILT_ENTRIES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [$clog2(ENTRIES)-1:0] cfg_idx,
  input  logic        cfg_entry_valid,
  input  logic [PIX_W-1:0] cfg_y,
  input  logic [PIX_W-1:0] cfg_x,
  input  logic        in_valid,
  input  pix_t        in_data,
  output logic        in_ready,
  output logic        out_valid,
  output pix_t        out_data,
  input  logic        out_ready,
  output logic [15:0] n_drop
);
  logic [ENTRIES-1:0]   ent_v;
  logic [2*PIX_W-1:0]   ent_a [ENTRIES];
  logic                 hit;

  always_comb begin
    hit = 1'b0;
    for (int unsigned i = 0; i < ENTRIES; i++)
      if (ent_v[i] && ent_a[i] == {in_data.y, in_data.x}) hit = 1'b1;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ent_v     <= '0;
      for (int unsigned i = 0; i < ENTRIES; i++) ent_a[i] <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      n_drop    <= '0;
    end else begin
      if (cfg_we) begin
        ent_v[cfg_idx] <= cfg_entry_valid;
        ent_a[cfg_idx] <= {cfg_y, cfg_x};
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (hit) n_drop <= n_drop + 1'b1;
        else begin
          out_valid <= 1'b1;
          out_data  <= in_data;
        end
      end
    end
  end
endmodule
