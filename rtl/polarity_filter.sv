// polarity_filter: keeps the events of one polarity or of both.
//
// `pol_en[0]` passes OFF (pol = 0) events, `pol_en[1]` ON (pol = 1) events;
// 2'b11 passes both. Blocked events are counted in `n_drop`. One clock.
//
// From the paper: a specific polarity or both can be selected. The two
// enable bits are this design's encoding.
module polarity_filter
  import dynapse2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  pol_en,
  input  logic        in_valid,
  input  pix_t        in_data,
  output logic        in_ready,
  output logic        out_valid,
  output pix_t        out_data,
  input  logic        out_ready,
  output logic [15:0] n_drop
);
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      n_drop    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (pol_en[in_data.pol]) begin
          out_valid <= 1'b1;
          out_data  <= in_data;
        end else n_drop <= n_drop + 1'b1;
      end
    end
  end
endmodule
