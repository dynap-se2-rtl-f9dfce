// event_duplication: entry of the sensor mapping pipeline.
//
// Two sources feed it: events from the local sensor (after the pixel
// filter) and sensor events that other chips addressed to this one, which
// arrive through the top-level router. They are merged, local first when
// both wait. Every event goes on `main_*` to the pooling, cutting and
// mapping stages. When `dup_en` is set, a local event is also cloned
// unprocessed onto `copy_*`, towards the Destination Append block and a
// second pipeline on a neighbouring chip; the clone is what lets two chips
// each map their own patch of one sensor. An event leaves only when every
// output it needs is free (fork without loss).
//
// From the paper: the optional duplication to one of four neighbours. This
// design's own: only local events are cloned (a cloned event arriving back
// is not cloned again, so no loops), the fixed priority, the registers.
module event_duplication
  import dynapse2_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  dup_en,
  input  logic  loc_valid,
  input  pix_t  loc_data,
  output logic  loc_ready,
  input  logic  rtr_valid,
  input  pix_t  rtr_data,
  output logic  rtr_ready,
  output logic  main_valid,
  output pix_t  main_data,
  input  logic  main_ready,
  output logic  copy_valid,
  output pix_t  copy_data,
  input  logic  copy_ready,
  output logic [15:0] n_dup
);
  logic main_free, copy_free;
  assign main_free = !main_valid || main_ready;
  assign copy_free = !copy_valid || copy_ready;
  assign loc_ready = main_free && (!dup_en || copy_free);
  assign rtr_ready = main_free && !loc_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      main_valid <= 1'b0;
      main_data  <= '0;
      copy_valid <= 1'b0;
      copy_data  <= '0;
      n_dup      <= '0;
    end else begin
      if (main_valid && main_ready) main_valid <= 1'b0;
      if (copy_valid && copy_ready) copy_valid <= 1'b0;
      if (loc_valid && loc_ready) begin
        main_valid <= 1'b1;
        main_data  <= loc_data;
        if (dup_en) begin
          copy_valid <= 1'b1;
          copy_data  <= loc_data;
          n_dup      <= n_dup + 1'b1;
        end
      end else if (rtr_valid && rtr_ready) begin
        main_valid <= 1'b1;
        main_data  <= rtr_data;
      end
    end
  end
endmodule
