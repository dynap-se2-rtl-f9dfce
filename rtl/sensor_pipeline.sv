// sensor_pipeline: the 2D sensor event mapping and routing pipeline.
//
// Stages, in order: sensor interface -> pixel filter -> event duplication
// -> sum pooling -> cutting -> polarity filter -> source mapping -> to the
// top-level router. Event duplication also takes sensor events that the
// router kept for this chip, and can clone local events through
// destination append back to the router, addressed to a neighbouring chip
// whose own pipeline then maps another patch of the same sensor.
//
// All stages are valid/ready streams with one-word registers, so an event
// with no stalls needs 3 clocks through the sensor interface and 1 clock
// per later stage (2 for the mapping SRAM): 9 clocks from sensor request
// to mapped word. Configuration writes from the input interface set the
// stage registers (OP_SENSOR), pixel-filter entries (OP_PIXFILT) and
// mapping words (OP_SENSOR_MAP); all registers reset to pass-through
// values except polarity, which resets to "both".
//
// The stage order and functions follow the paper's pipeline figure; the
// register map and reset values are this design's own.
module sensor_pipeline
  import dynapse2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_valid,
  input  cfg_word_t   cfg,
  // sensor pins
  input  logic        s_req,
  input  logic [18:0] s_data,
  output logic        s_ack,
  // sensor events kept for this chip by the router
  input  logic        rtr_valid,
  input  sev_t        rtr_data,
  output logic        rtr_ready,
  // mapped inter-neuron events and cloned sensor events, to the router
  output logic        map_valid,
  output aer_word_t   map_data,
  input  logic        map_ready,
  output logic        copy_valid,
  output aer_word_t   copy_data,
  input  logic        copy_ready,
  output logic [15:0] n_pix_drop,
  output logic [15:0] n_cut_drop,
  output logic [15:0] n_pol_drop,
  output logic [15:0] n_dup
);
  // ---- configuration registers ----
  logic       dup_en;
  logic [1:0] dup_dy, dup_dx;
  logic [1:0] pool_sx, pool_sy;
  logic [PIX_W-1:0] cut_ox, cut_oy;
  logic [5:0] cut_w, cut_h;
  logic [1:0] pol_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dup_en <= 1'b0; dup_dy <= '0; dup_dx <= '0;
      pool_sx <= '0; pool_sy <= '0;
      cut_ox <= '0; cut_oy <= '0; cut_w <= 6'd63; cut_h <= 6'd63;
      pol_en <= 2'b11;
    end else if (cfg_valid && cfg.op == OP_SENSOR) begin
      unique case (cfg.arg[35:32])
        SR_DUP:      begin dup_en <= cfg.arg[0]; dup_dx <= cfg.arg[2:1]; dup_dy <= cfg.arg[4:3]; end
        SR_POOL:     begin pool_sx <= cfg.arg[1:0]; pool_sy <= cfg.arg[3:2]; end
        SR_CUT_ORG:  begin cut_ox <= cfg.arg[8:0]; cut_oy <= cfg.arg[17:9]; end
        SR_CUT_SIZE: begin cut_w <= cfg.arg[5:0]; cut_h <= cfg.arg[11:6]; end
        SR_POL:      pol_en <= cfg.arg[1:0];
        default: ;
      endcase
    end
  end

  // ---- stages ----
  logic si_v, si_r, pf_v, pf_r, ed_v, ed_r, cp_v, cp_r, sp_v, sp_r, ct_v, ct_r, pl_v, pl_r;
  pix_t si_d, pf_d, ed_d, cp_d, sp_d, ct_d, pl_d;

  sensor_interface u_if (.clk, .rst_n, .s_req, .s_data, .s_ack,
    .out_valid(si_v), .out_data(si_d), .out_ready(si_r));

  pixel_filter u_pf (.clk, .rst_n,
    .cfg_we(cfg_valid && cfg.op == OP_PIXFILT), .cfg_idx(cfg.arg[35:30]),
    .cfg_entry_valid(cfg.arg[18]), .cfg_y(cfg.arg[17:9]), .cfg_x(cfg.arg[8:0]),
    .in_valid(si_v), .in_data(si_d), .in_ready(si_r),
    .out_valid(pf_v), .out_data(pf_d), .out_ready(pf_r), .n_drop(n_pix_drop));

  event_duplication u_dup (.clk, .rst_n, .dup_en,
    .loc_valid(pf_v), .loc_data(pf_d), .loc_ready(pf_r),
    .rtr_valid, .rtr_data('{pol: rtr_data.pol, y: rtr_data.y, x: rtr_data.x}), .rtr_ready,
    .main_valid(ed_v), .main_data(ed_d), .main_ready(ed_r),
    .copy_valid(cp_v), .copy_data(cp_d), .copy_ready(cp_r), .n_dup);

  destination_append u_da (.clk, .rst_n, .cfg_dy(dup_dy), .cfg_dx(dup_dx),
    .in_valid(cp_v), .in_data(cp_d), .in_ready(cp_r),
    .out_valid(copy_valid), .out_data(copy_data), .out_ready(copy_ready));

  sum_pooling u_pool (.clk, .rst_n, .shift_x(pool_sx), .shift_y(pool_sy),
    .in_valid(ed_v), .in_data(ed_d), .in_ready(ed_r),
    .out_valid(sp_v), .out_data(sp_d), .out_ready(sp_r));

  cutting u_cut (.clk, .rst_n, .org_x(cut_ox), .org_y(cut_oy), .size_x(cut_w), .size_y(cut_h),
    .in_valid(sp_v), .in_data(sp_d), .in_ready(sp_r),
    .out_valid(ct_v), .out_data(ct_d), .out_ready(ct_r), .n_drop(n_cut_drop));

  polarity_filter u_pol (.clk, .rst_n, .pol_en,
    .in_valid(ct_v), .in_data(ct_d), .in_ready(ct_r),
    .out_valid(pl_v), .out_data(pl_d), .out_ready(pl_r), .n_drop(n_pol_drop));

  sensor_source_mapping u_map (.clk, .rst_n,
    .cfg_we(cfg_valid && cfg.op == OP_SENSOR_MAP), .cfg_addr(cfg.arg[35:24]), .cfg_data(cfg.arg[22:0]),
    .in_valid(pl_v), .in_data(pl_d), .in_ready(pl_r),
    .out_valid(map_valid), .out_data(map_data), .out_ready(map_ready));
endmodule
