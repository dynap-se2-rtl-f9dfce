// top_router: the chip's top-level event router.
//
// Every event that reaches the chip, from its own cores, from the sensor
// pipeline, from the host or from a neighbour, passes here. The decision
// follows the paper's rule: keep the event if dx = 0 and dy = 0, otherwise
// send it west if dx < 0, east if dx > 0, south if dx = 0 and dy < 0, north
// if dx = 0 and dy > 0. A kept inter-neuron event goes to the cores set in
// its 4-bit `cores` mask, and is dropped if the mask is 0000b. A kept sensor
// event (bit 23 = 1) goes to the sensor pipeline.
//
// This design's own choices: a forwarded event has the magnitude of the
// displacement it travels along reduced by one (sign-magnitude for 4-bit
// fields, a 2-bit field becomes 0); each output has a one-word register, and
// the input waits while the register of its destination is full (the
// sensor-pipeline register must be empty, which keeps the ready path of
// the pipeline out of the router's own ready). The local
// core output `core_tag` is a broadcast that the cores always accept.
// Latency is one clock.
module top_router
  import dynapse2_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  aer_word_t  in_data,
  output logic       in_ready,
  // to the cores: tag broadcast with a per-core enable
  output logic [3:0]        core_valid,
  output logic [TAG_W-1:0]  core_tag,
  // to the sensor pipeline (sensor events addressed to this chip)
  output logic       sens_valid,
  output sev_t       sens_data,
  input  logic       sens_ready,
  // to the neighbours: index 0..3 = west, east, south, north
  output logic [3:0] grid_valid,
  output aer_word_t  grid_data [4],
  input  logic [3:0] grid_ready,
  // counters of kept-for-cores, dropped (cores = 0) and forwarded events
  output logic [15:0] n_local,
  output logic [15:0] n_dropped,
  output logic [15:0] n_forward
);
  nev_t      nev;
  sev_t      sev;
  dir_e      dir;
  aer_word_t fwd;
  logic      dst_free;

  assign nev = nev_t'(in_data);
  assign sev = sev_t'(in_data);

  always_comb begin
    fwd = in_data;
    dir = DIR_LOCAL;
    if (!in_data[WORD_W-1]) begin
      if (!d4_zero(nev.dx)) begin
        dir = d4_neg(nev.dx) ? DIR_WEST : DIR_EAST;
        fwd = {nev.fmt, nev.tag, nev.dy, d4_step(nev.dx), nev.cores};
      end else if (!d4_zero(nev.dy)) begin
        dir = d4_neg(nev.dy) ? DIR_SOUTH : DIR_NORTH;
        fwd = {nev.fmt, nev.tag, d4_step(nev.dy), 4'd0, nev.cores};
      end else if (nev.cores == 4'b0000) begin
        dir = DIR_DROP;
      end
    end else begin
      if (!d2_zero(sev.dx)) begin
        dir = d2_neg(sev.dx) ? DIR_WEST : DIR_EAST;
        fwd = {sev.fmt, sev.pol, sev.y, sev.x, sev.dy, 2'b00};
      end else if (!d2_zero(sev.dy)) begin
        dir = d2_neg(sev.dy) ? DIR_SOUTH : DIR_NORTH;
        fwd = {sev.fmt, sev.pol, sev.y, sev.x, 2'b00, 2'b00};
      end
    end
  end

  always_comb begin
    unique case (dir)
      DIR_LOCAL: dst_free = in_data[WORD_W-1] ? !sens_valid : 1'b1;
      DIR_WEST:  dst_free = !grid_valid[0] || grid_ready[0];
      DIR_EAST:  dst_free = !grid_valid[1] || grid_ready[1];
      DIR_SOUTH: dst_free = !grid_valid[2] || grid_ready[2];
      DIR_NORTH: dst_free = !grid_valid[3] || grid_ready[3];
      default:   dst_free = 1'b1;
    endcase
  end
  assign in_ready = dst_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      core_valid <= '0;
      core_tag   <= '0;
      sens_valid <= 1'b0;
      sens_data  <= '0;
      grid_valid <= '0;
      for (int i = 0; i < 4; i++) grid_data[i] <= '0;
      n_local   <= '0;
      n_dropped <= '0;
      n_forward <= '0;
    end else begin
      core_valid <= '0;
      if (sens_valid && sens_ready) sens_valid <= 1'b0;
      for (int i = 0; i < 4; i++) if (grid_valid[i] && grid_ready[i]) grid_valid[i] <= 1'b0;
      if (in_valid && in_ready) begin
        unique case (dir)
          DIR_LOCAL: begin
            if (in_data[WORD_W-1]) begin
              sens_valid <= 1'b1;
              sens_data  <= sev;
            end else begin
              core_valid <= nev.cores;
              core_tag   <= nev.tag;
              n_local    <= n_local + 1'b1;
            end
          end
          DIR_DROP: n_dropped <= n_dropped + 1'b1;
          default: begin
            grid_valid[int'(dir) - 1] <= 1'b1;
            grid_data[int'(dir) - 1]  <= fwd;
            n_forward <= n_forward + 1'b1;
          end
        endcase
      end
    end
  end
endmodule
