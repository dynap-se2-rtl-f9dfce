// core_encoder: turns neuron spikes of one core into AER event words.
//
// Each neuron raises `req[n]` when it fires and holds it until `ack[n]`
// rises; it then drops `req[n]`, and once `ack[n]` falls the neuron starts
// its refractory period (4-phase handshake of the refractory circuit). The
// encoder serves one requesting neuron at a time, chosen round-robin. For
// that neuron it reads the four 23-bit source-mapping words {tag, dy, dx,
// cores} from the SRAM (source mapping) and sends each as a 24-bit
// inter-neuron event (bit 23 = 0). Entries with cores = 0000b are still sent:
// the top-level router drops them, as the paper describes.
//
// Timing: a spike costs 2 clocks of arbitration and handshake plus one clock
// per word when the output is ready, i.e. 4 words in clocks 3..6 after the
// grant. The SRAM read port is shared with nothing; its write port is the
// configuration path.
//
// From the paper: four 23-bit words per neuron, all read and sent per spike,
// the req/ack handshake with the neuron. This design's own: round-robin
// choice, the sequencing and the clocked implementation.
module core_encoder
  import dynapse2_pkg::*;
#(
  parameter int unsigned N_NEURONS = NEURONS_PER_CORE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_NEURONS-1:0] req,
  output logic [N_NEURONS-1:0] ack,
  // configuration write of one source-mapping word
  input  logic                 cfg_we,
  input  logic [$clog2(N_NEURONS)-1:0] cfg_neuron,
  input  logic [1:0]           cfg_slot,
  input  logic [SRAM_W-1:0]    cfg_data,
  // events out
  output logic                 out_valid,
  output aer_word_t            out_data,
  input  logic                 out_ready
);
  localparam int unsigned NW = $clog2(N_NEURONS);
  typedef enum logic [2:0] {S_IDLE, S_READ, S_SEND, S_ACK, S_REL} state_e;

  state_e          state;
  logic [NW-1:0]   cur, last;
  logic [1:0]      slot;
  logic            re;
  logic [NW+1:0]   raddr;
  logic [SRAM_W-1:0] rdata;
  logic            found;
  logic [NW-1:0]   pick;

  sram_1r1w #(.DEPTH(N_NEURONS * SRAM_PER_NEURON), .WIDTH(SRAM_W)) u_sram (
    .clk, .we(cfg_we), .waddr({cfg_neuron, cfg_slot}), .wdata(cfg_data),
    .re, .raddr, .rdata
  );

  // round-robin search for the next requesting neuron
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int unsigned k = 1; k <= N_NEURONS; k++) begin
      logic [NW-1:0] idx;
      idx = last + NW'(k);
      if (!found && req[idx]) begin
        found = 1'b1;
        pick  = idx;
      end
    end
  end

  assign re    = (state == S_READ) || (state == S_SEND && (!out_valid || out_ready) && slot != 2'd3);
  assign raddr = (state == S_READ) ? {cur, 2'd0} : {cur, slot + 2'd1};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      last      <= NW'(N_NEURONS - 1);
      slot      <= '0;
      ack       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (found) begin
          cur   <= pick;
          last  <= pick;
          slot  <= 2'd0;
          state <= S_READ;
        end
        S_READ: state <= S_SEND;          // word 0 arrives next clock
        S_SEND: begin
          if (!out_valid || out_ready) begin
            out_valid <= 1'b1;
            out_data  <= {1'b0, rdata};
            if (slot == 2'd3) state <= S_ACK;
            else slot <= slot + 2'd1;
          end
        end
        S_ACK: if (!out_valid || out_ready) begin
          ack[cur] <= 1'b1;
          state    <= S_REL;
        end
        S_REL: if (!req[cur]) begin
          ack[cur] <= 1'b0;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (out_valid && out_ready && !(state == S_SEND)) out_valid <= 1'b0;
    end
  end

  // at most one neuron is acknowledged at a time
  a_onehot_ack: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ack));
endmodule
