// synapse_cam: the destination-mapping CAM of one neural core.
//
// Every synapse of the core (256 neurons x 64 synapses) holds an 11-bit tag.
// An event that reaches the core is reduced to its tag, which is broadcast to
// all synapses; every synapse whose stored tag equals it in all eleven bits
// gets a match pulse. Several synapses, of one or many neurons, may match
// the same tag; that is how the tag scheme shares and fans out connections.
//
// Interface: `tag_valid`/`tag` is a broadcast that is always accepted, one
// tag per clock. `match` is high for exactly one clock, the clock after the
// tag, for each matching synapse (index = neuron * 64 + synapse). It stands
// for the active-low match signal of the chip, here active high. A write
// port loads one CAM word. The CAM contents are not reset.
//
// From the paper: 11-bit CAM per synapse, broadcast to the whole core, all
// bits must match. This design's own: the clocked timing and write port.
module synapse_cam
  import dynapse2_pkg::*;
#(
  parameter int unsigned N_NEURONS = NEURONS_PER_CORE,
  parameter int unsigned N_SYN     = SYN_PER_NEURON
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  logic [$clog2(N_NEURONS*N_SYN)-1:0] cfg_addr,
  input  logic [TAG_W-1:0]           cfg_tag,
  input  logic                       tag_valid,
  input  logic [TAG_W-1:0]           tag,
  output logic [N_NEURONS*N_SYN-1:0] match
);
  localparam int unsigned N = N_NEURONS * N_SYN;
  logic [TAG_W-1:0] cam [N];

  always_ff @(posedge clk) begin
    if (cfg_we) cam[cfg_addr] <= cfg_tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) match[i] <= 1'b0;
    end else begin
      for (int unsigned i = 0; i < N; i++)
        match[i] <= tag_valid && (cam[i] == tag);
    end
  end
endmodule
