// param_gen: behavioural model of one core's parameter generator.
//
// The real block is an analog current DAC with PTAT/CTAT reference that
// sets the biases shared by all neurons and synapses of a core. Each bias
// is programmed with a coarse range n_coarse (0..5) and a fine value
// n_fine (0..255); the nominal current is
//     I = k * I_coarse(n_coarse) * n_fine / 255,
// with I_coarse = 70 pA, 550 pA, 4.45 nA, 35 nA, 0.28 uA, 2.25 uA. Those
// steps are close to powers of 8, so this model returns the current as the
// integer n_fine * 8^n_coarse in units of I_coarse(0)/255 (about 0.27 pA).
// Mismatch, the non-monotonicity and the settling time of small currents
// are not modelled. Codes reset to 0/0, i.e. the dark current, taken as 0.
//
// The register bank (one 11-bit code per bias, written through the input
// interface) is ordinary logic; the current output stands for the analog
// value. The list of biases and its size are this design's choice.
module param_gen
  import dynapse2_pkg::*;
#(
  parameter int unsigned N_BIAS = NUM_BIAS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(N_BIAS)-1:0] idx,
  input  bias_code_t                code,
  output logic [CUR_W-1:0]          cur [N_BIAS]
);
  bias_code_t regs [N_BIAS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N_BIAS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[idx] <= code;
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < N_BIAS; i++) cur[i] = bias_current(regs[i]);
  end
endmodule
