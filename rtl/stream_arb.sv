// stream_arb: round-robin merge of N valid/ready streams into one.
//
// Each cycle the input after the last winner that is valid is granted and
// its word is moved into a one-entry output register. `in_ready` is high
// for the granted input only. With all inputs busy, each gets one word in
// N. Used wherever several event sources share one channel, as the
// asynchronous arbiters of the chip do; the round-robin policy is this
// design's choice.
module stream_arb #(
  parameter int unsigned N     = 2,
  parameter int unsigned WIDTH = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     in_valid,
  input  logic [WIDTH-1:0] in_data [N],
  output logic [N-1:0]     in_ready,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_data,
  input  logic             out_ready
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last, pick;
  logic          any;
  logic          take;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % N;
      if (!any && in_valid[idx]) begin
        any  = 1'b1;
        pick = IW'(idx);
      end
    end
  end

  assign take = any && (!out_valid || out_ready);

  always_comb begin
    in_ready = '0;
    if (take) in_ready[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      last      <= IW'(N - 1);
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out_data  <= in_data[pick];
        last      <= pick;
      end
    end
  end
endmodule
