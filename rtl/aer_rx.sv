// aer_rx: receiving end of an asynchronous bundled-data AER channel.
//
// The sender drives `data`, then raises `req`; this side answers with `ack`
// (4-phase: req up, ack up, req down, ack down). `req` is brought into the
// clock domain by a two-flop synchroniser; `data` is sampled once the
// synchronised `req` is high, when it is stable by the bundling rule. The
// word is offered on a valid/ready stream; `ack` rises only when the word
// has been taken into the output register, so a full pipeline back-pressures
// the sender. Latency: 3 clocks from `req` to `out_valid`.
//
// The 4-phase protocol is the standard one of AER links; the synchroniser
// and the stream interface are this design's choices.
module aer_rx #(
  parameter int unsigned WIDTH = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req,
  input  logic [WIDTH-1:0] data,
  output logic             ack,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_data,
  input  logic             out_ready
);
  logic req_s1, req_s2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_s1 <= 1'b0;
      req_s2 <= 1'b0;
    end else begin
      req_s1 <= req;
      req_s2 <= req_s1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack       <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (req_s2 && !ack && (!out_valid || out_ready)) begin
        out_data  <= data;
        out_valid <= 1'b1;
        ack       <= 1'b1;
      end else if (!req_s2 && ack) begin
        ack <= 1'b0;
      end
    end
  end
endmodule
