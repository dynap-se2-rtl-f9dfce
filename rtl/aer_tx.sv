// aer_tx: sending end of an asynchronous bundled-data AER channel.
//
// A word accepted from the valid/ready stream is put on `data`, and `req`
// is raised one clock later so that the data settle first. The module then
// waits for the synchronised `ack` to rise, drops `req`, and waits for `ack`
// to fall before it takes the next word (4-phase handshake). `in_ready` is
// high only in the idle phase.
//
// The protocol follows the usual AER convention; the clocked implementation
// is this design's own.
module aer_tx #(
  parameter int unsigned WIDTH = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             in_ready,
  output logic             req,
  output logic [WIDTH-1:0] data,
  input  logic             ack
);
  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_WAIT_ACK, S_WAIT_REL} state_e;
  state_e state;
  logic ack_s1, ack_s2;

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_s1 <= 1'b0;
      ack_s2 <= 1'b0;
    end else begin
      ack_s1 <= ack;
      ack_s2 <= ack_s1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      req   <= 1'b0;
      data  <= '0;
    end else begin
      unique case (state)
        S_IDLE:     if (in_valid) begin data <= in_data; state <= S_SETUP; end
        S_SETUP:    begin req <= 1'b1; state <= S_WAIT_ACK; end
        S_WAIT_ACK: if (ack_s2) begin req <= 1'b0; state <= S_WAIT_REL; end
        S_WAIT_REL: if (!ack_s2) state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  // data must stay stable while req is high (bundled-data rule)
  a_bundled: assert property (@(posedge clk) disable iff (!rst_n) req |-> $stable(data));
endmodule
