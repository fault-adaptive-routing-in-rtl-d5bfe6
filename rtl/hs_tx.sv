// hs_tx - output channel endpoint of a controller node.
//
// Sends an N-bit word one bit at a time over a three-wire channel (req, data,
// bit ack) with a four-phase, return-to-zero handshake: the sender puts a bit on
// `ch_data` and raises `ch_req`; the receiver takes the bit and raises `ch_ack`;
// the sender drops `ch_req`; the receiver drops `ch_ack`; the next bit follows.
// Bits go most significant first. The three wires per channel endpoint and the
// four-phase protocol follow the paper; the bit order is this design's choice.
//
// The paper's controllers are asynchronous circuits. This block is a clocked
// implementation of the same protocol: req and ack are sampled on `clk`, so a
// bit costs four clock cycles when the receiver answers within one cycle.
// Nodes in one simulation share one clock, so no synchronisers are inserted;
// a chip built from this RTL with independent clocks per node would need a
// two-flop synchroniser on `ch_ack`.
//
// Interface: pulse `start` for one cycle with the word on `word` while `busy` is
// low. `busy` stays high until the last bit's handshake has returned to zero;
// `done` pulses in that cycle. Reset (active low) leaves req low.
module hs_tx #(
  parameter int N = 23
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] word,
  output logic         busy,
  output logic         done,
  output logic         ch_req,
  output logic         ch_data,
  input  logic         ch_ack
);

  typedef enum logic [1:0] {T_IDLE, T_WAIT_ACK_HI, T_WAIT_ACK_LO} tx_state_e;

  tx_state_e            state;
  logic [N-1:0]         sreg;
  logic [$clog2(N+1)-1:0] left;

  assign busy    = (state != T_IDLE);
  assign ch_data = sreg[N-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= T_IDLE;
      sreg   <= '0;
      left   <= '0;
      ch_req <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          sreg   <= word;
          left   <= N[$clog2(N+1)-1:0];
          ch_req <= 1'b1;
          state  <= T_WAIT_ACK_HI;
        end
        T_WAIT_ACK_HI: if (ch_ack) begin
          ch_req <= 1'b0;
          state  <= T_WAIT_ACK_LO;
        end
        T_WAIT_ACK_LO: if (!ch_ack) begin
          sreg <= sreg << 1;
          left <= left - 1'b1;
          if (left == 1) begin
            done  <= 1'b1;
            state <= T_IDLE;
          end else begin
            ch_req <= 1'b1;
            state  <= T_WAIT_ACK_HI;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  // A new word may only be started when the previous one is finished.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  // req is only raised once the receiver has returned ack to zero.
  assert property (@(posedge clk) disable iff (!rst_n) $rose(ch_req) |-> !$past(ch_ack));

endmodule
