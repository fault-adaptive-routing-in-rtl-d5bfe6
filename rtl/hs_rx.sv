// hs_rx - input channel endpoint of a controller node.
//
// Receives an N-bit word, most significant bit first, over the three-wire
// four-phase channel (req, data, bit ack) driven by hs_tx. For each bit: when
// `ch_req` is seen high, the bit on `ch_data` is shifted in and `ch_ack` is
// raised; when `ch_req` is seen low again, `ch_ack` is dropped. After the N-th
// bit's handshake has returned to zero, `done` pulses for one cycle and `word`
// holds the received word until the next word starts.
//
// `enable` gates only the first bit of a word: a node that is busy simply does
// not acknowledge, and the sender waits with req high. Once a word has started,
// the endpoint finishes it on its own (the paper: a selected input is not changed
// until the whole packet has been received). `active` is high from the first
// bit until `done`. Like hs_tx this is a clocked implementation of the paper's
// asynchronous protocol; the ack is registered, so it follows req by one cycle.
module hs_rx #(
  parameter int N = 23
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  output logic         active,
  output logic         done,
  output logic [N-1:0] word,
  input  logic         ch_req,
  input  logic         ch_data,
  output logic         ch_ack
);

  logic [$clog2(N+1)-1:0] got;

  assign active = (got != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got    <= '0;
      word   <= '0;
      ch_ack <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!ch_ack) begin
        if (ch_req && (enable || got != 0)) begin
          word   <= {word[N-2:0], ch_data};
          got    <= got + 1'b1;
          ch_ack <= 1'b1;
        end
      end else if (!ch_req) begin
        ch_ack <= 1'b0;
        if (got == N[$clog2(N+1)-1:0]) begin
          got  <= '0;
          done <= 1'b1;
        end
      end
    end
  end

  // The sender must hold req until it has seen the ack.
  assert property (@(posedge clk) disable iff (!rst_n) (ch_req && !ch_ack) |=> (ch_req || ch_ack));

endmodule
