// tb_ch_recv - testbench model of a gateway's receiving channel endpoint.
//
// Behavioural: acknowledges every bit one cycle after req rises, releases ack
// once req falls, and queues every complete packet in `q` with the clock cycle
// count of its arrival in `t`. `clear()` empties the queue and any partial
// packet (used when the network is reset between experiments).
module tb_ch_recv
  import cn_pkg::*;
(
  input  logic clk,
  input  logic req,
  input  logic data,
  output logic ack
);
  packet_t q[$];
  longint  t[$];
  longint  cyc = 0;
  int      n = 0;
  logic [PKT_W-1:0] b = '0;

  initial ack = 1'b0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    forever begin
      @(posedge clk);
      if (req && !ack) begin
        b = {b[PKT_W-2:0], data};
        n++;
        ack <= 1'b1;
        @(posedge clk);
        while (req) @(posedge clk);
        ack <= 1'b0;
        if (n == PKT_W) begin
          q.push_back(packet_t'(b));
          t.push_back(cyc);
          n = 0;
        end
      end
    end
  end

  function automatic void clear();
    q.delete();
    t.delete();
    n = 0;
  endfunction
endmodule
