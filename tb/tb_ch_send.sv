// tb_ch_send - testbench model of a gateway's sending channel endpoint.
//
// Behavioural: `send(pkt)` shifts one packet out, most significant bit first,
// with the four-phase req/data/ack handshake, changing req/data on the falling
// clock edge. The gateways are external devices (clocked "smart" boards); this
// model stands in for their network interface.
module tb_ch_send
  import cn_pkg::*;
(
  input  logic clk,
  output logic req,
  output logic data,
  input  logic ack
);
  initial begin req = 1'b0; data = 1'b0; end

  task automatic send(input packet_t pk);
    logic [PKT_W-1:0] b;
    b = pk;
    for (int i = PKT_W - 1; i >= 0; i--) begin
      @(negedge clk);
      data = b[i];
      req  = 1'b1;
      while (!ack) @(negedge clk);
      req = 1'b0;
      while (ack) @(negedge clk);
    end
  endtask
endmodule
