// cn_node_tb - self-checking test of one controller node.
//
// Node (2,2) of a 6 x 6 network (orientation type 0: vertical output north,
// horizontal output east). The testbench drives both input channels with its
// own four-phase senders and collects whatever leaves on the two outputs with
// its own receivers. It checks:
//  - forwarding with the header unchanged, on the output XY calls for, and the
//    store-and-forward latency (whole packet in, then whole packet out);
//  - ejection: payload into `cfg`, then an ACK packet to the ACK gateway
//    carrying the node's coordinates;
//  - LFA: blocked preferred output -> other output, XY -> YX, abnormal mode;
//    a second fault in abnormal mode and a dead end drop the packet;
//  - both inputs requesting at once: both packets served one after the other,
//    never receiving while transmitting.
module cn_node_tb;
  import cn_pkg::*;

  localparam int W = 6, H = 6, X = 2, Y = 2;

  logic clk = 0, rst_n = 0;
  logic [1:0] in_req = 0, in_data = 0, in_ack;
  logic [1:0] out_req, out_data, out_ack = 0;
  logic [1:0] out_blocked = 0;
  logic [PAYLOAD_W-1:0] cfg;
  node_events_t ev;

  int checks = 0, failures = 0;
  int n_contention = 0, n_delivered = 0, n_term = 0, n_dead = 0, n_sw = 0, n_ab = 0;

  coord_t node_x = coord_t'(X), node_y = coord_t'(Y);

  cn_node #(.W(W), .H(H)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (ev.contention) n_contention++;
    if (ev.delivered)  n_delivered++;
    if (ev.terminated) n_term++;
    if (ev.dead_end)   n_dead++;
    if (ev.switched)   n_sw++;
    if (ev.abnormal)   n_ab++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // A node never receives and transmits at the same time.
  always @(posedge clk) if (rst_n && (out_req != 0) && (in_ack != 0)) begin
    failures++;
    $display("FAIL: receiving while transmitting");
  end

  // Sender model on input p.
  task automatic send(input int p, input packet_t pk);
    logic [PKT_W-1:0] b;
    b = pk;
    for (int i = PKT_W - 1; i >= 0; i--) begin
      @(negedge clk);
      in_data[p] = b[i];
      in_req[p]  = 1'b1;
      while (!in_ack[p]) @(negedge clk);
      in_req[p] = 1'b0;
      while (in_ack[p]) @(negedge clk);
    end
  endtask

  // Receiver models on both outputs.
  packet_t got_q [2][$];
  int      got_t [2][$];
  for (genvar p = 0; p < 2; p++) begin : g_rx
    initial begin
      logic [PKT_W-1:0] b;
      int n;
      n = 0;
      forever begin
        @(posedge clk);
        if (out_req[p] && !out_ack[p]) begin
          b = {b[PKT_W-2:0], out_data[p]};
          n++;
          out_ack[p] <= 1'b1;
          @(posedge clk);
          while (out_req[p]) @(posedge clk);
          out_ack[p] <= 1'b0;
          if (n == PKT_W) begin
            got_q[p].push_back(packet_t'(b));
            got_t[p].push_back(int'($time / 10));
            n = 0;
          end
        end
      end
    end
  end

  task automatic expect_pkt(input int p, input packet_t pk, input string what);
    int waited;
    waited = 0;
    while (got_q[p].size() == 0 && waited < 1000) begin @(posedge clk); waited++; end
    check(got_q[p].size() != 0, {what, ": packet arrives"});
    if (got_q[p].size() != 0) begin
      packet_t g;
      g = got_q[p].pop_front();
      void'(got_t[p].pop_front());
      check(g == pk, $sformatf("%s: got %h expected %h", what, g, pk));
    end
  endtask

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    packet_t pk, ack;
    int t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(cfg == 0 && out_req == 0, "reset state");

    // 1. forward north: destination (2,5), arriving on the horizontal input
    pk = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 2, dst_y: 5, payload: 10'h155};
    send(1, pk);
    t0 = $time / 10;
    check(out_req == 0, "nothing sent before the whole packet is in");
    while (out_req == 0) @(posedge clk);
    t1 = $time / 10;
    check(t1 - t0 <= 4, $sformatf("routing takes %0d cycles", t1 - t0));
    expect_pkt(PORT_V, pk, "forward north");
    // 4 cycles per bit on the output with a receiver that answers at once
    t0 = $time / 10;
    check(t0 - t1 >= 4 * PKT_W - 2 && t0 - t1 <= 4 * PKT_W + 2,
          $sformatf("output takes %0d cycles for %0d bits", t0 - t1, PKT_W));
    check(got_q[PORT_H].size() == 0, "nothing on the other output");

    // 2. forward east: destination (5,2)
    pk = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 5, dst_y: 2, payload: 10'h0F0};
    send(0, pk);
    expect_pkt(PORT_H, pk, "forward east");

    // 3. ejection and ACK
    pk = '{kind: KIND_DATA, alg: ALG_YX, mode: MODE_ABNORMAL, dst_x: 2, dst_y: 2, payload: 10'h2AB};
    send(0, pk);
    ack = '{kind: KIND_ACK, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 5, dst_y: 0,
            payload: PAYLOAD_W'({coord_t'(X), coord_t'(Y)})};
    expect_pkt(PORT_H, ack, "ACK after delivery");
    check(cfg == 10'h2AB, $sformatf("configuration written: %h", cfg));
    check(n_delivered == 1, "one delivery event");

    // 4. LFA: north output blocked (faulty (2,3)), packet for (2,5)
    out_blocked = 2'b01;
    pk = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 2, dst_y: 5, payload: 10'h001};
    send(1, pk);
    pk.alg = ALG_YX; pk.mode = MODE_ABNORMAL;
    expect_pkt(PORT_H, pk, "LFA detour east, YX, abnormal");
    check(n_sw == 1 && n_ab == 1, "switch and abnormal events");

    // 5. abnormal packet meets a fault: terminated
    pk = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_ABNORMAL, dst_x: 2, dst_y: 5, payload: 10'h002};
    send(1, pk);
    repeat (200) @(posedge clk);
    check(got_q[0].size() == 0 && got_q[1].size() == 0 && n_term == 1, "abnormal packet terminated");

    // 6. both outputs blocked: dropped
    out_blocked = 2'b11;
    pk = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 4, dst_y: 4, payload: 10'h003};
    send(0, pk);
    repeat (200) @(posedge clk);
    check(got_q[0].size() == 0 && got_q[1].size() == 0 && n_dead == 1, "dead end dropped");
    check(cfg == 10'h2AB, "configuration untouched by dropped packets");
    out_blocked = 2'b00;

    // 7. both inputs at once
    fork
      send(0, '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 2, dst_y: 4, payload: 10'h011});
      send(1, '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 4, dst_y: 2, payload: 10'h022});
    join
    expect_pkt(PORT_V, '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 2, dst_y: 4, payload: 10'h011}, "contention V");
    expect_pkt(PORT_H, '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 4, dst_y: 2, payload: 10'h022}, "contention H");
    check(n_contention >= 1, "contention seen");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
