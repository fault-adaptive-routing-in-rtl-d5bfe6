// cn_top_tb - end-to-end test of the controller network (6 x 6 here).
//
// Gateway models send configuration packets into node (0,0) and collect ACK
// packets leaving node (W-1,0). Each experiment resets the network with a
// given set of faulty nodes, sends one packet, and waits for the ACK, for a
// drop, or for a time limit. Checked in every experiment: the payload lands in
// the destination's configuration register and nowhere else; an ACK that
// arrives names the destination; a packet is either delivered, dropped
// (terminated / dead end) or still circulating at the time limit.
//  Phase 1: no faults, one destination of each orientation type, one per
//           quarter of the grid: every packet and every ACK must arrive.
//  Phase 2: one faulty node on the XY path (as in the paper's single-fault
//           runs): fault adaptation must be used.
//  Phase 3: random faults with node failure probability 0.02 .. 0.08.
//  Phase 4: bursts of packets from both gateway sides at once, so that packets
//           meet at busy nodes.
// Each mechanism must occur at least once: delivery, ACK, XY<->YX switch,
// abnormal mode, termination, dead end, waiting at a busy node, refused U-turn
// at an edge wraparound, and traffic over edge wraparounds.
module cn_top_tb;
  import cn_pkg::*;

  localparam int W = 6;
  localparam int H = 6;
  localparam int N = W * H;
  localparam int LIMIT = 40 * (W + H) * 4 * PKT_W;   // cycles per experiment
  localparam int RUNS  = 6;                           // per destination and Pf

  logic clk = 0, rst_n = 0;
  logic [N-1:0] node_fault = '0;
  logic gwi_req, gwi_data, gwi_ack, gwo_req, gwo_data, gwo_ack;
  logic ackgw_req, ackgw_data, ackgw_ack, ackgwi_req, ackgwi_data, ackgwi_ack;
  logic [PAYLOAD_W-1:0] cfg [N];
  node_events_t ev [N];

  cn_top #(.W(W), .H(H)) dut (.*);

  tb_ch_send u_gwi    (.clk, .req(gwi_req),    .data(gwi_data),    .ack(gwi_ack));
  tb_ch_send u_ackgwi (.clk, .req(ackgwi_req), .data(ackgwi_data), .ack(ackgwi_ack));
  tb_ch_recv u_ackgw  (.clk, .req(ackgw_req),  .data(ackgw_data),  .ack(ackgw_ack));
  tb_ch_recv u_gwo    (.clk, .req(gwo_req),    .data(gwo_data),    .ack(gwo_ack));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_deliv = 0, n_ackm = 0, n_sw = 0, n_ab = 0, n_term = 0, n_dead = 0, n_ut = 0, n_wait = 0;
  int n_wrap = 0, n_lost = 0, n_ack_rx = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      n_deliv += int'(ev[i].delivered);
      n_ackm  += int'(ev[i].ack_made);
      n_sw    += int'(ev[i].switched);
      n_ab    += int'(ev[i].abnormal);
      n_term  += int'(ev[i].terminated);
      n_dead  += int'(ev[i].dead_end);
      n_ut    += int'(ev[i].uturn_avoid);
      n_wait  += int'(ev[i].contention);
    end
  end

  // Traffic over edge wraparounds: first bit of a packet on a wraparound
  // output (testbench's own list of wraparound outputs).
  logic [1:0] prev_req [N];
  always @(posedge clk) begin
    for (int x = 0; x < W; x++)
      for (int y = 0; y < H; y++) begin
        int id;
        logic wv, wh;
        id = x * H + y;
        wv = (x % 2 == 0 && y == H - 1) || (x % 2 == 1 && y == 0);
        wh = (y % 2 == 0 && x == W - 1 && y > 0) || (y % 2 == 1 && x == 0 && y > 1);
        if (wv && dut.o_req[id][0] && !prev_req[id][0]) n_wrap++;
        if (wh && dut.o_req[id][1] && !prev_req[id][1]) n_wrap++;
        prev_req[id] = dut.o_req[id];
      end
  end

  initial begin : watchdog
    repeat (400 * LIMIT) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic net_reset(input logic [N-1:0] faults);
    rst_n = 1'b0;
    node_fault = faults;
    repeat (3) @(posedge clk);
    u_ackgw.clear();
    u_gwo.clear();
    rst_n = 1'b1;
    @(posedge clk);
  endtask

  // One experiment. result: 1 delivered + ACK, 2 delivered + ACK dropped,
  // 3 dropped before delivery, 0 lost (time limit).
  task automatic experiment(input int dx, input int dy, input logic [N-1:0] faults,
                            output int result);
    packet_t pk;
    logic [PAYLOAD_W-1:0] pay;
    int drops0, t;
    logic others_clean;
    net_reset(faults);
    pay = PAYLOAD_W'($urandom_range(1, (1 << PAYLOAD_W) - 1));
    pk = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: coord_t'(dx),
           dst_y: coord_t'(dy), payload: pay};
    drops0 = n_term + n_dead;
    u_gwi.send(pk);
    t = 0;
    while (u_ackgw.q.size() == 0 && n_term + n_dead == drops0 && t < LIMIT) begin
      @(posedge clk);
      t++;
    end
    others_clean = 1'b1;
    for (int i = 0; i < N; i++)
      if (i != dx * H + dy && cfg[i] != '0) others_clean = 1'b0;
    check(others_clean, $sformatf("no other node configured (dest %0d,%0d)", dx, dy));
    if (u_ackgw.q.size() != 0) begin
      packet_t a;
      a = u_ackgw.q.pop_front();
      n_ack_rx++;
      check(cfg[dx * H + dy] == pay, $sformatf("payload at (%0d,%0d)", dx, dy));
      check(a.kind == KIND_ACK && a.payload == PAYLOAD_W'({coord_t'(dx), coord_t'(dy)}),
            $sformatf("ACK names (%0d,%0d): %h", dx, dy, a.payload));
      result = 1;
    end else if (n_term + n_dead != drops0) begin
      result = (cfg[dx * H + dy] == pay) ? 2 : 3;
    end else begin
      result = 0;
      n_lost++;
    end
    check(u_gwo.q.size() == 0, "nothing leaves towards the input gateway");
  endtask

  // XY path of the deadlock-free variant from (0,0), testbench's own walk, used
  // to place a single fault on it: same rules as the paper's figures.
  int dests [4][2] = '{'{1, 1}, '{4, 1}, '{1, 4}, '{4, 4}};

  initial begin
    int res, cnt_ok, cnt_fault_ok;
    logic [N-1:0] f;
    u_gwi.req = 0;
    repeat (3) @(posedge clk);

    // Phase 1: fault free, one destination per quarter and orientation type
    for (int d = 0; d < 4; d++) begin
      experiment(dests[d][0], dests[d][1], '0, res);
      check(res == 1, $sformatf("fault free delivery and ACK to (%0d,%0d)", dests[d][0], dests[d][1]));
    end
    // every node, fault free
    cnt_ok = 0;
    for (int x = 0; x < W; x++)
      for (int y = 0; y < H; y++) begin
        if (x == 0 && y == 0) continue;
        experiment(x, y, '0, res);
        if (res == 1) cnt_ok++;
      end
    check(cnt_ok == N - 1, $sformatf("fault free: %0d of %0d nodes reached and acknowledged", cnt_ok, N - 1));

    // Phase 2: one fault next to each destination's column / row
    cnt_fault_ok = 0;
    for (int d = 0; d < 4; d++)
      for (int k = 0; k < 4; k++) begin
        int fx, fy;
        fx = dests[d][0] + ((k == 0) ? 1 : (k == 1) ? -1 : 0);
        fy = dests[d][1] + ((k == 2) ? -1 : (k == 3) ? 1 : 0);
        f = '0;
        f[fx * H + fy] = 1'b1;
        experiment(dests[d][0], dests[d][1], f, res);
        check(res != 0, $sformatf("single fault at (%0d,%0d): packet delivered or dropped, not stuck", fx, fy));
        if (res == 1) cnt_fault_ok++;
      end
    $display("single fault next to destination: %0d of 16 acknowledged", cnt_fault_ok);

    // Phase 3: random faults, Pf = 0.02 .. 0.08
    for (int pf = 2; pf <= 8; pf += 2) begin
      int ok;
      ok = 0;
      for (int d = 0; d < 4; d++)
        for (int r = 0; r < RUNS; r++) begin
          f = '0;
          for (int i = 0; i < N; i++) f[i] = ($urandom_range(99) < pf);
          f[0] = 1'b0;                                   // entry node
          f[dests[d][0] * H + dests[d][1]] = 1'b0;       // destination
          experiment(dests[d][0], dests[d][1], f, res);
          if (res == 1) ok++;
        end
      $display("Pf=0.%02d: %0d of %0d acknowledged", pf, ok, 4 * RUNS);
    end

    // Phase 4: bursts from both gateway sides
    for (int b = 0; b < 4; b++) begin
      int t, sent;
      net_reset('0);
      sent = 0;
      fork
        for (int i = 0; i < 3; i++) begin
          u_gwi.send('{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL,
                       dst_x: coord_t'((b + i) % W), dst_y: coord_t'(H - 1 - i), payload: 10'h100 + 10'(i)});
          sent++;
        end
        for (int i = 0; i < 3; i++) begin
          u_ackgwi.send('{kind: KIND_DATA, alg: ALG_YX, mode: MODE_NORMAL,
                          dst_x: coord_t'(i), dst_y: coord_t'((b + 2 * i) % H), payload: 10'h200 + 10'(i)});
          sent++;
        end
      join
      t = 0;
      while (u_ackgw.q.size() < sent && t < LIMIT) begin @(posedge clk); t++; end
      n_ack_rx += u_ackgw.q.size();
      if (u_ackgw.q.size() < sent) n_lost++;
    end

    $display("events: delivered=%0d ack_made=%0d ack_received=%0d switched=%0d abnormal=%0d",
             n_deliv, n_ackm, n_ack_rx, n_sw, n_ab);
    $display("        terminated=%0d dead_end=%0d uturn_refused=%0d waited=%0d wrap_traffic=%0d lost=%0d",
             n_term, n_dead, n_ut, n_wait, n_wrap, n_lost);
    check(n_deliv > 0,  "mechanism: delivery");
    check(n_ack_rx > 0, "mechanism: ACK at the ACK gateway");
    check(n_sw > 0,     "mechanism: XY/YX switch at a fault");
    check(n_ab > 0,     "mechanism: abnormal mode");
    check(n_term > 0,   "mechanism: termination in abnormal mode");
    check(n_dead > 0,   "mechanism: dead end");
    check(n_ut > 0,     "mechanism: refused U-turn at an edge wraparound");
    check(n_wait > 0,   "mechanism: packet waiting at a busy node");
    check(n_wrap > 0,   "mechanism: traffic over edge wraparounds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
