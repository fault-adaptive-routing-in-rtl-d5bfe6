// route_unit_tb - self-checking test of the next-hop decision.
//
// The testbench has its own model of the grid (which node each output leads
// to) and walks packets hop by hop, asking the routing unit at every node.
//  1. Deadlock-free XY path from the input gateway to (3,4) on a 6 x 6 grid,
//     compared node by node with the path drawn for the variant.
//  2. The LFA walk-through situation (fault at (4,3), packet at (4,2) heading
//     for (3,3)): switch to the healthy output with XY -> YX and abnormal mode,
//     YX from node a goes east, north, west, and the second fault terminates it.
//  3. Fault-free reachability on the 24 x 24 grid, XY and YX: every destination
//     from the input gateway, every node pair, and an ACK from every node to
//     the ACK gateway, each within a hop bound, never a drop, never a U-turn.
//  4. Corner cases: eject, dead end, normal-mode switch without abnormal,
//     refused 180-degree turn at an edge wraparound.
module route_unit_tb;
  import cn_pkg::*;

  localparam int W = 24;
  localparam int H = 24;

  coord_t     cur_x, cur_y;
  packet_t    pkt_in, pkt_out;
  logic       arr_valid;
  port_e      arr_port, out_port;
  logic [1:0] out_blocked;
  logic       eject, fwd, ev_sw, ev_ab, ev_term, ev_dead, ev_ut;

  int checks = 0, failures = 0;

  // Grid size used by the walks; the DUT instance for 6 x 6 / 8 x 6 cases is
  // separate so each has the right wraparounds.
  route_unit #(.W(W), .H(H)) dut (
    .cur_x, .cur_y, .pkt_in, .arr_valid, .arr_port, .out_blocked,
    .eject, .fwd, .out_port, .pkt_out,
    .ev_switched(ev_sw), .ev_abnormal(ev_ab), .ev_terminated(ev_term),
    .ev_dead_end(ev_dead), .ev_uturn(ev_ut)
  );

  coord_t     s_x, s_y;
  packet_t    s_pkt_in, s_pkt_out;
  logic       s_arr_valid;
  port_e      s_arr_port, s_out_port;
  logic [1:0] s_blk;
  logic       s_eject, s_fwd, s_sw, s_ab, s_term, s_dead, s_ut;

  route_unit #(.W(8), .H(6)) dut_s (
    .cur_x(s_x), .cur_y(s_y), .pkt_in(s_pkt_in), .arr_valid(s_arr_valid),
    .arr_port(s_arr_port), .out_blocked(s_blk), .eject(s_eject), .fwd(s_fwd),
    .out_port(s_out_port), .pkt_out(s_pkt_out), .ev_switched(s_sw),
    .ev_abnormal(s_ab), .ev_terminated(s_term), .ev_dead_end(s_dead), .ev_uturn(s_ut)
  );

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Testbench's own grid model: next node along an output, (-1,-1) = gateway.
  task automatic tb_next(input int w, input int h, input int x, input int y,
                         input int port, output int nx, output int ny);
    if (port == 0) begin                       // vertical
      if (x % 2 == 0) begin nx = x; ny = y + 1; if (ny == h) begin ny = y; nx = x + 1; end end
      else            begin nx = x; ny = y - 1; if (ny < 0)  begin ny = 0; nx = x - 1; end end
    end else begin                             // horizontal
      if (y % 2 == 0) begin nx = x + 1; ny = y; if (nx == w) begin nx = (y == 0) ? -1 : x; ny = (y == 0) ? -1 : y + 1; end end
      else            begin nx = x - 1; ny = y; if (nx < 0)  begin nx = (y == 1) ? -1 : 0; ny = (y == 1) ? -1 : y - 1; end end
    end
  endtask

  // Walk a packet on the 24 x 24 DUT without faults. Returns hops, -1 on drop,
  // -2 on exceeding the bound. `ack` packets must leave to the ACK gateway.
  task automatic walk(input int sx, input int sy, input int dx, input int dy,
                      input alg_e alg, input kind_e kind, input int arrived_port,
                      output int hops, output int uturns);
    int x, y, nx, ny, lim;
    packet_t p;
    p = '{kind: kind, alg: alg, mode: MODE_NORMAL, dst_x: coord_t'(dx),
          dst_y: coord_t'(dy), payload: '0};
    x = sx; y = sy; hops = 0; uturns = 0;
    lim = 3 * ((dx > sx ? dx - sx : sx - dx) + (dy > sy ? dy - sy : sy - dy)) + 12;
    arr_valid = (arrived_port >= 0);
    arr_port  = (arrived_port == 1) ? PORT_H : PORT_V;
    out_blocked = 2'b00;
    forever begin
      cur_x = coord_t'(x); cur_y = coord_t'(y); pkt_in = p;
      #1;
      if (ev_ut) uturns++;
      if (eject) return;
      if (!fwd) begin hops = -1; return; end
      tb_next(W, H, x, y, (out_port == PORT_H) ? 1 : 0, nx, ny);
      hops++;
      if (nx < 0) begin
        if (!(kind == KIND_ACK && x == W - 1 && y == 0)) hops = -1;
        return;
      end
      p = pkt_out;
      x = nx; y = ny;
      arr_valid = 1'b1;
      arr_port  = out_port;
      if (hops > lim) begin hops = -2; return; end
    end
  endtask

  // One step on the 8 x 6 DUT.
  task automatic step_s(input int x, input int y, input packet_t p, input logic [1:0] blk,
                        input int arrived_port);
    s_x = coord_t'(x); s_y = coord_t'(y); s_pkt_in = p; s_blk = blk;
    s_arr_valid = (arrived_port >= 0);
    s_arr_port  = (arrived_port == 1) ? PORT_H : PORT_V;
    #1;
  endtask

  initial begin : watchdog
    #50000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hops, ut, nx, ny, x, y, cnt_xy, cnt_yx, cnt_ack, maxh;
    packet_t p;
    int exp_path [8][2] = '{'{0,0},'{1,0},'{2,0},'{2,1},'{2,2},'{2,3},'{2,4},'{3,4}};

    // ---- 1. deadlock-free XY, 6x6 layout (first 6x6 corner of the 8x6 DUT)
    p = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 3, dst_y: 4, payload: '0};
    x = 0; y = 0;
    for (int i = 0; i < 8; i++) begin
      check(x == exp_path[i][0] && y == exp_path[i][1],
            $sformatf("XY path step %0d at (%0d,%0d)", i, x, y));
      step_s(x, y, p, 2'b00, (i == 0) ? 1 : -1);
      if (i == 7) check(s_eject, "XY path ejects at (3,4)");
      else begin
        check(s_fwd, "XY path forwards");
        tb_next(8, 6, x, y, (s_out_port == PORT_H) ? 1 : 0, nx, ny);
        x = nx; y = ny;
        p = s_pkt_out;
      end
    end

    // ---- 2. walk-through: fault at (4,3), node prior (4,2), destination (3,3)
    p = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 3, dst_y: 3, payload: '0};
    step_s(4, 2, p, 2'b00, 0);
    check(s_fwd && s_out_port == PORT_V, "XY at (4,2) would go north into (4,3)");
    step_s(4, 2, p, 2'b01, 0);   // V output blocked: (4,3) faulty
    check(s_fwd && s_out_port == PORT_H, "LFA sends east to a");
    check(s_sw && s_pkt_out.alg == ALG_YX, "LFA switches XY -> YX");
    check(s_ab && s_pkt_out.mode == MODE_ABNORMAL, "fault between node and target: abnormal mode");
    p = s_pkt_out;
    step_s(5, 2, p, 2'b00, 1);
    check(s_fwd && s_out_port == PORT_H, "YX at a=(5,2) goes east");
    step_s(6, 2, p, 2'b00, 1);
    check(s_fwd && s_out_port == PORT_V, "YX at (6,2) goes north");
    step_s(6, 3, p, 2'b00, 0);
    check(s_fwd && s_out_port == PORT_H, "YX at (6,3) goes west");
    step_s(5, 3, p, 2'b10, 1);   // H output of (5,3) leads to faulty (4,3)
    check(!s_fwd && s_term && !s_eject, "second fault in abnormal mode terminates");
    // Same fault met in normal mode: switch again instead.
    p.mode = MODE_NORMAL;
    step_s(5, 3, p, 2'b10, 1);
    check(s_fwd && s_out_port == PORT_V && s_sw && s_pkt_out.alg == ALG_XY,
          "normal mode: YX -> XY on the other output");
    // Fault outside the rectangle node..target: switch, stay normal.
    // (3,1) -> (5,1): the west row forces a detour south to (3,0); (3,0) faulty.
    p = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 5, dst_y: 1, payload: '0};
    step_s(3, 1, p, 2'b01, 1);
    check(s_fwd && s_out_port == PORT_H && s_sw && !s_ab && s_pkt_out.mode == MODE_NORMAL,
          "fault off the rectangle: switch without abnormal mode");
    p = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 5, dst_y: 5, payload: '0};
    step_s(2, 2, p, 2'b11, 1);
    check(!s_fwd && s_dead && !s_eject, "both outputs blocked: dead end");
    step_s(5, 5, p, 2'b11, 1);
    check(s_eject && !s_fwd, "eject at destination");
    // ACK leaves (W-1,0) to the ACK gateway
    p = '{kind: KIND_ACK, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 7, dst_y: 0, payload: '0};
    step_s(7, 0, p, 2'b00, 0);
    check(s_fwd && s_out_port == PORT_H && !s_eject, "ACK exits to the ACK gateway");
    // Data packet at (W-1,0) never uses the gateway output.
    p = '{kind: KIND_DATA, alg: ALG_YX, mode: MODE_NORMAL, dst_x: 7, dst_y: 3, payload: '0};
    step_s(7, 0, p, 2'b00, 0);
    check(s_fwd && s_out_port == PORT_V, "data packet at (W-1,0) avoids the ACK gateway");
    // 180-degree turn at the top edge wraparound: (6,5) -> (7,5) by V, (7,5)
    // would go back west by H. Packet for (2,5) arriving at (7,5) on V, XY.
    p = '{kind: KIND_DATA, alg: ALG_XY, mode: MODE_NORMAL, dst_x: 2, dst_y: 5, payload: '0};
    step_s(7, 5, p, 2'b00, -1);
    check(s_fwd && s_out_port == PORT_H && !s_ut, "made locally: west on top row");
    step_s(7, 5, p, 2'b00, 0);
    check(s_ut && s_fwd && s_out_port == PORT_V && s_pkt_out.alg == ALG_YX,
          "U-turn at edge wraparound refused, other output used");

    // ---- 3. fault-free reachability, 24 x 24
    cnt_xy = 0; cnt_yx = 0; cnt_ack = 0; maxh = 0;
    for (int dx = 0; dx < W; dx++)
      for (int dy = 0; dy < H; dy++) begin
        if (dx == 0 && dy == 0) continue;
        walk(0, 0, dx, dy, ALG_XY, KIND_DATA, 1, hops, ut);
        if (hops > 0 && ut == 0) cnt_xy++;
        else $display("XY from GW to (%0d,%0d): hops=%0d uturns=%0d", dx, dy, hops, ut);
        if (hops > maxh) maxh = hops;
        walk(0, 0, dx, dy, ALG_YX, KIND_DATA, 1, hops, ut);
        if (hops > 0 && ut == 0) cnt_yx++;
        else $display("YX from GW to (%0d,%0d): hops=%0d uturns=%0d", dx, dy, hops, ut);
        walk(dx, dy, W - 1, 0, ALG_XY, KIND_ACK, -1, hops, ut);
        if (hops > 0 && ut == 0) cnt_ack++;
        else $display("ACK from (%0d,%0d): hops=%0d", dx, dy, hops);
      end
    check(cnt_xy == W * H - 1, $sformatf("XY reaches all %0d nodes (%0d)", W * H - 1, cnt_xy));
    check(cnt_yx == W * H - 1, $sformatf("YX reaches all nodes (%0d)", cnt_yx));
    check(cnt_ack == W * H - 1, $sformatf("ACK from all nodes (%0d)", cnt_ack));
    // XY from the gateway to (dx,dy) never needs more than |dx|+|dy|+3 hops.
    check(maxh <= W + H + 1, $sformatf("longest XY path from gateway %0d hops", maxh));
    cnt_xy = 0;
    // every ordered pair of nodes, XY and YX
    for (int i = 0; i < 2 * W * H * W * H; i++) begin
      int sx, sy, dx, dy;
      sx = (i / 2) % W; sy = (i / 2 / W) % H; dx = (i / 2 / W / H) % W; dy = i / 2 / W / H / W;
      if (sx == dx && sy == dy) begin cnt_xy++; continue; end
      walk(sx, sy, dx, dy, (i % 2) ? ALG_YX : ALG_XY, KIND_DATA, -1, hops, ut);
      if (hops > 0 && ut == 0) cnt_xy++;
      else $display("pair (%0d,%0d)->(%0d,%0d) alg %0d: hops=%0d", sx, sy, dx, dy, i % 2, hops);
    end
    check(cnt_xy == 2 * W * H * W * H, $sformatf("all pairs delivered %0d", cnt_xy));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
