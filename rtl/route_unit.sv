// route_unit - next-hop decision of a controller node: orientation-aware XY / YX
// routing with the loop-free algorithm's (LFA) XY-YX fault adaptation.
//
// Every node can send on only two outputs, vertical (V) and horizontal (H), whose
// directions are fixed by the node's orientation (column parity for V, row parity
// for H). The routing functions therefore choose between "move" and "detour":
//
//  XY (header alg = 0), X offset first:
//   - on the destination column: V if the column runs towards the destination
//     row, else H (step to the neighbouring column, which runs the other way);
//   - on the destination row: H if the row runs towards the destination column,
//     else V (step to the neighbouring row);
//   - otherwise the packet heads for the column it will climb: the destination
//     column if that column runs the right way, else the column just before it
//     in the direction of travel (the deadlock-free XY variant: "the even column
//     that is before the destination column"); it moves H when the row runs
//     towards that column, V otherwise, and V once on that column.
//  YX (alg = 1) is the same with the roles of rows and columns exchanged.
//  From the input gateway, XY to (3,4) gives exactly the deadlock-free XY path
//  drawn in the paper; YX from node a=(5,2) to (3,3) gives east, north, west into
//  the faulty node, as in the paper's walk-through. The case split itself is
//  this design's own, since the paper gives the rules only by example.
//
//  LFA fault adaptation (paper): an output is unusable when its channel is
//  faulty or leads to a faulty node (`out_blocked`). If the preferred output is
//  unusable and the other is usable, the packet is sent on the other output and
//  the alg bit is flipped (XY <-> YX) so the next node routes with the other
//  order. The node prior to the fault also sets the mode bit to abnormal when
//  the faulty node lies in the rectangle spanned by this node and the
//  destination (this design's rule for "if necessary"; the paper compares fault
//  and target location but does not publish the rule). A packet already in
//  abnormal mode that meets another fault is terminated (dropped). If both
//  outputs are unusable the packet is dropped. 180-degree turns at edge
//  wraparounds (leaving towards the node the packet came from) are never taken.
//  The paper's abnormal-mode turn-prohibition table is not published and is not
//  implemented: in abnormal mode the packet routes with plain XY/YX.
//
//  Data packets are ejected at their destination. ACK packets are addressed to
//  node (W-1,0) and leave there on its H output, which is the ACK gateway.
//
// Purely combinational; `cur_x`/`cur_y` are constants in the network. Only the
// alg and mode fields of `pkt_out` are ever rewritten; the other header and
// payload bits pass straight through.
module route_unit
  import cn_pkg::*;
#(
  parameter int W = 24,
  parameter int H = 24
) (
  input  coord_t      cur_x,
  input  coord_t      cur_y,
  input  packet_t     pkt_in,
  input  logic        arr_valid,    // packet arrived on a link (not made here)
  input  port_e       arr_port,     // which input it arrived on
  input  logic [1:0]  out_blocked,  // [PORT_V], [PORT_H]: faulty channel/neighbour
  output logic        eject,        // data packet for this node
  output logic        fwd,          // send pkt_out on out_port
  output port_e       out_port,
  output packet_t     pkt_out,
  output logic        ev_switched,
  output logic        ev_abnormal,
  output logic        ev_terminated,
  output logic        ev_dead_end,
  output logic        ev_uturn
);

  // Signed coordinate arithmetic, wide enough for differences of coordinates.
  typedef logic signed [COORD_W+1:0] sc_t;

  // XY choice at (x,y) towards (dx,dy), (x,y) != (dx,dy).
  function automatic port_e route_xy(input sc_t x, input sc_t y, input sc_t dx, input sc_t dy);
    sc_t  ex, ey, tx, hd;
    logic h_good, v_good, col_ok_dx;
    ex = dx - x;
    ey = dy - y;
    h_good = (ex > 0 && !y[0]) || (ex < 0 && y[0]);
    v_good = (ey > 0 && !x[0]) || (ey < 0 && x[0]);
    if (ex == 0)      return v_good ? PORT_V : PORT_H;
    else if (ey == 0) return h_good ? PORT_H : PORT_V;
    else begin
      // Column to climb: the destination column if it runs towards dy, else
      // the neighbour from which the destination row leads into dx.
      col_ok_dx = ((ey > 0) == !dx[0]);
      hd = dy[0] ? -sc_t'(1) : sc_t'(1);
      tx = dx - hd;
      if (tx < 0 || tx >= sc_t'(W)) tx = dx + hd;
      if (col_ok_dx) tx = dx;
      if (x == tx) return v_good ? PORT_V : PORT_H;
      return h_good ? PORT_H : PORT_V;
    end
  endfunction

  // YX choice at (x,y) towards (dx,dy), (x,y) != (dx,dy).
  function automatic port_e route_yx(input sc_t x, input sc_t y, input sc_t dx, input sc_t dy);
    sc_t  ex, ey, ty, vd;
    logic h_good, v_good, row_ok_dy;
    ex = dx - x;
    ey = dy - y;
    h_good = (ex > 0 && !y[0]) || (ex < 0 && y[0]);
    v_good = (ey > 0 && !x[0]) || (ey < 0 && x[0]);
    if (ey == 0)      return h_good ? PORT_H : PORT_V;
    else if (ex == 0) return v_good ? PORT_V : PORT_H;
    else begin
      // Row to travel: the destination row if it runs towards dx, else the
      // neighbour from which the destination column leads into dy.
      row_ok_dy = ((ex > 0) == !dy[0]);
      vd = dx[0] ? -sc_t'(1) : sc_t'(1);
      ty = dy - vd;
      // No such row at the top or bottom edge: fall back to X first.
      if (!row_ok_dy && (ty < 0 || ty >= sc_t'(H))) return route_xy(x, y, dx, dy);
      if (row_ok_dy) ty = dy;
      if (y == ty) return h_good ? PORT_H : PORT_V;
      return v_good ? PORT_V : PORT_H;
    end
  endfunction

  // Neighbour positions of this node (a gateway gives valid = 0).
  typedef struct packed { logic valid; sc_t x; sc_t y; } pos_t;

  function automatic pos_t v_next_pos(input sc_t x, input sc_t y);
    if (!x[0]) return (y < sc_t'(H - 1)) ? '{1'b1, x, y + 1} : '{1'b1, x + 1, y};
    else       return (y > 0)            ? '{1'b1, x, y - 1} : '{1'b1, x - 1, y};
  endfunction

  function automatic pos_t h_next_pos(input sc_t x, input sc_t y);
    if (!y[0]) begin
      if (x < sc_t'(W - 1)) return '{1'b1, x + 1, y};
      if (y == 0)           return '{1'b0, x, y};        // ACK gateway
      return '{1'b1, x, y + 1};                          // right edge wraparound
    end else begin
      if (x > 0)            return '{1'b1, x - 1, y};
      if (y == 1)           return '{1'b0, x, y};        // input gateway
      return '{1'b1, x, y - 1};                          // left edge wraparound
    end
  endfunction

  // Where the vertical / horizontal input comes from.
  function automatic pos_t src_pos(input sc_t x, input sc_t y, input port_e p);
    if (p == PORT_V) begin
      if (!x[0]) return (y > 0)            ? '{1'b1, x, y - 1} : '{1'b1, x + 1, y};
      else       return (y < sc_t'(H - 1)) ? '{1'b1, x, y + 1} : '{1'b1, x - 1, y};
    end else begin
      if (!y[0]) begin
        if (x > 0)            return '{1'b1, x - 1, y};
        if (y == 0)           return '{1'b0, x, y};      // input gateway
        return '{1'b1, x, y + 1};
      end else begin
        if (x < sc_t'(W - 1)) return '{1'b1, x + 1, y};
        if (y == 1)           return '{1'b0, x, y};      // ACK gateway side
        return '{1'b1, x, y - 1};
      end
    end
  endfunction

  always_comb begin
    sc_t   x, y, dx, dy;
    pos_t  vn, hn, src;
    sc_t   fx, fy;
    logic  ack_exit, gw_edge, in_box;
    logic [1:0] uturn, usable;
    port_e pref, other;

    x  = sc_t'(cur_x);
    y  = sc_t'(cur_y);
    dx = sc_t'(pkt_in.dst_x);
    dy = sc_t'(pkt_in.dst_y);

    eject         = 1'b0;
    fwd           = 1'b0;
    out_port      = PORT_V;
    pkt_out       = pkt_in;
    ev_switched   = 1'b0;
    ev_abnormal   = 1'b0;
    ev_terminated = 1'b0;
    ev_dead_end   = 1'b0;
    ev_uturn      = 1'b0;
    pref          = PORT_V;
    other         = PORT_H;
    in_box        = 1'b0;

    vn  = v_next_pos(x, y);
    hn  = h_next_pos(x, y);
    src = src_pos(x, y, arr_port);
    // Node ahead on the preferred output (used when that node is faulty).
    fx  = 0;
    fy  = 0;

    // 180-degree turn at an edge wraparound: the output leads back to the sender.
    uturn[PORT_V] = arr_valid && src.valid && (vn == src);
    uturn[PORT_H] = arr_valid && src.valid && (hn == src);

    // The H output of (W-1,0) and (0,1) leads to a gateway, not into the grid.
    gw_edge  = !hn.valid;
    ack_exit = (pkt_in.kind == KIND_ACK) && (x == sc_t'(W - 1)) && (y == 0);

    usable[PORT_V] = !out_blocked[PORT_V] && !uturn[PORT_V];
    usable[PORT_H] = !out_blocked[PORT_H] && !uturn[PORT_H] && !gw_edge;

    if (pkt_in.kind == KIND_DATA && x == dx && y == dy) begin
      eject = 1'b1;
    end else if (ack_exit) begin
      fwd      = 1'b1;
      out_port = PORT_H;
    end else begin
      if (gw_edge)                   pref = PORT_V;
      else if (pkt_in.alg == ALG_XY) pref = route_xy(x, y, dx, dy);
      else                           pref = route_yx(x, y, dx, dy);
      other = (pref == PORT_V) ? PORT_H : PORT_V;
      ev_uturn = uturn[pref];
      fx = (pref == PORT_V) ? vn.x : hn.x;
      fy = (pref == PORT_V) ? vn.y : hn.y;

      if (usable[pref]) begin
        fwd      = 1'b1;
        out_port = pref;
      end else if (usable[other]) begin
        if (pkt_in.mode == MODE_ABNORMAL) begin
          ev_terminated = 1'b1;
        end else begin
          fwd         = 1'b1;
          out_port    = other;
          ev_switched = 1'b1;
          pkt_out.alg = (pkt_in.alg == ALG_XY) ? ALG_YX : ALG_XY;
          in_box = (fx >= ((x < dx) ? x : dx)) && (fx <= ((x > dx) ? x : dx)) &&
                   (fy >= ((y < dy) ? y : dy)) && (fy <= ((y > dy) ? y : dy));
          if (out_blocked[pref] && in_box) begin
            pkt_out.mode = MODE_ABNORMAL;
            ev_abnormal  = 1'b1;
          end
        end
      end else begin
        ev_dead_end = 1'b1;
      end
    end
  end

endmodule
