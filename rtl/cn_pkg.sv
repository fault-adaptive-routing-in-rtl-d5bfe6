// cn_pkg - types, constants and topology functions shared by the metasurface
// controller network (CN).
//
// The CN is a W x H grid of controller nodes. Every node has two unidirectional
// inputs and two unidirectional outputs: one vertical pair ("input1/output1")
// and one horizontal pair ("input2/output2"). Horizontal links run east on even
// rows and west on odd rows; vertical links run north in even columns and south
// in odd columns. Instead of full wraparounds, neighbouring edge nodes are joined
// by "edge wraparounds" (top row: column x even -> x+1, bottom row: x odd -> x-1,
// right edge: row y even -> y+1, left edge: row y odd -> y-1). The input gateway
// sits at the west end of rows 0/1 and the ACK gateway at the east end of rows
// 0/1, where the edge wraparound would otherwise be. All of this follows the
// 4x4 example drawing of the network; W and H must both be even.
//
// A node's orientation type is 2*y[0] + x[0]: type 0 even/even, type 1 odd
// column on an even row, type 2 even column on an odd row, type 3 odd/odd. This
// follows the orientation drawing (type 1 sends east and south); the prose of the
// paper swaps the words row and column for types 1 and 2.
//
// Packet format (bit-serial, MSB first), all widths this design's own choice:
//   kind(1) alg(1) mode(1) dst_x(COORD_W) dst_y(COORD_W) payload(PAYLOAD_W)
//   kind : 0 data (configuration for the destination), 1 acknowledgement
//   alg  : 0 XY, 1 YX          (LFA header bit 1)
//   mode : 0 normal, 1 abnormal (LFA header bit 2)
package cn_pkg;

  localparam int COORD_W   = 5;   // coordinates up to 31: grids up to 32 x 32
  localparam int PAYLOAD_W = 10;  // switch-configuration word / ACK source id
  localparam int PKT_W     = 3 + 2 * COORD_W + PAYLOAD_W;

  typedef logic [COORD_W-1:0] coord_t;

  typedef enum logic {KIND_DATA = 1'b0, KIND_ACK = 1'b1} kind_e;
  typedef enum logic {ALG_XY = 1'b0, ALG_YX = 1'b1} alg_e;
  typedef enum logic {MODE_NORMAL = 1'b0, MODE_ABNORMAL = 1'b1} mode_e;

  // Output / input port index of a node: 0 = vertical (port 1 of the paper),
  // 1 = horizontal (port 2 of the paper).
  typedef enum logic {PORT_V = 1'b0, PORT_H = 1'b1} port_e;

  typedef struct packed {
    kind_e                kind;
    alg_e                 alg;
    mode_e                mode;
    coord_t               dst_x;
    coord_t               dst_y;
    logic [PAYLOAD_W-1:0] payload;
  } packet_t;

  // Events a node reports for one routing decision, used for observation.
  typedef struct packed {
    logic delivered;   // data packet ejected at its destination
    logic ack_made;    // ACK packet generated towards the ACK gateway
    logic switched;    // LFA: fault met, packet sent on the other output, XY<->YX
    logic abnormal;    // LFA: packet entered abnormal routing mode
    logic terminated;  // LFA: second fault in abnormal mode, packet dropped
    logic dead_end;    // both outputs unusable, packet dropped
    logic uturn_avoid; // 180-degree turn at an edge wraparound refused
    logic contention;  // a packet had to wait for a busy node
  } node_events_t;

  // Node positions are passed around as one int, node_code(x,y) = 256*x + y;
  // NO_NODE (-1) stands for a gateway.
  localparam int NO_NODE = -1;

  function automatic int node_code(input int x, input int y);
    return x * 256 + y;
  endfunction

  // Where a node's vertical output leads.
  function automatic int v_next(input int h, input int x, input int y);
    if (x % 2 == 0) return (y < h - 1) ? node_code(x, y + 1)
                                       : node_code(x + 1, y);  // top edge wraparound
    else            return (y > 0)     ? node_code(x, y - 1)
                                       : node_code(x - 1, y);  // bottom edge wraparound
  endfunction

  // Where a node's horizontal output leads.
  function automatic int h_next(input int w, input int x, input int y);
    if (y % 2 == 0) begin
      if (x < w - 1) return node_code(x + 1, y);
      if (y == 0)    return NO_NODE;                  // ACK gateway
      return node_code(x, y + 1);                     // right edge wraparound
    end else begin
      if (x > 0)     return node_code(x - 1, y);
      if (y == 1)    return NO_NODE;                  // input gateway
      return node_code(x, y - 1);                     // left edge wraparound
    end
  endfunction

  // Where a node's vertical (port 0) or horizontal (port 1) input comes from,
  // the inverse of v_next / h_next.
  function automatic int in_src(input int w, input int h, input int x, input int y,
                                input int port);
    if (port == 0) begin
      if (x % 2 == 0) return (y > 0)     ? node_code(x, y - 1) : node_code(x + 1, 0);
      else            return (y < h - 1) ? node_code(x, y + 1) : node_code(x - 1, h - 1);
    end else begin
      if (y % 2 == 0) begin
        if (x > 0)     return node_code(x - 1, y);
        if (y == 0)    return NO_NODE;                // input gateway
        return node_code(0, y + 1);
      end else begin
        if (x < w - 1) return node_code(x + 1, y);
        if (y == 1)    return NO_NODE;                // ACK gateway side
        return node_code(w - 1, y - 1);
      end
    end
  endfunction

endpackage
