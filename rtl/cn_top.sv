// cn_top - the metasurface controller network: W x H controller nodes in a
// Manhattan-like grid with edge wraparounds, one input gateway and one ACK
// gateway.
//
// Topology (as drawn for the 4x4 example, generalised to any even W and H):
// horizontal links run east on even rows and west on odd rows, vertical links
// run north in even columns and south in odd columns, there are no full
// wraparounds, and edge nodes of neighbouring rows/columns are joined by edge
// wraparounds. The input gateway drives node (0,0)'s horizontal input and
// receives node (0,1)'s horizontal output; the ACK gateway receives node
// (W-1,0)'s horizontal output and drives node (W-1,1)'s horizontal input. The
// gateways themselves are external devices; their channels are ports here.
// Default size 24 x 24, the network size of the paper's evaluation.
//
// Faults: `node_fault[x*H + y]` marks node (x,y) as not functioning. A faulty
// node's channels are cut (it neither sends nor acknowledges), and each of its
// upstream neighbours gets the corresponding `out_blocked` bit, modelling the
// paper's assumption that nodes know which neighbours are faulty before traffic
// starts. Change `node_fault` only while the network is in reset or idle.
//
// Every channel is a three-wire bit-serial four-phase link (req, data, ack).
// Outputs `cfg` (per node switch configuration) and `ev` (per node one-cycle
// event pulses) are indexed by x*H + y.
module cn_top
  import cn_pkg::*;
#(
  parameter int W = 24,
  parameter int H = 24
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W*H-1:0]       node_fault,
  // input gateway -> node (0,0)
  input  logic                 gwi_req,
  input  logic                 gwi_data,
  output logic                 gwi_ack,
  // node (0,1) -> input gateway
  output logic                 gwo_req,
  output logic                 gwo_data,
  input  logic                 gwo_ack,
  // node (W-1,0) -> ACK gateway
  output logic                 ackgw_req,
  output logic                 ackgw_data,
  input  logic                 ackgw_ack,
  // ACK gateway -> node (W-1,1)
  input  logic                 ackgwi_req,
  input  logic                 ackgwi_data,
  output logic                 ackgwi_ack,
  output logic [PAYLOAD_W-1:0] cfg [W*H],
  output node_events_t         ev  [W*H]
);

  // Raw node pins, indexed by node id x*H + y and port (0 = V, 1 = H).
  logic [1:0] o_req  [W*H];
  logic [1:0] o_data [W*H];
  logic [1:0] o_ack  [W*H];   // ack seen by a node's output endpoint
  logic [1:0] i_req  [W*H];   // req/data seen by a node's input endpoint
  logic [1:0] i_data [W*H];
  logic [1:0] i_ack  [W*H];
  logic [1:0] blk    [W*H];

  function automatic int id_of(input int code);
    return (code / 256) * H + (code % 256);
  endfunction

  for (genvar gx = 0; gx < W; gx++) begin : g_x
    for (genvar gy = 0; gy < H; gy++) begin : g_y
      localparam int ID  = gx * H + gy;
      localparam int VN  = v_next(H, gx, gy);
      localparam int HN  = h_next(W, gx, gy);
      localparam int VS  = in_src(W, H, gx, gy, 0);
      localparam int HS  = in_src(W, H, gx, gy, 1);

      logic [1:0] n_out_req, n_out_data, n_in_ack;

      cn_node #(.W(W), .H(H)) u_node (
        .clk, .rst_n,
        .node_x     (coord_t'(gx)),
        .node_y     (coord_t'(gy)),
        .in_req     (i_req[ID]),
        .in_data    (i_data[ID]),
        .in_ack     (n_in_ack),
        .out_req    (n_out_req),
        .out_data   (n_out_data),
        .out_ack    (o_ack[ID]),
        .out_blocked(blk[ID]),
        .cfg        (cfg[ID]),
        .ev         (ev[ID])
      );

      // A faulty node is cut off from its channels.
      assign o_req[ID]  = node_fault[ID] ? 2'b00 : n_out_req;
      assign o_data[ID] = node_fault[ID] ? 2'b00 : n_out_data;
      assign i_ack[ID]  = node_fault[ID] ? 2'b00 : n_in_ack;

      // Vertical input: always another node.
      assign i_req[ID][0]  = o_req[id_of(VS)][0];
      assign i_data[ID][0] = o_data[id_of(VS)][0];
      assign o_ack[ID][0]  = i_ack[id_of(VN)][0];
      assign blk[ID][0]    = node_fault[id_of(VN)];

      // Horizontal input: another node or a gateway.
      if (HS == NO_NODE && gy == 0) begin : g_hin_gwi
        assign i_req[ID][1]  = gwi_req;
        assign i_data[ID][1] = gwi_data;
        assign gwi_ack       = i_ack[ID][1];
      end else if (HS == NO_NODE) begin : g_hin_ackgw
        assign i_req[ID][1]  = ackgwi_req;
        assign i_data[ID][1] = ackgwi_data;
        assign ackgwi_ack    = i_ack[ID][1];
      end else begin : g_hin_node
        assign i_req[ID][1]  = o_req[id_of(HS)][1];
        assign i_data[ID][1] = o_data[id_of(HS)][1];
      end

      // Horizontal output: another node or a gateway.
      if (HN == NO_NODE && gy == 0) begin : g_hout_ackgw
        assign ackgw_req    = o_req[ID][1];
        assign ackgw_data   = o_data[ID][1];
        assign o_ack[ID][1] = ackgw_ack;
        assign blk[ID][1]   = 1'b0;
      end else if (HN == NO_NODE) begin : g_hout_gwo
        assign gwo_req      = o_req[ID][1];
        assign gwo_data     = o_data[ID][1];
        assign o_ack[ID][1] = gwo_ack;
        assign blk[ID][1]   = 1'b0;
      end else begin : g_hout_node
        assign o_ack[ID][1] = i_ack[id_of(HN)][1];
        assign blk[ID][1]   = node_fault[id_of(HN)];
      end
    end
  end

endmodule
