// cn_node - one controller of the metasurface controller network.
//
// A node has two input channel endpoints and two output channel endpoints
// (vertical = port 1, horizontal = port 2 of the paper), each a three-wire
// four-phase bit-serial channel (hs_rx / hs_tx). It works store-and-forward, as
// the paper specifies: it receives a whole packet into its buffer, decides the
// next hop from the header (route_unit), and then transmits the whole packet.
// Also as in the paper, a node never receives and transmits at the same time,
// never receives from both inputs at once, and does not change a selected
// input or output until the packet is over.
//
// A data packet addressed to this node is ejected: its payload is written to
// the switch-configuration register `cfg` (the word that sets this node's
// metasurface switches), and the node then builds an ACK packet addressed to the
// ACK gateway, carrying its own coordinates {node_x, node_y} as payload, and routes it
// like any other packet. The ACK format and the width of `cfg` are this
// design's choice.
//
// Input selection: when both inputs request in the same cycle the node serves
// the one it did not serve last (round robin); this choice is the design's own.
// A packet offered while the node is busy waits with req high (no ack); the
// event `ev.contention` marks that a packet had to wait.
//
// Timing (clocked implementation): per hop a packet of PKT_W bits takes about
// 4*PKT_W cycles to receive, 2 cycles to route, and 4*PKT_W cycles to send.
//
// The node's coordinates are inputs tied to constants by the network (like
// address straps), so every node is the same circuit.
//
// `out_blocked` is the node's static knowledge of faulty output channels or
// faulty neighbours; `ev` pulses for one cycle per event (see node_events_t).
module cn_node
  import cn_pkg::*;
#(
  parameter int W = 24,
  parameter int H = 24
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // this node's position, strapped by the placement in the grid
  input  coord_t               node_x,
  input  coord_t               node_y,
  // input channel endpoints [PORT_V], [PORT_H]
  input  logic [1:0]           in_req,
  input  logic [1:0]           in_data,
  output logic [1:0]           in_ack,
  // output channel endpoints [PORT_V], [PORT_H]
  output logic [1:0]           out_req,
  output logic [1:0]           out_data,
  input  logic [1:0]           out_ack,
  input  logic [1:0]           out_blocked,
  output logic [PAYLOAD_W-1:0] cfg,
  output node_events_t         ev
);

  typedef enum logic [1:0] {N_IDLE, N_RECV, N_ROUTE, N_SEND} node_state_e;

  node_state_e state;
  logic [1:0]  rx_en, rx_done, tx_done, tx_start;
  logic [PKT_W-1:0] rx_word [2];
  packet_t     buf_pkt;       // the packet buffer
  logic        buf_linked;    // packet arrived on a link (else made here)
  port_e       buf_port;      // input it arrived on
  port_e       rx_sel;
  port_e       send_port;
  logic        last_served;

  logic        r_eject, r_fwd, r_sw, r_ab, r_term, r_dead, r_ut;
  port_e       r_port;
  packet_t     r_pkt;

  for (genvar p = 0; p < 2; p++) begin : g_ch
    hs_rx #(.N(PKT_W)) u_rx (
      .clk, .rst_n,
      .enable (rx_en[p]),
      .active (),
      .done   (rx_done[p]),
      .word   (rx_word[p]),
      .ch_req (in_req[p]),
      .ch_data(in_data[p]),
      .ch_ack (in_ack[p])
    );
    hs_tx #(.N(PKT_W)) u_tx (
      .clk, .rst_n,
      .start  (tx_start[p]),
      .word   (r_pkt),
      .busy   (),
      .done   (tx_done[p]),
      .ch_req (out_req[p]),
      .ch_data(out_data[p]),
      .ch_ack (out_ack[p])
    );
  end

  route_unit #(.W(W), .H(H)) u_route (
    .cur_x        (node_x),
    .cur_y        (node_y),
    .pkt_in       (buf_pkt),
    .arr_valid    (buf_linked),
    .arr_port     (buf_port),
    .out_blocked  (out_blocked),
    .eject        (r_eject),
    .fwd          (r_fwd),
    .out_port     (r_port),
    .pkt_out      (r_pkt),
    .ev_switched  (r_sw),
    .ev_abnormal  (r_ab),
    .ev_terminated(r_term),
    .ev_dead_end  (r_dead),
    .ev_uturn     (r_ut)
  );

  // Input grant: only the selected input may start a packet, only while idle.
  always_comb begin
    rx_en = 2'b00;
    if (state == N_IDLE) begin
      if (in_req[0] && in_req[1]) rx_en[last_served ? 0 : 1] = 1'b1;
      else                        rx_en = in_req;
    end
  end

  always_comb begin
    tx_start = 2'b00;
    if (state == N_ROUTE && r_fwd) tx_start[r_port] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= N_IDLE;
      buf_pkt     <= '0;
      buf_linked  <= 1'b0;
      buf_port    <= PORT_V;
      rx_sel      <= PORT_V;
      send_port   <= PORT_V;
      last_served <= 1'b1;
      cfg         <= '0;
      ev          <= '0;
    end else begin
      ev <= '0;
      unique case (state)
        N_IDLE: begin
          if (rx_en[0] || rx_en[1]) begin
            rx_sel        <= rx_en[1] ? PORT_H : PORT_V;
            last_served   <= rx_en[1];
            ev.contention <= in_req[0] && in_req[1];
            state         <= N_RECV;
          end
        end
        N_RECV: begin
          if (rx_done[rx_sel]) begin
            buf_pkt    <= packet_t'(rx_word[rx_sel]);
            buf_linked <= 1'b1;
            buf_port   <= rx_sel;
            state      <= N_ROUTE;
          end
        end
        N_ROUTE: begin
          ev.switched    <= r_sw;
          ev.abnormal    <= r_ab;
          ev.terminated  <= r_term;
          ev.dead_end    <= r_dead;
          ev.uturn_avoid <= r_ut;
          if (r_eject) begin
            cfg          <= buf_pkt.payload;
            ev.delivered <= 1'b1;
            ev.ack_made  <= 1'b1;
            buf_pkt      <= '{kind: KIND_ACK, alg: ALG_XY, mode: MODE_NORMAL,
                              dst_x: coord_t'(W - 1), dst_y: coord_t'(0),
                              payload: PAYLOAD_W'({node_x, node_y})};
            buf_linked   <= 1'b0;
            // stay in N_ROUTE: the ACK is routed next cycle
          end else if (r_fwd) begin
            buf_pkt   <= r_pkt;
            send_port <= r_port;
            state     <= N_SEND;
          end else begin
            state <= N_IDLE;  // dropped
          end
        end
        N_SEND: begin
          if (tx_done[send_port]) begin
            state         <= N_IDLE;
            ev.contention <= |in_req;  // a packet waited while this one passed
          end
        end
        default: state <= N_IDLE;
      endcase
    end
  end

endmodule
