// ppb_noc_top: the phase-priority network of a tiled CMP.
//
// A MESH_X x MESH_Y mesh of ppb_router, one per tile. Every tile holds a
// core with private L1 caches and one bank of the shared L2 with its slice
// of the directory; memory controllers sit on some tiles too. These
// endpoints (cores, caches, directory controllers, memory controllers) are
// outside this module: each tile connects through two message ports.
//
//  * l1_tx_*: messages from the tile's L1 cache controller or memory
//    controller. Their outer phase is set here from the message type
//    (requests first phase, memory replies third phase, L1 replies inside a
//    transaction second phase); the inner phase of an L1 reply is the one
//    the controller copied from the forward or invalidation it answers.
//  * dir_tx_*: messages from the tile's directory controller. They pass a
//    ppb_phase_stamper, whose inner phase buffer gives every transaction the
//    directory orders the next inner phase of its cache line.
//
// A two-input phase-priority arbiter merges both streams into the tile's
// ppb_ni, which injects flits into the router's local port. Messages for the
// tile leave the NI on rx_*. Neighbouring routers are joined by ppb_link
// with LINK_LAT cycles each way; NI and router are joined directly.
//
// Defaults: a 4 x 4 mesh (16 tiles, as in the paper's block diagram and its
// "16 tiles" result), 5 VCs per port and 128-bit flits, 4-stage routers,
// 2-cycle links and X-Y routing (the paper's system table), 32-entry inner
// phase buffers (the paper's text). VC buffer depth 4 and starvation
// threshold 32 are this design's own values. The paper's system table
// lists a "3X3 mesh" and its text a "14-node mesh"; with 16 cores and 16 L2
// banks in its diagram this design follows the 16-tile figure.
//
// Tile n sits at x = n % MESH_X, y = n / MESH_X. The ev_* outputs pulse per
// tile for the mechanisms of the design, for observation only.
module ppb_noc_top
  import ppb_pkg::*;
#(
  parameter int unsigned MESH_X      = 4,
  parameter int unsigned MESH_Y      = 4,
  parameter int unsigned DEPTH       = 4,
  parameter int unsigned THRESH      = 32,
  parameter int unsigned LINK_LAT    = 2,
  parameter int unsigned IPB_ENTRIES = 32,
  localparam int unsigned NT         = MESH_X * MESH_Y
) (
  input  logic              clk,
  input  logic              rst_n,
  // L1 / memory controller side of each tile
  input  logic [NT-1:0]     l1_tx_valid,
  output logic [NT-1:0]     l1_tx_ready,
  input  msg_t [NT-1:0]     l1_tx_msg,
  // directory side of each tile
  input  logic [NT-1:0]     dir_tx_valid,
  output logic [NT-1:0]     dir_tx_ready,
  input  msg_t [NT-1:0]     dir_tx_msg,
  input  logic [NT-1:0]     dir_tx_new_txn,
  // messages delivered to each tile
  output logic [NT-1:0]     rx_valid,
  input  logic [NT-1:0]     rx_ready,
  output msg_t [NT-1:0]     rx_msg,
  // mechanism events
  output logic [NT-1:0]     ev_va_prio,
  output logic [NT-1:0]     ev_sa_prio,
  output logic [NT-1:0]     ev_starve,
  output logic [NT-1:0]     ev_credit_stall,
  output logic [NT-1:0]     ev_ni_prio,
  output logic [NT-1:0]     ev_ipb_hit,
  output logic [NT-1:0]     ev_ipb_evict
);

  link_t   [NT-1:0][NPORT-1:0] r_in, r_out;
  credit_t [NT-1:0][NPORT-1:0] r_in_crd, r_out_crd;

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned N = y * MESH_X + x;
      node_t here;
      assign here.x = COORD_W'(x);
      assign here.y = COORD_W'(y);

      // ------------------------------------------------ tile side
      msg_t l1_msg;
      always_comb begin
        l1_msg             = l1_tx_msg[N];
        l1_msg.phase.outer = outer_of(l1_tx_msg[N].mtype);
        if (l1_msg.phase.outer != OUTER_SECOND) l1_msg.phase.inner = '0;
      end

      logic  st_valid, st_ready;
      msg_t  st_msg;
      ppb_phase_stamper #(.ENTRIES(IPB_ENTRIES)) u_stamp (
        .clk        (clk),
        .rst_n      (rst_n),
        .in_valid   (dir_tx_valid[N]),
        .in_ready   (dir_tx_ready[N]),
        .in_msg     (dir_tx_msg[N]),
        .in_new_txn (dir_tx_new_txn[N]),
        .out_valid  (st_valid),
        .out_ready  (st_ready),
        .out_msg    (st_msg),
        .buf_hit    (ev_ipb_hit[N]),
        .buf_evict  (ev_ipb_evict[N])
      );

      // Merge of the two tile streams, by phase priority.
      logic [1:0]   m_gnt;
      logic         m_idx, m_valid, m_starve, m_prio, m_tie;
      logic         ni_ready;
      phase_t [1:0] m_phase;
      assign m_phase = {st_msg.phase, l1_msg.phase};

      ppb_arbiter #(.N(2), .THRESH(THRESH)) u_merge (
        .clk        (clk),
        .rst_n      (rst_n),
        .req        ({st_valid, l1_tx_valid[N]}),
        .phase      (m_phase),
        .accept     (ni_ready),
        .gnt        (m_gnt),
        .gnt_idx    (m_idx),
        .gnt_valid  (m_valid),
        .starve_win (m_starve),
        .prio_win   (m_prio),
        .tie_break  (m_tie)
      );

      assign l1_tx_ready[N] = ni_ready && m_gnt[0];
      assign st_ready       = ni_ready && m_gnt[1];

      ppb_ni #(.DEPTH(DEPTH), .THRESH(THRESH)) u_ni (
        .clk        (clk),
        .rst_n      (rst_n),
        .tx_valid   (m_valid),
        .tx_ready   (ni_ready),
        .tx_msg     (m_idx ? st_msg : l1_msg),
        .rx_valid   (rx_valid[N]),
        .rx_ready   (rx_ready[N]),
        .rx_msg     (rx_msg[N]),
        .inj_link   (r_in[N][P_LOCAL]),
        .inj_credit (r_in_crd[N][P_LOCAL]),
        .ej_link    (r_out[N][P_LOCAL]),
        .ej_credit  (r_out_crd[N][P_LOCAL]),
        .ev_prio    (ev_ni_prio[N])
      );

      // ------------------------------------------------ router
      ppb_router #(.DEPTH(DEPTH), .THRESH(THRESH)) u_router (
        .clk             (clk),
        .rst_n           (rst_n),
        .here            (here),
        .in_link         (r_in[N]),
        .in_credit       (r_in_crd[N]),
        .out_link        (r_out[N]),
        .out_credit      (r_out_crd[N]),
        .ev_va_prio      (ev_va_prio[N]),
        .ev_sa_prio      (ev_sa_prio[N]),
        .ev_starve       (ev_starve[N]),
        .ev_credit_stall (ev_credit_stall[N])
      );

      // ------------------------------------------------ links
      // East neighbour: this router's east output to its west input.
      if (x + 1 < MESH_X) begin : g_east
        ppb_link #(.LAT(LINK_LAT)) u_to_e (
          .clk     (clk),
          .rst_n   (rst_n),
          .fwd_in  (r_out[N][P_EAST]),
          .fwd_out (r_in[N+1][P_WEST]),
          .crd_in  (r_in_crd[N+1][P_WEST]),
          .crd_out (r_out_crd[N][P_EAST])
        );
        ppb_link #(.LAT(LINK_LAT)) u_from_e (
          .clk     (clk),
          .rst_n   (rst_n),
          .fwd_in  (r_out[N+1][P_WEST]),
          .fwd_out (r_in[N][P_EAST]),
          .crd_in  (r_in_crd[N][P_EAST]),
          .crd_out (r_out_crd[N+1][P_WEST])
        );
      end else begin : g_east_edge
        assign r_in[N][P_EAST]      = '0;
        assign r_out_crd[N][P_EAST] = '0;
      end
      if (x == 0) begin : g_west_edge
        assign r_in[N][P_WEST]      = '0;
        assign r_out_crd[N][P_WEST] = '0;
      end

      // South neighbour: this router's south output to its north input.
      if (y + 1 < MESH_Y) begin : g_south
        ppb_link #(.LAT(LINK_LAT)) u_to_s (
          .clk     (clk),
          .rst_n   (rst_n),
          .fwd_in  (r_out[N][P_SOUTH]),
          .fwd_out (r_in[N+MESH_X][P_NORTH]),
          .crd_in  (r_in_crd[N+MESH_X][P_NORTH]),
          .crd_out (r_out_crd[N][P_SOUTH])
        );
        ppb_link #(.LAT(LINK_LAT)) u_from_s (
          .clk     (clk),
          .rst_n   (rst_n),
          .fwd_in  (r_out[N+MESH_X][P_NORTH]),
          .fwd_out (r_in[N][P_SOUTH]),
          .crd_in  (r_in_crd[N][P_SOUTH]),
          .crd_out (r_out_crd[N+MESH_X][P_NORTH])
        );
      end else begin : g_south_edge
        assign r_in[N][P_SOUTH]      = '0;
        assign r_out_crd[N][P_SOUTH] = '0;
      end
      if (y == 0) begin : g_north_edge
        assign r_in[N][P_NORTH]      = '0;
        assign r_out_crd[N][P_NORTH] = '0;
      end
    end
  end

endmodule
