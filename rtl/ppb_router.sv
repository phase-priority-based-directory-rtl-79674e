// ppb_router: five-port virtual-channel mesh router with phase-priority
// allocation.
//
// The router follows the classic four-stage pipeline the paper takes as its
// base: routing computation (RC), VC allocation (VA), switch allocation (SA)
// and switch traversal (ST). Each input port has NVC = 5 VC buffers. A head
// flit that reaches the front of its VC buffer is routed X-Y in the RC
// cycle; in the next cycle the VC requests an output VC from ppb_vc_alloc;
// once it holds one, every flit of the packet requests the crossbar from
// ppb_sw_alloc as soon as the downstream buffer has a credit; the winner is
// read out and registered into the output stage, which drives the link in
// the ST cycle. A flit written into an input buffer at the end of cycle c
// therefore leaves on the output link in cycle c+4 if it meets no
// contention. Body flits skip RC and VA. The output VC is released when the
// tail flit wins the switch.
//
// What the paper adds is in the allocators: both VA and SA grant the flit
// of highest phase priority among all input VCs, round-robin among equals,
// with a starvation threshold. The phase of a packet is taken from its head
// flit and kept with the input VC for the body flits.
//
// Flow control is credit based: a counter per output VC starts at DEPTH,
// the depth of the downstream VC buffer, drops when a flit is sent and
// rises when the downstream buffer returns a credit. The router returns one
// credit per flit it reads out of an input buffer, registered, in the cycle
// after the read. Buffer depth and the credit timing are this design's
// choices.
//
// Ports: for each of the five ports (0 local, 1 north, 2 east, 3 south,
// 4 west) an input link and the credit it returns, and an output link and
// the credit it receives. 'here' is the router's mesh position. The ev_*
// outputs pulse when an allocation was decided by phase priority, when a
// starved request was granted, and when a flit waited for a credit.
module ppb_router
  import ppb_pkg::*;
#(
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned THRESH = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  node_t                  here,
  input  link_t   [NPORT-1:0]    in_link,
  output credit_t [NPORT-1:0]    in_credit,
  output link_t   [NPORT-1:0]    out_link,
  input  credit_t [NPORT-1:0]    out_credit,
  output logic                   ev_va_prio,
  output logic                   ev_sa_prio,
  output logic                   ev_starve,
  output logic                   ev_credit_stall
);

  localparam int unsigned NIN   = NPORT * NVC;
  localparam int unsigned CRD_W = $clog2(DEPTH + 1);
  localparam int unsigned CNT_W = $clog2(DEPTH) + 1;

  typedef enum logic [1:0] {VS_IDLE, VS_VA, VS_ACTIVE} vc_state_e;

  // ------------------------------------------------------- input buffers
  flit_t [NIN-1:0]             front;
  logic  [NIN-1:0]             empty;
  logic  [NIN-1:0]             pop;
  vc_state_e [NIN-1:0]         state;
  logic  [NIN-1:0][PORT_W-1:0] route;
  logic  [NIN-1:0][VC_W-1:0]   ovc;
  phase_t [NIN-1:0]            vphase;
  logic  [NIN-1:0][PORT_W-1:0] rc_port;
  head_t [NIN-1:0]             fhead;   // front flit read as a head flit

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    for (genvar v = 0; v < NVC; v++) begin : g_vc
      localparam int unsigned I = p * NVC + v;
      logic              full_unused;
      logic [CNT_W-1:0]  count_unused;

      ppb_vc_fifo #(.T(flit_t), .DEPTH(DEPTH)) u_buf (
        .clk     (clk),
        .rst_n   (rst_n),
        .wr_en   (in_link[p].valid && in_link[p].vc == VC_W'(v)),
        .wr_data (in_link[p].flit),
        .rd_en   (pop[I]),
        .rd_data (front[I]),
        .empty   (empty[I]),
        .full    (full_unused),
        .count   (count_unused)
      );

      assign fhead[I] = head_t'(front[I].payload);

      // RC stage.
      ppb_route_xy u_rc (
        .here (here),
        .dst  (fhead[I].dst),
        .port (rc_port[I])
      );
    end
  end

  // ------------------------------------------------- output VC bookkeeping
  logic [NPORT-1:0][NVC-1:0]             ovc_busy;
  logic [NPORT-1:0][NVC-1:0][CRD_W-1:0]  credit;

  // ------------------------------------------------------------ VA stage
  logic [NIN-1:0]             va_req, va_gnt;
  logic [NIN-1:0][VC_W-1:0]   va_vc;
  logic [NPORT-1:0]           va_prio, va_starve;

  always_comb begin
    for (int i = 0; i < NIN; i++) va_req[i] = (state[i] == VS_VA);
  end

  ppb_vc_alloc #(.THRESH(THRESH)) u_va (
    .clk         (clk),
    .rst_n       (rst_n),
    .req         (va_req),
    .req_port    (route),
    .req_phase   (vphase),
    .out_vc_busy (ovc_busy),
    .gnt         (va_gnt),
    .gnt_vc      (va_vc),
    .prio_win    (va_prio),
    .starve_win  (va_starve)
  );

  // ------------------------------------------------------------ SA stage
  logic [NIN-1:0]               sa_req, sa_gnt;
  logic [NPORT-1:0]             sa_valid;
  logic [NPORT-1:0][PORT_W-1:0] sa_sel;
  logic [NPORT-1:0][VC_W-1:0]   sa_sel_vc;
  logic [NPORT-1:0]             sa_prio, sa_starve;
  logic [NIN-1:0]               stalled;

  always_comb begin
    for (int i = 0; i < NIN; i++) begin
      sa_req[i]  = (state[i] == VS_ACTIVE) && !empty[i] &&
                   (credit[route[i]][ovc[i]] != '0);
      stalled[i] = (state[i] == VS_ACTIVE) && !empty[i] &&
                   (credit[route[i]][ovc[i]] == '0);
    end
  end

  ppb_sw_alloc #(.THRESH(THRESH)) u_sa (
    .clk        (clk),
    .rst_n      (rst_n),
    .req        (sa_req),
    .req_port   (route),
    .req_phase  (vphase),
    .gnt        (sa_gnt),
    .out_valid  (sa_valid),
    .out_sel    (sa_sel),
    .out_sel_vc (sa_sel_vc),
    .prio_win   (sa_prio),
    .starve_win (sa_starve)
  );

  assign pop = sa_gnt;

  // --------------------------------------------------- VC state machines
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NIN; i++) state[i] <= VS_IDLE;
      route  <= '0;
      ovc    <= '0;
      vphase <= '0;
    end else begin
      for (int i = 0; i < NIN; i++) begin
        unique case (state[i])
          VS_IDLE:
            if (!empty[i] && is_head(front[i].ftype)) begin
              route[i]  <= rc_port[i];
              vphase[i] <= fhead[i].phase;
              state[i]  <= VS_VA;
            end
          VS_VA:
            if (va_gnt[i]) begin
              ovc[i]   <= va_vc[i];
              state[i] <= VS_ACTIVE;
            end
          VS_ACTIVE:
            if (sa_gnt[i] && is_tail(front[i].ftype)) state[i] <= VS_IDLE;
          default: state[i] <= VS_IDLE;
        endcase
      end
    end
  end

  // Output VC busy flags and credit counters.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ovc_busy <= '0;
      for (int o = 0; o < NPORT; o++)
        for (int v = 0; v < NVC; v++) credit[o][v] <= CRD_W'(DEPTH);
    end else begin
      for (int i = 0; i < NIN; i++) begin
        if (va_gnt[i]) ovc_busy[route[i]][va_vc[i]] <= 1'b1;
        if (sa_gnt[i] && is_tail(front[i].ftype))
          ovc_busy[route[i]][ovc[i]] <= 1'b0;
      end
      for (int o = 0; o < NPORT; o++)
        for (int v = 0; v < NVC; v++) begin
          logic dec, inc;
          dec = 1'b0;
          for (int i = 0; i < NIN; i++)
            if (sa_gnt[i] && route[i] == PORT_W'(o) && ovc[i] == VC_W'(v))
              dec = 1'b1;
          inc = out_credit[o].valid && out_credit[o].vc == VC_W'(v);
          if (dec && !inc)      credit[o][v] <= credit[o][v] - 1'b1;
          else if (inc && !dec) credit[o][v] <= credit[o][v] + 1'b1;
        end
    end
  end

  // ----------------------------------------------- ST stage and credits
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_link  <= '0;
      in_credit <= '0;
    end else begin
      for (int o = 0; o < NPORT; o++) begin
        automatic int unsigned src = int'(sa_sel[o]) * NVC + int'(sa_sel_vc[o]);
        out_link[o].valid <= sa_valid[o];
        out_link[o].vc    <= ovc[src];
        out_link[o].flit  <= front[src];
      end
      for (int p = 0; p < NPORT; p++) begin
        in_credit[p].valid <= 1'b0;
        in_credit[p].vc    <= '0;
        for (int v = 0; v < NVC; v++)
          if (pop[p*NVC + v]) begin
            in_credit[p].valid <= 1'b1;
            in_credit[p].vc    <= VC_W'(v);
          end
      end
    end
  end

  assign ev_va_prio      = |va_prio;
  assign ev_sa_prio      = |sa_prio;
  assign ev_starve       = |va_starve | |sa_starve;
  assign ev_credit_stall = |stalled;

  // A credit may never arrive for a VC whose counter is already full.
  for (genvar o = 0; o < NPORT; o++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      out_credit[o].valid |-> credit[o][out_credit[o].vc] < CRD_W'(DEPTH))
      else $error("ppb_router: credit overflow on port %0d", o);
  end

endmodule
