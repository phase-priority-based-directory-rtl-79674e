// ppb_vc_alloc: virtual-channel allocator of the router with phase priority.
//
// Every input VC whose head flit has been routed requests its output port.
// For each output port one phase-priority arbiter looks at all input VCs of
// all input ports that want that port and grants the one with the highest
// phase priority (ties round-robin, starvation threshold as in
// ppb_arbiter), as the paper asks: "choose the message with the highest
// priority among all messages in all VCs and allocate output VC for it
// firstly". The winner gets the lowest-numbered free VC of that output
// port. At most one VC per output port is allocated per cycle, and only
// while a free VC exists there; both limits are this design's choice.
//
// Interface: flattened input-VC index i = port*NVC + vc. Requests, target
// ports and phases in; one-hot grant per input VC and the allocated VC out,
// combinational. The router marks the VC busy at the clock edge.
module ppb_vc_alloc
  import ppb_pkg::*;
#(
  parameter int unsigned THRESH = 32,
  localparam int unsigned NIN   = NPORT * NVC
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [NIN-1:0]                 req,
  input  logic [NIN-1:0][PORT_W-1:0]     req_port,
  input  phase_t [NIN-1:0]               req_phase,
  input  logic [NPORT-1:0][NVC-1:0]      out_vc_busy,
  output logic [NIN-1:0]                 gnt,
  output logic [NIN-1:0][VC_W-1:0]       gnt_vc,
  output logic [NPORT-1:0]               prio_win,
  output logic [NPORT-1:0]               starve_win
);

  localparam int unsigned IDX_W = $clog2(NIN);

  logic [NPORT-1:0]               have_free;
  logic [NPORT-1:0][VC_W-1:0]     free_vc;
  logic [NPORT-1:0][NIN-1:0]      port_req;
  logic [NPORT-1:0][NIN-1:0]      port_gnt;
  logic [NPORT-1:0][IDX_W-1:0]    port_idx;
  logic [NPORT-1:0]               port_valid;
  logic [NPORT-1:0]               port_prio, port_starve, port_tie;

  always_comb begin
    for (int o = 0; o < NPORT; o++) begin
      have_free[o] = 1'b0;
      free_vc[o]   = '0;
      for (int v = NVC - 1; v >= 0; v--)
        if (!out_vc_busy[o][v]) begin
          have_free[o] = 1'b1;
          free_vc[o]   = VC_W'(v);
        end
      for (int i = 0; i < NIN; i++)
        port_req[o][i] = req[i] && (req_port[i] == PORT_W'(o)) && have_free[o];
    end
  end

  for (genvar o = 0; o < NPORT; o++) begin : g_out
    ppb_arbiter #(.N(NIN), .THRESH(THRESH)) u_arb (
      .clk        (clk),
      .rst_n      (rst_n),
      .req        (port_req[o]),
      .phase      (req_phase),
      .accept     (1'b1),
      .gnt        (port_gnt[o]),
      .gnt_idx    (port_idx[o]),
      .gnt_valid  (port_valid[o]),
      .starve_win (port_starve[o]),
      .prio_win   (port_prio[o]),
      .tie_break  (port_tie[o])
    );
  end

  always_comb begin
    gnt    = '0;
    gnt_vc = '0;
    for (int o = 0; o < NPORT; o++)
      for (int i = 0; i < NIN; i++)
        if (port_gnt[o][i]) begin
          gnt[i]    = 1'b1;
          gnt_vc[i] = free_vc[o];
        end
    prio_win   = port_prio & port_valid;
    starve_win = port_starve;
  end

endmodule
