// ppb_sw_alloc: switch allocator of the router with phase priority.
//
// Input VCs that hold a flit of a packet with an allocated output VC, and
// that have a credit for it, request the crossbar. The allocator is
// separable, input first: at each input port a phase-priority arbiter picks
// one of its VCs (an input buffer has one read port), then at each output
// port a second phase-priority arbiter picks one of the input ports whose
// winner wants that output. The best flit of all inputs and VCs that target
// an output therefore reaches the output stage, as the paper describes; the
// two-stage split is this design's choice. Ties are broken round-robin; an
// input-stage arbiter only advances when its pick also won at the output.
//
// Interface: flattened input-VC index i = port*NVC + vc. Combinational
// grant per input VC, and per output port the selected input port for the
// crossbar.
module ppb_sw_alloc
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
  output logic [NIN-1:0]                 gnt,
  output logic [NPORT-1:0]               out_valid,
  output logic [NPORT-1:0][PORT_W-1:0]   out_sel,     // winning input port
  output logic [NPORT-1:0][VC_W-1:0]     out_sel_vc,  // its VC
  output logic [NPORT-1:0]               prio_win,
  output logic [NPORT-1:0]               starve_win
);

  // ---------------------------------------------------------- input stage
  logic [NPORT-1:0][NVC-1:0]   in_req, in_gnt;
  logic [NPORT-1:0][VC_W-1:0]  in_idx;
  logic [NPORT-1:0]            in_valid, in_accept;
  phase_t [NPORT-1:0][NVC-1:0] in_phase;
  logic [NPORT-1:0]            in_prio, in_starve, in_tie;

  phase_t [NPORT-1:0]            win_phase;
  logic [NPORT-1:0][PORT_W-1:0]  win_port;

  always_comb begin
    for (int p = 0; p < NPORT; p++)
      for (int v = 0; v < NVC; v++) begin
        in_req[p][v]   = req[p*NVC + v];
        in_phase[p][v] = req_phase[p*NVC + v];
      end
  end

  for (genvar p = 0; p < NPORT; p++) begin : g_in
    ppb_arbiter #(.N(NVC), .THRESH(THRESH)) u_arb (
      .clk        (clk),
      .rst_n      (rst_n),
      .req        (in_req[p]),
      .phase      (in_phase[p]),
      .accept     (in_accept[p]),
      .gnt        (in_gnt[p]),
      .gnt_idx    (in_idx[p]),
      .gnt_valid  (in_valid[p]),
      .starve_win (in_starve[p]),
      .prio_win   (in_prio[p]),
      .tie_break  (in_tie[p])
    );
  end

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      win_phase[p] = in_phase[p][in_idx[p]];
      win_port[p]  = req_port[p*NVC + int'(in_idx[p])];
    end
  end

  // --------------------------------------------------------- output stage
  logic [NPORT-1:0][NPORT-1:0]   out_req, out_gnt;
  logic [NPORT-1:0][PORT_W-1:0]  out_idx;
  logic [NPORT-1:0]              out_prio, out_starve, out_tie;

  always_comb begin
    for (int o = 0; o < NPORT; o++)
      for (int p = 0; p < NPORT; p++)
        out_req[o][p] = in_valid[p] && (win_port[p] == PORT_W'(o));
  end

  for (genvar o = 0; o < NPORT; o++) begin : g_out
    ppb_arbiter #(.N(NPORT), .THRESH(THRESH)) u_arb (
      .clk        (clk),
      .rst_n      (rst_n),
      .req        (out_req[o]),
      .phase      (win_phase),
      .accept     (1'b1),
      .gnt        (out_gnt[o]),
      .gnt_idx    (out_idx[o]),
      .gnt_valid  (out_valid[o]),
      .starve_win (out_starve[o]),
      .prio_win   (out_prio[o]),
      .tie_break  (out_tie[o])
    );
  end

  always_comb begin
    gnt        = '0;
    in_accept  = '0;
    for (int o = 0; o < NPORT; o++) begin
      out_sel[o]    = out_idx[o];
      out_sel_vc[o] = in_idx[out_idx[o]];
      for (int p = 0; p < NPORT; p++)
        if (out_gnt[o][p]) in_accept[p] = 1'b1;
    end
    for (int p = 0; p < NPORT; p++)
      if (in_accept[p]) gnt[p*NVC + int'(in_idx[p])] = 1'b1;
    for (int o = 0; o < NPORT; o++) begin
      prio_win[o]   = out_valid[o] && (out_prio[o] || in_prio[out_idx[o]]);
      starve_win[o] = out_valid[o] && (out_starve[o] || in_starve[out_idx[o]]);
    end
  end

endmodule
