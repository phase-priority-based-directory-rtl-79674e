// ppb_ni: network interface between a tile (L1 cache, L2 bank with its
// directory, or memory controller) and the local port of its router.
//
// Injection. A message from the tile is taken into a free one of NVC message
// slots, one per VC of the router's local input port, so up to five
// messages can wait in the NI at once. Every cycle a phase-priority arbiter
// (ppb_arbiter) looks at all slots that still have flits to send and a
// credit for their VC, and the winner sends its next flit: the paper names
// the NI as the first place where messages of all VCs must be arbitrated by
// phase. A control message is one head-tail flit; a message with a 64-byte
// line is a head flit and four body flits (the last one marked tail), data
// in ascending 128-bit chunks. Slots are filled lowest VC first; slot and
// packet formats are this design's choice.
//
// Ejection. Flits from the router's local output are written into one flit
// buffer of DEPTH per VC, returning a credit for each flit read out. Each VC
// reassembles its packet; among the VCs holding a complete message, a
// second phase-priority arbiter chooses which one goes to the tile first.
// Using phase priority on the ejection side too is this design's choice.
//
// Timing: the tile handshake is valid/ready. A message accepted in cycle c
// can send its head flit onto the injection link in cycle c+2 (slot write,
// then arbitration and the registered link output). Ejected messages are
// offered to the tile the cycle after their last flit was read out.
module ppb_ni
  import ppb_pkg::*;
#(
  parameter int unsigned DEPTH  = 4,
  parameter int unsigned THRESH = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  // tile side
  input  logic     tx_valid,
  output logic     tx_ready,
  input  msg_t     tx_msg,
  output logic     rx_valid,
  input  logic     rx_ready,
  output msg_t     rx_msg,
  // router side
  output link_t    inj_link,
  input  credit_t  inj_credit,
  input  link_t    ej_link,
  output credit_t  ej_credit,
  // events
  output logic     ev_prio
);

  localparam int unsigned CRD_W  = $clog2(DEPTH + 1);
  localparam int unsigned FCNT_W = $clog2(DATA_FLITS + 2);
  localparam int unsigned CNT_W  = $clog2(DEPTH) + 1;

  // ============================================================ injection
  logic [NVC-1:0]               slot_busy;
  msg_t [NVC-1:0]               slot_msg;
  logic [NVC-1:0][FCNT_W-1:0]   slot_next;    // index of next flit to send
  logic [NVC-1:0][CRD_W-1:0]    credit;

  logic               have_free;
  logic [VC_W-1:0]    free_slot;

  always_comb begin
    have_free = 1'b0;
    free_slot = '0;
    for (int v = NVC - 1; v >= 0; v--)
      if (!slot_busy[v]) begin
        have_free = 1'b1;
        free_slot = VC_W'(v);
      end
  end

  assign tx_ready = have_free;

  logic [NVC-1:0]      inj_req, inj_gnt;
  phase_t [NVC-1:0]    inj_phase;
  logic [VC_W-1:0]     inj_idx;
  logic                inj_valid, inj_starve, inj_prio, inj_tie;

  always_comb begin
    for (int v = 0; v < NVC; v++) begin
      inj_req[v]   = slot_busy[v] && (credit[v] != '0);
      inj_phase[v] = slot_msg[v].phase;
    end
  end

  ppb_arbiter #(.N(NVC), .THRESH(THRESH)) u_inj_arb (
    .clk        (clk),
    .rst_n      (rst_n),
    .req        (inj_req),
    .phase      (inj_phase),
    .accept     (1'b1),
    .gnt        (inj_gnt),
    .gnt_idx    (inj_idx),
    .gnt_valid  (inj_valid),
    .starve_win (inj_starve),
    .prio_win   (inj_prio),
    .tie_break  (inj_tie)
  );

  // Flit the winning slot sends this cycle.
  msg_t               win_msg;
  logic [FCNT_W-1:0]  win_k;
  logic               win_last;
  flit_t              win_flit;

  always_comb begin
    win_msg  = slot_msg[inj_idx];
    win_k    = slot_next[inj_idx];
    win_last = (32'(win_k) == flits_of(win_msg.mtype) - 1);
    if (win_k == '0) begin
      win_flit.ftype   = win_last ? FT_HEADTAIL : FT_HEAD;
      win_flit.payload = FLIT_W'(head_of(win_msg));
    end else begin
      win_flit.ftype   = win_last ? FT_TAIL : FT_BODY;
      win_flit.payload = win_msg.data[(32'(win_k) - 1) * FLIT_W +: FLIT_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_busy <= '0;
      slot_msg  <= '0;
      slot_next <= '0;
      for (int v = 0; v < NVC; v++) credit[v] <= CRD_W'(DEPTH);
      inj_link  <= '0;
    end else begin
      if (tx_valid && tx_ready) begin
        slot_busy[free_slot] <= 1'b1;
        slot_msg[free_slot]  <= tx_msg;
        slot_next[free_slot] <= '0;
      end
      if (inj_valid) begin
        slot_next[inj_idx] <= win_k + 1'b1;
        if (win_last) slot_busy[inj_idx] <= 1'b0;
      end
      for (int v = 0; v < NVC; v++) begin
        logic dec, inc;
        dec = inj_valid && inj_idx == VC_W'(v);
        inc = inj_credit.valid && inj_credit.vc == VC_W'(v);
        if (dec && !inc)      credit[v] <= credit[v] - 1'b1;
        else if (inc && !dec) credit[v] <= credit[v] + 1'b1;
      end
      inj_link.valid <= inj_valid;
      inj_link.vc    <= inj_idx;
      inj_link.flit  <= win_flit;
    end
  end

  // ============================================================= ejection
  flit_t [NVC-1:0]             ej_front;
  logic  [NVC-1:0]             ej_empty, ej_pop;
  logic  [NVC-1:0]             asm_done;
  msg_t  [NVC-1:0]             asm_msg;
  logic  [NVC-1:0][FCNT_W-1:0] asm_k;

  for (genvar v = 0; v < NVC; v++) begin : g_ej
    logic              full_unused;
    logic [CNT_W-1:0]  count_unused;
    ppb_vc_fifo #(.T(flit_t), .DEPTH(DEPTH)) u_buf (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (ej_link.valid && ej_link.vc == VC_W'(v)),
      .wr_data (ej_link.flit),
      .rd_en   (ej_pop[v]),
      .rd_data (ej_front[v]),
      .empty   (ej_empty[v]),
      .full    (full_unused),
      .count   (count_unused)
    );
  end

  // One buffer is read per cycle, the lowest-numbered VC that can take a
  // flit, so that one credit per cycle goes back to the router.
  always_comb begin
    ej_pop = '0;
    for (int v = NVC - 1; v >= 0; v--)
      if (!ej_empty[v] && !asm_done[v]) ej_pop = NVC'(1) << v;
  end

  logic [NVC-1:0]      rx_gnt;
  phase_t [NVC-1:0]    rx_phase;
  logic [VC_W-1:0]     rx_idx;
  logic                rx_any, rx_starve, rx_prio, rx_tie;

  always_comb begin
    for (int v = 0; v < NVC; v++) rx_phase[v] = asm_msg[v].phase;
  end

  ppb_arbiter #(.N(NVC), .THRESH(THRESH)) u_ej_arb (
    .clk        (clk),
    .rst_n      (rst_n),
    .req        (asm_done),
    .phase      (rx_phase),
    .accept     (rx_ready),
    .gnt        (rx_gnt),
    .gnt_idx    (rx_idx),
    .gnt_valid  (rx_any),
    .starve_win (rx_starve),
    .prio_win   (rx_prio),
    .tie_break  (rx_tie)
  );

  assign rx_valid = rx_any;
  assign rx_msg   = asm_msg[rx_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      asm_done  <= '0;
      asm_msg   <= '0;
      asm_k     <= '0;
      ej_credit <= '0;
    end else begin
      ej_credit.valid <= 1'b0;
      ej_credit.vc    <= '0;
      for (int v = 0; v < NVC; v++) begin
        if (rx_any && rx_ready && rx_idx == VC_W'(v))
          asm_done[v] <= 1'b0;
        if (ej_pop[v]) begin
          ej_credit.valid <= 1'b1;
          ej_credit.vc    <= VC_W'(v);
          if (is_head(ej_front[v].ftype)) begin
            head_t h;
            h = head_t'(ej_front[v].payload);
            asm_msg[v].mtype <= h.mtype;
            asm_msg[v].phase <= h.phase;
            asm_msg[v].src   <= h.src;
            asm_msg[v].dst   <= h.dst;
            asm_msg[v].laddr <= h.laddr;
            asm_msg[v].acks  <= h.acks;
            asm_msg[v].data  <= '0;
            asm_k[v]         <= FCNT_W'(1);
          end else begin
            asm_msg[v].data[(32'(asm_k[v]) - 1) * FLIT_W +: FLIT_W] <=
              ej_front[v].payload;
            asm_k[v] <= asm_k[v] + 1'b1;
          end
          if (is_tail(ej_front[v].ftype)) asm_done[v] <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    inj_credit.valid |-> credit[inj_credit.vc] < CRD_W'(DEPTH))
    else $error("ppb_ni: credit overflow");

  assign ev_prio = inj_valid && inj_prio;

endmodule
