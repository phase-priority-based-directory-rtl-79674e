// tb_ppb_router: self-checking test of one phase-priority router placed at
// (1,1) of a 3 x 3 mesh.
//
// The testbench plays the five upstream neighbours, which send packets of
// one or five flits under credit flow control, and the five downstream
// neighbours, which hold a 4-flit buffer per VC, drain it at random and
// return credits. Checked:
//  * zero-load latency: a lone head-tail flit leaves 4 cycles after it was
//    written into the input buffer (RC, VA, SA, ST);
//  * phase priority: two packets that arrive together for the same output
//    leave in phase order, whichever input they came from;
//  * every packet leaves through its X-Y port, complete, in order, on one
//    output VC and without interleaving with another packet on that VC;
//  * no output VC ever receives more flits than its downstream buffer
//    holds, including while the testbench withholds credits (credit stall).
module tb_ppb_router;
  import ppb_pkg::*;

  localparam int D = 4;

  logic clk = 0, rst_n = 0;
  node_t here;
  link_t   [NPORT-1:0] in_link, out_link;
  credit_t [NPORT-1:0] in_credit, out_credit;
  logic ev_va_prio, ev_sa_prio, ev_starve, ev_credit_stall;

  int checks = 0, failures = 0;
  int n_stall = 0, n_sa_prio = 0, n_va_prio = 0;

  ppb_router #(.DEPTH(D), .THRESH(32)) dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ helpers
  function automatic flit_t mk_head(input int id, input node_t dst, input phase_t ph, input logic single);
    head_t h;
    flit_t f;
    h = '0;
    h.mtype = single ? MSG_ACK : MSG_DATA;
    h.phase = ph;
    h.dst = dst;
    h.laddr = LADDR_W'(id);
    f.ftype = single ? FT_HEADTAIL : FT_HEAD;
    f.payload = h;
    return f;
  endfunction

  function automatic logic [PORT_W-1:0] xy_port(input node_t d);
    if (d.x > 1) return P_EAST;
    if (d.x < 1) return P_WEST;
    if (d.y > 1) return P_SOUTH;
    if (d.y < 1) return P_NORTH;
    return P_LOCAL;
  endfunction

  // ------------------------------------------------- downstream model
  int occ [NPORT][NVC];          // flits held downstream
  int cur_id [NPORT][NVC];       // packet on an output VC, -1 none
  int cur_seq [NPORT][NVC];
  int exp_port [int];            // packet id -> expected output port
  int delivered = 0;
  int sent_pkts = 0;
  logic hold_credit [NPORT];
  int   out_time [int];          // packet id -> cycle its head left
  int   cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    for (int o = 0; o < NPORT; o++) begin
      // Flit arrival.
      if (out_link[o].valid) begin
        int v, id;
        head_t hh;
        v = int'(out_link[o].vc);
        hh = head_t'(out_link[o].flit.payload);
        occ[o][v]++;
        checks++;
        if (occ[o][v] > D) begin failures++; $display("FAIL overflow port %0d vc %0d", o, v); end
        if (is_head(out_link[o].flit.ftype)) begin
          id = int'(hh.laddr);
          checks++;
          if (cur_id[o][v] != -1 || !exp_port.exists(id) || exp_port[id] != o) begin
            failures++;
            $display("FAIL head id %0d at port %0d vc %0d (busy %0d)", id, o, v, cur_id[o][v]);
          end
          out_time[id] = cyc;
          cur_id[o][v] = is_tail(out_link[o].flit.ftype) ? -1 : id;
          cur_seq[o][v] = 1;
          if (is_tail(out_link[o].flit.ftype)) delivered++;
        end else begin
          checks++;
          if (cur_id[o][v] < 0 || out_link[o].flit.payload != FLIT_W'({cur_id[o][v], cur_seq[o][v]})) begin
            failures++; $display("FAIL body flit at port %0d vc %0d: %h cur %0d seq %0d t=%0d", o, v, out_link[o].flit.payload, cur_id[o][v], cur_seq[o][v], cyc);
          end
          cur_seq[o][v]++;
          if (is_tail(out_link[o].flit.ftype)) begin
            checks++;
            if (cur_seq[o][v] != 1 + DATA_FLITS) begin failures++; $display("FAIL packet length"); end
            cur_id[o][v] = -1;
            delivered++;
          end
        end
      end
    end
  end

  // Drain one flit per port per cycle at random, returning its credit.
  always @(negedge clk) begin
    for (int o = 0; o < NPORT; o++) begin
      int v;
      out_credit[o] <= '0;
      v = $urandom_range(NVC - 1, 0);
      if (rst_n && !hold_credit[o] && occ[o][v] > 0 && ($urandom % 4 != 0)) begin
        occ[o][v]--;
        out_credit[o] <= '{valid: 1'b1, vc: VC_W'(v)};
      end
    end
  end

  // ---------------------------------------------------- upstream model
  int up_credit [NPORT][NVC];

  always @(posedge clk) begin
    for (int p = 0; p < NPORT; p++)
      if (rst_n && in_credit[p].valid) up_credit[p][in_credit[p].vc]++;
  end

  // Send one packet from port p on VC v; flits go out one per cycle when a
  // credit is available.
  task automatic send_pkt(input int p, input int v, input int id, input node_t dst,
                          input phase_t ph, input logic single);
    int n;
    n = single ? 1 : 1 + DATA_FLITS;
    exp_port[id] = xy_port(dst);
    sent_pkts++;
    for (int k = 0; k < n; k++) begin
      link_t l;
      while (up_credit[p][v] == 0) @(negedge clk);
      l.valid = 1'b1;
      l.vc    = VC_W'(v);
      if (k == 0) l.flit = mk_head(id, dst, ph, single);
      else begin
        l.flit.ftype   = (k == n - 1) ? FT_TAIL : FT_BODY;
        l.flit.payload = FLIT_W'({id, k});
      end
      up_credit[p][v]--;
      in_link[p] = l;
      @(negedge clk);
      in_link[p] = '0;
    end
  endtask

  always @(posedge clk) begin
    if (ev_credit_stall) n_stall++;
    if (ev_sa_prio) n_sa_prio++;
    if (ev_va_prio) n_va_prio++;
  end

  task automatic rand_port(input int p);
    for (int k = 0; k < 120; k++) begin
      node_t d;
      d.x = COORD_W'($urandom_range(2, 0));
      d.y = COORD_W'($urandom_range(2, 0));
      send_pkt(p, $urandom_range(NVC - 1, 0), 1000 + p * 1000 + k, d,
               '{outer_e'($urandom_range(2, 0)), 6'($urandom_range(63, 0))}, 1'($urandom_range(1, 0)));
    end
  endtask

  node_t dst_e, dst_w;
  int t0;

  initial begin
    here = '{x: 4'd1, y: 4'd1};
    in_link = '0; out_credit = '0;
    for (int o = 0; o < NPORT; o++) begin
      hold_credit[o] = 0;
      for (int v = 0; v < NVC; v++) begin
        occ[o][v] = 0; cur_id[o][v] = -1; cur_seq[o][v] = 0; up_credit[o][v] = D;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // Zero-load latency: head-tail flit from west to east.
    dst_e = '{x: 4'd2, y: 4'd1};
    t0 = cyc;                 // written into the buffer at the end of this cycle
    send_pkt(P_WEST, 0, 1, dst_e, '{OUTER_FIRST, 6'd0}, 1);
    repeat (8) @(negedge clk);
    checks++;
    if (!out_time.exists(1) || out_time[1] - t0 != 4) begin
      failures++; $display("FAIL zero-load latency %0d", out_time.exists(1) ? out_time[1] - t0 : -1);
    end

    // Phase priority: first-phase packet from north and third-phase packet
    // from south arrive in the same cycle, both for the east port.
    fork
      send_pkt(P_NORTH, 1, 2, dst_e, '{OUTER_FIRST, 6'd0}, 1);
      send_pkt(P_SOUTH, 2, 3, dst_e, '{OUTER_THIRD, 6'd0}, 1);
    join
    repeat (8) @(negedge clk);
    checks++;
    if (!(out_time.exists(2) && out_time.exists(3) && out_time[3] < out_time[2])) begin
      failures++; $display("FAIL outer phase order");
    end
    // Inner phase: earlier transaction (smaller inner) first.
    fork
      send_pkt(P_NORTH, 1, 4, dst_e, '{OUTER_SECOND, 6'd9}, 1);
      send_pkt(P_LOCAL, 3, 5, dst_e, '{OUTER_SECOND, 6'd2}, 1);
    join
    repeat (8) @(negedge clk);
    checks++;
    if (!(out_time.exists(4) && out_time.exists(5) && out_time[5] < out_time[4])) begin
      failures++; $display("FAIL inner phase order");
    end

    // Credit stall: hold the east credits while data packets go east.
    hold_credit[P_EAST] = 1;
    fork
      send_pkt(P_WEST, 0, 10, dst_e, '{OUTER_SECOND, 6'd1}, 0);
      send_pkt(P_NORTH, 1, 11, dst_e, '{OUTER_SECOND, 6'd2}, 0);
    join_none
    repeat (40) @(negedge clk);
    hold_credit[P_EAST] = 0;
    wait fork;

    // Random traffic from all five inputs.
    fork
      rand_port(0);
      rand_port(1);
      rand_port(2);
      rand_port(3);
      rand_port(4);
    join
    repeat (200) @(negedge clk);

    checks++;
    if (delivered != sent_pkts) begin failures++; $display("FAIL delivered %0d of %0d", delivered, sent_pkts); end
    checks++;
    if (n_stall == 0 || n_sa_prio == 0 || n_va_prio == 0) begin
      failures++; $display("FAIL mechanisms: stall %0d sa %0d va %0d", n_stall, n_sa_prio, n_va_prio);
    end
    $display("router: %0d packets, credit-stall cycles %0d, priority SA %0d VA %0d",
             sent_pkts, n_stall, n_sa_prio, n_va_prio);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
