// tb_ppb_noc_top: end-to-end test of the 16-tile phase-priority network at
// its default size (4 x 4 mesh, 5 VCs, 32-entry inner phase buffers).
//
// The testbench plays the endpoints the network connects: a behavioural L1
// controller and directory controller in every tile and memory controllers
// on tiles 0, 3, 12 and 15. Home tile of line L is L % 16, its memory
// controller tile is picked by (L / 16) % 4. Phase 1 measures the zero-load
// latency of one control message across three hops. Phase 2 runs the
// transactions of the paper's cache-access figure on one line:
//   (d)+(a) read miss in L2: GetS, memory GetS, memory Data, Data;
//   (c) write to a shared line: GetX, Data with ack count, Inv, Ack;
//   (b) read of a modified line: GetS, Fwd, Data from the owner and
//       writeback to the directory.
// Every message is checked on arrival: its outer phase must match its
// class, and every second-phase message must carry the inner phase of its
// transaction (0, 1, 2 for the three transactions on the line), also the
// replies the L1s build from the forwards and invalidations. Phase 3 sends
// random messages between random tiles from both ports with random
// back-pressure and checks that each arrives once and unchanged. The test
// counts the mechanisms of the design and fails if any never happened:
// phase-priority decisions in VA, SA and NI, starvation grants, credit
// stalls, inner phase buffer hits and evictions.
module tb_ppb_noc_top;
  import ppb_pkg::*;

  localparam int NT = 16;
  localparam int MX = 4;

  logic clk = 0, rst_n = 0;
  logic [NT-1:0] l1_tx_valid, l1_tx_ready, dir_tx_valid, dir_tx_ready, dir_tx_new_txn;
  msg_t [NT-1:0] l1_tx_msg, dir_tx_msg, rx_msg;
  logic [NT-1:0] rx_valid, rx_ready;
  logic [NT-1:0] ev_va_prio, ev_sa_prio, ev_starve, ev_credit_stall, ev_ni_prio,
                 ev_ipb_hit, ev_ipb_evict;

  int checks = 0, failures = 0;

  ppb_noc_top dut (.*);

  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------ event counters
  int n_va = 0, n_sa = 0, n_starve = 0, n_stall = 0, n_ni = 0, n_hit = 0, n_evict = 0;
  always @(posedge clk) if (rst_n) begin
    n_va     += $countones(ev_va_prio);
    n_sa     += $countones(ev_sa_prio);
    n_starve += $countones(ev_starve);
    n_stall  += $countones(ev_credit_stall);
    n_ni     += $countones(ev_ni_prio);
    n_hit    += $countones(ev_ipb_hit & dir_tx_valid & dir_tx_ready);
    n_evict  += $countones(ev_ipb_evict & dir_tx_valid & dir_tx_ready);
  end

  function automatic node_t nd(input int t);
    node_t n;
    n.x = COORD_W'(t % MX);
    n.y = COORD_W'(t / MX);
    return n;
  endfunction

  function automatic int tid(input node_t n);
    return int'(n.y) * MX + int'(n.x);
  endfunction

  // ------------------------------------------------------ output queues
  msg_t l1_q [NT][$];
  msg_t dir_q [NT][$];
  logic dir_nt [NT][$];
  logic rx_bp = 0;              // random back-pressure on rx

  task automatic l1_send(input int t, input msg_t m);
    m.src = nd(t);
    l1_q[t].push_back(m);
  endtask

  task automatic dir_send(input int t, input msg_t m, input logic new_txn);
    m.src = nd(t);
    dir_q[t].push_back(m);
    dir_nt[t].push_back(new_txn);
  endtask

  // ---------------------------------------------------- protocol model
  localparam logic [LADDR_W-1:0] RAND_BIT = LADDR_W'(1) << (LADDR_W - 1);
  int         owner [logic [LADDR_W-1:0]];
  int         sharers [logic [LADDR_W-1:0]];
  logic       in_l2 [logic [LADDR_W-1:0]];
  int         pend_req [logic [LADDR_W-1:0]];  // requestor waiting on memory
  int         exp_inner [logic [LADDR_W-1:0]];  // inner phase of current txn
  int         acks_seen [NT], acks_need [NT], data_seen [NT];
  int         done_cnt = 0;

  function automatic int mc_of(input logic [LADDR_W-1:0] l);
    int mcs [4] = '{0, 3, 12, 15};
    return mcs[(int'(l) / 16) % 4];
  endfunction

  function automatic msg_t mk(input msg_type_e t, input int dst, input logic [LADDR_W-1:0] l,
                              input int inner);
    msg_t m;
    m = '0;
    m.mtype = t;
    m.dst = nd(dst);
    m.laddr = l;
    m.phase.inner = INNER_W'(inner);
    if (has_data(t)) m.data = {16{32'(l)}};
    return m;
  endfunction

  // Directory: open a transaction (next inner phase) and send.
  task automatic dir_open(input int home, input msg_t m);
    logic [LADDR_W-1:0] l;
    l = m.laddr;
    exp_inner[l] = exp_inner.exists(l) ? (exp_inner[l] + 1) % 64 : 0;
    dir_send(home, m, 1'b1);
  endtask

  task automatic handle(input int t, input msg_t m);
    logic [LADDR_W-1:0] l;
    int req;
    l = m.laddr;
    // Phase checks.
    checks++;
    if (m.phase.outer != outer_of(m.mtype)) begin
      failures++; $display("FAIL %s at tile %0d: outer phase %0d", m.mtype.name(), t, m.phase.outer);
    end
    if (l & RAND_BIT) return;
    if (m.phase.outer == OUTER_SECOND) begin
      checks++;
      if (int'(m.phase.inner) != exp_inner[l]) begin
        failures++;
        $display("FAIL %s at tile %0d: inner phase %0d expected %0d", m.mtype.name(), t,
                 m.phase.inner, exp_inner[l]);
      end
    end
    if (has_data(m.mtype)) begin
      checks++;
      if (m.data != {16{32'(l)}}) begin failures++; $display("FAIL data of %s", m.mtype.name()); end
    end
    req = tid(m.src);
    case (m.mtype)
      // ----- directory side (home tile)
      MSG_GETS: begin
        if (!in_l2.exists(l)) begin
          pend_req[l] = req;
          dir_send(t, mk(MSG_MEM_GETS, mc_of(l), l, 0), 1'b0);
        end else if (owner[l] >= 0) begin
          msg_t f;
          f = mk(MSG_FWD_GETS, owner[l], l, 0);
          f.acks = 8'(req);            // requestor travels with the forward
          dir_open(t, f);
        end else begin
          dir_open(t, mk(MSG_DATA, req, l, 0));
          sharers[l] |= 1 << req;
        end
      end
      MSG_GETX: begin
        msg_t d;
        int n;
        n = 0;
        for (int s = 0; s < NT; s++) if (sharers[l][s] && s != req) n++;
        d = mk(MSG_DATA_EXCL, req, l, 0);
        d.acks = 8'(n);
        dir_open(t, d);
        for (int s = 0; s < NT; s++)
          if (sharers[l][s] && s != req) begin
            msg_t iv;
            iv = mk(MSG_INV, s, l, 0);
            iv.acks = 8'(req);
            dir_send(t, iv, 1'b0);
          end
        sharers[l] = 0;
        owner[l] = req;
      end
      MSG_MEM_DATA: begin
        in_l2[l] = 1;
        owner[l] = -1;
        sharers[l] = 1 << pend_req[l];
        dir_open(t, mk(MSG_DATA, pend_req[l], l, 0));
      end
      MSG_WB_DATA: begin
        sharers[l] |= 1 << req;
        owner[l] = -1;
        done_cnt++;
      end
      MSG_UNBLOCK: done_cnt++;
      // ----- memory controller
      MSG_MEM_GETS: l1_send(t, mk(MSG_MEM_DATA, req, l, 0));
      // ----- L1 side
      MSG_FWD_GETS: begin
        int r;
        r = int'(m.acks);
        l1_send(t, mk(MSG_DATA, r, l, int'(m.phase.inner)));
        l1_send(t, mk(MSG_WB_DATA, int'(l) % NT, l, int'(m.phase.inner)));
        sharers[l] |= 1 << r;
      end
      MSG_INV: l1_send(t, mk(MSG_ACK, int'(m.acks), l, int'(m.phase.inner)));
      MSG_DATA: l1_send(t, mk(MSG_UNBLOCK, int'(l) % NT, l, 0));
      MSG_DATA_EXCL: begin
        data_seen[t]++;
        acks_need[t] = int'(m.acks);
        if (acks_seen[t] == acks_need[t]) l1_send(t, mk(MSG_UNBLOCK, int'(l) % NT, l, 0));
      end
      MSG_ACK: begin
        acks_seen[t]++;
        if (data_seen[t] > 0 && acks_seen[t] == acks_need[t])
          l1_send(t, mk(MSG_UNBLOCK, int'(l) % NT, l, 0));
      end
      default: ;
    endcase
  endtask

  // ---------------------------------------------------- random traffic
  msg_t rnd_sent [int];
  int   rnd_got = 0;
  int   lat_rx_cycle = -1;

  // ------------------------------------------------------- port driver
  // Drive at the falling edge; a handshake seen then is taken at the next
  // rising edge, so queues are popped right away.
  always @(negedge clk) begin
    for (int t = 0; t < NT; t++) begin
      l1_tx_valid[t] = l1_q[t].size() > 0;
      l1_tx_msg[t] = l1_tx_valid[t] ? l1_q[t][0] : '0;
      dir_tx_valid[t] = dir_q[t].size() > 0;
      dir_tx_msg[t] = dir_tx_valid[t] ? dir_q[t][0] : '0;
      dir_tx_new_txn[t] = dir_tx_valid[t] ? dir_nt[t][0] : 1'b0;
      rx_ready[t] = rx_bp ? ($urandom % 4 != 0) : 1'b1;
    end
    #1;
    if (rst_n) for (int t = 0; t < NT; t++) begin
      if (l1_tx_valid[t] && l1_tx_ready[t]) void'(l1_q[t].pop_front());
      if (dir_tx_valid[t] && dir_tx_ready[t]) begin
        void'(dir_q[t].pop_front());
        void'(dir_nt[t].pop_front());
      end
      if (rx_valid[t] && rx_ready[t]) begin
        msg_t m;
        m = rx_msg[t];
        checks++;
        if (tid(m.dst) != t) begin failures++; $display("FAIL message for %0d at %0d", tid(m.dst), t); end
        if (m.laddr & RAND_BIT) begin
          int id;
          id = int'(m.laddr[30:0]);
          checks++;
          if (!rnd_sent.exists(id) || rnd_sent[id].mtype != m.mtype || rnd_sent[id].src != m.src ||
              rnd_sent[id].acks != m.acks ||
              (has_data(m.mtype) && rnd_sent[id].data != m.data)) begin
            failures++; $display("FAIL random message %0d", id);
          end else rnd_sent.delete(id);
          rnd_got++;
          handle(t, m);
        end else if (m.mtype == MSG_ACK && m.laddr == LADDR_W'(7)) begin
          lat_rx_cycle = cyc;
        end else handle(t, m);
      end
    end
  end

  msg_type_e l1_types [6] = '{MSG_GETS, MSG_GETX, MSG_ACK, MSG_DATA, MSG_WB_DATA, MSG_MEM_DATA};
  msg_type_e dir_types [5] = '{MSG_FWD_GETS, MSG_INV, MSG_DATA, MSG_DATA_EXCL, MSG_MEM_GETS};

  initial begin
    int t0, rnd_n, wait_c;
    logic [LADDR_W-1:0] L;
    l1_tx_valid = '0; dir_tx_valid = '0; l1_tx_msg = '0; dir_tx_msg = '0;
    dir_tx_new_txn = '0; rx_ready = '1;
    for (int t = 0; t < NT; t++) begin acks_seen[t] = 0; acks_need[t] = 0; data_seen[t] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- phase 1: zero-load latency, tile 0 -> tile 3 (three hops).
    l1_send(0, mk(MSG_ACK, 3, 7, 0));
    @(posedge clk);
    t0 = cyc;                       // handshake at this rising edge
    wait (lat_rx_cycle >= 0);
    checks++;
    // 2 cycles NI injection, 4 + 6 per hop through 4 routers and 3 links,
    // 2 cycles NI ejection, counted to the rising edge of delivery.
    if (lat_rx_cycle - t0 != 2 + 4 + 3 * 6 + 2) begin
      failures++; $display("FAIL zero-load latency %0d", lat_rx_cycle - t0);
    end
    $display("zero-load latency tile 0 -> 3: %0d cycles", lat_rx_cycle - t0);

    // ---- phase 2: the transactions of the cache-access figure on line L.
    L = LADDR_W'(16 * 1 + 6);       // home tile 6, memory controller tile 3
    // (d)+(a): tile 5 read miss, line only in memory.
    l1_send(5, mk(MSG_GETS, 6, L, 0));
    wait (done_cnt == 1);
    checks++;
    if (exp_inner[L] != 0 || sharers[L] != (1 << 5)) begin failures++; $display("FAIL after read miss"); end
    // (c): tile 9 writes the line shared by tile 5.
    l1_send(9, mk(MSG_GETX, 6, L, 0));
    wait (done_cnt == 2);
    checks++;
    if (exp_inner[L] != 1 || owner[L] != 9 || acks_seen[9] != 1) begin failures++; $display("FAIL after write"); end
    // (b): tile 2 reads the line modified in tile 9.
    l1_send(2, mk(MSG_GETS, 6, L, 0));
    wait (done_cnt == 4);           // unblock from 2 and writeback from 9
    checks++;
    if (exp_inner[L] != 2 || sharers[L] != ((1 << 2) | (1 << 9))) begin
      failures++; $display("FAIL after forwarded read");
    end
    $display("coherence transactions done at cycle %0d", cyc);

    // ---- phase 3: random traffic with back-pressure.
    rx_bp = 1;
    rnd_n = 0;
    for (int c = 0; c < 1500; c++) begin
      @(negedge clk);
      for (int t = 0; t < NT; t++) begin
        if ($urandom % 3 == 0 && l1_q[t].size() < 4) begin
          msg_t m;
          int hot;
          hot = (c % 200 < 100) ? 5 : $urandom_range(NT - 1, 0);   // bursts to one tile
          m = mk(l1_types[$urandom_range(5, 0)], ($urandom % 2) ? hot : $urandom_range(NT - 1, 0),
                 RAND_BIT | LADDR_W'(rnd_n), $urandom_range(63, 0));
          m.acks = 8'($urandom);
          m.data = {16{$urandom}};
          m.src = nd(t);
          rnd_sent[rnd_n] = m;
          rnd_n++;
          l1_send(t, m);
        end
        if ($urandom % 4 == 0 && dir_q[t].size() < 4) begin
          msg_t m;
          m = mk(dir_types[$urandom_range(4, 0)], $urandom_range(NT - 1, 0),
                 RAND_BIT | LADDR_W'(rnd_n), 0);
          m.acks = 8'($urandom);
          m.data = {16{$urandom}};
          m.src = nd(t);
          rnd_sent[rnd_n] = m;
          rnd_n++;
          dir_send(t, m, 1'($urandom));
        end
      end
    end
    rx_bp = 0;
    wait_c = 0;
    while (rnd_got < rnd_n && wait_c < 5000) begin @(negedge clk); wait_c++; end
    checks++;
    if (rnd_got != rnd_n || rnd_sent.num() != 0) begin
      failures++; $display("FAIL random traffic: %0d of %0d delivered", rnd_got, rnd_n);
    end
    $display("random traffic: %0d messages delivered, finished at cycle %0d", rnd_got, cyc);
    $display("mechanisms: VA priority %0d, SA priority %0d, NI priority %0d, starvation %0d, credit stall %0d, IPB hit %0d, IPB evict %0d",
             n_va, n_sa, n_ni, n_starve, n_stall, n_hit, n_evict);
    checks++;
    if (n_va == 0 || n_sa == 0 || n_ni == 0 || n_starve == 0 || n_stall == 0 || n_hit == 0 || n_evict == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
