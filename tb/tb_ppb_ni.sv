// tb_ppb_ni: self-checking test of the network interface.
//
// The testbench closes the NI's router side into a loop: it accepts the
// injected flits into a 4-flit buffer per VC (returning credits as it
// forwards them) and sends them back on the same VC into the NI's ejection
// side, honouring the NI's ejection credits. Checked:
//  * every injected flit is well formed: head fields equal the message,
//    body flits carry the line in ascending 128-bit chunks, control
//    messages are one head-tail flit and data messages five flits;
//  * every message comes back on rx unchanged (all fields and data);
//  * injection priority: a third-phase data message that arrives one cycle
//    after a first-phase data message overtakes it (its tail leaves first);
//  * no VC buffer of the loop ever overflows (credit flow control).
module tb_ppb_ni;
  import ppb_pkg::*;

  localparam int D = 4;

  logic clk = 0, rst_n = 0;
  logic tx_valid, tx_ready, rx_valid, rx_ready, ev_prio;
  msg_t tx_msg, rx_msg;
  link_t inj_link, ej_link;
  credit_t inj_credit, ej_credit;

  int checks = 0, failures = 0;

  ppb_ni #(.DEPTH(D), .THRESH(32)) dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------ loop model
  flit_t lbuf [NVC][$];
  int    ej_crd [NVC];
  msg_t  sent [int];            // id -> message
  int    inj_cur [NVC];         // id of packet being injected per VC
  int    inj_k [NVC];
  int    tail_time [int];
  int    cyc = 0;
  int    n_prio = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (ev_prio) n_prio++;
  end

  always @(negedge clk) if (rst_n) begin
    int fv;
    // Injected flit: check and buffer.
    if (inj_link.valid) begin
      int v;
      head_t h;
      msg_t m;
      v = int'(inj_link.vc);
      lbuf[v].push_back(inj_link.flit);
      checks++;
      if (lbuf[v].size() > D) begin failures++; $display("FAIL loop buffer overflow vc %0d", v); end
      if (is_head(inj_link.flit.ftype)) begin
        h = head_t'(inj_link.flit.payload);
        inj_cur[v] = int'(h.laddr);
        inj_k[v] = 1;
        checks++;
        if (!sent.exists(inj_cur[v])) begin failures++; $display("FAIL unknown head"); end
        else begin
          m = sent[inj_cur[v]];
          if (h.mtype != m.mtype || h.phase != m.phase || h.src != m.src || h.dst != m.dst ||
              h.acks != m.acks || (inj_link.flit.ftype == FT_HEADTAIL) == has_data(m.mtype)) begin
            failures++; $display("FAIL head flit of %0d", inj_cur[v]);
          end
        end
        if (inj_link.flit.ftype == FT_HEADTAIL) tail_time[inj_cur[v]] = cyc;
      end else begin
        m = sent[inj_cur[v]];
        checks++;
        if (inj_link.flit.payload != m.data[(inj_k[v] - 1) * FLIT_W +: FLIT_W] ||
            (inj_link.flit.ftype == FT_TAIL) != (inj_k[v] == DATA_FLITS)) begin
          failures++; $display("FAIL body flit %0d of %0d", inj_k[v], inj_cur[v]);
        end
        if (inj_link.flit.ftype == FT_TAIL) tail_time[inj_cur[v]] = cyc;
        inj_k[v]++;
      end
    end
    if (ej_credit.valid) ej_crd[ej_credit.vc]++;
    // Forward one buffered flit per cycle back into the NI.
    inj_credit = '0;
    ej_link = '0;
    fv = $urandom_range(NVC - 1, 0);
    for (int j = 0; j < NVC; j++) begin
      int v;
      v = (fv + j) % NVC;
      if (!ej_link.valid && lbuf[v].size() > 0 && ej_crd[v] > 0) begin
        ej_link.valid = 1'b1;
        ej_link.vc = VC_W'(v);
        ej_link.flit = lbuf[v].pop_front();
        ej_crd[v]--;
        inj_credit = '{valid: 1'b1, vc: VC_W'(v)};
      end
    end
  end

  // ---------------------------------------------------------- receive
  int received = 0;
  always @(posedge clk) if (rst_n && rx_valid && rx_ready) begin
    int id;
    id = int'(rx_msg.laddr);
    checks++;
    if (!sent.exists(id) || rx_msg.mtype != sent[id].mtype || rx_msg.phase != sent[id].phase ||
        rx_msg.src != sent[id].src || rx_msg.dst != sent[id].dst || rx_msg.acks != sent[id].acks ||
        (has_data(rx_msg.mtype) && rx_msg.data != sent[id].data)) begin
      failures++; $display("FAIL received message %0d", id);
    end
    received++;
  end

  // ------------------------------------------------------------- send
  function automatic msg_t mk_msg(input int id, input msg_type_e t, input phase_t ph);
    msg_t m;
    m = '0;
    m.mtype = t;
    m.phase = ph;
    m.src = node_t'($urandom);
    m.dst = node_t'($urandom);
    m.laddr = LADDR_W'(id);
    m.acks = 8'($urandom);
    if (has_data(t)) for (int i = 0; i < 16; i++) m.data[i*32 +: 32] = $urandom;
    return m;
  endfunction

  task automatic send(input msg_t m);
    tx_msg = m;
    tx_valid = 1;
    sent[int'(m.laddr)] = m;
    @(posedge clk);
    while (!tx_ready) @(posedge clk);
    #1 tx_valid = 0;
  endtask

  msg_type_e types [6] = '{MSG_GETS, MSG_INV, MSG_DATA, MSG_ACK, MSG_MEM_DATA, MSG_WB_DATA};

  initial begin
    tx_valid = 0; tx_msg = '0; rx_ready = 1; inj_credit = '0; ej_link = '0;
    for (int v = 0; v < NVC; v++) ej_crd[v] = D;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // Priority: first-phase data, then third-phase data one cycle later.
    send(mk_msg(1, MSG_WB_DATA, '{OUTER_FIRST, 6'd0}));
    send(mk_msg(2, MSG_MEM_DATA, '{OUTER_THIRD, 6'd0}));
    repeat (20) @(negedge clk);
    checks++;
    if (!(tail_time.exists(1) && tail_time.exists(2) && tail_time[2] < tail_time[1])) begin
      failures++; $display("FAIL third phase did not overtake first phase");
    end

    // Random messages with random rx back-pressure.
    fork
      forever @(negedge clk) rx_ready = ($urandom % 4) != 0;
    join_none
    for (int i = 0; i < 400; i++) begin
      send(mk_msg(100 + i, types[$urandom_range(5, 0)],
                  '{outer_e'($urandom_range(2, 0)), 6'($urandom_range(63, 0))}));
      if ($urandom % 3 == 0) @(negedge clk);
    end
    repeat (300) @(negedge clk);
    checks++;
    if (received != 402) begin failures++; $display("FAIL received %0d of 402", received); end
    checks++;
    if (n_prio == 0) begin failures++; $display("FAIL no priority decision seen"); end
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
