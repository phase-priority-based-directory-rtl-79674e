// tb_ppb_sw_alloc: self-checking test of the phase-priority switch
// allocator.
//
// Random requests of all input VCs are applied each cycle. Checked rules:
// each grant answers a request; at most one grant per input port and per
// output port; the crossbar select names the granted input port and VC; a
// granted VC has the highest phase priority among the requests of its input
// port; and no input port whose requests of highest priority all target an
// output loses that output to a flit of lower priority. A single request
// must always be granted at once.
module tb_ppb_sw_alloc;
  import ppb_pkg::*;

  localparam int NIN = NPORT * NVC;

  logic clk = 0, rst_n = 0;
  logic [NIN-1:0] req, gnt;
  logic [NIN-1:0][PORT_W-1:0] req_port;
  phase_t [NIN-1:0] req_phase;
  logic [NPORT-1:0] out_valid, prio_win, starve_win;
  logic [NPORT-1:0][PORT_W-1:0] out_sel;
  logic [NPORT-1:0][VC_W-1:0] out_sel_vc;

  int checks = 0, failures = 0;

  ppb_sw_alloc #(.THRESH(1000)) dut (.*);

  always #5 clk = ~clk;

  function automatic int keyof(input phase_t p);
    return {p.outer, ~p.inner};
  endfunction

  int tgt;
  logic same;

  initial begin
    req = '0; req_port = '0; req_phase = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // Single requests.
    for (int i = 0; i < NIN; i++) begin
      @(negedge clk);
      req = '0; req[i] = 1; req_port[i] = PORT_W'($urandom_range(NPORT - 1, 0));
      #1;
      checks++;
      if (gnt != NIN'(1) << i || !out_valid[req_port[i]] || out_sel[req_port[i]] != PORT_W'(i / NVC) ||
          out_sel_vc[req_port[i]] != VC_W'(i % NVC)) begin
        failures++; $display("FAIL single request %0d", i);
      end
    end

    for (int r = 0; r < 3000; r++) begin
      int pbest [NPORT];
      int gkey [NPORT];
      @(negedge clk);
      for (int i = 0; i < NIN; i++) begin
        req[i] = ($urandom % 2) == 0;
        req_port[i] = PORT_W'($urandom_range(NPORT - 1, 0));
        req_phase[i] = '{outer_e'($urandom % 3), 6'($urandom % 8)};
      end
      #1;
      for (int o = 0; o < NPORT; o++) gkey[o] = -1;
      for (int p = 0; p < NPORT; p++) begin
        int n;
        n = 0; pbest[p] = -1;
        for (int v = 0; v < NVC; v++)
          if (req[p*NVC+v] && keyof(req_phase[p*NVC+v]) > pbest[p]) pbest[p] = keyof(req_phase[p*NVC+v]);
        for (int v = 0; v < NVC; v++) begin
          int i;
          i = p * NVC + v;
          if (gnt[i]) begin
            n++;
            checks++;
            if (!req[i] || keyof(req_phase[i]) != pbest[p] || !out_valid[req_port[i]] ||
                out_sel[req_port[i]] != PORT_W'(p) || out_sel_vc[req_port[i]] != VC_W'(v)) begin
              failures++; $display("FAIL grant %0d inconsistent", i);
            end
            gkey[req_port[i]] = keyof(req_phase[i]);
          end
        end
        checks++;
        if (n > 1) begin failures++; $display("FAIL input %0d has %0d grants", p, n); end
      end
      for (int o = 0; o < NPORT; o++) begin
        checks++;
        if (out_valid[o] != (gkey[o] >= 0)) begin failures++; $display("FAIL out_valid %0d", o); end
      end
      // Inputs whose best requests all target one output.
      for (int p = 0; p < NPORT; p++) if (pbest[p] >= 0) begin
        tgt = -1; same = 1;
        for (int v = 0; v < NVC; v++)
          if (req[p*NVC+v] && keyof(req_phase[p*NVC+v]) == pbest[p]) begin
            if (tgt < 0) tgt = int'(req_port[p*NVC+v]);
            else if (tgt != req_port[p*NVC+v]) same = 0;
          end
        if (same) begin
          checks++;
          if (gkey[tgt] < pbest[p]) begin
            failures++; $display("FAIL output %0d went to key %0d over key %0d (input %0d) ports %p req %b", tgt, gkey[tgt], pbest[p], p, req_port, req);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
