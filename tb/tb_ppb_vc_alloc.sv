// tb_ppb_vc_alloc: self-checking test of the phase-priority VC allocator.
//
// Each cycle random input VCs request random output ports with random
// phases, and random output VCs are busy. Checked against rules worked out
// here: per output port exactly one grant when it has a request and a free
// VC, none otherwise; the grant goes to a request of the highest phase
// priority for that port; the allocated VC is the lowest free one. A
// directed case checks round-robin rotation among equal phases.
module tb_ppb_vc_alloc;
  import ppb_pkg::*;

  localparam int NIN = NPORT * NVC;

  logic clk = 0, rst_n = 0;
  logic [NIN-1:0] req, gnt;
  logic [NIN-1:0][PORT_W-1:0] req_port;
  phase_t [NIN-1:0] req_phase;
  logic [NPORT-1:0][NVC-1:0] out_vc_busy;
  logic [NIN-1:0][VC_W-1:0] gnt_vc;
  logic [NPORT-1:0] prio_win, starve_win;

  int checks = 0, failures = 0;

  ppb_vc_alloc #(.THRESH(1000)) dut (.*);

  always #5 clk = ~clk;

  function automatic int keyof(input phase_t p);
    return {p.outer, ~p.inner};
  endfunction

  initial begin
    int winners [int];
    req = '0; req_port = '0; req_phase = '0; out_vc_busy = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // Round robin: VCs 0, 7 and 13 want port 2 with equal phases.
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      req = '0;
      foreach (req[i]) if (i == 0 || i == 7 || i == 13) begin
        req[i] = 1; req_port[i] = P_EAST; req_phase[i] = '{OUTER_SECOND, 6'd4};
      end
      #1;
      for (int i = 0; i < NIN; i++) if (gnt[i]) winners[i] = 1;
    end
    checks++;
    if (winners.num() != 3) begin failures++; $display("FAIL round robin: %0d winners", winners.num()); end

    for (int r = 0; r < 3000; r++) begin
      @(negedge clk);
      for (int i = 0; i < NIN; i++) begin
        req[i] = ($urandom % 3) == 0;
        req_port[i] = PORT_W'($urandom_range(NPORT - 1, 0));
        req_phase[i] = '{outer_e'($urandom % 3), 6'($urandom % 8)};
      end
      for (int o = 0; o < NPORT; o++) out_vc_busy[o] = ($urandom % 4 == 0) ? '1 : NVC'($urandom);
      #1;
      for (int o = 0; o < NPORT; o++) begin
        int best, n, g, lowfree;
        best = -1; n = 0; g = -1; lowfree = -1;
        for (int v = NVC - 1; v >= 0; v--) if (!out_vc_busy[o][v]) lowfree = v;
        for (int i = 0; i < NIN; i++)
          if (req[i] && req_port[i] == o && keyof(req_phase[i]) > best) best = keyof(req_phase[i]);
        for (int i = 0; i < NIN; i++)
          if (gnt[i] && req_port[i] == o) begin n++; g = i; end
        checks++;
        if (best < 0 || lowfree < 0) begin
          if (n != 0) begin failures++; $display("FAIL port %0d: grant without request or free VC", o); end
        end else if (n != 1 || !req[g] || keyof(req_phase[g]) != best || gnt_vc[g] != VC_W'(lowfree)) begin
          failures++;
          $display("FAIL port %0d: %0d grants, winner %0d key %0d best %0d vc %0d/%0d",
                   o, n, g, g >= 0 ? keyof(req_phase[g]) : -1, best, g >= 0 ? gnt_vc[g] : 0, lowfree);
        end
      end
      for (int i = 0; i < NIN; i++) begin
        checks++;
        if (gnt[i] && !req[i]) begin failures++; $display("FAIL grant to idle VC %0d", i); end
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
