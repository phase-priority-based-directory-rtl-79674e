// tb_ppb_arbiter: self-checking test of the phase-priority arbiter.
//
// Directed cases check the paper's three priority rules (outer phase first,
// larger outer wins, smaller inner wins), round-robin among equal phases and
// the starvation threshold (a low-priority request facing a permanent
// high-priority one must be served after exactly THRESH cycles of waiting).
// A random phase then compares every grant with a reference model kept in
// the testbench.
module tb_ppb_arbiter;
  import ppb_pkg::*;

  localparam int N = 4;
  localparam int TH = 8;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] req;
  phase_t [N-1:0] phase;
  logic accept;
  logic [N-1:0] gnt;
  logic [1:0] gnt_idx;
  logic gnt_valid, starve_win, prio_win, tie_break;

  int checks = 0, failures = 0;

  ppb_arbiter #(.N(N), .THRESH(TH)) dut (.*);

  always #5 clk = ~clk;

  // Reference model state.
  int ref_last;
  int ref_wait [N];

  function automatic int ref_pick();
    int best_i, k, i;
    logic [8:0] bk, kk;
    best_i = -1;
    bk = 0;
    for (k = 1; k <= N; k++) begin
      i = (ref_last + k) % N;
      if (req[i]) begin
        kk = {ref_wait[i] >= TH, phase[i].outer, ~phase[i].inner};
        if (best_i < 0 || kk > bk) begin
          best_i = i;
          bk = kk;
        end
      end
    end
    return best_i;
  endfunction

  task automatic ref_step();
    int w;
    w = ref_pick();
    for (int i = 0; i < N; i++) begin
      if (accept && i == w) ref_wait[i] = 0;
      else if (req[i] && ref_wait[i] < TH) ref_wait[i]++;
      else if (!req[i]) ref_wait[i] = 0;
    end
    if (accept && w >= 0) ref_last = w;
  endtask

  task automatic check_grant(input int exp, input string what);
    checks++;
    if (exp < 0 ? gnt_valid : (!gnt_valid || gnt_idx != exp[1:0] || gnt != N'(1) << exp)) begin
      failures++;
      $display("FAIL %s: expected %0d got valid=%0b idx=%0d", what, exp, gnt_valid, gnt_idx);
    end
  endtask

  function automatic phase_t ph(input logic [1:0] o, input int in);
    phase_t p;
    p.outer = outer_e'(o);
    p.inner = in[5:0];
    return p;
  endfunction

  // Apply inputs, check against the model, advance one clock.
  task automatic cycle(input string what);
    #1;
    check_grant(ref_pick(), what);
    @(posedge clk);
    ref_step();
  endtask

  initial begin
    int cnt;
    req = '0; phase = '0; accept = 1;
    ref_last = N - 1;
    for (int i = 0; i < N; i++) ref_wait[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // Rule (1)/(2): outer phase decides, inner is ignored across outers.
    req = 4'b0011; phase[0] = ph(2'b01, 63); phase[1] = ph(2'b00, 0);
    #1; check_grant(0, "second phase beats first phase"); @(posedge clk); ref_step(); @(negedge clk);
    req = 4'b0110; phase[1] = ph(2'b10, 40); phase[2] = ph(2'b01, 1);
    #1; check_grant(1, "third phase beats second phase"); @(posedge clk); ref_step(); @(negedge clk);
    // Rule (3): smaller inner phase wins within one outer phase.
    req = 4'b1100; phase[2] = ph(2'b01, 7); phase[3] = ph(2'b01, 5);
    #1; check_grant(3, "earlier inner phase wins"); @(posedge clk); ref_step(); @(negedge clk);
    checks++; if (!prio_win) begin failures++; $display("FAIL prio_win flag"); end

    // Round robin among equals: four equal requests must rotate.
    req = 4'b1111;
    for (int i = 0; i < N; i++) phase[i] = ph(2'b01, 3);
    for (int r = 0; r < 8; r++) begin
      #1;
      checks++;
      if (!tie_break) begin failures++; $display("FAIL tie flag"); end
      check_grant((ref_last + 1) % N, "round robin");
      @(posedge clk); ref_step(); @(negedge clk);
    end

    // Accept low: the pointer must not move.
    accept = 0;
    begin
      int held;
      #1; held = gnt_idx;
      @(posedge clk); ref_step(); @(negedge clk);
      #1; checks++;
      if (gnt_idx != held[1:0]) begin failures++; $display("FAIL pointer moved without accept"); end
    end
    accept = 1;
    req = 0;
    @(posedge clk); ref_step(); @(negedge clk);

    // Starvation threshold: requester 0 in first phase, requester 1 always
    // in third phase. 0 must win after TH cycles of waiting.
    req = 4'b0011; phase[0] = ph(2'b00, 0); phase[1] = ph(2'b10, 0);
    cnt = 0;
    while (cnt < 3 * TH) begin
      #1;
      if (gnt_valid && gnt_idx == 0) break;
      check_grant(1, "high priority while not starved");
      cnt++;
      @(posedge clk); ref_step(); @(negedge clk);
    end
    checks++;
    if (cnt != TH || !starve_win) begin
      failures++;
      $display("FAIL starvation grant after %0d cycles (expected %0d), flag %0b", cnt, TH, starve_win);
    end
    @(posedge clk); ref_step(); @(negedge clk);
    req = 0;
    @(posedge clk); ref_step(); @(negedge clk);

    // Random traffic against the reference model.
    for (int r = 0; r < 2000; r++) begin
      req = N'($urandom);
      accept = ($urandom % 4) != 0;
      for (int i = 0; i < N; i++) phase[i] = ph(2'($urandom % 3), $urandom % 4);
      cycle("random");
      @(negedge clk);
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
