// tb_ppb_inner_phase_buffer: self-checking test of the inner phase buffer at
// its full size of 32 entries.
//
// Directed accesses check that a new line starts at inner phase 0, that
// every further transaction on the line adds one, that reads do not count,
// that the phase wraps from 63 to 0, and that the least recently used line
// is the one forgotten when a 33rd line arrives. Random accesses over a
// small address pool then compare phase, hit and evict with a reference LRU
// list kept in the testbench.
module tb_ppb_inner_phase_buffer;
  import ppb_pkg::*;

  localparam int E = 32;

  logic clk = 0, rst_n = 0;
  logic access, bump;
  logic [LADDR_W-1:0] laddr;
  logic [INNER_W-1:0] phase;
  logic hit, evict;

  int checks = 0, failures = 0;

  ppb_inner_phase_buffer #(.ENTRIES(E)) dut (.*);

  always #5 clk = ~clk;

  // Reference: lines in LRU order, most recent first.
  logic [LADDR_W-1:0] ref_addr [$];
  int                 ref_ph   [$];

  task automatic do_access(input logic [LADDR_W-1:0] a, input logic b, input string what);
    int pos, exp_ph;
    logic exp_hit, exp_evict;
    pos = -1;
    foreach (ref_addr[i]) if (ref_addr[i] == a) pos = i;
    exp_hit   = (pos >= 0);
    exp_evict = !exp_hit && ref_addr.size() == E;
    exp_ph    = exp_hit ? (b ? (ref_ph[pos] + 1) % 64 : ref_ph[pos]) : 0;
    @(negedge clk);
    access = 1; bump = b; laddr = a;
    #1;
    checks++;
    if (phase != exp_ph[5:0] || hit != exp_hit || evict != exp_evict) begin
      failures++;
      $display("FAIL %s addr=%0h: phase %0d/%0d hit %0b/%0b evict %0b/%0b",
               what, a, phase, exp_ph, hit, exp_hit, evict, exp_evict);
    end
    @(posedge clk);
    #1 access = 0;
    if (exp_hit) begin
      ref_addr.delete(pos);
      ref_ph.delete(pos);
    end else if (exp_evict) begin
      void'(ref_addr.pop_back());
      void'(ref_ph.pop_back());
    end
    ref_addr.push_front(a);
    ref_ph.push_front(exp_ph);
  endtask

  initial begin
    access = 0; bump = 0; laddr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // New line: phase 0; each later transaction adds one; reads do not.
    do_access(42'h100, 1, "first transaction");
    do_access(42'h100, 1, "second transaction");
    do_access(42'h100, 0, "read of current phase");
    do_access(42'h100, 1, "third transaction");
    // Wrap past 63.
    for (int i = 0; i < 62; i++) do_access(42'h200, 1, "count up");
    do_access(42'h200, 1, "phase 62");
    do_access(42'h200, 1, "phase 63");
    do_access(42'h200, 1, "wrap to 0");

    // Fill the buffer with 30 more lines, touch 0x100 again, then one more
    // line must evict the oldest of the fill (0x200 was used earlier).
    for (int i = 0; i < 30; i++) do_access(42'h1000 + i, 1, "fill");
    do_access(42'h100, 1, "touch");
    do_access(42'h2000, 1, "33rd line evicts LRU");
    do_access(42'h200, 1, "evicted line restarts at 0");

    // Random accesses over 48 lines.
    for (int r = 0; r < 3000; r++)
      do_access(42'h8000 + ($urandom % 48), 1'($urandom), "random");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
