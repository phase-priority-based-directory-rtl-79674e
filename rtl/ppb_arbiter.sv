// ppb_arbiter: phase-priority arbiter used at every arbitration point of the
// network (NI injection and ejection, VC allocation, switch allocation).
//
// Each of the N requesters presents a request and the 8-bit phase of its
// message. The winner is the requester with the largest key
// {starved, outer phase, ~inner phase}: a larger outer phase wins, and with
// equal outer phases the smaller inner phase (the earlier transaction)
// wins, as the paper's rules (1) to (3) state. When several requesters share
// the best key the winner is chosen round-robin, starting after the last
// accepted winner, which the paper also asks for. Against starvation the
// paper adds "a threshold value" without giving it or its mechanism; here
// each requester counts the cycles it has requested without being granted,
// and once the count reaches THRESH it is flagged starved and outranks every
// phase. The count of a requester clears when its grant is accepted.
//
// Interface: req/phase in, gnt (one-hot) and gnt_idx out, combinational in
// the same cycle. 'accept' tells the arbiter that the grant it shows was
// used; only then do the round-robin pointer and the wait counters advance
// for the winner (a separable allocator may drop a first-stage grant).
// Status outputs report, for the current grant, whether it went to a
// starved requester, whether a lower-priority requester lost to it, and
// whether a round-robin tie-break was needed.
module ppb_arbiter
  import ppb_pkg::*;
#(
  parameter int unsigned N      = 4,
  parameter int unsigned THRESH = 32,
  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CNT_W = $clog2(THRESH + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  phase_t [N-1:0]       phase,
  input  logic                 accept,
  output logic [N-1:0]         gnt,
  output logic [IDX_W-1:0]     gnt_idx,
  output logic                 gnt_valid,
  output logic                 starve_win,   // winner was starved
  output logic                 prio_win,     // a lower-priority request lost
  output logic                 tie_break     // round-robin among equals used
);

  logic [N-1:0][CNT_W-1:0] wait_cnt;
  logic [IDX_W-1:0]        last;
  key_t [N-1:0]            key;
  key_t                    best;
  logic [N-1:0]            at_best;

  always_comb begin
    for (int i = 0; i < N; i++)
      key[i] = prio_key(phase[i], wait_cnt[i] >= CNT_W'(THRESH));
  end

  // Best key among the active requests.
  always_comb begin
    best = '0;
    for (int i = 0; i < N; i++)
      if (req[i] && key[i] > best) best = key[i];
    for (int i = 0; i < N; i++)
      at_best[i] = req[i] && (key[i] == best);
  end

  // Round-robin among the requesters holding the best key.
  always_comb begin
    int unsigned idx;
    gnt       = '0;
    gnt_idx   = '0;
    gnt_valid = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      idx = int'(last) + k;
      if (idx >= N) idx = idx - N;
      if (!gnt_valid && at_best[idx]) begin
        gnt_valid    = 1'b1;
        gnt_idx      = IDX_W'(idx);
        gnt[idx]     = 1'b1;
      end
    end
  end

  always_comb begin
    int unsigned n_best;
    n_best     = 0;
    prio_win   = 1'b0;
    for (int i = 0; i < N; i++) begin
      if (at_best[i]) n_best++;
      if (req[i] && !at_best[i]) prio_win = 1'b1;
    end
    tie_break  = (n_best > 1);
    starve_win = gnt_valid && best[KEY_W-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last     <= IDX_W'(N - 1);
      wait_cnt <= '0;
    end else begin
      if (accept && gnt_valid) last <= gnt_idx;
      for (int i = 0; i < N; i++) begin
        if (accept && gnt[i])
          wait_cnt[i] <= '0;
        else if (req[i] && wait_cnt[i] < CNT_W'(THRESH))
          wait_cnt[i] <= wait_cnt[i] + 1'b1;
        else if (!req[i])
          wait_cnt[i] <= '0;
      end
    end
  end

endmodule
