// ppb_inner_phase_buffer: the per-L2-bank table that remembers, for the
// cache lines accessed most recently, the latest inner phase number the
// directory gave them.
//
// The paper adds "an extra buffer for every L2 cache bank" of a fixed number
// of entries (32 in its evaluation), each holding a line address and its
// latest inner phase, and keeps only the most recently accessed lines. It
// gives neither the lookup nor the replacement; here the buffer is fully
// associative and replaces the least recently used entry (an invalid entry
// first). A lookup either only reads the phase of the line ('bump' low) or
// orders a new transaction for it ('bump' high): the line's phase then
// becomes the old phase plus one, wrapping modulo 64, or 0 for a line that
// was not in the buffer. Either kind of access makes the line most recently
// used; a read of an absent line allocates it with phase 0.
//
// Timing: 'phase' is combinational from 'laddr' and the table state, and is
// the phase of this access (after the increment when bumping). The table is
// updated at the clock edge when 'access' is high. 'hit' and 'evict' report
// the lookup outcome for statistics.
module ppb_inner_phase_buffer
  import ppb_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  localparam int unsigned IDX_W  = $clog2(ENTRIES)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                access,
  input  logic                bump,
  input  logic [LADDR_W-1:0]  laddr,
  output logic [INNER_W-1:0]  phase,
  output logic                hit,
  output logic                evict
);

  logic [ENTRIES-1:0]                valid;
  logic [ENTRIES-1:0][LADDR_W-1:0]   tag;
  logic [ENTRIES-1:0][INNER_W-1:0]   inner;
  logic [ENTRIES-1:0][IDX_W-1:0]     age;   // 0 = most recently used

  logic [IDX_W-1:0] hit_idx, victim, sel;
  logic             have_free;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (valid[i] && tag[i] == laddr && !hit) begin
        hit     = 1'b1;
        hit_idx = IDX_W'(i);
      end
  end

  // Victim: the first invalid entry, else the oldest one.
  always_comb begin
    have_free = 1'b0;
    victim    = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (!valid[i] && !have_free) begin
        have_free = 1'b1;
        victim    = IDX_W'(i);
      end
    if (!have_free)
      for (int i = 0; i < ENTRIES; i++)
        if (age[i] == IDX_W'(ENTRIES - 1)) victim = IDX_W'(i);
  end

  assign sel   = hit ? hit_idx : victim;
  assign evict = !hit && !have_free;

  always_comb begin
    if (hit) phase = bump ? inner[hit_idx] + 1'b1 : inner[hit_idx];
    else     phase = '0;
  end

  // The age of the accessed entry; entries younger than it grow older.
  logic [IDX_W-1:0] sel_age;
  assign sel_age = (hit || !have_free) ? age[sel] : IDX_W'(ENTRIES - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      tag   <= '0;
      inner <= '0;
      for (int i = 0; i < ENTRIES; i++) age[i] <= IDX_W'(ENTRIES - 1);
    end else if (access) begin
      for (int i = 0; i < ENTRIES; i++)
        if (IDX_W'(i) != sel && valid[i] && age[i] < sel_age)
          age[i] <= age[i] + 1'b1;
      valid[sel] <= 1'b1;
      tag[sel]   <= laddr;
      inner[sel] <= phase;
      age[sel]   <= '0;
    end
  end

endmodule
