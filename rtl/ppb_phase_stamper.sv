// ppb_phase_stamper: writes the phase identifier into every message that the
// directory of an L2 bank sends into the network.
//
// The directory is the ordering point of a coherence transaction. When it
// takes up a new request for a line it marks the first message it sends for
// that transaction with 'new_txn'; the stamper then gives the transaction the
// next inner phase of that line from the inner phase buffer. Further
// messages of the same transaction ('new_txn' low, for example the
// invalidations that follow the data reply) get the line's current inner
// phase. The outer phase comes from the message type: messages to L1 caches
// are second phase, messages to memory are third phase. Third-phase
// messages carry inner phase 0 and do not touch the buffer, since the paper
// notes that at most one memory message per line is in flight. Which
// message opens a transaction is this design's interface choice; the phase
// classes and the per-line counting follow the paper.
//
// Interface: a valid/ready message stream in, the same stream out with the
// phase field replaced; every other field (type, addresses, data) and the
// handshake are wired straight through. The path is combinational; the
// buffer is updated on the clock edge at which a message is handed on
// (out_valid && out_ready).
module ppb_phase_stamper
  import ppb_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  msg_t  in_msg,
  input  logic  in_new_txn,
  output logic  out_valid,
  input  logic  out_ready,
  output msg_t  out_msg,
  output logic  buf_hit,
  output logic  buf_evict
);

  outer_e             outer;
  logic               use_buf;
  logic [INNER_W-1:0] inner;

  assign outer    = outer_of(in_msg.mtype);
  assign use_buf  = (outer == OUTER_SECOND);

  ppb_inner_phase_buffer #(.ENTRIES(ENTRIES)) u_buf (
    .clk    (clk),
    .rst_n  (rst_n),
    .access (in_valid && out_ready && use_buf),
    .bump   (in_new_txn),
    .laddr  (in_msg.laddr),
    .phase  (inner),
    .hit    (buf_hit),
    .evict  (buf_evict)
  );

  always_comb begin
    out_msg             = in_msg;
    out_msg.phase.outer = outer;
    out_msg.phase.inner = use_buf ? inner : '0;
  end

  assign out_valid = in_valid;
  assign in_ready  = out_ready;

endmodule
