// ppb_pkg: shared types and constants of the phase-priority (PPB) network.
//
// Every coherence message carries an 8-bit phase identifier. Bits [7:6] are
// the outer phase (00 first phase: a request not yet ordered at the
// directory; 01 second phase: sent after the directory ordered the
// transaction; 10 third phase: traffic between L2 and memory). Bits [5:0]
// are the inner phase, a per-cache-line sequence number that the directory
// gives each transaction it orders. In every arbiter of the network a larger
// outer phase wins; with equal outer phases the smaller inner phase (the
// earlier transaction) wins. This field layout and the ordering rules follow
// the paper; the message set, the flit layout and the field widths of the
// head flit are this design's own choices.
//
// Flits are 128 bits of payload with a 2-bit flit type and the VC number
// carried as side-band signals on the link. A control message is one flit;
// a data message carries a 64-byte line and is a head flit plus 4 body
// flits.
package ppb_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NVC        = 5;    // virtual channels per port
  localparam int unsigned VC_W       = 3;    // bits to number them
  localparam int unsigned NPORT      = 5;    // router ports: L, N, E, S, W
  localparam int unsigned PORT_W     = 3;
  localparam int unsigned FLIT_W     = 128;  // flit payload width
  localparam int unsigned LINE_BYTES = 64;   // cache block size
  localparam int unsigned LINE_W     = LINE_BYTES * 8;
  localparam int unsigned DATA_FLITS = LINE_W / FLIT_W;  // 4 body flits
  localparam int unsigned COORD_W    = 4;    // mesh coordinate width
  localparam int unsigned ADDR_W     = 48;   // physical address width
  localparam int unsigned LADDR_W    = ADDR_W - 6;  // line address width
  localparam int unsigned INNER_W    = 6;    // inner phase width
  localparam int unsigned PHASE_W    = 8;    // whole phase identifier

  // Router port numbers.
  localparam logic [PORT_W-1:0] P_LOCAL = 3'd0;
  localparam logic [PORT_W-1:0] P_NORTH = 3'd1;  // towards y-1
  localparam logic [PORT_W-1:0] P_EAST  = 3'd2;  // towards x+1
  localparam logic [PORT_W-1:0] P_SOUTH = 3'd3;  // towards y+1
  localparam logic [PORT_W-1:0] P_WEST  = 3'd4;  // towards x-1

  // ---------------------------------------------------------------- phase
  typedef enum logic [1:0] {
    OUTER_FIRST  = 2'b00,
    OUTER_SECOND = 2'b01,
    OUTER_THIRD  = 2'b10
  } outer_e;

  typedef struct packed {
    outer_e              outer;   // bits [7:6]
    logic [INNER_W-1:0]  inner;   // bits [5:0]
  } phase_t;

  // Arbitration key: a larger key wins. The starvation flag sits above the
  // phase so that a requester that waited past the threshold goes first.
  localparam int unsigned KEY_W = 1 + PHASE_W;
  typedef logic [KEY_W-1:0] key_t;

  function automatic key_t prio_key(input phase_t p, input logic starved);
    return {starved, p.outer, ~p.inner};
  endfunction

  // ------------------------------------------------------------- messages
  typedef enum logic [3:0] {
    MSG_GETS      = 4'd0,   // L1 -> dir: read miss
    MSG_GETX      = 4'd1,   // L1 -> dir: write miss / upgrade
    MSG_PUTX      = 4'd2,   // L1 -> dir: writeback of a modified line
    MSG_UNBLOCK   = 4'd3,   // L1 -> dir: transaction complete
    MSG_FWD_GETS  = 4'd4,   // dir -> owner L1
    MSG_FWD_GETX  = 4'd5,   // dir -> owner L1
    MSG_INV       = 4'd6,   // dir -> sharer L1
    MSG_DATA      = 4'd7,   // dir or owner L1 -> requestor (with data)
    MSG_DATA_EXCL = 4'd8,   // dir -> requestor, exclusive (with data)
    MSG_ACK       = 4'd9,   // sharer L1 -> requestor / dir
    MSG_WB_DATA   = 4'd10,  // owner L1 -> dir (with data)
    MSG_MEM_GETS  = 4'd11,  // L2 -> memory
    MSG_MEM_WB    = 4'd12,  // L2 -> memory (with data)
    MSG_MEM_DATA  = 4'd13   // memory -> L2 (with data)
  } msg_type_e;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
  } node_t;

  // One coherence message as the tiles see it.
  typedef struct packed {
    msg_type_e          mtype;
    phase_t             phase;
    node_t              src;
    node_t              dst;
    logic [LADDR_W-1:0] laddr;   // line address
    logic [7:0]         acks;    // acknowledgement count
    logic [LINE_W-1:0]  data;    // valid only when has_data(mtype)
  } msg_t;

  function automatic logic has_data(input msg_type_e t);
    return t inside {MSG_DATA, MSG_DATA_EXCL, MSG_WB_DATA, MSG_MEM_WB,
                     MSG_MEM_DATA};
  endfunction

  // Outer phase a message type belongs to (Sec. "outer phase" rules):
  // requests from L1 are first phase, memory traffic is third phase, all
  // the rest is issued inside an already ordered transaction.
  function automatic outer_e outer_of(input msg_type_e t);
    if (t inside {MSG_GETS, MSG_GETX, MSG_PUTX, MSG_UNBLOCK})
      return OUTER_FIRST;
    else if (t inside {MSG_MEM_GETS, MSG_MEM_WB, MSG_MEM_DATA})
      return OUTER_THIRD;
    else
      return OUTER_SECOND;
  endfunction

  // ---------------------------------------------------------------- flits
  typedef enum logic [1:0] {
    FT_HEAD     = 2'd0,
    FT_BODY     = 2'd1,
    FT_TAIL     = 2'd2,
    FT_HEADTAIL = 2'd3
  } flit_type_e;

  // Head flit payload layout (128 bits, upper bits reserved as zero).
  localparam int unsigned HEAD_USED_W = 4 + PHASE_W + 2*2*COORD_W + LADDR_W + 8;
  typedef struct packed {
    logic [FLIT_W-HEAD_USED_W-1:0] rsvd;
    msg_type_e                     mtype;
    phase_t                        phase;
    node_t                         src;
    node_t                         dst;
    logic [LADDR_W-1:0]            laddr;
    logic [7:0]                    acks;
  } head_t;

  typedef struct packed {
    flit_type_e          ftype;
    logic [FLIT_W-1:0]   payload;
  } flit_t;

  // One direction of a link: a flit and the VC it travels on.
  typedef struct packed {
    logic             valid;
    logic [VC_W-1:0]  vc;
    flit_t            flit;
  } link_t;

  // Credit returned upstream when a flit leaves an input VC buffer.
  typedef struct packed {
    logic             valid;
    logic [VC_W-1:0]  vc;
  } credit_t;

  function automatic logic is_head(input flit_type_e t);
    return (t == FT_HEAD) || (t == FT_HEADTAIL);
  endfunction

  function automatic logic is_tail(input flit_type_e t);
    return (t == FT_TAIL) || (t == FT_HEADTAIL);
  endfunction

  function automatic head_t head_of(input msg_t m);
    head_t h;
    h       = '0;
    h.mtype = m.mtype;
    h.phase = m.phase;
    h.src   = m.src;
    h.dst   = m.dst;
    h.laddr = m.laddr;
    h.acks  = m.acks;
    return h;
  endfunction

  // Number of flits of a message.
  function automatic int unsigned flits_of(input msg_type_e t);
    return has_data(t) ? 1 + DATA_FLITS : 1;
  endfunction

endpackage
