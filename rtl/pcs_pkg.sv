// pcs_pkg: types and constants shared by the persistent CXL switch.
//
// A packet moving through the switch is modelled as one 16-byte header slot
// plus one 64-byte data block (the CXL.mem cache-line payload). The header
// slot is also what a persist-buffer entry keeps as its metadata, so that a
// drained entry can be turned back into a write packet towards persistent
// memory (PM). The 64-bit address, the 58-bit line tag (address bits 63:6),
// the 64-byte block, the 16-byte header and the 2-bit entry state follow the
// paper's table layout; the field layout inside the header slot, the opcode
// set and the state encoding are this design's own choices.
package pcs_pkg;

  localparam int unsigned ADDR_W   = 64;
  localparam int unsigned LINE_OFS = 6;                 // 64-byte lines
  localparam int unsigned TAG_W    = ADDR_W - LINE_OFS; // 58-bit tag
  localparam int unsigned DATA_W   = 512;               // 64-byte block
  localparam int unsigned HDR_W    = 128;               // 16-byte header slot
  localparam int unsigned PORT_W   = 4;                 // port id field
  localparam int unsigned RTAG_W   = 13;                // request tag field

  // Packet opcodes. MEM_RD / MEM_WR are CXL.mem requests, CMP the write
  // completion (the "write acknowledgment"), MEM_DATA the read response.
  // IO and CACHE stand for CXL.io / CXL.cache traffic the buffer ignores.
  typedef enum logic [2:0] {
    OP_NOP      = 3'd0,
    OP_MEM_RD   = 3'd1,
    OP_MEM_WR   = 3'd2,
    OP_CMP      = 3'd3,
    OP_MEM_DATA = 3'd4,
    OP_IO       = 3'd5,
    OP_CACHE    = 3'd6
  } opcode_e;

  // 16-byte header slot: 3 + 4 + 4 + 13 + 64 + 40 = 128 bits.
  typedef struct packed {
    opcode_e             op;
    logic [PORT_W-1:0]   src;   // port the request entered from
    logic [PORT_W-1:0]   dst;   // port the packet is routed to
    logic [RTAG_W-1:0]   rtag;  // requester's transaction tag
    logic [ADDR_W-1:0]   addr;  // byte address (line aligned for MEM_*)
    logic [39:0]         rsvd;
  } hdr_t;

  typedef struct packed {
    hdr_t              hdr;
    logic [DATA_W-1:0] data;
  } pkt_t;

  // Persist-buffer entry (PBE) state, 2 bits.
  typedef enum logic [1:0] {
    PBE_EMPTY = 2'b00,
    PBE_DIRTY = 2'b01,
    PBE_DRAIN = 2'b10
  } pbe_state_e;

  // One-cycle event pulses from the controller, for statistics.
  typedef struct packed {
    logic wr_alloc;     // write persisted into an Empty entry
    logic wr_coalesce;  // write merged into a Dirty entry of the same line
    logic rd_forward;   // read answered from the buffer
    logic rd_to_pm;     // read passed on to PM after the entry was gone
    logic ack_done;     // PM acknowledgment turned a Drain entry Empty
    logic drain;        // entry sent towards PM (Dirty -> Drain)
    logic victim;       // forced drain because no Empty entry was left
    logic stall;        // head of the PI buffer could not be served
    logic rf_burst;     // read-forwarding threshold crossed, burst started
    logic recover;      // recovery pass after a crash started
  } pbc_events_t;

  function automatic logic [TAG_W-1:0] line_tag(input logic [ADDR_W-1:0] a);
    return a[ADDR_W-1:LINE_OFS];
  endfunction

endpackage
