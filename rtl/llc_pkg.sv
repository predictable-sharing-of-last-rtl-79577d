// llc_pkg: types and default sizes shared by the partition-sharing cache
// subsystem (private L2 caches, one-slot TDM bus, inclusive shared LLC with a
// set sequencer).
//
// Default sizes follow the evaluated system: four cores, a 4-way 16-set L2
// per core, a 16-way 32-set LLC and 64-byte lines.  The slot length of 50
// cycles is not printed as such; it is the value for which the set-sequencer
// bound (2(n-1)n+1)*N*SW gives the 5000 cycles quoted for n = N = 4.  The
// address width and the message encodings are this design's own choices.
// The caches hold tags and state only: no data payload is carried.
package llc_pkg;

  localparam int unsigned ADDR_W       = 32;   // byte address width (own choice)
  localparam int unsigned LINE_BYTES   = 64;   // cache line size
  localparam int unsigned OFFSET_W     = $clog2(LINE_BYTES);
  localparam int unsigned LINE_W       = ADDR_W - OFFSET_W;  // line address width

  localparam int unsigned N_CORES_DEF  = 4;
  localparam int unsigned L2_SETS_DEF  = 16;
  localparam int unsigned L2_WAYS_DEF  = 4;
  localparam int unsigned LLC_SETS_DEF = 32;
  localparam int unsigned LLC_WAYS_DEF = 16;
  localparam int unsigned SLOT_CYC_DEF = 50;   // SW, cycles per TDM slot

  typedef logic [LINE_W-1:0] line_t;

  // Kind of a message an L2 controller places on the bus in its slot.
  typedef enum logic [0:0] {
    MSG_REQ = 1'b0,   // request for a line (the PRB entry)
    MSG_WB  = 1'b1    // write-back of a line (the PWB head)
  } msg_kind_e;

  typedef struct packed {
    logic      valid;
    msg_kind_e kind;
    line_t     line;
    logic      write;   // REQ: the core wants to write the line
    logic      dirty;   // WB: the line was modified in the private cache
  } bus_msg_t;

  // Entry of the pending write-back buffer.
  typedef struct packed {
    line_t line;
    logic  dirty;
  } wb_entry_t;

  // Entry of the pending request buffer.
  typedef struct packed {
    logic  valid;
    line_t line;
    logic  write;
  } prb_entry_t;

endpackage
