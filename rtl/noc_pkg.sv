// noc_pkg: constants and types shared by the blocks of the five-port
// dynamic-virtual-channel router.
//
// The router has five ports (four mesh neighbours and one local core), a
// unified buffer structure (UBS) of 16 flit slots per input port, 128-bit
// flits and four-flit packets (header, two bodies, tail). These numbers follow
// the paper. The two TYPE bits at the bottom of every flit (bits 1:0) tell a
// free slot (00), header (01), body (10) and tail (11), also as in the paper.
//
// This design's own choices: the port numbering, the position of the
// destination coordinates in the header (X in bits 5:2, Y in bits 9:6, so
// that they also fit a 16-bit flit) and the 4-bit mesh coordinates.
package noc_pkg;

  localparam int NUM_PORTS = 5;   // Local + N/E/S/W
  localparam int NUM_SLOTS = 16;  // UBS slots per input port
  localparam int NUM_VCS   = 16;  // at most one VC per slot
  localparam int FLIT_WIDTH = 128; // flit width in bits
  localparam int PKT_FLITS = 4;   // header, body, body, tail

  localparam int PORT_W  = $clog2(NUM_PORTS);
  localparam int COORD_W = 4;

  // TYPE field, flit bits 1:0
  typedef enum logic [1:0] {
    FLIT_FREE   = 2'b00,
    FLIT_HEADER = 2'b01,
    FLIT_BODY   = 2'b10,
    FLIT_TAIL   = 2'b11
  } flit_type_e;

  // Port numbers
  typedef enum logic [PORT_W-1:0] {
    PORT_LOCAL = 3'd0,
    PORT_NORTH = 3'd1,
    PORT_EAST  = 3'd2,
    PORT_SOUTH = 3'd3,
    PORT_WEST  = 3'd4
  } port_e;

  // Header fields (bit positions of the destination coordinates)
  localparam int DST_X_LSB = 2;
  localparam int DST_Y_LSB = DST_X_LSB + COORD_W;

  // State of one virtual channel in the VC control table
  typedef enum logic [1:0] {
    VC_IDLE    = 2'd0,  // no packet
    VC_WAIT_VA = 2'd1,  // header stored and routed, waiting for a downstream VC
    VC_ACTIVE  = 2'd2   // downstream VC held, flits may cross the switch
  } vc_state_e;

endpackage
