// noc_pkg: types and constants shared by the RACE mesh NoC.
//
// A flit is 128 bits (link width of the platform table). Its top bits carry
// the wormhole framing and the destination/source coordinates used by XY
// routing; the rest is payload. The field layout is this design's own choice:
// the published platform only fixes the 128-bit width.
//
// Port numbering of a router (N, E, S, W, Local) follows the order in which
// the agent state lists the credits: C_N, C_E, C_S, C_W. The mesh's y index
// grows towards the south.
package noc_pkg;

  localparam int unsigned FLIT_W  = 128;  // link / subchannel width
  localparam int unsigned COORD_W = 3;    // enough for an 8x8 mesh
  localparam int unsigned NPORT   = 5;    // N, E, S, W, Local
  localparam int unsigned PAYLOAD_W = FLIT_W - 2 - 4 * COORD_W;

  typedef enum logic [2:0] {
    P_N = 3'd0,
    P_E = 3'd1,
    P_S = 3'd2,
    P_W = 3'd3,
    P_L = 3'd4
  } port_e;

  typedef struct packed {
    logic                 head;     // first flit of a packet
    logic                 tail;     // last flit of a packet (head&tail: 1-flit packet)
    logic [COORD_W-1:0]   dst_x;
    logic [COORD_W-1:0]   dst_y;
    logic [COORD_W-1:0]   src_x;
    logic [COORD_W-1:0]   src_y;
    logic [PAYLOAD_W-1:0] payload;
  } flit_t;

  // Direction of a subchannel: A is the west (horizontal link) or north
  // (vertical link) router, B the east or south router.
  typedef enum logic {
    DIR_AB = 1'b0,
    DIR_BA = 1'b1
  } sub_dir_e;

  // Per-link events of one cycle, brought out of the mesh for monitoring.
  typedef struct packed {
    logic bypass_ab;   // flit passed A->B in repeater mode
    logic bypass_ba;
    logic store_ab;    // flit stored in a subchannel, A->B
    logic store_ba;
    logic rev_done;    // a subchannel reversed
    logic rev_busy;    // a reversal is pending (writes to it blocked)
    logic falsefull;   // falsefull condition this cycle
    logic epoch_end;   // last cycle of the agent's epoch
    logic action_new;  // the agent applied a new allocation
  } link_evt_t;

endpackage
