// of_pkg: types and constants shared by the block-matching optical-flow core.
//
// The core takes address events from a 240x180 dynamic vision sensor (DVS),
// accumulates them into binary "slices" and, for every event, finds which of
// 9 flow directions best explains the local event pattern by Hamming-distance
// block matching between the two past slices.  The sensor size, the 9x9
// block, the 9 directions and the three rotating slices follow the published
// algorithm.  The bit layout of the event words, the direction code and the
// slice-memory request record are choices of this implementation.
package of_pkg;

  // Sensor array (240x180 DVS) and the coordinate field width used on the buses.
  localparam int SENSOR_W = 240;
  localparam int SENSOR_H = 180;
  localparam int COORD_W  = 8;

  // 9x9 block, search over the centre and its 8 neighbours (radius 1).
  localparam int DEF_BLOCK_DIM = 9;
  localparam int DEF_SEARCH_R  = 1;
  localparam int DIR_W     = 4;      // enough for 9 direction codes
  localparam int TIME_W    = 32;     // slice-duration counter, in clock cycles

  // Number of slice memories that rotate: t, t-d, t-2d.
  localparam int N_SLICES = 3;

  // Incoming DVS event, as latched from the input handshake bus (17 bits).
  typedef struct packed {
    logic               pol;   // polarity; carried through, not used for matching
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
  } dvs_event_t;

  // Outgoing optical-flow event (21 bits).
  // dir = (dy+R_S)*(2*R_S+1) + (dx+R_S), where (dx,dy) is the
  // offset of the best-matching block in slice t-2d relative to the event.
  // The motion over one slice interval d is therefore (-dx,-dy); dir = 4 is
  // "no motion" for a search radius R_S = 1.
  typedef struct packed {
    logic               pol;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
    logic [DIR_W-1:0]   dir;
  } of_event_t;

  // One access to a single-port slice memory holding one image row per word.
  //   en  : access this cycle.  With set=clr=0 it is a row read (data next cycle).
  //   set : write a 1 into pixel (row, col); the rest of the row is kept.
  //   clr : write the whole row to 0.
  typedef struct packed {
    logic               en;
    logic               set;
    logic               clr;
    logic [COORD_W-1:0] row;
    logic [COORD_W-1:0] col;
  } slice_req_t;

  localparam slice_req_t SLICE_IDLE = '{en: 1'b0, set: 1'b0, clr: 1'b0, row: '0, col: '0};

  // States of the controller, named after the published state diagram.
  typedef enum logic [3:0] {
    S_IDLE,
    S_READ,
    S_DATA_CHECK,
    S_EXTRACT_EVENTS,
    S_READ_BLOCKS,
    S_SAD_HD,
    S_GET_MINIMUM,
    S_SEND_DATA,
    S_TIMEOUT_CHECK,
    S_RAM_ROTATION
  } of_state_t;

endpackage
