// uber_pkg: types and constants shared by every block of the Uber network.
//
// The network moves fixed-size cells. A cell carries one 4-byte word of a
// coherence message (the link width) plus sideband routing fields. Control
// messages (request, forward) are 8 bytes, i.e. 2 cells, and travel on virtual
// network 0; cache blocks (response) are 72 bytes, i.e. 18 cells, and travel
// on virtual network 1. Virtual network 0 always has priority.
//
// Following the paper: 4-byte links, 8-byte control and 72-byte data messages,
// the request/forward versus response split into two virtual networks, strict
// priority between them. This design's own choices: the sideband fields carried
// next to the 32-bit word (head/tail marks, message type, source and
// destination core ids) and the 8-bit core id, enough for 256 cores.
package uber_pkg;

  localparam int unsigned CELL_BYTES   = 4;                 // link width
  localparam int unsigned WORD_W       = CELL_BYTES * 8;    // 32-bit cell payload
  localparam int unsigned CTRL_BYTES   = 8;                 // control message
  localparam int unsigned DATA_BYTES   = 72;                // cache block
  localparam int unsigned CTRL_CELLS   = CTRL_BYTES / CELL_BYTES;  // 2
  localparam int unsigned DATA_CELLS   = DATA_BYTES / CELL_BYTES;  // 18
  localparam int unsigned MSG_W        = DATA_BYTES * 8;    // 576-bit message body
  localparam int unsigned CELL_IDX_W   = $clog2(DATA_CELLS);
  localparam int unsigned CORE_ID_W    = 8;                 // up to 256 cores
  localparam int unsigned NUM_VNETS    = 2;

  // Virtual networks, in priority order (0 = highest).
  typedef enum logic [0:0] {
    VN_CTRL = 1'b0,   // requests and forwards
    VN_DATA = 1'b1    // responses carrying a cache block
  } vnet_e;

  typedef enum logic [1:0] {
    MSG_REQ  = 2'd0,
    MSG_FWD  = 2'd1,
    MSG_RESP = 2'd2
  } msg_type_e;

  typedef logic [CORE_ID_W-1:0] core_id_t;

  typedef struct packed {
    logic        head;   // first cell of a message
    logic        tail;   // last cell of a message
    vnet_e       vn;
    msg_type_e   mtype;
    core_id_t    src;
    core_id_t    dst;
    logic [WORD_W-1:0] data;
  } cell_t;

  // A cell on a wire, with its valid bit.
  typedef struct packed {
    logic  valid;
    cell_t body;
  } link_t;

  // A whole message as the core hands it over or receives it.
  // Word i of the body is data[WORD_W*i +: WORD_W].
  typedef struct packed {
    msg_type_e         mtype;
    core_id_t          src;
    core_id_t          dst;
    logic [MSG_W-1:0]  data;
  } msg_t;

  // Router port numbering.
  typedef enum logic [2:0] {
    P_LOCAL = 3'd0,
    P_EAST  = 3'd1,   // +x
    P_WEST  = 3'd2,   // -x
    P_NORTH = 3'd3,   // +y
    P_SOUTH = 3'd4    // -y
  } port_e;
  localparam int unsigned NUM_PORTS = 5;

  function automatic vnet_e vnet_of(msg_type_e t);
    return (t == MSG_RESP) ? VN_DATA : VN_CTRL;
  endfunction

  function automatic int unsigned cells_of(msg_type_e t);
    return (t == MSG_RESP) ? DATA_CELLS : CTRL_CELLS;
  endfunction

endpackage
