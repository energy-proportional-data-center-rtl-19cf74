// lcdc_pkg: types and constants shared by the LCDC laser-control switch.
//
// The switch moves Ethernet frames as 64-bit flits (the datapath width the
// switch is built around). Octet 0 of a frame is the most significant byte of
// the first flit. Every frame inside the pipeline is preceded by one
// annotation flit (ann = 1) whose 64 data bits hold an ann_t record; the
// pipeline stages fill it in as the frame goes by and the output queues strip
// it. The field layout of ann_t, the logical-port width and the stageID
// encoding are this design's choices; the control EtherType 0x9100, the
// 4-byte senderID, 2-byte stageID and 2-byte TTL follow the paper.
package lcdc_pkg;

  localparam int DATA_W       = 64;
  localparam int MAX_PORTS    = 8;          // width of port bitmaps inside ann_t
  localparam int LPORT_W      = 16;         // logical port identifier width
  localparam logic [15:0] CTRL_ETYPE = 16'h9100;
  localparam int MAX_FRAME_FLITS = 190;     // 1518-byte frame in 8-byte flits

  // One flit on a frame stream. empty = number of unused bytes in the last
  // flit (only meaningful with eop).
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic              sop;
    logic              eop;
    logic [2:0]        empty;
    logic              ann;
  } flit_t;

  // Annotation record carried in the data bits of the annotation flit.
  typedef struct packed {
    logic [13:0]          rsvd;
    logic [MAX_PORTS-1:0] qsel;    // queues the frame is placed in (scheduler)
    logic [MAX_PORTS-1:0] pmap;    // usable physical ports (stage CAM map)
    logic [LPORT_W-1:0]   lport;   // logical port (logical CAM)
    logic [7:0]           ttl_new; // TTL after decrement (control frames)
    logic                 lk_done; // logical lookup result written
    logic                 miss;    // logical CAM miss
    logic                 mcast;   // multicast logical port
    logic                 drop;    // control frame whose TTL reached zero
    logic                 local_;  // control frame generated by this switch
    logic                 is_ctrl; // LCDC control frame
    logic [3:0]           in_port; // arbiter input (NPORTS = virtual port)
  } ann_t;

  // stageID encoding (deployment-wide convention of this design):
  // bit 15 = 1 for a stage turn-off message, bits 7:0 = stage number 1..N.
  function automatic logic [15:0] stage_id(input logic down, input logic [7:0] stage);
    return {down, 7'd0, stage};
  endfunction

endpackage
