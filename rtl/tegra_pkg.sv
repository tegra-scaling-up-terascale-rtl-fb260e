// tegra_pkg: types and constants shared by the TEGRA message-passing fabric.
//
// A message is 8 bytes: the vertex to update and the new distance (weight)
// proposed for it. That size and content are the SSSP message format of the
// design; the even 32/32 split between the two fields is this design's choice.
//
// Memory requests and responses use one fixed-width format for both the
// local (vertex) memory and the remote (edge) memory. A request carries a tag
// that the memory returns with the response, so that a shared port can route
// each read response back to whoever issued the read. Writes get no response.
//
// The core port and the address map of the node's dedicated addresses are
// also defined here (see tegra_node for how they are used). The address map
// is this design's choice; the source describes only that the message queues
// have dedicated addresses that are caught before the cache hierarchy.
package tegra_pkg;

  localparam int unsigned VID_W  = 32;   // vertex ID width
  localparam int unsigned DIST_W = 32;   // distance / weight width
  localparam int unsigned MSG_W  = VID_W + DIST_W;  // 64 bits = 8 bytes
  localparam int unsigned ADDR_W = 48;   // byte address width of the core port
  localparam int unsigned DATA_W = 64;   // core and memory data width
  localparam int unsigned TAG_W  = 8;    // memory request tag (up to 256 cores)

  typedef logic [VID_W-1:0]  vid_t;
  typedef logic [DIST_W-1:0] dist_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [TAG_W-1:0]  tag_t;

  // SSSP update message: vertex to update and the candidate distance.
  typedef struct packed {
    vid_t  vid;
    dist_t new_dist;
  } msg_t;

  // Memory request (local HBM vertex memory or remote edge memory).
  typedef struct packed {
    logic  we;
    addr_t addr;
    data_t wdata;
    tag_t  tag;
  } mem_req_t;

  // Memory read response.
  typedef struct packed {
    data_t rdata;
    tag_t  tag;
  } mem_rsp_t;

  // Core load/store request.
  typedef struct packed {
    logic  we;
    addr_t addr;
    data_t wdata;
  } core_req_t;

  // Address map of a node as seen by its core. Bits [47:46] select a region,
  // leaving 2^46 bytes (64 TiB, 8.8e12 eight-byte edges) per region.
  localparam logic [1:0] REGION_LOCAL  = 2'b00;  // vertex memory (local HBM)
  localparam logic [1:0] REGION_REMOTE = 2'b01;  // edge memory (remote pool)
  localparam logic [1:0] REGION_MMIO   = 2'b10;  // queue registers

  // Offsets inside the MMIO region (byte addresses, 8-byte registers).
  localparam logic [15:0] MMIO_STATUS  = 16'h0000; // read: occupancy counts
  localparam logic [15:0] MMIO_MQ_POP  = 16'h0008; // read: pop own message queue
  localparam logic [15:0] MMIO_AL_PUSH = 16'h0010; // write: push vertex ID
  localparam logic [15:0] MMIO_AL_POP  = 16'h0018; // read: pop vertex ID
  localparam logic [15:0] MMIO_SEND    = 16'h1000; // write at +8*d: send to core d

  function automatic addr_t mmio_addr(input logic [15:0] off);
    return {REGION_MMIO, (ADDR_W-18)'(0), off};
  endfunction

  function automatic addr_t send_addr(input int unsigned dest);
    return {REGION_MMIO, (ADDR_W-18)'(0), MMIO_SEND + 16'(dest * 8)};
  endfunction

  // Status word returned by a read of MMIO_STATUS.
  typedef struct packed {
    logic [31:0] al_count;    // vertices in the active list (queue + overflow)
    logic [15:0] send_free;   // free slots in the send buffer
    logic [15:0] mq_count;    // messages waiting in the own message queue
  } status_t;

endpackage
