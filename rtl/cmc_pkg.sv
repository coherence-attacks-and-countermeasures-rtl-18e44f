// cmc_pkg: types and constants shared by the interposer's coherence
// message checkers (CMCs), their address protection unit (APU) tables and
// the interposer mesh.
//
// Message format. Every MOESI Hammer control message is one 64-bit head
// flit followed by one 64-bit address flit; a data response adds eight more
// flits of 8 bytes each (64-byte block), ten flits in all. The head flit
// fields and their widths are the published ones: message type 5 bits,
// sender ID 8, destination ID 8, virtual network 2, current owner 8,
// dirty 1, 32 unused bits. Their order in the word (message type in the most
// significant bits, unused bits at the bottom) is this design's choice.
//
// Node IDs (this design's numbering): cores are 0..63, core c living in
// chiplet c/8; the four memory controllers (home directories) are 64..67;
// 8'hFF as a destination marks a directory broadcast to all cores.
//
// Mesh: 3 columns x 4 rows of interposer routers (routers 72..83, row
// major). Chiplets 0..3 attach to column 0, chiplets 4..7 to column 2 and
// memory controllers 0..3 to column 1, row by row.
//
// Permissions (2 bits per chiplet per region): 00 none, 01 read-only,
// 11 read/write, 10 unused; this design treats 10 as no access.
//
// Message types and their virtual networks follow gem5's MOESI Hammer
// names, reduced to the ones the checker needs to tell apart; the numeric
// encoding is this design's own.
package cmc_pkg;

  // ---- system sizes (published values) ----
  localparam int unsigned N_CHIPLETS        = 8;
  localparam int unsigned CORES_PER_CHIPLET = 8;
  localparam int unsigned N_MC              = 4;
  localparam int unsigned N_REGIONS         = 64;   // 64 regions of 64 MB
  localparam int unsigned PADDR_W           = 32;   // 4 GB main memory
  localparam int unsigned REGION_W          = $clog2(N_REGIONS);
  localparam int unsigned FLIT_W            = 64;   // interposer link width
  localparam int unsigned DATA_FLITS        = 8;    // 64-byte data block
  localparam int unsigned MESH_X            = 3;
  localparam int unsigned MESH_Y            = 4;
  localparam int unsigned N_NODES           = MESH_X * MESH_Y;
  localparam int unsigned NODE_W            = $clog2(N_NODES);
  localparam int unsigned N_VN              = 4;    // 2-bit VN field
  localparam int unsigned ENTRY_W           = 2 * N_CHIPLETS;

  // ---- IDs (this design's numbering) ----
  localparam logic [7:0] MC_ID_BASE = 8'd64;
  localparam logic [7:0] BCAST_ID   = 8'hFF;

  // ---- virtual networks ----
  typedef enum logic [1:0] {
    VN_REQ     = 2'd0,  // cache -> home directory requests
    VN_FWD     = 2'd1,  // directory -> caches (forwards, broadcasts)
    VN_RESP    = 2'd2,  // responses (acks, data, writeback data)
    VN_UNBLOCK = 2'd3   // cache -> directory unblocks
  } vn_e;

  // ---- message types ----
  typedef enum logic [4:0] {
    MT_GETX           = 5'd0,
    MT_GETS           = 5'd1,
    MT_PUT            = 5'd2,
    MT_FWD_GETX       = 5'd3,
    MT_FWD_GETS       = 5'd4,
    MT_WB_ACK         = 5'd5,
    MT_WB_NACK        = 5'd6,
    MT_ACK            = 5'd8,
    MT_ACK_SHARED     = 5'd9,
    MT_DATA           = 5'd10,
    MT_DATA_SHARED    = 5'd11,
    MT_DATA_EXCLUSIVE = 5'd12,
    MT_WB_CLEAN       = 5'd13,
    MT_WB_DIRTY       = 5'd14,
    MT_NACK           = 5'd15,
    MT_UNBLOCK        = 5'd16,
    MT_UNBLOCKS       = 5'd17,
    MT_UNBLOCKM       = 5'd18
  } msg_type_e;

  typedef enum logic [1:0] {
    PERM_NONE   = 2'b00,
    PERM_UNUSED = 2'b10,
    PERM_RO     = 2'b01,
    PERM_RW     = 2'b11
  } perm_e;

  // ---- head flit (Flit 1) ----
  typedef struct packed {
    logic [4:0]  mtype;
    logic [7:0]  sender;
    logic [7:0]  dest;
    logic [1:0]  vn;
    logic [7:0]  cur_owner;
    logic        dirty;
    logic [31:0] unused;
  } head_t;

  // ---- flit on a chiplet or memory-controller link (untrusted side) ----
  typedef struct packed {
    logic              head;
    logic              tail;
    logic [FLIT_W-1:0] data;
  } link_flit_t;

  // ---- flit inside the interposer mesh ----
  typedef struct packed {
    logic              head;
    logic              tail;
    logic [1:0]        vn;
    logic [NODE_W-1:0] dst;    // destination router (0..11 = routers 72..83)
    logic [FLIT_W-1:0] data;
  } noc_flit_t;

  // ---- reasons a CMC rejects a message ----
  typedef enum logic [2:0] {
    VIOL_NONE       = 3'd0,
    VIOL_FORMAT     = 3'd1,  // undefined type, wrong VN, bad flit framing
    VIOL_MASQUERADE = 3'd2,  // sender ID outside the chiplet's range
    VIOL_PERMISSION = 3'd3,  // type needs a permission the chiplet lacks
    VIOL_DIVERT     = 3'd4,  // destination not allowed for this type
    VIOL_ADDRESS    = 3'd5   // address beyond main memory
  } viol_e;

  // ---- helpers ----
  function automatic logic is_core_id(logic [7:0] id);
    return id < 8'(N_CHIPLETS * CORES_PER_CHIPLET);
  endfunction

  function automatic logic is_mc_id(logic [7:0] id);
    return (id >= MC_ID_BASE) && (id < MC_ID_BASE + 8'(N_MC));
  endfunction

  function automatic logic [2:0] chiplet_of(logic [7:0] core_id);
    return core_id[5:3];
  endfunction

  function automatic logic [REGION_W-1:0] region_of(logic [FLIT_W-1:0] addr);
    return addr[PADDR_W-1 -: REGION_W];
  endfunction

  // Home memory controller: 64-byte blocks interleaved over the four MCs.
  function automatic logic [1:0] home_mc(logic [FLIT_W-1:0] addr);
    return addr[7:6];
  endfunction

  function automatic logic [NODE_W-1:0] chiplet_node(logic [2:0] c);
    return (c < 3'd4) ? NODE_W'(c * MESH_X) : NODE_W'(int'(c - 3'd4) * MESH_X + 2);
  endfunction

  function automatic logic [NODE_W-1:0] mc_node(logic [1:0] m);
    return NODE_W'(m * MESH_X + 1);
  endfunction

  // Router a destination ID is delivered to.
  function automatic logic [NODE_W-1:0] node_of_id(logic [7:0] id);
    if (is_mc_id(id)) return mc_node(2'(id - MC_ID_BASE));
    return chiplet_node(chiplet_of(id));
  endfunction

  function automatic logic type_defined(logic [4:0] t);
    return (t <= 5'd6) || (t >= 5'd8 && t <= 5'd18);
  endfunction

  function automatic logic [1:0] vn_of_type(logic [4:0] t);
    if (t <= 5'd2)  return VN_REQ;
    if (t <= 5'd7)  return VN_FWD;
    if (t <= 5'd15) return VN_RESP;
    return VN_UNBLOCK;
  endfunction

  // Data responses carry eight data flits after the address flit.
  function automatic logic has_data(logic [4:0] t);
    return (t == MT_DATA) || (t == MT_DATA_SHARED) || (t == MT_DATA_EXCLUSIVE) ||
           (t == MT_WB_DIRTY);
  endfunction

  function automatic logic perm_can_read(logic [1:0] p);
    return p == PERM_RO || p == PERM_RW;
  endfunction

  function automatic logic perm_can_write(logic [1:0] p);
    return p == PERM_RW;
  endfunction

endpackage
