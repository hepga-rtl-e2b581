// hepga_pkg: types and constants shared by the HePGA accelerator RTL.
//
// HePGA is a 3D stack of planar tiers of processing-in-memory (PIM) processing
// elements (PEs). Every tier holds PEs of a single memory device: ReRAM, FeFET
// or SRAM. The PEs are joined by a 3D mesh network-on-chip. The main
// configuration is 3x3 PEs per tier and 4 tiers. Tier 1 sits next to the heat
// sink and the tier order is ReRAM, ReRAM, FeFET, SRAM, written [R1 R2 F3 S4].
//
// Network packets are single flits (flit_t). A destination is a node_t. This
// holds mesh coordinates, or the host flag that sends the flit out of the host
// port at node (0,0,0). The message set (op_t) is this design's own. The
// source paper does not describe a packet format.
package hepga_pkg;

  typedef enum logic [1:0] {
    DEV_RERAM = 2'd0,
    DEV_FEFET = 2'd1,
    DEV_SRAM  = 2'd2
  } dev_t;

  // Mesh size of the main configuration: 9 PEs per tier (3x3), 4 tiers.
  localparam int unsigned MESH_X = 3;
  localparam int unsigned MESH_Y = 3;
  localparam int unsigned MESH_Z = 4;
  localparam int unsigned TILES_PER_PE = 4;

  // Tier configuration Gamma, index 0 = tier 1 (next to the heat sink).
  localparam dev_t [3:0] HEPGA_TIERS = {DEV_SRAM, DEV_FEFET, DEV_RERAM, DEV_RERAM};

  // Data precision (not fixed by the paper; chosen here).
  localparam int unsigned WBITS = 8;   // weight bits
  localparam int unsigned XBITS = 8;   // input activation bits, fed bit-serially
  localparam int unsigned ACCW  = 24;  // shift-and-add accumulator width
  localparam int unsigned IDXW  = 16;  // element index field width

  // Router ports.
  localparam int unsigned NPORTS = 7;
  localparam int unsigned P_LOCAL = 0;
  localparam int unsigned P_XP    = 1;
  localparam int unsigned P_XM    = 2;
  localparam int unsigned P_YP    = 3;
  localparam int unsigned P_YM    = 4;
  localparam int unsigned P_ZP    = 5;
  localparam int unsigned P_ZM    = 6;

  typedef enum logic [2:0] {
    OP_WRITE_W  = 3'd0,  // program one weight word into a crossbar
    OP_WRITE_X  = 3'd1,  // write one input activation into a tile input buffer
    OP_RUN      = 3'd2,  // start a bit-serial MVM on a tile
    OP_RESULT   = 3'd3,  // one MVM output element
    OP_ADD_DEST = 3'd4,  // append a multicast destination of a tile's results
    OP_CLR_DEST = 3'd5   // clear a tile's multicast destination list
  } op_t;

  typedef struct packed {
    logic       host;
    logic [1:0] z;
    logic [1:0] y;
    logic [1:0] x;
  } node_t;

  typedef struct packed {
    node_t            dst;
    node_t            src;
    op_t              op;
    logic [1:0]       tile;
    logic [6:0]       xbar;   // crossbar / array index inside a tile
    logic [IDXW-1:0]  index;  // OP_WRITE_W: {row, word}; OP_WRITE_X/RESULT: element
    logic [31:0]      data;
  } flit_t;

  // Requests into a tile.
  typedef struct packed {
    logic [6:0]       xbar;
    logic [8:0]       row;
    logic [5:0]       word;   // logical weight column inside the crossbar
    logic [WBITS-1:0] data;
  } wreq_t;

  typedef struct packed {
    logic [8:0]       row;
    logic [XBITS-1:0] data;
  } xreq_t;

  typedef struct packed {
    logic [11:0]     idx;
    logic [ACCW-1:0] data;
  } result_t;

  // A multicast destination: node plus the tile whose input buffer receives.
  typedef struct packed {
    node_t      node;
    logic [1:0] tile;
  } dest_t;

endpackage
