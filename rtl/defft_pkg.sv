// defft_pkg: types, constants and geometry helpers shared by the DeFT 2.5D chiplet network.
//
// The system is a set of 4x4 mesh chiplets standing on an active interposer that is itself a
// mesh. Each chiplet reaches the interposer through four bidirectional vertical links (VLs).
// Every router has six ports: Local, North, East, South, West and one Vertical port (the
// "Down" port on a chiplet, the "Up" port on the interposer). Two virtual channels, one per
// virtual network (VN.0 and VN.1), share every physical channel.
//
// Numbers that follow the paper: four chiplets, 4x4 chiplet meshes, four VLs per chiplet, two
// VCs, buffers of four flits, packets of eight flits, 32-bit flits. This design's own choices:
// the interposer is a mesh of 2x2 router quadrants, one quadrant under each chiplet, which
// receives that chiplet's four VLs (read from the baseline drawing of the paper); the VLs sit
// at chiplet routers (1,0), (2,0), (1,3), (2,3) (read from the VL-selection example drawing);
// the head-flit field layout below; sideband head/tail/VN bits carried beside the 32 data bits.
package defft_pkg;

  // ---------------- system size ----------------
  localparam int unsigned CHIP_DIM     = 4;   // chiplet mesh is CHIP_DIM x CHIP_DIM
  localparam int unsigned CHIP_COLS    = 2;   // chiplets across the interposer
  localparam int unsigned CHIP_ROWS    = 2;   // chiplets down the interposer
  localparam int unsigned NUM_CHIPLETS = CHIP_COLS * CHIP_ROWS;
  localparam int unsigned NUM_VLS      = 4;   // vertical links per chiplet
  localparam int unsigned IP_DIM_X     = 2 * CHIP_COLS;  // interposer mesh width
  localparam int unsigned IP_DIM_Y     = 2 * CHIP_ROWS;  // interposer mesh height
  localparam int unsigned CHIP_NODES   = CHIP_DIM * CHIP_DIM;
  localparam int unsigned IP_NODES     = IP_DIM_X * IP_DIM_Y;

  // ---------------- router and link ----------------
  localparam int unsigned NUM_PORTS  = 6;
  localparam int unsigned NUM_VC     = 2;     // one VC per VN
  localparam int unsigned BUF_DEPTH  = 4;     // flits per VC buffer
  localparam int unsigned PKT_LEN    = 8;     // flits per packet
  localparam int unsigned FLIT_W     = 32;    // flit data width

  typedef enum logic [2:0] {
    P_LOCAL = 3'd0,
    P_NORTH = 3'd1,
    P_EAST  = 3'd2,
    P_SOUTH = 3'd3,
    P_WEST  = 3'd4,
    P_VERT  = 3'd5
  } port_e;

  // Layer identifier: chiplets are 0 .. NUM_CHIPLETS-1, the interposer is LAYER_IP.
  localparam logic [2:0] LAYER_IP = 3'd7;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic              vn;      // VC/VN the flit occupies in the receiving buffer
    logic [FLIT_W-1:0] data;
  } flit_t;

  typedef struct packed {
    logic  valid;
    flit_t flit;
  } link_t;

  // Head-flit data layout (32 bits).
  typedef struct packed {
    logic [2:0] dst_layer;  // [31:29] destination chiplet, or LAYER_IP
    logic [2:0] dst_x;      // [28:26]
    logic [2:0] dst_y;      // [25:23]
    logic [1:0] sel1;       // [22:21] VL chosen on the source chiplet (1st intermediate dest.)
    logic [1:0] sel2;       // [20:19] VL chosen on the interposer (2nd intermediate dest.)
    logic [2:0] src_layer;  // [18:16]
    logic [2:0] src_x;      // [15:13]
    logic [2:0] src_y;      // [12:10]
    logic [9:0] tag;        // [9:0]   free for the sender (packet id)
  } head_t;

  // ---------------- geometry ----------------
  // Chiplet-side position of VL k (the boundary router it is attached to).
  function automatic logic [2:0] vl_chip_x(input logic [1:0] k);
    return (k[0] == 1'b0) ? 3'd1 : 3'd2;
  endfunction
  function automatic logic [2:0] vl_chip_y(input logic [1:0] k);
    return (k[1] == 1'b0) ? 3'd0 : 3'(CHIP_DIM - 1);
  endfunction

  // Interposer-side position of VL k of chiplet c: the 2x2 quadrant under the chiplet.
  function automatic logic [2:0] vl_ip_x(input logic [2:0] c, input logic [1:0] k);
    return 3'((32'(c) % CHIP_COLS) * 2 + 32'(k[0]));
  endfunction
  function automatic logic [2:0] vl_ip_y(input logic [2:0] c, input logic [1:0] k);
    return 3'((32'(c) / CHIP_COLS) * 2 + 32'(k[1]));
  endfunction

  // VL index of a chiplet router, or -1 when it is not a boundary router.
  function automatic int chip_vl_index(input int x, input int y);
    for (int k = 0; k < int'(NUM_VLS); k++)
      if (x == int'(vl_chip_x(2'(k))) && y == int'(vl_chip_y(2'(k)))) return k;
    return -1;
  endfunction

endpackage
