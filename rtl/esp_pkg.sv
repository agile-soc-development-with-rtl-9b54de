// esp_pkg: types and constants shared by the NoC, the tile sockets and the
// accelerator.
//
// A NoC flit is 34 bits: a 2-bit preamble (head, tail) and a 32-bit payload.
// The first flit of a packet carries a header with source and destination tile
// coordinates and a message type; later flits carry addresses, lengths or data.
// A one-flit packet has both head and tail set.
//
// Plane numbering follows the six-plane NoC: planes 1-3 carry coherence
// request/forward/response traffic, planes 4 and 6 carry DMA (requests towards
// memory on plane 6, data back towards the device on plane 4), and plane 5
// carries short messages (register access, interrupts). Widths, message codes
// and the header layout are this design's choices.
package esp_pkg;

  localparam int unsigned DATA_W     = 32;
  localparam int unsigned FLIT_W     = DATA_W + 2;
  localparam int unsigned COORD_W    = 3;
  localparam int unsigned NUM_PLANES = 6;

  // Plane numbers, 1-based as in the plane legend; index = plane - 1.
  localparam int unsigned PLANE_COH_REQ = 1;
  localparam int unsigned PLANE_COH_FWD = 2;
  localparam int unsigned PLANE_COH_RSP = 3;
  localparam int unsigned PLANE_DMA_M2D = 4;  // memory (or producer) to device
  localparam int unsigned PLANE_MISC    = 5;  // registers, interrupts
  localparam int unsigned PLANE_DMA_D2M = 6;  // device to memory (or producer)

  // Router port order; a one-hot route vector uses the same order.
  localparam int unsigned PORT_N = 0;
  localparam int unsigned PORT_S = 1;
  localparam int unsigned PORT_W = 2;
  localparam int unsigned PORT_E = 3;
  localparam int unsigned PORT_L = 4;
  localparam int unsigned NPORTS = 5;

  typedef enum logic [4:0] {
    MSG_DMA_RD_REQ = 5'd1,   // hdr, addr, len           (plane 6)
    MSG_DMA_WR_REQ = 5'd2,   // hdr, addr, len, data...  (plane 6)
    MSG_DMA_RD_RSP = 5'd3,   // hdr, data...             (plane 4)
    MSG_P2P_REQ    = 5'd4,   // hdr, len                 (plane 6)
    MSG_REG_WR     = 5'd8,   // hdr, reg, data           (plane 5)
    MSG_REG_RD     = 5'd9,   // hdr, reg                 (plane 5)
    MSG_REG_RSP    = 5'd10,  // hdr, data                (plane 5)
    MSG_IRQ        = 5'd12   // hdr                      (plane 5)
  } msg_t;

  typedef struct packed {
    logic [COORD_W-1:0] src_y;
    logic [COORD_W-1:0] src_x;
    logic [COORD_W-1:0] dst_y;
    logic [COORD_W-1:0] dst_x;
    msg_t               msg;
    logic [14:0]        rsvd;
  } header_t;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [DATA_W-1:0] data;
  } flit_t;

  // Accelerator DMA control word (load_ctrl / store_ctrl): word index and
  // length in words.
  typedef struct packed {
    logic [31:0] index;
    logic [15:0] length;
  } dma_ctrl_t;

  // Accelerator configuration (conf_info).
  typedef struct packed {
    logic [15:0] len;         // words per chunk (one load/compute/store step)
    logic [15:0] nchunk;      // chunks per invocation
    logic [31:0] addend;      // operand of the example computation
    logic [31:0] out_offset;  // word offset of the output from the buffer base
  } conf_t;

  // Accelerator register map (word index in the tile's register window).
  localparam logic [5:0] REG_CMD      = 6'd0;   // write 1: start
  localparam logic [5:0] REG_STATUS   = 6'd1;   // [0] running [1] done; write clears done
  localparam logic [5:0] REG_BASE     = 6'd2;   // physical word address of the buffer
  localparam logic [5:0] REG_P2P      = 6'd3;   // [0] store p2p [1] load p2p [4:2] src x [7:5] src y
  localparam logic [5:0] REG_LEN      = 6'd16;
  localparam logic [5:0] REG_NCHUNK   = 6'd17;
  localparam logic [5:0] REG_ADDEND   = 6'd18;
  localparam logic [5:0] REG_OUTOFF   = 6'd19;

  // Tile types of the grid.
  typedef enum logic [1:0] {TILE_CPU = 2'd0, TILE_ACC = 2'd1, TILE_MEM = 2'd2, TILE_AUX = 2'd3} tile_t;

  // The 3x3 instance: row 0 MEM CPU CPU, row 1 ACC ACC ACC, row 2 AUX ACC MEM.
  // Element t = y*3 + x.
  localparam logic [8:0][1:0] MAP_3X3 = {TILE_MEM, TILE_ACC, TILE_AUX,
                                         TILE_ACC, TILE_ACC, TILE_ACC,
                                         TILE_CPU, TILE_CPU, TILE_MEM};

  function automatic flit_t mk_head(input logic [COORD_W-1:0] sy, input logic [COORD_W-1:0] sx,
                                    input logic [COORD_W-1:0] dy, input logic [COORD_W-1:0] dx,
                                    input msg_t m, input logic tail);
    header_t h;
    h = '{src_y: sy, src_x: sx, dst_y: dy, dst_x: dx, msg: m, rsvd: '0};
    return '{head: 1'b1, tail: tail, data: h};
  endfunction

  function automatic flit_t mk_body(input logic [DATA_W-1:0] d, input logic tail);
    return '{head: 1'b0, tail: tail, data: d};
  endfunction

  // Look-ahead X-then-Y route: the output port a router at (y, x) gives a
  // packet bound for (dy, dx).
  function automatic logic [NPORTS-1:0] xy_route(input logic [COORD_W-1:0] y, input logic [COORD_W-1:0] x,
                                                 input logic [COORD_W-1:0] dy, input logic [COORD_W-1:0] dx);
    logic [NPORTS-1:0] r;
    r = '0;
    if (dx > x)      r[PORT_E] = 1'b1;
    else if (dx < x) r[PORT_W] = 1'b1;
    else if (dy > y) r[PORT_S] = 1'b1;
    else if (dy < y) r[PORT_N] = 1'b1;
    else             r[PORT_L] = 1'b1;
    return r;
  endfunction

endpackage
