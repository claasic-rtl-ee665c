// claasic_pkg: types and constants shared by the CLAASIC accelerator.
//
// All network traffic is made of single-flit packets. A packet carries a
// type, a destination rectangle of columnar cores (CCs) in the 2-D mesh, and
// up to MAX_ITEMS payload items of ITEM_W bits each. Several items with the
// same destination are packed into one packet by the coalescing injector.
// Item layouts (widths for a 2048-column, 2048-input, 32-cell system):
//   PK_INPUT   : input bit index                    [10:0]
//   PK_INHIB   : {overlap[10:0], column id[10:0]}    (22 bits)
//   PK_LATERAL : {learn, column id[10:0], cell[4:0]} (17 bits)
//   PK_BROOM   : no items; marks the end of a stage on one link.
// The 22-bit item width and the 22/16/11-bit field sums follow the packet
// sizes worked out for a 2048-column system with 32 cells per column; the
// learn flag on lateral items and the 4-item packing are this design's own.
// Header (2+16+3) + 4x22 = 109 bits, which fits a 16-byte link.
package claasic_pkg;

  localparam int ITEM_W    = 22;
  localparam int MAX_ITEMS = 4;
  localparam int COORD_W   = 4;   // up to 16x16 CCs
  localparam int COL_W     = 11;  // up to 2048 columns
  localparam int CELL_W    = 5;   // up to 32 cells per column
  localparam int IN_W      = 11;  // up to 2048 encoder bits
  localparam int OVL_W     = 11;  // overlap field in an inhibition item
  localparam int CNT_W     = $clog2(MAX_ITEMS + 1);

  typedef enum logic [1:0] {
    PK_INPUT   = 2'd0,
    PK_INHIB   = 2'd1,
    PK_LATERAL = 2'd2,
    PK_BROOM   = 2'd3
  } ptype_e;

  typedef logic [ITEM_W-1:0] item_t;

  typedef struct packed {
    logic [COORD_W-1:0] x0;
    logic [COORD_W-1:0] x1;
    logic [COORD_W-1:0] y0;
    logic [COORD_W-1:0] y1;
  } rect_t;

  typedef struct packed {
    ptype_e                         ptype;
    rect_t                          dst;
    logic [CNT_W-1:0]               n_items;
    logic [MAX_ITEMS-1:0][ITEM_W-1:0] items;
  } pkt_t;

  // Router port numbering: local, north, east, south, west.
  localparam int P_L = 0;
  localparam int P_N = 1;
  localparam int P_E = 2;
  localparam int P_S = 3;
  localparam int P_W = 4;

  function automatic item_t mk_inhib(input logic [OVL_W-1:0] ovl, input logic [COL_W-1:0] col);
    return item_t'({ovl, col});
  endfunction

  function automatic item_t mk_lateral(input logic learn, input logic [COL_W-1:0] col,
                                       input logic [CELL_W-1:0] cid);
    return item_t'({learn, col, cid});
  endfunction

endpackage
