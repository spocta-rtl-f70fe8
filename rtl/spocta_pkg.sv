// spocta_pkg: types and constants shared by the SpOctA sparse-convolution accelerator.
// The octree geometry follows the paper: a 16x16x16 search block, so 4 bits per axis,
// 8 octree-table banks selected by the lowest octree digit phi1 = {z1,y1,x1} and a 9-bit
// bank address {phi4,phi3,phi2}. The 16x16 PE array, 8-bit data and the four weight
// partitions are the paper's; word widths, map-entry layout and memory sizes are choices
// of this design and are marked as such where they are defined.
package spocta_pkg;

  // ---- octree search geometry (paper: 16x16x16 block, 8 banks) ----
  localparam int COORD_W   = 4;                 // bits per axis inside a block
  localparam int NBANK     = 8;                 // octree table banks / map table FIFOs
  localparam int TADDR_W   = 3*COORD_W - 3;     // {phi4,phi3,phi2} = 9 bits
  localparam int VID_W     = 3*COORD_W;         // voxel index inside a block (<= 4096)
  localparam int WIDX_W    = 5;                 // kernel offset index 0..26
  localparam int W_CENTER  = 13;                // index of delta = (0,0,0)

  // ---- computing core (paper: (16x16)x(16x1) per cycle, 8-bit data) ----
  localparam int LANES     = 16;                // input channels per cycle
  localparam int NPE       = 16;                // output channels per cycle
  localparam int DW        = 8;                 // feature / weight width
  localparam int PSW       = 32;                // psum width (choice of this design)
  localparam int TILE_W    = LANES*NPE*DW;      // one 16x16 weight tile = 2048 bits

  // ---- weight memory partitions (words are 16x16 tiles = 256 B) ----
  localparam int WM_CENTER = 256;               // 64 KB  (choice)
  localparam int WM_MID    = 128;               // 32 KB  (paper: "restricted to 32KB")
  localparam int WM_UP     = 32;                // 8 KB   (choice)
  localparam int WM_DOWN   = 32;                // 8 KB   (choice)
  localparam int WM_WORDS  = WM_CENTER + WM_MID + WM_UP + WM_DOWN;
  localparam int WM_AW     = $clog2(WM_WORDS);
  localparam int WM_MID_BASE  = WM_CENTER;
  localparam int WM_UP_BASE   = WM_CENTER + WM_MID;
  localparam int WM_DOWN_BASE = WM_CENTER + WM_MID + WM_UP;

  localparam int IFM_WORDS = 4096;              // 64 KB feature memory (choice)
  localparam int IFM_AW    = $clog2(IFM_WORDS);
  localparam int OFM_WORDS = 1024;              // psum words for input-stationary layers (choice)
  localparam int OFM_AW    = $clog2(OFM_WORDS);
  localparam int CH_W      = 4;                 // up to 16 chunks / tiles = 256 channels

  typedef enum logic [1:0] {
    M_SUBM3  = 2'd0,   // submanifold 3x3x3, stride 1: searched, output stationary
    M_GCONV2 = 2'd1,   // generalized 2x2x2, stride 2: searched, output stationary
    M_GCONV3 = 2'd2,   // generalized 3x3x3, stride 2: maps loaded, input stationary
    M_TCONV2 = 2'd3    // transposed 2x2x2: maps loaded, input stationary
  } mode_e;

  typedef struct packed {
    logic [COORD_W-1:0] z;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
    logic [VID_W-1:0]   idx;   // position of the voxel in the block's feature list
  } voxel_t;

  // One IN-OUT map entry: (input voxel, kernel offset, output voxel) plus window end.
  typedef struct packed {
    logic [VID_W-1:0]  in_idx;
    logic [WIDX_W-1:0] w_idx;
    logic [VID_W-1:0]  out_idx;
    logic              last;     // last map of its output window
  } map_entry_t;

  // Per-cycle side information travelling with a set of 8 table queries.
  typedef struct packed {
    logic [NBANK-1:0][WIDX_W-1:0] w_idx;
    logic [VID_W-1:0]             out_idx;
    logic                         last;       // final query cycle of this voxel
    logic [2:0]                   center_phi1;
    mode_e                        mode;
  } qmeta_t;

  typedef struct packed {
    mode_e                mode;
    logic [CH_W:0]        cin_chunks;   // Cin/16, 1..16
    logic [CH_W:0]        cout_tiles;   // Cout/16, 1..16
    logic [CH_W:0]        mid_otiles;   // C'out/16 held on chip for W_mid
    logic [CH_W:0]        ud_otiles;    // C'out/16 held on chip for W_up / W_down
    logic [3:0]           n_up;         // entries in the W_up reserved list (0..9)
    logic [3:0]           n_down;
    logic [8:0][WIDX_W-1:0] up_list;    // kernel offsets with dz=+1 kept on chip
    logic [8:0][WIDX_W-1:0] down_list;  // kernel offsets with dz=-1 kept on chip
    logic signed [15:0]   pp_scale;
    logic [4:0]           pp_shift;
    logic                 pp_relu;
  } layer_cfg_t;

  // One compute job for the SPAC core: one map x one input chunk x one output tile.
  typedef struct packed {
    logic [VID_W-1:0]  in_idx;
    logic [WIDX_W-1:0] w_idx;
    logic [VID_W-1:0]  out_idx;
    logic [CH_W-1:0]   chunk;
    logic [CH_W-1:0]   otile;
    logic              first;   // first job of an accumulation group
    logic              last;    // last job of an accumulation group
  } job_t;

  // Octree code of a block-local coordinate (Eq. 3): phi_l = {z_l, y_l, x_l}.
  function automatic logic [2:0] oct_phi1(input logic [COORD_W-1:0] x, y, z);
    return {z[0], y[0], x[0]};
  endfunction

  function automatic logic [TADDR_W-1:0] oct_addr(input logic [COORD_W-1:0] x, y, z);
    logic [TADDR_W-1:0] a;
    for (int l = 1; l < COORD_W; l++) a[3*(l-1) +: 3] = {z[l], y[l], x[l]};
    return a;
  endfunction

  function automatic logic [5:0] popcnt16(input logic [15:0] v);
    logic [5:0] c = '0;
    for (int i = 0; i < 16; i++) c += 6'(v[i]);
    return c;
  endfunction
endpackage
