// vcim_pkg: types, constants and small functions shared by the Voxel-CIM blocks.
//
// Voxel coordinates are packed {z, y, x} so that comparing two coordinates as
// unsigned integers gives the (z, y, x) lexicographic order in which voxels are
// stored in off-chip memory. Widths fit the 1408 x 1600 x 41 voxel space of the
// high-resolution case. A voxel word carries its feature index (fid), which is
// the row of its feature vector; a halo copy (a voxel duplicated from the
// x+ neighbour block for block-DOMS) carries the original's fid.
//
// Kernel offsets: the half kernel searched for every output voxel Q holds the 13
// offsets d with either dz = 0 and (dy = 0, dx = +1) or (dy = +1), or dz = +1.
// The weight of offset d is W[(dz+1)*9 + (dy+1)*3 + (dx+1)], where the input
// voxel is P = Q + d; the centre weight is W13 and the reverse of W[i] is W[26-i].
// This numbering is this design's own; the paper only names W0..W26.
package vcim_pkg;
  localparam int X_W      = 11;   // 1408 columns
  localparam int Y_W      = 11;   // 1600 rows
  localparam int Z_W      = 6;    // 41 depths
  localparam int ID_W     = 20;   // voxel address / feature index width
  localparam int NUM_OFFS = 13;   // half-kernel neighbours (central symmetry)
  localparam int NUM_W3   = 27;   // 3x3x3 kernel positions
  localparam int NUM_W2   = 9;    // 3x3 kernel positions
  localparam int WIDX_W   = 5;
  localparam int CENTER_W = 13;

  typedef struct packed {
    logic [Z_W-1:0] z;
    logic [Y_W-1:0] y;
    logic [X_W-1:0] x;
  } coord_t;

  localparam int COORD_W = $bits(coord_t);

  // One word of off-chip voxel memory.
  typedef struct packed {
    logic [ID_W-1:0] fid;
    logic            halo;
    coord_t          c;
  } voxel_t;

  // One entry of a voxel FIFO: the voxel plus the memory address it came from.
  typedef struct packed {
    logic [ID_W-1:0] addr;
    voxel_t          v;
  } fifo_ent_t;

  // One entry of the bitonic sorter. Sorting key is {inv, c, cand}; tag is the
  // fid of a voxel or the offset number (0..12) of a candidate.
  typedef struct packed {
    logic            inv;
    coord_t          c;
    logic            cand;
    logic [ID_W-1:0] tag;
  } sort_ent_t;

  localparam int SORT_KEY_W = 1 + COORD_W + 1;

  // One in-out pair of the IN-OUT maps.
  typedef struct packed {
    logic [ID_W-1:0]   in_id;
    logic [ID_W-1:0]   out_id;
    logic [WIDX_W-1:0] widx;
  } pair_t;

  function automatic logic [SORT_KEY_W-1:0] sort_key(sort_ent_t e);
    return {e.inv, e.c, e.cand};
  endfunction

  function automatic int off_dx(int k);
    if (k == 0) return 1;
    if (k <= 3) return k - 2;          // k = 1,2,3 -> -1,0,+1
    return ((k - 4) % 3) - 1;
  endfunction

  function automatic int off_dy(int k);
    if (k == 0) return 0;
    if (k <= 3) return 1;
    return ((k - 4) / 3) - 1;
  endfunction

  function automatic int off_dz(int k);
    return (k <= 3) ? 0 : 1;
  endfunction

  function automatic logic [WIDX_W-1:0] off_widx(int k);
    return WIDX_W'((off_dz(k) + 1) * 9 + (off_dy(k) + 1) * 3 + (off_dx(k) + 1));
  endfunction

  // W2B copy factors of the first subm3 layer of SECOND (Fig. 6c), W0..W26.
  localparam int W2B_COPIES_SECOND [NUM_W3] = '{
    1, 1, 1, 1, 1, 1, 1, 1, 1, 2, 4, 4, 4, 16,
    4, 4, 4, 2, 1, 1, 1, 1, 1, 1, 1, 1, 1};
endpackage
