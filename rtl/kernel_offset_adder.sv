// kernel_offset_adder: the parallel "Adder" of the map search core.
//
// Adds the 13 half-kernel offsets (see vcim_pkg) to the output voxel Q in one
// cycle of combinational logic, giving the positions where an input voxel
// would form an in-out pair with Q. cand_ok[k] is low when position k falls
// outside the SPACE_X x SPACE_Y x SPACE_Z voxel space. The 13-offset half
// kernel and the parallel adder follow the paper; the choice of which half,
// and the range flags, are this design's.
module kernel_offset_adder
  import vcim_pkg::*;
#(
  parameter int SPACE_X = 1408,
  parameter int SPACE_Y = 1600,
  parameter int SPACE_Z = 41
) (
  input  coord_t              q,
  output coord_t              cand    [NUM_OFFS],
  output logic [NUM_OFFS-1:0] cand_ok
);
  always_comb begin
    int nx, ny, nz;
    for (int k = 0; k < NUM_OFFS; k++) begin
      nx = int'(q.x) + off_dx(k);
      ny = int'(q.y) + off_dy(k);
      nz = int'(q.z) + off_dz(k);
      cand[k].x  = X_W'(nx);
      cand[k].y  = Y_W'(ny);
      cand[k].z  = Z_W'(nz);
      cand_ok[k] = (nx >= 0) && (nx < SPACE_X) && (ny >= 0) && (ny < SPACE_Y) &&
                   (nz >= 0) && (nz < SPACE_Z);
    end
  end
endmodule
