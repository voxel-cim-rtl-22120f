// tb_kernel_offset_adder: for random output voxels (including the space's
// faces) checks the 13 neighbour positions against the half-kernel offset
// list written out by hand, and the in-range flags.
module tb_kernel_offset_adder;
  import vcim_pkg::*;
  localparam int SX = 10, SY = 12, SZ = 5;
  int checks = 0, failures = 0;
  coord_t q; coord_t cand [NUM_OFFS]; logic [NUM_OFFS-1:0] cand_ok;
  // (dx, dy, dz) of the 13 offsets, independent of the package functions
  int ref_d [NUM_OFFS][3] = '{'{1,0,0}, '{-1,1,0}, '{0,1,0}, '{1,1,0},
    '{-1,-1,1}, '{0,-1,1}, '{1,-1,1}, '{-1,0,1}, '{0,0,1}, '{1,0,1}, '{-1,1,1}, '{0,1,1}, '{1,1,1}};
  kernel_offset_adder #(.SPACE_X(SX), .SPACE_Y(SY), .SPACE_Z(SZ)) dut (.*);
  initial begin
    for (int n = 0; n < 500; n++) begin
      automatic int x = $urandom % SX, y = $urandom % SY, z = $urandom % SZ;
      q = '{z: Z_W'(z), y: Y_W'(y), x: X_W'(x)}; #1;
      for (int k = 0; k < NUM_OFFS; k++) begin
        automatic int nx = x + ref_d[k][0], ny = y + ref_d[k][1], nz = z + ref_d[k][2];
        automatic bit ok = nx >= 0 && nx < SX && ny >= 0 && ny < SY && nz < SZ;
        checks++;
        if (cand_ok[k] != ok || (ok && (int'(cand[k].x) != nx || int'(cand[k].y) != ny || int'(cand[k].z) != nz))) begin
          failures++; if (failures < 5) $display("k=%0d q=(%0d,%0d,%0d)", k, x, y, z);
        end
      end
      // weight index of the offset and of its reverse
      for (int k = 0; k < NUM_OFFS; k++) begin
        checks++;
        if (int'(off_widx(k)) != (ref_d[k][2] + 1) * 9 + (ref_d[k][1] + 1) * 3 + ref_d[k][0] + 1) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
