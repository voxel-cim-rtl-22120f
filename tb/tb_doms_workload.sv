// tb_doms_workload: map search on the two voxel spaces of the evaluation.
//
// Low resolution: 352 x 400 x 10 at sparsity 0.005 (7,040 voxels). High
// resolution: 1408 x 1600 x 41 at sparsity 0.001 (92,365 voxels; the 0.005
// end of the range only takes longer). Each is searched by plain DOMS and by
// block-DOMS on the 2 x 8 grid (see doms_workload_run), checked against a
// brute-force neighbour count, and reported as reads per voxel word.
module tb_doms_workload;
  bit fin [2];
  int ch [2], fl [2];

  doms_workload_run #(.SX(352), .SY(400), .SZ(10), .NVOX(7040), .NAME("352x400x10@0.005")) u_low (
    .finished(fin[0]), .checks(ch[0]), .failures(fl[0]));
  doms_workload_run #(.SX(1408), .SY(1600), .SZ(41), .NVOX(92365), .NAME("1408x1600x41@0.001")) u_high (
    .finished(fin[1]), .checks(ch[1]), .failures(fl[1]));

  initial begin
    fork
      begin
        wait (fin[0] && fin[1]);
        #100;
        $display("TB_RESULT checks=%0d failures=%0d", ch[0] + ch[1], fl[0] + fl[1]);
      end
      begin
        #(40_000_000 * 10);
        $display("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", ch[0] + ch[1], fl[0] + fl[1] + 1);
      end
    join_any
    $finish;
  end
endmodule
