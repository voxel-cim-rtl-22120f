// tb_intersection_detector: random voxel sets and candidate sets are sorted
// in the testbench and fed to the detector; found[k] and pid[k] must match a
// direct search of the voxel set for candidate k's position.
module tb_intersection_detector;
  import vcim_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  sort_ent_t seq [N];
  logic [ID_W-1:0] q_fid, q_fid_out;
  logic [NUM_OFFS-1:0] found;
  logic [ID_W-1:0] pid [NUM_OFFS];
  intersection_detector #(.N(N)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    in_valid = 0; q_fid = '0;
    for (int i = 0; i < N; i++) seq[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      sort_ent_t e [$];
      int vpos [64];            // position index -> fid + 1
      coord_t cpos [NUM_OFFS];
      e.delete();
      for (int p = 0; p < 64; p++) vpos[p] = 0;
      // up to 40 voxels at distinct positions of a 4x4x4 space
      for (int i = 0; i < 40; i++) begin
        automatic int p = $urandom % 64;
        if (vpos[p] == 0 && ($urandom % 2)) begin
          vpos[p] = 100 + i + 1;
          e.push_back('{inv: 1'b0, c: '{z: Z_W'(p / 16), y: Y_W'((p / 4) % 4), x: X_W'(p % 4)},
                        cand: 1'b0, tag: ID_W'(100 + i)});
        end
      end
      // candidates sit at distinct positions, as the 13 offsets of one output do
      for (int k = 0; k < NUM_OFFS; k++) begin
        automatic int p = (k * 5 + n) % 64;
        cpos[k] = '{z: Z_W'(p / 16), y: Y_W'((p / 4) % 4), x: X_W'(p % 4)};
        e.push_back('{inv: 1'b0, c: cpos[k], cand: 1'b1, tag: ID_W'(k)});
      end
      while (e.size() < N) e.push_back('{inv: 1'b1, c: '1, cand: 1'b1, tag: '0});
      e.sort() with (sort_key(item));
      @(negedge clk);
      for (int i = 0; i < N; i++) seq[i] = e[i];
      q_fid = ID_W'(n); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid || q_fid_out != ID_W'(n)) failures++;
      for (int k = 0; k < NUM_OFFS; k++) begin
        automatic int p = int'(cpos[k].z) * 16 + int'(cpos[k].y) * 4 + int'(cpos[k].x);
        checks++;
        if (found[k] != (vpos[p] != 0) || (found[k] && int'(pid[k]) != vpos[p] - 1)) begin
          failures++; if (failures < 5) $display("k=%0d found=%0b pid=%0d exp=%0d", k, found[k], pid[k], vpos[p] - 1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
