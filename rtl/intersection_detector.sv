// intersection_detector: finds the in-out pairs in a sorted sequence.
//
// Every adjacent pair of entries of the sorted sequence is compared on x, y and
// z at the same time (N-1 three-coordinate comparators in parallel). When an
// input voxel is immediately followed by a candidate with the same position,
// the candidate's offset k has an input voxel: found[k] is set and pid[k] is
// that voxel's feature index. Equal voxels (a halo copy and its original) sort
// next to each other and only the last is taken, so no pair is reported twice.
// The parallel comparator follows the paper; the tagging is this design's.
//
// Timing: found/pid/out_valid/q_fid_out are registered, one cycle after
// in_valid.
module intersection_detector
  import vcim_pkg::*;
#(
  parameter int N = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  sort_ent_t           seq [N],
  input  logic [ID_W-1:0]     q_fid,
  output logic                out_valid,
  output logic [NUM_OFFS-1:0] found,
  output logic [ID_W-1:0]     pid [NUM_OFFS],
  output logic [ID_W-1:0]     q_fid_out
);
  logic [NUM_OFFS-1:0] found_c;
  logic [ID_W-1:0]     pid_c [NUM_OFFS];

  always_comb begin
    logic eq;
    found_c = '0;
    for (int k = 0; k < NUM_OFFS; k++) pid_c[k] = '0;
    for (int i = 0; i < N - 1; i++) begin
      eq = (seq[i].c.x == seq[i+1].c.x) && (seq[i].c.y == seq[i+1].c.y) &&
           (seq[i].c.z == seq[i+1].c.z);
      if (eq && !seq[i].inv && !seq[i+1].inv && !seq[i].cand && seq[i+1].cand) begin
        for (int k = 0; k < NUM_OFFS; k++) begin
          if (seq[i+1].tag == ID_W'(k)) begin
            found_c[k] = 1'b1;
            pid_c[k]   = seq[i].tag;
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      found     <= '0;
      q_fid_out <= '0;
      for (int k = 0; k < NUM_OFFS; k++) pid[k] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        found     <= found_c;
        pid       <= pid_c;
        q_fid_out <= q_fid;
      end
    end
  end
endmodule
