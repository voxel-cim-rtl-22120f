// bitonic_sorter: fixed-length bitonic sorting network of the map search core.
//
// Sorts N sorter entries (voxels from buffer I, buffer II and the backup FIFO
// plus the candidate positions of one output voxel) in ascending order of the
// key {inv, z, y, x, cand}, so that invalid slots go last and an input voxel
// lands immediately before a candidate with the same position. The network is
// the standard log2(N)*(log2(N)+1)/2-stage bitonic sorter (21 stages of N/2
// compare-exchange elements for N = 64), fully combinational, with one output
// register: out_* is valid one cycle after in_*. A bitonic sorter of length 64
// follows the paper; sorting all inputs (rather than merging two sorted runs)
// and the single register stage are this design's choices.
module bitonic_sorter
  import vcim_pkg::*;
#(
  parameter int N = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  sort_ent_t in_ent  [N],
  output logic      out_valid,
  output sort_ent_t out_ent [N]
);
  sort_ent_t sorted [N];

  always_comb begin
    sort_ent_t v [N];
    sort_ent_t t;
    t = '0;
    for (int i = 0; i < N; i++) v[i] = in_ent[i];
    for (int k = 2; k <= N; k = k * 2) begin
      for (int j = k / 2; j > 0; j = j / 2) begin
        for (int i = 0; i < N; i++) begin
          if ((i ^ j) > i) begin
            if (((i & k) == 0) ? (sort_key(v[i]) > sort_key(v[i ^ j]))
                               : (sort_key(v[i]) < sort_key(v[i ^ j]))) begin
              t        = v[i];
              v[i]     = v[i ^ j];
              v[i ^ j] = t;
            end
          end
        end
      end
    end
    for (int i = 0; i < N; i++) sorted[i] = v[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < N; i++) out_ent[i] <= sorted[i];
    end
  end

  initial begin
    if ((N & (N - 1)) != 0) $error("bitonic_sorter: N must be a power of two");
  end
endmodule
