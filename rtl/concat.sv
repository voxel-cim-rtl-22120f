// concat: register stage between the bitonic sorter and the intersection
// detector.
//
// It joins the sorted sequence with the identity (feature index) of the output
// voxel being searched. The output identity is held in a register that feeds
// back on itself while an output voxel needs more than one sort pass (when a
// buffer cannot hold its whole search window), and is replaced when q_load
// marks a new output voxel. The paper only draws this block, with a self loop;
// what it does here is this design's reading of that drawing.
//
// Timing: seq_out / seq_valid_out follow seq_in / seq_valid by one cycle;
// q_fid_out is the held identity at the time of the sequence.
module concat
  import vcim_pkg::*;
#(
  parameter int N = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            q_load,
  input  logic [ID_W-1:0] q_fid,
  input  logic            seq_valid,
  input  sort_ent_t       seq_in  [N],
  output logic            seq_valid_out,
  output sort_ent_t       seq_out [N],
  output logic [ID_W-1:0] q_fid_out
);
  logic [ID_W-1:0] q_hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_hold        <= '0;
      q_fid_out     <= '0;
      seq_valid_out <= 1'b0;
    end else begin
      if (q_load) q_hold <= q_fid;     // self loop: held otherwise
      seq_valid_out <= seq_valid;
      if (seq_valid) q_fid_out <= q_hold;
    end
  end

  always_ff @(posedge clk) begin
    if (seq_valid) begin
      for (int i = 0; i < N; i++) seq_out[i] <= seq_in[i];
    end
  end
endmodule
