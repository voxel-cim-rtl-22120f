// voxel_fifo: voxel coordinate FIFO with a parallel view of every held entry.
//
// The map search core uses three of these: buffer I (rows of the current
// depth z0), buffer II (rows of depth z0+1) and the backup FIFO (voxels of
// neighbouring blocks for block-DOMS). Voxels are pushed in memory order and
// released oldest first, as the rows they belong to leave the search window;
// all held entries, oldest first, feed the bitonic sorter in parallel.
// That role follows the paper; the depth (16) and the flush port are this
// design's choices.
//
// Interface: push/push_ent, pop, flush (highest priority), all synchronous to
// clk with active-low asynchronous reset. head_ent is the oldest entry.
// all_ent[i] / all_vld[i] is the i-th oldest entry. Push and pop in the same
// cycle are allowed. Pushing when full or popping when empty is an error
// (asserted).
module voxel_fifo
  import vcim_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      flush,
  input  logic                      push,
  input  fifo_ent_t                 push_ent,
  input  logic                      pop,
  output fifo_ent_t                 head_ent,
  output logic                      empty,
  output logic                      full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output fifo_ent_t                 all_ent [DEPTH],
  output logic [DEPTH-1:0]          all_vld
);
  localparam int PW = $clog2(DEPTH);

  fifo_ent_t          mem [DEPTH];
  logic [PW-1:0]      rd_ptr, wr_ptr;

  assign empty    = (count == 0);
  assign full     = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign head_ent = mem[rd_ptr];

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      all_ent[i] = mem[PW'(rd_ptr + PW'(i))];
      all_vld[i] = (i < int'(count));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (flush) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= PW'(wr_ptr + 1'b1);
      if (pop)  rd_ptr <= PW'(rd_ptr + 1'b1);
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push && !flush) mem[wr_ptr] <= push_ent;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) (push && !flush) |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) (pop && !flush) |-> !empty);
endmodule
