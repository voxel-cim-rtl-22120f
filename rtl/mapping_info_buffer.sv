// mapping_info_buffer: FIFO of in-out pairs between map search and compute.
//
// The map search core pushes every pair it finds (input feature index,
// output feature index, weight index); the gather unit pops them. First-word
// fall-through: rd_pair is the oldest pair whenever !empty. The role follows
// the paper; the depth and the fall-through interface are this design's.
module mapping_info_buffer
  import vcim_pkg::*;
#(
  parameter int DEPTH = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  pair_t wr_pair,
  input  logic  pop,
  output pair_t rd_pair,
  output logic  empty,
  output logic  full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = $clog2(DEPTH);
  pair_t         mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign rd_pair = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
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
    if (push) mem[wr_ptr] <= wr_pair;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
