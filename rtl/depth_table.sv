// depth_table: depth-encoding table buffer of block-DOMS.
//
// For every block b of the 2D block grid and every depth z it holds the
// address in off-chip memory of the first voxel of that depth in that block
// (entry b*(SPACE_Z+1)+z). Entry b*(SPACE_Z+1)+SPACE_Z holds the block's end
// address, so depth z of block b occupies [entry z, entry z+1). The content
// follows the paper; the end entry, the single asynchronous read port and the
// bus write port are this design's choices.
//
// Timing: writes take effect at the next clock edge; rd_data follows rd_addr
// in the same cycle.
module depth_table
  import vcim_pkg::*;
#(
  parameter int NUM_BLOCKS = 16,
  parameter int SPACE_Z    = 41,
  localparam int ENTRIES   = NUM_BLOCKS * (SPACE_Z + 1),
  localparam int AW        = $clog2(ENTRIES)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [ID_W-1:0] wr_data,
  input  logic [AW-1:0]   rd_addr,
  output logic [ID_W-1:0] rd_data
);
  logic [ID_W-1:0] tbl [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) tbl[wr_addr] <= wr_data;
  end

  assign rd_data = tbl[rd_addr];

  initial begin
    for (int i = 0; i < ENTRIES; i++) tbl[i] = '0;
  end
endmodule
