// cim_unit: one CIM unit, a tile of NUM_PE processing elements.
//
// With the default 128 x 128 PE, 64 PEs make one 1024 x 1024-cell tile. Under
// the sub-matrices mapping every kernel position owns its own PEs (27 for a
// 3x3x3 Spconv3D kernel, 9 for a 3x3 Conv2D kernel), and under W2B a position
// owns as many PEs as its copy factor; which PE serves which position is kept
// by the gather unit, so this unit is a plain array of independently started
// PEs. One PE is started per cycle (start one-hot, shared in_vec and tag);
// every PE returns its result through res_valid/res_ack. Weights are written
// one PE row at a time. Tile and PE organisation follow the paper; NUM_PE and
// the one-start-per-cycle port are this design's choices.
module cim_unit
  import vcim_pkg::*;
#(
  parameter int NUM_PE = 64,
  parameter int ROWS   = 128,
  parameter int COLS   = 128,
  parameter int WBITS  = 8,
  parameter int IBITS  = 8,
  parameter int ACC_W  = 32,
  localparam int OCH   = COLS / WBITS,
  localparam int RW    = $clog2(ROWS),
  localparam int PEW   = $clog2(NUM_PE)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [PEW-1:0]          wr_pe,
  input  logic [RW-1:0]           wr_row,
  input  logic [COLS-1:0]         wr_bits,
  input  logic [NUM_PE-1:0]       start,
  input  logic [IBITS-1:0]        in_vec [ROWS],
  input  logic [ID_W-1:0]         tag,
  output logic [NUM_PE-1:0]       busy,
  output logic [NUM_PE-1:0]       res_valid,
  output logic signed [ACC_W-1:0] res_psum [NUM_PE][OCH],
  output logic [ID_W-1:0]         res_tag  [NUM_PE],
  input  logic [NUM_PE-1:0]       res_ack
);
  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    cim_pe #(.ROWS(ROWS), .COLS(COLS), .WBITS(WBITS), .IBITS(IBITS), .ACC_W(ACC_W)) u_pe (
      .clk, .rst_n,
      .wr_en(wr_en && wr_pe == PEW'(p)), .wr_row, .wr_bits,
      .start(start[p]), .in_vec, .tag,
      .busy(busy[p]), .res_valid(res_valid[p]), .psum(res_psum[p]), .res_tag(res_tag[p]),
      .res_ack(res_ack[p]));
  end

  a_one_start: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(start));
endmodule
