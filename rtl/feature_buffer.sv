// feature_buffer: on-chip input feature buffer.
//
// DEPTH feature vectors of C1 8-bit channels, one per voxel (Spconv3D) or
// pixel (Conv2D), indexed by feature index. Written from the host one vector
// per cycle; read asynchronously by the gather unit. The paper gives only the
// total on-chip buffer (776 KB); DEPTH = 8192 and C1 = 16 are this design's
// choices (128 KB).
module feature_buffer #(
  parameter int DEPTH = 8192,
  parameter int C1    = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_vec [C1],
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_vec [C1]
);
  logic [C1*8-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int c = 0; c < C1; c++) mem[wr_addr][c*8 +: 8] <= wr_vec[c];
    end
  end

  always_comb begin
    for (int c = 0; c < C1; c++) rd_vec[c] = mem[rd_addr][c*8 +: 8];
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end
endmodule
