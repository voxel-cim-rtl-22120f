// cim_array: behavioural model of the SRAM compute-in-memory array of one PE.
//
// Behavioural model, not a synthesizable implementation of the real part: the
// real array is a mixed-signal macro (6T-style SRAM cells, word-line drivers,
// bit-line/source-line sensing, column multiplexers and ADCs). This model
// keeps its function in ideal form: ROWS x COLS one-bit cells, a word-line
// vector wl (one input bit per row), and for every column an ideal ADC output
// col_cnt[c] = number of rows r with wl[r] = 1 and cell[r][c] = 1, available
// in the same cycle. Column multiplexing of ADCs is not modelled (one ADC per
// column). Cells are written one row at a time (wr_en, wr_row, wr_bits) at the
// clock edge. The 1-bit cell and the WL driver / MUX / ADC structure follow the
// paper; the PE size (128 x 128) and the ideal ADC are this design's choices.
module cim_array #(
  parameter int ROWS  = 128,
  parameter int COLS  = 128,
  localparam int ADC_W = $clog2(ROWS + 1),
  localparam int RW    = $clog2(ROWS)
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [RW-1:0]       wr_row,
  input  logic [COLS-1:0]     wr_bits,
  input  logic [ROWS-1:0]     wl,
  output logic [ADC_W-1:0]    col_cnt [COLS]
);
  // column-major storage: cells[c][r]
  logic [ROWS-1:0] cells [COLS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int c = 0; c < COLS; c++) cells[c][wr_row] <= wr_bits[c];
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) col_cnt[c] = ADC_W'($countones(wl & cells[c]));
  end

  initial begin
    for (int c = 0; c < COLS; c++) cells[c] = '0;
  end
endmodule
