// cim_pe: one processing element of a CIM tile.
//
// Holds one C1 x C2 weight sub-matrix: row r is input channel r, and output
// channel o uses the WBITS columns o*WBITS .. o*WBITS+WBITS-1, column
// o*WBITS+b holding bit b of the signed weight W[r][o]. A dot product of an
// unsigned IBITS-bit input vector with all OCH = COLS/WBITS weight columns is
// computed bit-serially: in cycle t the word lines carry bit t of every input
// (LSB first), the ADCs count the active cells of each column, and the
// shift-adder adds  sum_b (b == WBITS-1 ? -cnt : cnt) << b  shifted by t into
// the output channel's accumulator (two's-complement weight bit WBITS-1 has
// negative weight).
//
// Timing: start (when !busy) latches in_vec and tag; res_valid rises IBITS
// cycles later with psum[o] = sum_r in_vec[r] * W[r][o] and holds, with
// res_tag, until res_ack. busy is high from start until the result is taken.
// WL driver, ADC and shift-add follow the paper; the PE size, bit-serial input
// order, signed weights and unsigned inputs are this design's choices.
module cim_pe
  import vcim_pkg::*;
#(
  parameter int ROWS  = 128,
  parameter int COLS  = 128,
  parameter int WBITS = 8,
  parameter int IBITS = 8,
  parameter int ACC_W = 32,
  localparam int OCH  = COLS / WBITS,
  localparam int RW   = $clog2(ROWS),
  localparam int ADC_W = $clog2(ROWS + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [RW-1:0]           wr_row,
  input  logic [COLS-1:0]         wr_bits,
  input  logic                    start,
  input  logic [IBITS-1:0]        in_vec [ROWS],
  input  logic [ID_W-1:0]         tag,
  output logic                    busy,
  output logic                    res_valid,
  output logic signed [ACC_W-1:0] psum [OCH],
  output logic [ID_W-1:0]         res_tag,
  input  logic                    res_ack
);
  logic [IBITS-1:0]        in_q [ROWS];
  logic [ROWS-1:0]         wl;
  logic [ADC_W-1:0]        cnt [COLS];
  logic                    running;
  logic [$clog2(IBITS+1)-1:0] t;
  logic signed [ACC_W-1:0] colval [OCH];

  cim_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .wr_en, .wr_row, .wr_bits, .wl, .col_cnt(cnt));

  // word-line driver: bit t of every input
  always_comb begin
    for (int r = 0; r < ROWS; r++) wl[r] = running && in_q[r][t];
  end

  // shift-add across the WBITS columns of each output channel
  always_comb begin
    for (int o = 0; o < OCH; o++) begin
      colval[o] = '0;
      for (int b = 0; b < WBITS; b++) begin
        if (b == WBITS - 1) colval[o] = colval[o] - (ACC_W'(cnt[o * WBITS + b]) <<< b);
        else                colval[o] = colval[o] + (ACC_W'(cnt[o * WBITS + b]) <<< b);
      end
    end
  end

  assign busy = running || res_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running   <= 1'b0;
      res_valid <= 1'b0;
      t         <= '0;
      res_tag   <= '0;
      for (int o = 0; o < OCH; o++) psum[o] <= '0;
      for (int r = 0; r < ROWS; r++) in_q[r] <= '0;
    end else begin
      if (res_valid && res_ack) res_valid <= 1'b0;
      if (start && !busy) begin
        running <= 1'b1;
        t       <= '0;
        in_q    <= in_vec;
        res_tag <= tag;
        for (int o = 0; o < OCH; o++) psum[o] <= '0;
      end else if (running) begin
        for (int o = 0; o < OCH; o++) psum[o] <= psum[o] + (colval[o] <<< t);
        t <= t + 1'b1;
        if (int'(t) == IBITS - 1) begin
          running   <= 1'b0;
          res_valid <= 1'b1;
        end
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
