// accumulation_unit: output feature buffer with partial-sum accumulation.
//
// Holds DEPTH output feature vectors of OCH signed ACC_W-bit accumulators. A
// partial-sum vector arriving with an output index is added to that row in one
// read-modify-write cycle, so results for the same output may arrive on
// consecutive cycles. clear_start sweeps all rows to zero, one per cycle
// (clear_busy high meanwhile; accumulation must wait). rd_addr/rd_vec is an
// asynchronous read port for the activation unit. Accumulating scattered
// partial sums follows the paper; DEPTH = 8192 and ACC_W = 32 are this
// design's choices.
module accumulation_unit #(
  parameter int DEPTH = 8192,
  parameter int OCH   = 16,
  parameter int ACC_W = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear_start,
  output logic                    clear_busy,
  input  logic                    in_valid,
  input  logic [AW-1:0]           in_addr,
  input  logic signed [ACC_W-1:0] in_psum [OCH],
  input  logic [AW-1:0]           rd_addr,
  output logic signed [ACC_W-1:0] rd_vec [OCH]
);
  logic [OCH*ACC_W-1:0] mem [DEPTH];
  logic [AW-1:0]        clr_ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clear_busy <= 1'b0;
      clr_ptr    <= '0;
    end else if (clear_start) begin
      clear_busy <= 1'b1;
      clr_ptr    <= '0;
    end else if (clear_busy) begin
      clr_ptr <= clr_ptr + 1'b1;
      if (int'(clr_ptr) == DEPTH - 1) clear_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (clear_busy) mem[clr_ptr] <= '0;
    else if (in_valid) begin
      for (int o = 0; o < OCH; o++)
        mem[in_addr][o*ACC_W +: ACC_W] <= mem[in_addr][o*ACC_W +: ACC_W] + in_psum[o];
    end
  end

  always_comb begin
    for (int o = 0; o < OCH; o++) rd_vec[o] = mem[rd_addr][o*ACC_W +: ACC_W];
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  a_no_acc_in_clear: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !clear_busy);
endmodule
