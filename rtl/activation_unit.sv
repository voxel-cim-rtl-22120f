// activation_unit: turns accumulated outputs into 8-bit activations.
//
// On rd_en it reads an output row of the accumulation unit (acc_addr /
// acc_vec, asynchronous), applies ReLU, an arithmetic right shift by `shift`
// (requantisation) and saturation to 0..255, and presents the result on
// rd_vec with rd_valid one cycle later. The paper only names an activation
// unit; ReLU with shift-and-saturate requantisation is this design's choice.
module activation_unit #(
  parameter int OCH   = 16,
  parameter int ACC_W = 32,
  parameter int AW    = 13
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  input  logic [4:0]              shift,
  output logic [AW-1:0]           acc_addr,
  input  logic signed [ACC_W-1:0] acc_vec [OCH],
  output logic                    rd_valid,
  output logic [7:0]              rd_vec [OCH]
);
  assign acc_addr = rd_addr;

  logic [7:0] act [OCH];

  always_comb begin
    for (int o = 0; o < OCH; o++) begin
      if (acc_vec[o] <= 0)                   act[o] = 8'd0;
      else if ((acc_vec[o] >>> shift) > 255) act[o] = 8'd255;
      else                                   act[o] = 8'(acc_vec[o] >>> shift);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      for (int o = 0; o < OCH; o++) rd_vec[o] <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) begin
        for (int o = 0; o < OCH; o++) rd_vec[o] <= act[o];
      end
    end
  end
endmodule
