// scatter_unit: collects finished PE results for the accumulation unit.
//
// Every PE that has finished holds its partial-sum vector and output index
// (res_valid). Each cycle a round-robin arbiter takes one of them (res_ack to
// that PE) and passes it on as out_valid / out_tag / out_psum to the
// accumulation unit, which accepts one per cycle. The round-robin pointer
// moves past the PE just served. The scatter step follows the paper; the
// arbiter is this design's choice.
module scatter_unit
  import vcim_pkg::*;
#(
  parameter int NUM_PE = 64,
  parameter int OCH    = 16,
  parameter int ACC_W  = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NUM_PE-1:0]       res_valid,
  input  logic signed [ACC_W-1:0] res_psum [NUM_PE][OCH],
  input  logic [ID_W-1:0]         res_tag  [NUM_PE],
  output logic [NUM_PE-1:0]       res_ack,
  output logic                    out_valid,
  output logic [ID_W-1:0]         out_tag,
  output logic signed [ACC_W-1:0] out_psum [OCH]
);
  localparam int PW = $clog2(NUM_PE);
  logic [PW-1:0] rr;     // first PE to consider
  logic [PW-1:0] sel;
  logic          any;

  always_comb begin
    int p;
    any = 1'b0;
    sel = '0;
    for (int i = NUM_PE - 1; i >= 0; i--) begin
      p = (int'(rr) + i) % NUM_PE;
      if (res_valid[p]) begin
        any = 1'b1;
        sel = PW'(p);
      end
    end
  end

  always_comb begin
    res_ack = '0;
    if (any) res_ack[sel] = 1'b1;
  end

  assign out_valid = any;
  assign out_tag   = res_tag[sel];
  always_comb begin
    for (int o = 0; o < OCH; o++) out_psum[o] = res_psum[sel][o];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else if (any) rr <= PW'(sel + 1'b1);
  end
endmodule
