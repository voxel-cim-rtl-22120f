// tb_cim_unit: a small unit of 4 PEs with different weights; starts PEs on
// consecutive cycles with different inputs and checks that each PE returns
// its own dot products and tag, and that weight writes reach only their PE.
module tb_cim_unit;
  import vcim_pkg::*;
  localparam int NP = 4, ROWS = 16, COLS = 16, WB = 8, IB = 8, ACC = 32, OCH = COLS / WB;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en; logic [1:0] wr_pe; logic [3:0] wr_row; logic [COLS-1:0] wr_bits;
  logic [NP-1:0] start, busy, res_valid, res_ack;
  logic [IB-1:0] in_vec [ROWS];
  logic [ID_W-1:0] tag;
  logic signed [ACC-1:0] res_psum [NP][OCH];
  logic [ID_W-1:0] res_tag [NP];
  int w [NP][ROWS][OCH];
  int x [NP][ROWS];
  cim_unit #(.NUM_PE(NP), .ROWS(ROWS), .COLS(COLS), .WBITS(WB), .IBITS(IB), .ACC_W(ACC)) dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wr_en = 0; wr_pe = '0; wr_row = '0; wr_bits = '0; start = '0; res_ack = '0; tag = '0;
    for (int r = 0; r < ROWS; r++) in_vec[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk); wr_en = 1; wr_pe = 2'(p); wr_row = 4'(r);
        for (int o = 0; o < OCH; o++) begin
          automatic logic [7:0] wv = 8'($urandom);
          w[p][r][o] = int'($signed(wv));
          for (int b = 0; b < WB; b++) wr_bits[o * WB + b] = wv[b];
        end
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 20; n++) begin
      for (int p = 0; p < NP; p++) begin
        for (int r = 0; r < ROWS; r++) begin x[p][r] = $urandom % 256; in_vec[r] = IB'(x[p][r]); end
        start = '0; start[p] = 1'b1; tag = ID_W'(n * 10 + p);
        @(negedge clk);
      end
      start = '0;
      while (res_valid != '1) @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        for (int o = 0; o < OCH; o++) begin
          automatic int e = 0;
          for (int r = 0; r < ROWS; r++) e += x[p][r] * w[p][r][o];
          checks++; if (res_psum[p][o] != e) begin failures++; if (failures < 5) $display("p%0d o%0d %0d vs %0d", p, o, res_psum[p][o], e); end
        end
        checks++; if (res_tag[p] != ID_W'(n * 10 + p)) failures++;
      end
      res_ack = '1; @(negedge clk); res_ack = '0;
      checks++; if (busy != '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
