// tb_feature_buffer: writes random feature vectors and reads them back.
module tb_feature_buffer;
  localparam int D = 64, C1 = 4, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en; logic [AW-1:0] wr_addr, rd_addr;
  logic [7:0] wr_vec [C1];
  logic [7:0] rd_vec [C1];
  logic [7:0] model [D][C1];
  feature_buffer #(.DEPTH(D), .C1(C1)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wr_en = 0; wr_addr = '0; rd_addr = '0;
    for (int c = 0; c < C1; c++) wr_vec[c] = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(a);
      for (int c = 0; c < C1; c++) begin wr_vec[c] = 8'($urandom); model[a][c] = wr_vec[c]; end
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      automatic int a = $urandom % D;
      rd_addr = AW'(a); #1;
      for (int c = 0; c < C1; c++) begin checks++; if (rd_vec[c] != model[a][c]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
