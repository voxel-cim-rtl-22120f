// tb_activation_unit: random accumulator values (negative, small, large)
// through ReLU, shift and saturation, compared with a model, one cycle after
// the read.
module tb_activation_unit;
  localparam int OCH = 4, ACC = 32, AW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rd_en, rd_valid; logic [AW-1:0] rd_addr, acc_addr; logic [4:0] shift;
  logic signed [ACC-1:0] acc_vec [OCH];
  logic [7:0] rd_vec [OCH];
  logic signed [ACC-1:0] mem [16][OCH];
  activation_unit #(.OCH(OCH), .ACC_W(ACC), .AW(AW)) dut (.*);
  always_comb for (int o = 0; o < OCH; o++) acc_vec[o] = mem[acc_addr][o];
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    rd_en = 0; rd_addr = '0; shift = '0;
    for (int a = 0; a < 16; a++) for (int o = 0; o < OCH; o++)
      mem[a][o] = (a % 3 == 0) ? -($urandom % 5000) : ($urandom % 70000);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic int a = $urandom % 16;
      automatic int e [OCH];
      @(negedge clk);
      rd_en = 1; rd_addr = AW'(a); shift = 5'($urandom % 10);
      for (int o = 0; o < OCH; o++) begin
        e[o] = (mem[a][o] <= 0) ? 0 : (int'(mem[a][o]) >>> shift);
        if (e[o] > 255) e[o] = 255;
      end
      @(negedge clk); rd_en = 0;
      checks++; if (!rd_valid) failures++;
      for (int o = 0; o < OCH; o++) begin checks++; if (int'(rd_vec[o]) != e[o]) begin failures++; if (failures < 5) $display("%0d vs %0d", rd_vec[o], e[o]); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
