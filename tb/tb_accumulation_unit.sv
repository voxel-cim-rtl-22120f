// tb_accumulation_unit: clears the buffer, then adds random partial sums to
// random rows (often the same row on consecutive cycles) and compares every
// row with a model; checks the clear sweep takes DEPTH cycles.
module tb_accumulation_unit;
  localparam int D = 32, OCH = 4, ACC = 32, AW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clear_start, clear_busy, in_valid;
  logic [AW-1:0] in_addr, rd_addr;
  logic signed [ACC-1:0] in_psum [OCH];
  logic signed [ACC-1:0] rd_vec [OCH];
  int model [D][OCH];
  accumulation_unit #(.DEPTH(D), .OCH(OCH), .ACC_W(ACC)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    clear_start = 0; in_valid = 0; in_addr = '0; rd_addr = '0;
    for (int o = 0; o < OCH; o++) in_psum[o] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      int cyc;
      @(negedge clk); clear_start = 1;
      @(negedge clk); clear_start = 0;
      cyc = 0;
      while (clear_busy) begin @(negedge clk); cyc++; end
      checks++; if (cyc != D) begin failures++; $display("clear took %0d", cyc); end
      for (int a = 0; a < D; a++) for (int o = 0; o < OCH; o++) model[a][o] = 0;
      for (int n = 0; n < 500; n++) begin
        in_valid = 1;
        if ($urandom % 2) in_addr = AW'($urandom % D);
        for (int o = 0; o < OCH; o++) begin
          in_psum[o] = $signed($urandom % 2001) - 1000;
          model[in_addr][o] += in_psum[o];
        end
        @(negedge clk);
      end
      in_valid = 0;
      for (int a = 0; a < D; a++) begin
        rd_addr = AW'(a); #1;
        for (int o = 0; o < OCH; o++) begin checks++; if (rd_vec[o] != model[a][o]) failures++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
