// tb_cim_pe: programs random signed 8-bit weights into a PE (one bit per
// column), runs random unsigned input vectors and compares every output
// channel with the integer dot product; checks the IBITS-cycle latency and
// that the result holds until acknowledged.
module tb_cim_pe;
  import vcim_pkg::*;
  localparam int ROWS = 32, COLS = 32, WB = 8, IB = 8, ACC = 32, OCH = COLS / WB;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en, start, busy, res_valid, res_ack;
  logic [$clog2(ROWS)-1:0] wr_row;
  logic [COLS-1:0] wr_bits;
  logic [IB-1:0] in_vec [ROWS];
  logic [ID_W-1:0] tag, res_tag;
  logic signed [ACC-1:0] psum [OCH];
  int w [ROWS][OCH];
  cim_pe #(.ROWS(ROWS), .COLS(COLS), .WBITS(WB), .IBITS(IB), .ACC_W(ACC)) dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    wr_en = 0; start = 0; res_ack = 0; wr_row = '0; wr_bits = '0; tag = '0;
    for (int r = 0; r < ROWS; r++) in_vec[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = $bits(wr_row)'(r);
      for (int o = 0; o < OCH; o++) begin
        automatic logic [7:0] wv = 8'($urandom);
        if (r == 0 && o == 0) wv = 8'h80;         // most negative weight
        if (r == 1 && o == 0) wv = 8'h7f;
        w[r][o] = int'($signed(wv));
        for (int b = 0; b < WB; b++) wr_bits[o * WB + b] = wv[b];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 100; n++) begin
      int expv [OCH];
      int lat;
      for (int r = 0; r < ROWS; r++) in_vec[r] = (n == 0) ? 8'hff : IB'($urandom);
      for (int o = 0; o < OCH; o++) begin
        expv[o] = 0;
        for (int r = 0; r < ROWS; r++) expv[o] += int'(in_vec[r]) * w[r][o];
      end
      tag = ID_W'(n); start = 1;
      @(negedge clk); start = 0;
      for (int r = 0; r < ROWS; r++) in_vec[r] = '1;   // inputs are latched
      lat = 0;
      while (!res_valid) begin @(negedge clk); lat++; end
      checks++; if (lat != IB) begin failures++; $display("latency %0d", lat); end
      repeat (2) @(negedge clk);
      checks++; if (!res_valid || !busy) failures++;
      for (int o = 0; o < OCH; o++) begin
        checks++;
        if (psum[o] != expv[o]) begin failures++; if (failures < 5) $display("o=%0d %0d vs %0d", o, psum[o], expv[o]); end
      end
      checks++; if (res_tag != ID_W'(n)) failures++;
      res_ack = 1; @(negedge clk); res_ack = 0;
      checks++; if (res_valid || busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
