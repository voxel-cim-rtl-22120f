// tb_conv2d_pair_gen: for several map sizes, the generated pairs must be
// exactly the pairs of a 3x3 stride-1 zero-padded convolution, each once, in
// input-pixel-major order, under random back-pressure.
module tb_conv2d_pair_gen;
  import vcim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, pair_valid, pair_ready;
  logic [10:0] width, height;
  pair_t pair;
  conv2d_pair_gen dut (.*);
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int sizes [4][2] = '{'{1, 1}, '{3, 2}, '{5, 4}, '{7, 6}};
    start = 0; width = '0; height = '0; pair_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (sizes[s]) begin
      automatic int W = sizes[s][0], H = sizes[s][1], n = 0, expn = 0, last_in = -1;
      bit seen [int];
      seen.delete();
      for (int py = 0; py < H; py++) for (int px = 0; px < W; px++)
        for (int k = 0; k < 9; k++) begin
          automatic int ox = px - (k % 3) + 1, oy = py - (k / 3) + 1;
          if (ox >= 0 && ox < W && oy >= 0 && oy < H) expn++;
        end
      @(negedge clk); width = 11'(W); height = 11'(H); start = 1;
      @(negedge clk); start = 0;
      while (!done) begin
        pair_ready = ($urandom % 3) != 0;
        #1;
        if (pair_valid && pair_ready) begin
          automatic int pi = int'(pair.in_id), po = int'(pair.out_id), k = int'(pair.widx);
          automatic int key = (pi * 9 + k);
          checks++;
          if (k > 8 || (po % W) != (pi % W) - (k % 3) + 1 || (po / W) != (pi / W) - (k / 3) + 1 ||
              seen.exists(key) || pi < last_in) begin
            failures++; if (failures < 5) $display("bad pair in=%0d out=%0d k=%0d", pi, po, k);
          end
          seen[key] = 1; last_in = pi; n++;
        end
        @(negedge clk);
      end
      checks++; if (n != expn) begin failures++; $display("%0dx%0d: %0d pairs, expected %0d", W, H, n, expn); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
