// tb_mapping_info_buffer: random pushes and pops against a queue model,
// including filling it completely.
module tb_mapping_info_buffer;
  import vcim_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fulls = 0;
  logic push, pop, empty, full;
  pair_t wr_pair, rd_pair;
  logic [$clog2(D+1)-1:0] count;
  pair_t q [$];
  mapping_info_buffer #(.DEPTH(D)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    push = 0; pop = 0; wr_pair = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != q.size() || empty != (q.size() == 0) || full != (q.size() == D) ||
          (q.size() > 0 && rd_pair != q[0])) begin failures++; if (failures < 5) $display("mismatch at %0d", n); end
      if (full) fulls++;
      push = !full && (($urandom % 4) < ((n / 500) % 2 ? 1 : 3));
      pop  = !empty && (($urandom % 4) < ((n / 500) % 2 ? 3 : 1));
      wr_pair = pair_t'({$urandom, $urandom});
      @(posedge clk); #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_pair);
      @(negedge clk); push = 0; pop = 0;
    end
    checks++; if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
