// tb_scatter_unit: PEs finish at random; every result must be delivered once,
// with its own tag and partial sums, one per cycle, and no PE may wait longer
// than NUM_PE cycles (round-robin fairness).
module tb_scatter_unit;
  import vcim_pkg::*;
  localparam int NP = 8, OCH = 2, ACC = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, delivered = 0, produced = 0;
  logic [NP-1:0] res_valid, res_ack;
  logic signed [ACC-1:0] res_psum [NP][OCH];
  logic [ID_W-1:0] res_tag [NP];
  logic out_valid; logic [ID_W-1:0] out_tag; logic signed [ACC-1:0] out_psum [OCH];
  int wait_c [NP];
  scatter_unit #(.NUM_PE(NP), .OCH(OCH), .ACC_W(ACC)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NP; p++) begin
        if (res_valid[p] && res_ack[p]) begin
          res_valid[p] <= 1'b0;
          wait_c[p] <= 0;
        end else if (res_valid[p]) begin
          wait_c[p] <= wait_c[p] + 1;
          if (wait_c[p] > NP) begin failures++; $display("PE %0d starved", p); end
        end else if ($urandom % 3 == 0 && produced < 2000) begin
          res_valid[p] <= 1'b1;
          res_tag[p] <= ID_W'(produced * 16 + p);
          res_psum[p][0] <= produced; res_psum[p][1] <= -produced;
          produced++;
        end
      end
      if (out_valid) begin
        checks++;
        if ($countones(res_ack) != 1 || out_tag != res_tag[int'(out_tag) % 16] ||
            out_psum[0] != res_psum[int'(out_tag) % 16][0] || out_psum[1] != -out_psum[0]) failures++;
        delivered++;
      end
    end
  end
  initial begin
    res_valid = '0;
    for (int p = 0; p < NP; p++) begin wait_c[p] = 0; res_tag[p] = '0; res_psum[p][0] = 0; res_psum[p][1] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    wait (produced == 2000);
    wait (res_valid == '0);
    repeat (2) @(posedge clk);
    checks++; if (delivered != produced) begin failures++; $display("%0d of %0d delivered", delivered, produced); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
