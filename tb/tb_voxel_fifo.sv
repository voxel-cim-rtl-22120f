// tb_voxel_fifo: random push/pop/flush traffic against a queue model; checks
// head, count, full/empty and the parallel all_ent/all_vld view every cycle.
module tb_voxel_fifo;
  import vcim_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic flush, push, pop, empty, full;
  fifo_ent_t push_ent, head_ent;
  fifo_ent_t all_ent [D];
  logic [D-1:0] all_vld;
  logic [$clog2(D+1)-1:0] count;
  fifo_ent_t q [$];

  voxel_fifo #(.DEPTH(D)) dut (.*);

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    flush = 0; push = 0; pop = 0; push_ent = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // compare state with the model
      checks++;
      if (int'(count) != q.size() || empty != (q.size() == 0) || full != (q.size() == D)) begin
        failures++; $display("count %0d model %0d", count, q.size());
      end
      for (int i = 0; i < D; i++) begin
        checks++;
        if (all_vld[i] != (i < q.size()) || (i < q.size() && all_ent[i] != q[i])) begin
          failures++; if (failures < 5) $display("entry %0d mismatch", i);
        end
      end
      if (q.size() > 0) begin checks++; if (head_ent != q[0]) failures++; end
      flush = ($urandom % 50) == 0;
      push  = !full && ($urandom % 2);
      pop   = !empty && ($urandom % 3 == 0);
      push_ent = {$urandom, $urandom};
      @(posedge clk); #1;
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(push_ent);
      end
      @(negedge clk); flush = 0; push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
