// tb_bitonic_sorter: random entry sets (with duplicates and invalid slots)
// must come out as a sorted permutation of the input one cycle later.
module tb_bitonic_sorter;
  import vcim_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  sort_ent_t in_ent [N];
  sort_ent_t out_ent [N];
  bitonic_sorter #(.N(N)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    in_valid = 0;
    for (int i = 0; i < N; i++) in_ent[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      sort_ent_t r [N];
      longint ki [N];
      longint ko [N];
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        in_ent[i].inv  = ($urandom % 5) == 0;
        in_ent[i].c    = '{z: Z_W'($urandom % 3), y: Y_W'($urandom % 4), x: X_W'($urandom % 4)};
        in_ent[i].cand = $urandom % 2;
        in_ent[i].tag  = ID_W'(i);
      end
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) failures++;
      for (int i = 0; i < N; i++) begin ki[i] = longint'(sort_key(in_ent[i])); ko[i] = longint'(sort_key(out_ent[i])); end
      ki.sort();
      for (int i = 0; i < N; i++) begin
        checks++;
        if (ko[i] != ki[i]) begin failures++; if (failures < 5) $display("pos %0d: %0h vs %0h", i, ko[i], ki[i]); end
        // the tag must travel with its entry
        checks++;
        if (sort_key(in_ent[out_ent[i].tag]) != sort_key(out_ent[i])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
