// tb_concat: the sequence passes with one cycle of delay, and the output
// identity loaded with q_load is held across several sequences.
module tb_concat;
  import vcim_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic q_load, seq_valid, seq_valid_out;
  logic [ID_W-1:0] q_fid, q_fid_out;
  sort_ent_t seq_in [N];
  sort_ent_t seq_out [N];
  concat #(.N(N)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    q_load = 0; seq_valid = 0; q_fid = '0;
    for (int i = 0; i < N; i++) seq_in[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      automatic logic [ID_W-1:0] id = ID_W'($urandom);
      @(negedge clk); q_load = 1; q_fid = id;
      @(negedge clk); q_load = 0; q_fid = ~id;    // later changes of q_fid must not leak
      for (int p = 0; p < 3; p++) begin
        sort_ent_t s [N];
        for (int i = 0; i < N; i++) begin s[i] = {$urandom, $urandom}; seq_in[i] = s[i]; end
        seq_valid = 1;
        @(negedge clk); seq_valid = 0;
        checks++; if (!seq_valid_out || q_fid_out != id) begin failures++; $display("id %0h vs %0h", q_fid_out, id); end
        for (int i = 0; i < N; i++) begin checks++; if (seq_out[i] != s[i]) failures++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
