// tb_gather_unit: checks that a pair starts the lowest free PE among the W2B
// copies of its kernel position (Fig. 6c copy factors), stalls when all
// copies are busy, uses only the first copy with W2B off, uses the Conv2D
// table in mode 1, and forwards the feature address, feature vector and tag.
module tb_gather_unit;
  import vcim_pkg::*;
  localparam int NP = 64, ROWS = 32, C1 = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic mode, w2b_en, pair_valid, pair_ready;
  pair_t pair;
  logic [12:0] feat_addr;
  logic [7:0] feat_vec [C1];
  logic [NP-1:0] pe_busy, pe_start;
  logic [7:0] in_vec [ROWS];
  logic [ID_W-1:0] tag;
  logic [31:0] cnt_issue, cnt_stall;
  int cp3 [27] = '{1,1,1,1,1,1,1,1,1,2,4,4,4,16,4,4,4,2,1,1,1,1,1,1,1,1,1};
  gather_unit #(.NUM_PE(NP), .ROWS(ROWS), .C1(C1), .FEAT_AW(13)) dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int base3(int w);
    int s = 0;
    for (int v = 0; v < w; v++) s += cp3[v];
    return s;
  endfunction
  initial begin
    mode = 0; w2b_en = 1; pair_valid = 0; pair = '0; pe_busy = '0;
    for (int c = 0; c < C1; c++) feat_vec[c] = 8'(c + 1);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      automatic int w, nfree, first;
      @(negedge clk);
      mode   = (n >= 300);
      w2b_en = !(n >= 200 && n < 300);
      w = mode ? ($urandom % 9) : ($urandom % 27);
      pair = '{in_id: ID_W'($urandom % 8192), out_id: ID_W'($urandom), widx: WIDX_W'(w)};
      pair_valid = 1;
      pe_busy = {$urandom, $urandom};
      if ($urandom % 4 == 0) pe_busy = '1;
      #1;
      first = -1;
      begin
        automatic int b = mode ? 7 * w : base3(w);
        automatic int c = mode ? 7 : cp3[w];
        if (!w2b_en) c = 1;
        for (int i = 0; i < c; i++) if (!pe_busy[b + i] && first < 0) first = b + i;
      end
      checks++;
      if ((first >= 0) != pair_ready) begin failures++; $display("ready %0b expected %0b (w=%0d)", pair_ready, first >= 0, w); end
      checks++;
      if (first >= 0 ? (pe_start != (NP'(1) << first)) : (pe_start != '0)) begin failures++; $display("pe_start %0h first %0d", pe_start, first); end
      checks++;
      if (feat_addr != pair.in_id[12:0] || tag != pair.out_id || in_vec[3] != 8'd4 || in_vec[C1] != 8'd0) failures++;
    end
    @(negedge clk); pair_valid = 0;
    @(negedge clk);
    checks++; if (cnt_issue + cnt_stall != 400 || cnt_stall == 0) begin failures++; $display("issue %0d stall %0d", cnt_issue, cnt_stall); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
