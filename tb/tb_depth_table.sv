// tb_depth_table: writes random start pointers to every entry and reads them
// back in random order through the asynchronous port.
module tb_depth_table;
  import vcim_pkg::*;
  localparam int NB = 4, SZ = 5, E = NB * (SZ + 1), AW = $clog2(E);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en; logic [AW-1:0] wr_addr, rd_addr; logic [ID_W-1:0] wr_data, rd_data;
  logic [ID_W-1:0] model [E];
  depth_table #(.NUM_BLOCKS(NB), .SPACE_Z(SZ)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int e = 0; e < E; e++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(e); wr_data = ID_W'($urandom); model[e] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      automatic int e = $urandom % E;
      rd_addr = AW'(e); #1;
      checks++; if (rd_data != model[e]) begin failures++; $display("entry %0d: %0h vs %0h", e, rd_data, model[e]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
