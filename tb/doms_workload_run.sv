// doms_workload_run: one map-search workload run, used by tb_doms_workload.
//
// NVOX voxels are placed uniformly at random in an SX x SY x SZ space. Two
// map search cores with 16-entry FIFOs search the same voxel set: one with a
// single block (plain DOMS) and one with the 2 x 8 block grid (block-DOMS,
// with its own memory layout, halo copies and 16 depth tables). Each pair a
// core emits must join two existing voxels at the offset of its weight index,
// no (output, weight) may repeat, and the number of pairs must equal a
// brute-force count over all 27 offsets. The run prints the off-chip reads
// per stored voxel word, the measure the evaluation compares (one read per
// word is the O(N) ideal, two the O(2N) case), and the cycles per output.
// finished goes high when both cores are done; checks and failures count
// the comparisons.
module doms_workload_run
  import vcim_pkg::*;
#(
  parameter int SX = 352,
  parameter int SY = 400,
  parameter int SZ = 10,
  parameter int NVOX = 7040,
  parameter string NAME = "352x400x10"
) (
  output bit finished,
  output int checks,
  output int failures
);
  localparam int MEMW = NVOX + NVOX / 4 + 64;
  localparam int GXS [2] = '{1, 2};
  localparam int GYS [2] = '{1, 8};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  bit occb [SX][SY][SZ];
  int fidm [int];
  int fx [NVOX], fy [NVOX], fz [NVOX];
  voxel_t mem [2][MEMW];
  logic [ID_W-1:0] tbl [2][16 * (SZ + 1)];
  int nmem [2], ntbl [2];
  int expected = 0;

  logic start;
  logic tbl_wr_en [2];
  logic [15:0] tbl_wr_addr [2];
  logic [ID_W-1:0] tbl_wr_data [2];
  logic busy [2], done [2], mreq [2], pvalid [2], pready [2];
  logic [ID_W-1:0] maddr [2];
  voxel_t mrdata [2];
  pair_t pout [2];
  logic [31:0] c_reads [2], c_outs [2], c_pairs [2], c_mp [2], c_bk [2], c_bko [2];
  int cyc [2];

  map_search_core #(.SPACE_X(SX), .SPACE_Y(SY), .SPACE_Z(SZ), .GRID_X(1), .GRID_Y(1)) dut0 (
    .clk, .rst_n, .start, .busy(busy[0]), .done(done[0]), .tbl_wr_en(tbl_wr_en[0]),
    .tbl_wr_addr(tbl_wr_addr[0][$clog2(SZ + 1) - 1:0]), .tbl_wr_data(tbl_wr_data[0]),
    .mem_req(mreq[0]), .mem_addr(maddr[0]), .mem_rdata(mrdata[0]), .pair_valid(pvalid[0]),
    .pair_ready(pready[0]), .pair_out(pout[0]), .cnt_reads(c_reads[0]), .cnt_outputs(c_outs[0]),
    .cnt_pairs(c_pairs[0]), .cnt_multipass(c_mp[0]), .cnt_backup(c_bk[0]), .cnt_backup_ovf(c_bko[0]));
  map_search_core #(.SPACE_X(SX), .SPACE_Y(SY), .SPACE_Z(SZ), .GRID_X(2), .GRID_Y(8)) dut1 (
    .clk, .rst_n, .start, .busy(busy[1]), .done(done[1]), .tbl_wr_en(tbl_wr_en[1]),
    .tbl_wr_addr(tbl_wr_addr[1][$clog2(16 * (SZ + 1)) - 1:0]), .tbl_wr_data(tbl_wr_data[1]),
    .mem_req(mreq[1]), .mem_addr(maddr[1]), .mem_rdata(mrdata[1]), .pair_valid(pvalid[1]),
    .pair_ready(pready[1]), .pair_out(pout[1]), .cnt_reads(c_reads[1]), .cnt_outputs(c_outs[1]),
    .cnt_pairs(c_pairs[1]), .cnt_multipass(c_mp[1]), .cnt_backup(c_bk[1]), .cnt_backup_ovf(c_bko[1]));

  always_ff @(posedge clk) begin
    for (int d = 0; d < 2; d++) if (mreq[d] && int'(maddr[d]) < MEMW) mrdata[d] <= mem[d][maddr[d]];
  end

  bit seen [2][NVOX * 27];
  int got [2];
  always_ff @(posedge clk) begin
    for (int d = 0; d < 2; d++) begin
      pready[d] <= 1'b1;
      if (rst_n && pvalid[d] && pready[d]) begin
        automatic int pi = int'(pout[d].in_id), qi = int'(pout[d].out_id), w = int'(pout[d].widx);
        automatic bit ok;
        ok = (pi < NVOX) && (qi < NVOX) && (w < 27) &&
             (fx[pi] - fx[qi] == (w % 3) - 1) && (fy[pi] - fy[qi] == ((w / 3) % 3) - 1) &&
             (fz[pi] - fz[qi] == (w / 9) - 1);
        checks++;
        if (!ok) begin
          failures++;
          if (failures < 10) $display("core %0d: bad pair in=%0d out=%0d w=%0d", d, pi, qi, w);
        end else if (seen[d][qi * 27 + w]) begin
          failures++;
          if (failures < 10) $display("core %0d: duplicate pair out=%0d w=%0d", d, qi, w);
        end else seen[d][qi * 27 + w] = 1'b1;
        got[d]++;
      end
    end
  end

  initial begin
    int placed;
    finished = 0; checks = 0; failures = 0;
    start = 0; got[0] = 0; got[1] = 0;
    for (int d = 0; d < 2; d++) begin
      tbl_wr_en[d] = 0; tbl_wr_addr[d] = '0; tbl_wr_data[d] = '0; nmem[d] = 0;
      for (int i = 0; i < MEMW; i++) mem[d][i] = '0;
    end
    placed = 0;
    while (placed < NVOX) begin
      automatic int x = $urandom % SX, y = $urandom % SY, z = $urandom % SZ;
      if (!occb[x][y][z]) begin occb[x][y][z] = 1'b1; placed++; end
    end
    // feature index in (z, y, x) order
    placed = 0;
    for (int z = 0; z < SZ; z++) for (int y = 0; y < SY; y++) for (int x = 0; x < SX; x++)
      if (occb[x][y][z]) begin
        fidm[(z * SY + y) * SX + x] = placed; fx[placed] = x; fy[placed] = y; fz[placed] = z; placed++;
      end
    // memory layouts, one per block grid
    for (int d = 0; d < 2; d++) begin
      automatic int gx = GXS[d], gy = GYS[d], bw = SX / gx, bh = SY / gy;
      ntbl[d] = gx * gy * (SZ + 1);
      for (int i = 0; i < gx; i++) for (int j = 0; j < gy; j++) begin
        automatic int b = i * gy + j;
        for (int z = 0; z < SZ; z++) begin
          tbl[d][b * (SZ + 1) + z] = ID_W'(nmem[d]);
          for (int y = j * bh; y < (j + 1) * bh; y++)
            for (int x = i * bw; x <= (i + 1) * bw && x < SX; x++)
              if (occb[x][y][z]) begin
                mem[d][nmem[d]].fid  = ID_W'(fidm[(z * SY + y) * SX + x]);
                mem[d][nmem[d]].halo = (x == (i + 1) * bw);
                mem[d][nmem[d]].c    = '{z: Z_W'(z), y: Y_W'(y), x: X_W'(x)};
                nmem[d]++;
              end
        end
        tbl[d][b * (SZ + 1) + SZ] = ID_W'(nmem[d]);
      end
    end
    for (int q = 0; q < NVOX; q++)
      for (int w = 0; w < 27; w++) begin
        automatic int px = fx[q] + (w % 3) - 1, py = fy[q] + ((w / 3) % 3) - 1, pz = fz[q] + (w / 9) - 1;
        if (px >= 0 && px < SX && py >= 0 && py < SY && pz >= 0 && pz < SZ && occb[px][py][pz])
          expected++;
      end
    $display("%s: voxels=%0d words: DOMS %0d, block-DOMS(2,8) %0d (%0.2f%% halo copies); expected pairs=%0d",
             NAME, NVOX, nmem[0], nmem[1], 100.0 * real'(nmem[1] - NVOX) / real'(NVOX), expected);

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < ntbl[1]; e++) begin
      @(negedge clk);
      for (int d = 0; d < 2; d++) begin
        tbl_wr_en[d] = (e < ntbl[d]); tbl_wr_addr[d] = 16'(e); tbl_wr_data[d] = tbl[d][e];
      end
    end
    @(negedge clk); tbl_wr_en[0] = 0; tbl_wr_en[1] = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc[0] = 0; cyc[1] = 0;
    fork
      begin while (done[0] !== 1'b1) begin @(posedge clk); cyc[0]++; end end
      begin while (done[1] !== 1'b1) begin @(posedge clk); cyc[1]++; end end
    join
    wait (!pvalid[0] && !pvalid[1]);
    repeat (5) @(posedge clk);
    for (int d = 0; d < 2; d++) begin
      $display("%s %s: outputs=%0d pairs=%0d reads=%0d (%0.2f per voxel word) multipass=%0d backup=%0d, %0d cycles (%0.1f per output)",
 NAME, d == 0 ? "DOMS      " : "block-DOMS", c_outs[d], got[d], c_reads[d], real'(c_reads[d]) / real'(nmem[d]),
               c_mp[d], c_bk[d], cyc[d], real'(cyc[d]) / real'(NVOX));
      checks++; if (got[d] != expected) begin failures++; $display("core %0d: %0d pairs, expected %0d", d, got[d], expected); end
      checks++; if (c_outs[d] != NVOX) begin failures++; $display("core %0d: %0d outputs", d, c_outs[d]); end
      checks++; if (c_bko[d] != 0) begin failures++; $display("core %0d: backup FIFO overflowed", d); end
    end
    checks++; if (c_bk[1] == 0) begin failures++; $display("block-DOMS made no cross-block load"); end
    finished = 1;
  end
endmodule
