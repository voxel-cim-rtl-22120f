// tb_map_search_core: end-to-end check of the map search core.
//
// A random voxel set in a small 12 x 16 x 4 space, cut into a 2 x 2 block
// grid, is laid out in memory block by block with x+ halo copies and a
// depth-encoding table, exactly as the core expects. Two cores search it: one
// with 16-entry FIFOs and one with 4-entry FIFOs, which forces multi-pass
// searches. Every pair they emit must join two existing voxels whose offset
// matches the weight index, no (output, weight) may appear twice, and the
// number of pairs must equal the brute-force count over all 27 offsets, which
// together prove the pair sets equal. The testbench also requires that
// cross-block (backup FIFO) loads and multi-pass searches both happened, and
// that the small-FIFO core read memory more often. The consumer side applies
// random back-pressure.
module tb_map_search_core;
  import vcim_pkg::*;
  localparam int SX = 12, SY = 16, SZ = 4, GX = 2, GY = 2;
  localparam int BW = SX / GX, BH = SY / GY;
  localparam int NB = GX * GY;
  localparam int TAW = $clog2(NB * (SZ + 1));
  localparam int MEMW = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int occ [SX][SY][SZ];        // fid + 1, 0 = empty
  voxel_t mem [MEMW];
  logic [ID_W-1:0] tbl [NB * (SZ + 1)];
  int nvox = 0, nmem = 0, expected = 0;
  int fx [MEMW], fy [MEMW], fz [MEMW];

  logic start;
  logic tbl_wr_en;
  logic [TAW-1:0] tbl_wr_addr;
  logic [ID_W-1:0] tbl_wr_data;

  // two cores: 0 = 16-entry FIFOs, 1 = 4-entry FIFOs
  logic busy [2], done [2], mreq [2], pvalid [2], pready [2];
  logic [ID_W-1:0] maddr [2];
  voxel_t mrdata [2];
  pair_t pout [2];
  logic [31:0] c_reads [2], c_outs [2], c_pairs [2], c_mp [2], c_bk [2], c_bko [2];

  map_search_core #(.SPACE_X(SX), .SPACE_Y(SY), .SPACE_Z(SZ), .GRID_X(GX), .GRID_Y(GY),
                    .FIFO_DEPTH(16)) dut0 (
    .clk, .rst_n, .start, .busy(busy[0]), .done(done[0]), .tbl_wr_en, .tbl_wr_addr, .tbl_wr_data,
    .mem_req(mreq[0]), .mem_addr(maddr[0]), .mem_rdata(mrdata[0]), .pair_valid(pvalid[0]),
    .pair_ready(pready[0]), .pair_out(pout[0]), .cnt_reads(c_reads[0]), .cnt_outputs(c_outs[0]),
    .cnt_pairs(c_pairs[0]), .cnt_multipass(c_mp[0]), .cnt_backup(c_bk[0]), .cnt_backup_ovf(c_bko[0]));
  map_search_core #(.SPACE_X(SX), .SPACE_Y(SY), .SPACE_Z(SZ), .GRID_X(GX), .GRID_Y(GY),
                    .FIFO_DEPTH(4), .BACKUP_DEPTH(16), .MIB_DEPTH(16)) dut1 (
    .clk, .rst_n, .start, .busy(busy[1]), .done(done[1]), .tbl_wr_en, .tbl_wr_addr, .tbl_wr_data,
    .mem_req(mreq[1]), .mem_addr(maddr[1]), .mem_rdata(mrdata[1]), .pair_valid(pvalid[1]),
    .pair_ready(pready[1]), .pair_out(pout[1]), .cnt_reads(c_reads[1]), .cnt_outputs(c_outs[1]),
    .cnt_pairs(c_pairs[1]), .cnt_multipass(c_mp[1]), .cnt_backup(c_bk[1]), .cnt_backup_ovf(c_bko[1]));

  // off-chip memory model: one-cycle read latency
  always_ff @(posedge clk) begin
    for (int d = 0; d < 2; d++) if (mreq[d]) mrdata[d] <= mem[maddr[d]];
  end

  // pair checker
  bit seen [2][MEMW * 27];
  int got [2];
  always_ff @(posedge clk) begin
    for (int d = 0; d < 2; d++) begin
      pready[d] <= ($urandom % 4) != 0;
      if (rst_n && pvalid[d] && pready[d]) begin
        automatic int pi = int'(pout[d].in_id), qi = int'(pout[d].out_id), w = int'(pout[d].widx);
        automatic bit ok;
        ok = (pi < nvox) && (qi < nvox) && (w < 27) &&
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
    #(2_000_000 * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; tbl_wr_en = 0; tbl_wr_addr = '0; tbl_wr_data = '0;
    got[0] = 0; got[1] = 0;
    for (int i = 0; i < MEMW; i++) mem[i] = '0;
    // random voxels, fid in (z, y, x) order; a dense patch makes rows overflow small FIFOs
    for (int z = 0; z < SZ; z++)
      for (int y = 0; y < SY; y++)
        for (int x = 0; x < SX; x++) begin
          occ[x][y][z] = 0;
          if (($urandom % 100) < ((y >= 4 && y < 8) ? 70 : 25)) begin
            occ[x][y][z] = nvox + 1;
            fx[nvox] = x; fy[nvox] = y; fz[nvox] = z;
            nvox++;
          end
        end
    // memory layout: block by block, depth by depth, rows, x with halo column
    for (int i = 0; i < GX; i++)
      for (int j = 0; j < GY; j++) begin
        automatic int b = i * GY + j;
        for (int z = 0; z < SZ; z++) begin
          tbl[b * (SZ + 1) + z] = ID_W'(nmem);
          for (int y = j * BH; y < (j + 1) * BH; y++)
            for (int x = i * BW; x <= (i + 1) * BW && x < SX; x++)
              if (occ[x][y][z] != 0) begin
                mem[nmem].fid  = ID_W'(occ[x][y][z] - 1);
                mem[nmem].halo = (x == (i + 1) * BW);
                mem[nmem].c    = '{z: Z_W'(z), y: Y_W'(y), x: X_W'(x)};
                nmem++;
              end
        end
        tbl[b * (SZ + 1) + SZ] = ID_W'(nmem);
      end
    // brute-force pair count over all 27 offsets
    for (int q = 0; q < nvox; q++)
      for (int w = 0; w < 27; w++) begin
        automatic int px = fx[q] + (w % 3) - 1, py = fy[q] + ((w / 3) % 3) - 1, pz = fz[q] + (w / 9) - 1;
        if (px >= 0 && px < SX && py >= 0 && py < SY && pz >= 0 && pz < SZ && occ[px][py][pz] != 0)
          expected++;
      end
    $display("voxels=%0d words=%0d expected pairs=%0d", nvox, nmem, expected);

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < NB * (SZ + 1); e++) begin
      @(negedge clk);
      tbl_wr_en = 1; tbl_wr_addr = TAW'(e); tbl_wr_data = tbl[e];
    end
    @(negedge clk); tbl_wr_en = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    fork
      wait (done[0] === 1'b1);
      wait (done[1] === 1'b1);
    join
    wait (!pvalid[0] && !pvalid[1]);
    repeat (5) @(posedge clk);
    for (int d = 0; d < 2; d++) begin
      $display("core %0d: outputs=%0d pairs=%0d reads=%0d (%0.2f per voxel word) multipass=%0d backup=%0d ovf=%0d",
               d, c_outs[d], got[d], c_reads[d], real'(c_reads[d]) / real'(nmem), c_mp[d], c_bk[d], c_bko[d]);
      checks++; if (got[d] != expected) begin failures++; $display("core %0d: %0d pairs, expected %0d", d, got[d], expected); end
      checks++; if (c_outs[d] != nvox) begin failures++; $display("core %0d: %0d outputs, expected %0d", d, c_outs[d], nvox); end
      checks++; if (c_bk[d] == 0) begin failures++; $display("core %0d: no cross-block load happened", d); end
      checks++; if (c_bko[d] != 0) begin failures++; $display("core %0d: backup FIFO overflowed", d); end
    end
    checks++; if (c_mp[1] == 0) begin failures++; $display("small-FIFO core never searched in several passes"); end
    checks++; if (c_reads[1] <= c_reads[0]) begin failures++; $display("multi-pass did not cost extra reads"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
