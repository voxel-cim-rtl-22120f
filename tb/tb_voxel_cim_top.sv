// tb_voxel_cim_top: end-to-end run of the accelerator at its default sizes
// (1408 x 1600 x 41 voxel space, 2 x 8 blocks, two 64-PE CIM units).
//
// Layer 1, Spconv3D subm3 with W2B on: a random voxel cluster straddling the
// corner of four blocks (x = 704, y = 200) is laid out in memory with halo
// copies and depth-encoding tables; random 16-channel features and random
// 3x3x3x16x16 weights (every W2B copy of a kernel position holding the same
// weights) are loaded. Every output voxel's activation must equal the model:
// ReLU(sum over its 27 neighbours P of f_P . W_(P-Q)) >> shift, saturated.
// Layer 2 repeats it with W2B off and must give the same outputs in more
// cycles (the W2B speed-up). Layer 3 switches to Conv2D: an 8 x 6 map through
// a 3x3 kernel on the Conv2D unit, checked the same way. The mechanisms that
// must occur at least once are counted: cross-block backup loads, multi-pass
// searches, gather stalls, and the mode switch.
module tb_voxel_cim_top;
  import vcim_pkg::*;
  localparam int SX = 1408, SY = 1600, SZ = 41, GX = 2, GY = 8, BW = 704, BH = 200;
  localparam int NB = GX * GY, TAW = $clog2(NB * (SZ + 1));
  localparam int C1 = 16, OCH = 16, NPE = 64, MEMW = 4096;
  localparam int X0 = 696, XN = 16, Y0 = 196, YN = 8, ZN = 3;   // cluster
  localparam int CW = 8, CH = 6;                                // Conv2D map
  localparam int SHIFT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // DUT ports
  logic cfg_mode, cfg_w2b_en, cfg_reuse, start, busy, done, map_ovf;
  logic [10:0] cfg_width, cfg_height; logic [4:0] cfg_shift;
  logic tbl_wr_en; logic [TAW-1:0] tbl_wr_addr; logic [ID_W-1:0] tbl_wr_data;
  logic vmem_req; logic [ID_W-1:0] vmem_addr; voxel_t vmem_rdata;
  logic w_wr_en, w_wr_unit; logic [5:0] w_wr_pe; logic [6:0] w_wr_row; logic [127:0] w_wr_bits;
  logic f_wr_en; logic [12:0] f_wr_addr; logic [7:0] f_wr_vec [C1];
  logic o_rd_en, o_rd_valid; logic [12:0] o_rd_addr; logic [7:0] o_rd_vec [OCH];
  logic [31:0] cnt_ms_reads, cnt_ms_outputs, cnt_ms_pairs, cnt_ms_multipass, cnt_ms_backup,
               cnt_ms_backup_ovf, cnt_issue, cnt_stall, cnt_cycles;

  voxel_cim_top dut (.*);

  // off-chip voxel memory, one-cycle latency
  voxel_t vmem [MEMW];
  always_ff @(posedge clk) if (vmem_req) vmem_rdata <= vmem[vmem_addr];

  int occ [XN][YN][ZN];
  int vx [MEMW], vy [MEMW], vz [MEMW];
  int nvox = 0, nmem = 0;
  int feat [MEMW][C1];
  int w3 [27][C1][OCH];
  int w2 [9][C1][OCH];
  int cp3 [27] = '{1,1,1,1,1,1,1,1,1,2,4,4,4,16,4,4,4,2,1,1,1,1,1,1,1,1,1};
  logic [ID_W-1:0] tbl [NB * (SZ + 1)];
  int stalls_seen = 0, modes_seen = 0;

  initial begin
    #(400_000_000);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int act_model(int v);
    if (v <= 0) return 0;
    v = v >>> SHIFT;
    return (v > 255) ? 255 : v;
  endfunction

  task automatic write_weights(bit unit, int pe, int wt [C1][OCH]);
    for (int r = 0; r < C1; r++) begin
      @(negedge clk);
      w_wr_en = 1; w_wr_unit = unit; w_wr_pe = 6'(pe); w_wr_row = 7'(r);
      for (int o = 0; o < OCH; o++) begin
        automatic logic [7:0] b8 = 8'(wt[r][o]);
        for (int b = 0; b < 8; b++) w_wr_bits[o * 8 + b] = b8[b];
      end
    end
    @(negedge clk); w_wr_en = 0;
  endtask

  task automatic run_layer(output int cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
    end
    cycles = int'(cnt_cycles);
  endtask

  task automatic read_out(int addr, output int v [OCH]);
    @(negedge clk); o_rd_en = 1; o_rd_addr = 13'(addr);
    @(negedge clk); o_rd_en = 0;
    for (int o = 0; o < OCH; o++) v[o] = int'(o_rd_vec[o]);
  endtask

  task automatic check_sp3d(string tag);
    for (int q = 0; q < nvox; q++) begin
      automatic int e [OCH];
      int got [OCH];
      for (int o = 0; o < OCH; o++) e[o] = 0;
      for (int w = 0; w < 27; w++) begin
        automatic int px = vx[q] + (w % 3) - 1 - X0, py = vy[q] + ((w / 3) % 3) - 1 - Y0, pz = vz[q] + (w / 9) - 1;
        if (px >= 0 && px < XN && py >= 0 && py < YN && pz >= 0 && pz < ZN && occ[px][py][pz] != 0)
          for (int o = 0; o < OCH; o++)
            for (int c = 0; c < C1; c++) e[o] += feat[occ[px][py][pz] - 1][c] * w3[w][c][o];
      end
      read_out(q, got);
      for (int o = 0; o < OCH; o++) begin
        checks++;
        if (got[o] != act_model(e[o])) begin
          failures++; if (failures < 8) $display("%s: voxel %0d ch %0d got %0d expected %0d", tag, q, o, got[o], act_model(e[o]));
        end
      end
    end
  endtask

  always_ff @(posedge clk) if (cnt_stall != 0) stalls_seen <= 1;

  initial begin
    int cyc_ms, cyc_w2b, cyc_flat, cyc_c2d, st0;
    cfg_mode = 0; cfg_w2b_en = 1; cfg_reuse = 0; start = 0; cfg_width = '0; cfg_height = '0; cfg_shift = 5'(SHIFT);
    tbl_wr_en = 0; tbl_wr_addr = '0; tbl_wr_data = '0; w_wr_en = 0; w_wr_unit = 0; w_wr_pe = '0;
    w_wr_row = '0; w_wr_bits = '0; f_wr_en = 0; f_wr_addr = '0; o_rd_en = 0; o_rd_addr = '0;
    for (int c = 0; c < C1; c++) f_wr_vec[c] = '0;
    for (int i = 0; i < MEMW; i++) vmem[i] = '0;

    // ---- voxel cluster, fid in (z, y, x) order ----
    for (int z = 0; z < ZN; z++) for (int y = 0; y < YN; y++) for (int x = 0; x < XN; x++) begin
      occ[x][y][z] = 0;
      if (($urandom % 100) < ((y < 2) ? 80 : 45)) begin
        occ[x][y][z] = nvox + 1;
        vx[nvox] = X0 + x; vy[nvox] = Y0 + y; vz[nvox] = z;
        nvox++;
      end
    end
    // ---- memory layout, block by block with x+ halo column ----
    for (int i = 0; i < GX; i++) for (int j = 0; j < GY; j++) begin
      automatic int b = i * GY + j;
      for (int z = 0; z < SZ; z++) begin
        tbl[b * (SZ + 1) + z] = ID_W'(nmem);
        if (z < ZN)
          for (int y = j * BH; y < (j + 1) * BH; y++)
            for (int x = i * BW; x <= (i + 1) * BW && x < SX; x++)
              if (x >= X0 && x < X0 + XN && y >= Y0 && y < Y0 + YN && occ[x - X0][y - Y0][z] != 0) begin
                vmem[nmem].fid  = ID_W'(occ[x - X0][y - Y0][z] - 1);
                vmem[nmem].halo = (x == (i + 1) * BW);
                vmem[nmem].c    = '{z: Z_W'(z), y: Y_W'(y), x: X_W'(x)};
                nmem++;
              end
      end
      tbl[b * (SZ + 1) + SZ] = ID_W'(nmem);
    end
    $display("cluster: %0d voxels, %0d memory words", nvox, nmem);

    for (int v = 0; v < MEMW; v++) for (int c = 0; c < C1; c++) feat[v][c] = $urandom % 16;
    for (int w = 0; w < 27; w++) for (int c = 0; c < C1; c++) for (int o = 0; o < OCH; o++)
      w3[w][c][o] = int'($urandom % 11) - 3;
    for (int w = 0; w < 9; w++) for (int c = 0; c < C1; c++) for (int o = 0; o < OCH; o++)
      w2[w][c][o] = int'($urandom % 11) - 3;

    repeat (3) @(posedge clk); rst_n = 1;
    for (int e = 0; e < NB * (SZ + 1); e++) begin
      @(negedge clk); tbl_wr_en = 1; tbl_wr_addr = TAW'(e); tbl_wr_data = tbl[e];
    end
    @(negedge clk); tbl_wr_en = 0;
    for (int v = 0; v < nvox; v++) begin
      @(negedge clk); f_wr_en = 1; f_wr_addr = 13'(v);
      for (int c = 0; c < C1; c++) f_wr_vec[c] = 8'(feat[v][c]);
    end
    @(negedge clk); f_wr_en = 0;
    begin
      automatic int pe = 0;
      for (int w = 0; w < 27; w++)
        for (int k = 0; k < cp3[w]; k++) begin
          write_weights(1'b0, pe, w3[w]);
          pe++;
        end
    end

    // ---- layer 1: Spconv3D, map search, W2B on ----
    cfg_mode = 0; cfg_w2b_en = 1; cfg_reuse = 0;
    run_layer(cyc_ms);
    $display("subm3 searched : %0d cycles, outputs=%0d pairs=%0d reads=%0d multipass=%0d backup=%0d",
             cyc_ms, cnt_ms_outputs, cnt_ms_pairs, cnt_ms_reads, cnt_ms_multipass, cnt_ms_backup);
    checks++; if (int'(cnt_ms_outputs) != nvox) begin failures++; $display("outputs %0d", cnt_ms_outputs); end
    checks++; if (cnt_ms_backup == 0) begin failures++; $display("no cross-block search happened"); end
    checks++; if (cnt_ms_multipass == 0) begin failures++; $display("no multi-pass search happened"); end
    checks++; if (cnt_ms_backup_ovf != 0 || map_ovf) begin failures++; $display("buffer overflow"); end
    check_sp3d("searched");

    // ---- layer 2: next subm3 layer reuses the map, evenly mapped (W2B off) ----
    cfg_reuse = 1; cfg_w2b_en = 0; st0 = int'(cnt_stall);
    run_layer(cyc_flat);
    $display("subm3 reused, W2B off: %0d cycles, stalls=%0d", cyc_flat, int'(cnt_stall) - st0);
    check_sp3d("reuse flat");

    // ---- layer 3: the same with W2B on ----
    cfg_w2b_en = 1; st0 = int'(cnt_stall);
    run_layer(cyc_w2b);
    $display("subm3 reused, W2B on : %0d cycles, stalls=%0d (clear sweep of 8192 cycles included)",
             cyc_w2b, int'(cnt_stall) - st0);
    check_sp3d("reuse W2B");
    checks++; if (!(cyc_w2b < cyc_flat)) begin failures++; $display("W2B gave no speed-up"); end
    checks++; if (!stalls_seen) begin failures++; $display("gather never stalled"); end
    modes_seen++;
    cfg_reuse = 0;

    // ---- layer 3: Conv2D on the Conv2D unit ----
    for (int p = 0; p < CW * CH; p++) begin
      @(negedge clk); f_wr_en = 1; f_wr_addr = 13'(p);
      for (int c = 0; c < C1; c++) f_wr_vec[c] = 8'(feat[p][c]);
    end
    @(negedge clk); f_wr_en = 0;
    for (int w = 0; w < 9; w++) for (int k = 0; k < 7; k++) write_weights(1'b1, w * 7 + k, w2[w]);
    cfg_mode = 1; cfg_w2b_en = 1; cfg_width = 11'(CW); cfg_height = 11'(CH);
    run_layer(cyc_c2d);
    $display("conv2d %0dx%0d: %0d cycles, issued=%0d", CW, CH, cyc_c2d, cnt_issue);
    modes_seen++;
    for (int oy = 0; oy < CH; oy++) for (int ox = 0; ox < CW; ox++) begin
      automatic int e [OCH];
      int got [OCH];
      for (int o = 0; o < OCH; o++) e[o] = 0;
      for (int k = 0; k < 9; k++) begin
        automatic int ix = ox + (k % 3) - 1, iy = oy + (k / 3) - 1;
        if (ix >= 0 && ix < CW && iy >= 0 && iy < CH)
          for (int o = 0; o < OCH; o++) for (int c = 0; c < C1; c++) e[o] += feat[iy * CW + ix][c] * w2[k][c][o];
      end
      read_out(oy * CW + ox, got);
      for (int o = 0; o < OCH; o++) begin
        checks++;
        if (got[o] != act_model(e[o])) begin
          failures++; if (failures < 8) $display("conv2d: (%0d,%0d) ch %0d got %0d expected %0d", ox, oy, o, got[o], act_model(e[o]));
        end
      end
    end
    checks++; if (modes_seen != 2) failures++;
    $display("mechanisms: backup=%0d multipass=%0d stall=%0d mode switches=%0d",
             cnt_ms_backup, cnt_ms_multipass, stalls_seen, modes_seen - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
