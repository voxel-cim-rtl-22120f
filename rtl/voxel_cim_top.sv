// voxel_cim_top: Voxel-CIM accelerator, map search core plus computing core.
//
// A layer runs in one of two modes. Spconv3D (mode 0, subm3): the map search
// core reads the layer's voxel coordinates from off-chip memory, builds the
// IN-OUT maps with block-DOMS and streams the in-out pairs through its mapping
// info buffer. Conv2D (mode 1, RPN layers, 3x3 stride 1): the Conv2D pair
// generator produces the pairs of a dense feature map. In both modes the
// gather unit reads each pair's input feature from the feature buffer and
// starts a free PE holding a copy of the pair's kernel position in the CIM
// unit of that mode (27 sub-matrices with W2B copies for Spconv3D, 9 for
// Conv2D); the scatter unit sends the finished partial sums to the
// accumulation unit, which adds them into the output row of the pair's output
// voxel. The activation unit reads results out as ReLU'd 8-bit activations.
//
// Sequence: start (pulse) first clears the accumulation buffer (OUT_DEPTH
// cycles), then starts the pair source; done pulses once the source has
// finished, the mapping info buffer is empty, every PE is idle and the last
// partial sum has been accumulated. Weights (w_wr_*), input features (f_wr_*)
// and the depth-encoding table (tbl_wr_*) are written beforehand through
// plain write ports standing in for the on-chip bus. The off-chip voxel
// memory is read through vmem_* with one cycle of latency. The pairs of a
// searched subm3 layer are also kept in the map store; a following subm3
// layer run with cfg_reuse replays them instead of searching again, one pair
// per cycle, as consecutive subm3 layers share one IN-OUT map. The voxelization,
// VFE and post-processing units are outside this RTL.
//
// The division into units and their connections follow Fig. 7 of the paper;
// the port set, the clear-then-run sequence and the mode multiplexing are this
// design's choices.
module voxel_cim_top
  import vcim_pkg::*;
#(
  parameter int SPACE_X    = 1408,
  parameter int SPACE_Y    = 1600,
  parameter int SPACE_Z    = 41,
  parameter int GRID_X     = 2,
  parameter int GRID_Y     = 8,
  parameter int FIFO_DEPTH = 16,
  parameter int BACKUP_DEPTH = 16,
  parameter int MIB_DEPTH  = 256,
  parameter int NUM_PE     = 64,
  parameter int ROWS       = 128,
  parameter int COLS       = 128,
  parameter int WBITS      = 8,
  parameter int IBITS      = 8,
  parameter int ACC_W      = 32,
  parameter int C1         = 16,
  parameter int FEAT_DEPTH = 8192,
  parameter int OUT_DEPTH  = 8192,
  parameter int MAP_DEPTH  = 8192,
  localparam int OCH       = COLS / WBITS,
  localparam int TBL_AW    = $clog2(GRID_X * GRID_Y * (SPACE_Z + 1)),
  localparam int FAW       = $clog2(FEAT_DEPTH),
  localparam int OAW       = $clog2(OUT_DEPTH),
  localparam int PEW       = $clog2(NUM_PE),
  localparam int RW        = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer configuration
  input  logic              cfg_mode,      // 0: Spconv3D (subm3), 1: Conv2D
  input  logic              cfg_w2b_en,
  input  logic              cfg_reuse,     // Spconv3D: replay the stored map, no search
  input  logic [10:0]       cfg_width,     // Conv2D feature map size
  input  logic [10:0]       cfg_height,
  input  logic [4:0]        cfg_shift,     // activation requantisation shift
  input  logic              start,
  output logic              busy,
  output logic              done,
  // depth-encoding table writes
  input  logic              tbl_wr_en,
  input  logic [TBL_AW-1:0] tbl_wr_addr,
  input  logic [ID_W-1:0]   tbl_wr_data,
  // off-chip voxel memory
  output logic              vmem_req,
  output logic [ID_W-1:0]   vmem_addr,
  input  voxel_t            vmem_rdata,
  // weight writes: unit 0 = Spconv3D CIM unit, 1 = Conv2D CIM unit
  input  logic              w_wr_en,
  input  logic              w_wr_unit,
  input  logic [PEW-1:0]    w_wr_pe,
  input  logic [RW-1:0]     w_wr_row,
  input  logic [COLS-1:0]   w_wr_bits,
  // input feature writes
  input  logic              f_wr_en,
  input  logic [FAW-1:0]    f_wr_addr,
  input  logic [7:0]        f_wr_vec [C1],
  // output readout
  input  logic              o_rd_en,
  input  logic [OAW-1:0]    o_rd_addr,
  output logic              o_rd_valid,
  output logic [7:0]        o_rd_vec [OCH],
  // statistics
  output logic [31:0]       cnt_ms_reads,
  output logic [31:0]       cnt_ms_outputs,
  output logic [31:0]       cnt_ms_pairs,
  output logic [31:0]       cnt_ms_multipass,
  output logic [31:0]       cnt_ms_backup,
  output logic [31:0]       cnt_ms_backup_ovf,
  output logic [31:0]       cnt_issue,
  output logic [31:0]       cnt_stall,
  output logic [31:0]       cnt_cycles,
  output logic              map_ovf        // stored map exceeded MAP_DEPTH
);
  typedef enum logic [2:0] { T_IDLE, T_CLEAR, T_START, T_RUN, T_DRAIN } tstate_t;
  tstate_t st;

  // ---------------- pair sources ----------------
  logic  ms_start, ms_busy, ms_done, ms_pvalid, ms_pready;
  pair_t ms_pair;
  logic  cg_start, cg_busy, cg_done, cg_pvalid, cg_pready;
  pair_t cg_pair;

  map_search_core #(.SPACE_X(SPACE_X), .SPACE_Y(SPACE_Y), .SPACE_Z(SPACE_Z), .GRID_X(GRID_X),
                    .GRID_Y(GRID_Y), .FIFO_DEPTH(FIFO_DEPTH), .BACKUP_DEPTH(BACKUP_DEPTH),
                    .MIB_DEPTH(MIB_DEPTH)) u_ms (
    .clk, .rst_n, .start(ms_start), .busy(ms_busy), .done(ms_done),
    .tbl_wr_en, .tbl_wr_addr, .tbl_wr_data,
    .mem_req(vmem_req), .mem_addr(vmem_addr), .mem_rdata(vmem_rdata),
    .pair_valid(ms_pvalid), .pair_ready(ms_pready), .pair_out(ms_pair),
    .cnt_reads(cnt_ms_reads), .cnt_outputs(cnt_ms_outputs), .cnt_pairs(cnt_ms_pairs),
    .cnt_multipass(cnt_ms_multipass), .cnt_backup(cnt_ms_backup), .cnt_backup_ovf(cnt_ms_backup_ovf));

  conv2d_pair_gen u_cg (
    .clk, .rst_n, .start(cg_start), .width(cfg_width), .height(cfg_height),
    .busy(cg_busy), .done(cg_done), .pair_valid(cg_pvalid), .pair_ready(cg_pready), .pair(cg_pair));

  logic  rp_start, rp_valid, rp_ready, rp_done, rec_clear, rec_en;
  pair_t rp_pair;
  logic [$clog2(MAP_DEPTH):0] rp_count;

  map_store #(.DEPTH(MAP_DEPTH)) u_map (
    .clk, .rst_n, .rec_clear, .rec_en, .rec_pair(ms_pair),
    .play_start(rp_start), .play_valid(rp_valid), .play_ready(rp_ready), .play_pair(rp_pair),
    .play_done(rp_done), .count(rp_count), .ovf(map_ovf));

  // ---------------- gather ----------------
  logic              g_pvalid, g_pready;
  pair_t             g_pair;
  logic [FAW-1:0]    feat_addr;
  logic [7:0]        feat_vec [C1];
  logic [NUM_PE-1:0] busy3, busy2, pe_busy, pe_start;
  logic [IBITS-1:0]  in_vec [ROWS];
  logic [ID_W-1:0]   g_tag;

  assign g_pvalid  = cfg_mode ? cg_pvalid : (cfg_reuse ? rp_valid : ms_pvalid);
  assign g_pair    = cfg_mode ? cg_pair   : (cfg_reuse ? rp_pair  : ms_pair);
  assign ms_pready = !cfg_mode && !cfg_reuse && g_pready;
  assign rp_ready  = !cfg_mode &&  cfg_reuse && g_pready;
  assign cg_pready =  cfg_mode && g_pready;
  assign rec_en    = ms_pvalid && ms_pready;
  assign pe_busy   = cfg_mode ? busy2 : busy3;

  feature_buffer #(.DEPTH(FEAT_DEPTH), .C1(C1)) u_fbuf (
    .clk, .wr_en(f_wr_en), .wr_addr(f_wr_addr), .wr_vec(f_wr_vec),
    .rd_addr(feat_addr), .rd_vec(feat_vec));

  gather_unit #(.NUM_PE(NUM_PE), .ROWS(ROWS), .IBITS(IBITS), .C1(C1), .FEAT_AW(FAW)) u_gather (
    .clk, .rst_n, .mode(cfg_mode), .w2b_en(cfg_w2b_en),
    .pair_valid(g_pvalid), .pair_ready(g_pready), .pair(g_pair),
    .feat_addr, .feat_vec, .pe_busy, .pe_start, .in_vec, .tag(g_tag),
    .cnt_issue, .cnt_stall);

  // ---------------- CIM units ----------------
  logic [NUM_PE-1:0]       rv3, rv2, ack3, ack2, s_ack;
  logic signed [ACC_W-1:0] ps3 [NUM_PE][OCH];
  logic signed [ACC_W-1:0] ps2 [NUM_PE][OCH];
  logic [ID_W-1:0]         tg3 [NUM_PE];
  logic [ID_W-1:0]         tg2 [NUM_PE];

  cim_unit #(.NUM_PE(NUM_PE), .ROWS(ROWS), .COLS(COLS), .WBITS(WBITS), .IBITS(IBITS),
             .ACC_W(ACC_W)) u_cim3d (
    .clk, .rst_n, .wr_en(w_wr_en && !w_wr_unit), .wr_pe(w_wr_pe), .wr_row(w_wr_row),
    .wr_bits(w_wr_bits), .start(cfg_mode ? '0 : pe_start), .in_vec, .tag(g_tag),
    .busy(busy3), .res_valid(rv3), .res_psum(ps3), .res_tag(tg3), .res_ack(ack3));

  cim_unit #(.NUM_PE(NUM_PE), .ROWS(ROWS), .COLS(COLS), .WBITS(WBITS), .IBITS(IBITS),
             .ACC_W(ACC_W)) u_cim2d (
    .clk, .rst_n, .wr_en(w_wr_en && w_wr_unit), .wr_pe(w_wr_pe), .wr_row(w_wr_row),
    .wr_bits(w_wr_bits), .start(cfg_mode ? pe_start : '0), .in_vec, .tag(g_tag),
    .busy(busy2), .res_valid(rv2), .res_psum(ps2), .res_tag(tg2), .res_ack(ack2));

  // ---------------- scatter, accumulate, activate ----------------
  logic [NUM_PE-1:0]       s_rv;
  logic signed [ACC_W-1:0] s_ps [NUM_PE][OCH];
  logic [ID_W-1:0]         s_tg [NUM_PE];
  logic                    a_valid;
  logic [ID_W-1:0]         a_tag;
  logic signed [ACC_W-1:0] a_psum [OCH];
  logic                    clr_start, clr_busy;
  logic [OAW-1:0]          acc_rd_addr;
  logic signed [ACC_W-1:0] acc_rd_vec [OCH];

  assign s_rv = cfg_mode ? rv2 : rv3;
  assign s_ps = cfg_mode ? ps2 : ps3;
  assign s_tg = cfg_mode ? tg2 : tg3;
  assign ack3 = cfg_mode ? '0 : s_ack;
  assign ack2 = cfg_mode ? s_ack : '0;

  scatter_unit #(.NUM_PE(NUM_PE), .OCH(OCH), .ACC_W(ACC_W)) u_scatter (
    .clk, .rst_n, .res_valid(s_rv), .res_psum(s_ps), .res_tag(s_tg), .res_ack(s_ack),
    .out_valid(a_valid), .out_tag(a_tag), .out_psum(a_psum));

  accumulation_unit #(.DEPTH(OUT_DEPTH), .OCH(OCH), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n, .clear_start(clr_start), .clear_busy(clr_busy),
    .in_valid(a_valid), .in_addr(OAW'(a_tag)), .in_psum(a_psum),
    .rd_addr(acc_rd_addr), .rd_vec(acc_rd_vec));

  activation_unit #(.OCH(OCH), .ACC_W(ACC_W), .AW(OAW)) u_act (
    .clk, .rst_n, .rd_en(o_rd_en), .rd_addr(o_rd_addr), .shift(cfg_shift),
    .acc_addr(acc_rd_addr), .acc_vec(acc_rd_vec), .rd_valid(o_rd_valid), .rd_vec(o_rd_vec));

  // ---------------- layer sequencing ----------------
  assign busy      = (st != T_IDLE);
  assign clr_start = (st == T_IDLE) && start;
  assign ms_start  = (st == T_START) && !cfg_mode && !cfg_reuse;
  assign rec_clear = ms_start;
  assign rp_start  = (st == T_START) && !cfg_mode &&  cfg_reuse;
  assign cg_start  = (st == T_START) &&  cfg_mode;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= T_IDLE;
      done       <= 1'b0;
      cnt_cycles <= '0;
    end else begin
      done <= 1'b0;
      if (st != T_IDLE) cnt_cycles <= cnt_cycles + 1;
      unique case (st)
        T_IDLE:  if (start) begin
                   st         <= T_CLEAR;
                   cnt_cycles <= '0;
                 end
        T_CLEAR: if (!clr_busy) st <= T_START;
        T_START: st <= T_RUN;
        T_RUN:   if (ms_done || cg_done || rp_done) st <= T_DRAIN;
        T_DRAIN: if (!g_pvalid && !ms_busy && !cg_busy && busy3 == '0 && busy2 == '0 && !a_valid) begin
                   done <= 1'b1;
                   st   <= T_IDLE;
                 end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
