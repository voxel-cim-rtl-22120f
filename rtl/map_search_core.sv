// map_search_core: the map search core of Voxel-CIM.
//
// Builds the IN-OUT maps of a subm3 layer with (block-)DOMS. Off-chip voxel
// words (see vcim_pkg::voxel_t) are read through mem_*; the depth-encoding
// table is written from the host through tbl_wr_*. The core holds buffer I,
// buffer II and the backup FIFO, the 13-way kernel offset adder, a 64-entry
// bitonic sorter (16 + 2*FIFO_DEPTH + BACKUP_DEPTH <= 64 slots used), the concat register, the intersection detector and the
// mapping info buffer; map_search_ctrl schedules them. The sorter's 64 slots
// are 16 candidate slots (13 used) followed by the three FIFOs' entries.
//
// Interface: start pulses to search a layer; done pulses at the end (pairs may
// still be waiting in the mapping info buffer). Pairs leave through a
// valid/ready port (pair_valid, pair_ready, pair_out). Statistics counters
// count off-chip voxel reads, outputs, pairs, extra passes and backup voxels.
// Block structure follows Fig. 7 of the paper; slot assignment is this
// design's.
module map_search_core
  import vcim_pkg::*;
#(
  parameter int SPACE_X    = 1408,
  parameter int SPACE_Y    = 1600,
  parameter int SPACE_Z    = 41,
  parameter int GRID_X     = 2,
  parameter int GRID_Y     = 8,
  parameter int FIFO_DEPTH = 16,
  parameter int BACKUP_DEPTH = 16,
  parameter int SORT_N     = 64,
  parameter int MIB_DEPTH  = 256,
  localparam int TBL_AW    = $clog2(GRID_X * GRID_Y * (SPACE_Z + 1))
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic              tbl_wr_en,
  input  logic [TBL_AW-1:0] tbl_wr_addr,
  input  logic [ID_W-1:0]   tbl_wr_data,
  output logic              mem_req,
  output logic [ID_W-1:0]   mem_addr,
  input  voxel_t            mem_rdata,
  output logic              pair_valid,
  input  logic              pair_ready,
  output pair_t             pair_out,
  output logic [31:0]       cnt_reads,
  output logic [31:0]       cnt_outputs,
  output logic [31:0]       cnt_pairs,
  output logic [31:0]       cnt_multipass,
  output logic [31:0]       cnt_backup,
  output logic [31:0]       cnt_backup_ovf
);
  localparam int CSLOTS = 16;

  initial begin
    if (CSLOTS + 2 * FIFO_DEPTH + BACKUP_DEPTH > SORT_N) $error("map_search_core: FIFOs do not fit the sorter");
  end

  logic [TBL_AW-1:0] tbl_addr;
  logic [ID_W-1:0]   tbl_data;
  logic [2:0]        f_push, f_pop, f_flush, f_empty, f_full;
  fifo_ent_t         f_push_ent;
  fifo_ent_t         f_head [3];
  fifo_ent_t         f_all  [2][FIFO_DEPTH];
  logic [FIFO_DEPTH-1:0] f_vld [2];
  fifo_ent_t         bk_all [BACKUP_DEPTH];
  logic [BACKUP_DEPTH-1:0] bk_vld;
  coord_t            q_coord;
  logic              q_load;
  logic [ID_W-1:0]   q_fid;
  logic              sort_go;
  logic [2:0]        act;
  coord_t            cand [NUM_OFFS];
  logic [NUM_OFFS-1:0] cand_ok;
  sort_ent_t         s_in [SORT_N];
  sort_ent_t         s_out [SORT_N];
  logic              s_valid;
  sort_ent_t         c_out [SORT_N];
  logic              c_valid;
  logic [ID_W-1:0]   c_qfid;
  logic              det_valid;
  logic [NUM_OFFS-1:0] det_found;
  logic [ID_W-1:0]   det_pid [NUM_OFFS];
  logic [ID_W-1:0]   det_qfid;
  logic              p_push, mib_empty, mib_full;
  pair_t             p_pair;

  depth_table #(.NUM_BLOCKS(GRID_X * GRID_Y), .SPACE_Z(SPACE_Z)) u_table (
    .clk, .wr_en(tbl_wr_en), .wr_addr(tbl_wr_addr), .wr_data(tbl_wr_data),
    .rd_addr(tbl_addr), .rd_data(tbl_data));

  for (genvar f = 0; f < 2; f++) begin : g_fifo
    voxel_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .flush(f_flush[f]), .push(f_push[f]), .push_ent(f_push_ent),
      .pop(f_pop[f]), .head_ent(f_head[f]), .empty(f_empty[f]), .full(f_full[f]),
      .count(), .all_ent(f_all[f]), .all_vld(f_vld[f]));
  end

  voxel_fifo #(.DEPTH(BACKUP_DEPTH)) u_backup (
    .clk, .rst_n, .flush(f_flush[2]), .push(f_push[2]), .push_ent(f_push_ent),
    .pop(f_pop[2]), .head_ent(f_head[2]), .empty(f_empty[2]), .full(f_full[2]),
    .count(), .all_ent(bk_all), .all_vld(bk_vld));

  kernel_offset_adder #(.SPACE_X(SPACE_X), .SPACE_Y(SPACE_Y), .SPACE_Z(SPACE_Z)) u_adder (
    .q(q_coord), .cand, .cand_ok);

  // Sorter input: candidates, then buffer I, buffer II, backup FIFO.
  always_comb begin
    for (int i = 0; i < SORT_N; i++) s_in[i] = '{inv: 1'b1, c: '1, cand: 1'b1, tag: '0};
    for (int k = 0; k < NUM_OFFS; k++)
      s_in[k] = '{inv: !cand_ok[k], c: cand[k], cand: 1'b1, tag: ID_W'(k)};
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < FIFO_DEPTH; i++)
        s_in[CSLOTS + f * FIFO_DEPTH + i] = '{inv: !(act[f] && f_vld[f][i]), c: f_all[f][i].v.c,
                                              cand: 1'b0, tag: f_all[f][i].v.fid};
    for (int i = 0; i < BACKUP_DEPTH; i++)
      s_in[CSLOTS + 2 * FIFO_DEPTH + i] = '{inv: !(act[2] && bk_vld[i]), c: bk_all[i].v.c,
                                            cand: 1'b0, tag: bk_all[i].v.fid};
  end

  bitonic_sorter #(.N(SORT_N)) u_sorter (
    .clk, .rst_n, .in_valid(sort_go), .in_ent(s_in), .out_valid(s_valid), .out_ent(s_out));

  concat #(.N(SORT_N)) u_concat (
    .clk, .rst_n, .q_load, .q_fid, .seq_valid(s_valid), .seq_in(s_out),
    .seq_valid_out(c_valid), .seq_out(c_out), .q_fid_out(c_qfid));

  intersection_detector #(.N(SORT_N)) u_det (
    .clk, .rst_n, .in_valid(c_valid), .seq(c_out), .q_fid(c_qfid),
    .out_valid(det_valid), .found(det_found), .pid(det_pid), .q_fid_out(det_qfid));

  map_search_ctrl #(.SPACE_X(SPACE_X), .SPACE_Y(SPACE_Y), .SPACE_Z(SPACE_Z),
                    .GRID_X(GRID_X), .GRID_Y(GRID_Y), .FIFO_DEPTH(FIFO_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .tbl_addr, .tbl_data, .mem_req, .mem_addr, .mem_rdata,
    .fifo_push(f_push), .fifo_pop(f_pop), .fifo_flush(f_flush), .fifo_push_ent(f_push_ent),
    .fifo_head(f_head), .fifo_empty(f_empty), .fifo_full(f_full), .fifo_i_all(f_all[0]),
    .q_coord, .q_load, .q_fid, .sort_go, .act, .det_valid, .det_found, .det_pid, .det_qfid,
    .pair_push(p_push), .pair(p_pair), .pair_full(mib_full),
    .cnt_reads, .cnt_outputs, .cnt_pairs, .cnt_multipass, .cnt_backup, .cnt_backup_ovf);

  mapping_info_buffer #(.DEPTH(MIB_DEPTH)) u_mib (
    .clk, .rst_n, .push(p_push), .wr_pair(p_pair), .pop(pair_valid && pair_ready),
    .rd_pair(pair_out), .empty(mib_empty), .full(mib_full), .count());

  assign pair_valid = !mib_empty;
endmodule
