// map_search_ctrl: scheduler of depth-encoding-based output-major search
// (DOMS) and its blocked form (block-DOMS) for subm3 layers.
//
// Memory layout it expects: the voxel space is cut into GRID_X x GRID_Y blocks
// in the x-y plane (block b = i*GRID_Y + j, i along x, j along y). Each block's
// voxels sit contiguously in off-chip memory sorted by (z, y, x), and include
// halo copies of the voxels of block (i+1, j) in the column just beyond the
// block's x range. The depth-encoding table gives, per block and depth, where
// that depth starts.
//
// For every block, every depth z0 and every non-halo voxel Q of that depth in
// memory order (the output voxel; in subm3 the outputs are the inputs):
//   1. Release from buffer I the voxels of rows y < y0 and from buffer II those
//      of rows y < y0-1 (the rows the next output no longer needs).
//   2. Load buffer I with the rows y0..y0+1 of depth z0 and buffer II with the
//      rows y0-1..y0+1 of depth z0+1, reading memory from where each buffer's
//      load pointer stopped. A one-word look-ahead register per buffer keeps
//      the word that ended the last load, so it is not read twice.
//   3. If Q lies on a block edge, scan the neighbouring blocks' edge rows into
//      the backup FIFO (Alg. 1 of the paper: the three blocks j-1 or j+1 at
//      depths z0 and z0+1, located through their tables; rows of block j-1 are
//      scanned backwards from the end of the depth, rows of block j+1 forwards
//      from its start). This design also scans block (i-1, j) for the column
//      x0-1 when Q is on the block's x- edge: with the half kernel searched
//      here, the offsets with dx = -1 are not covered by the x+ halo.
//   4. Sort candidates and buffer contents, detect intersections, and write
//      to the mapping info buffer the centre pair (Q, Q, W13), and for every
//      found offset k the pair (P, Q, W[k]) and its reverse (Q, P, W[26-k]).
// If a buffer fills before its window is complete, the search for Q is done
// in several passes: after each pass the full buffer is flushed and loaded
// with the next part of the window, and only the buffers that still had
// voxels to load take part in the next pass. The buffer is then rewound to the
// start of Q's window for the next output. This models the repeated loading
// the paper describes for too-small buffers.
//
// Interface: start (pulse) begins a layer, done pulses when it is finished.
// mem_req/mem_addr read a voxel word, returned on mem_rdata one cycle later.
// tbl_addr/tbl_data is an asynchronous read of the depth table. FIFO controls
// are arrays indexed 0 = buffer I, 1 = buffer II, 2 = backup FIFO. sort_go
// starts a sort of the candidates and the buffers flagged in act; the
// detector result returns three cycles later on det_*. pair_push writes one
// pair per cycle when !pair_full.
//
// Follows the paper: the two depth buffers and their row windows, row-wise
// release, table-based location of depths, the backup FIFO and Alg. 1, the
// reverse-pair inference by symmetry. This design's own: the state machine,
// the look-ahead register, the multi-pass handling and the x- block scan.
module map_search_ctrl
  import vcim_pkg::*;
#(
  parameter int SPACE_X    = 1408,
  parameter int SPACE_Y    = 1600,
  parameter int SPACE_Z    = 41,
  parameter int GRID_X     = 2,
  parameter int GRID_Y     = 8,
  parameter int FIFO_DEPTH = 16,
  localparam int NB        = GRID_X * GRID_Y,
  localparam int TBL_AW    = $clog2(NB * (SPACE_Z + 1))
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            done,
  // depth-encoding table
  output logic [TBL_AW-1:0] tbl_addr,
  input  logic [ID_W-1:0] tbl_data,
  // off-chip voxel memory
  output logic            mem_req,
  output logic [ID_W-1:0] mem_addr,
  input  voxel_t          mem_rdata,
  // voxel FIFOs (0: buffer I, 1: buffer II, 2: backup)
  output logic [2:0]      fifo_push,
  output logic [2:0]      fifo_pop,
  output logic [2:0]      fifo_flush,
  output fifo_ent_t       fifo_push_ent,
  input  fifo_ent_t       fifo_head [3],
  input  logic [2:0]      fifo_empty,
  input  logic [2:0]      fifo_full,
  input  fifo_ent_t       fifo_i_all [FIFO_DEPTH],
  // adder / sorter / concat / detector
  output coord_t          q_coord,
  output logic            q_load,
  output logic [ID_W-1:0] q_fid,
  output logic            sort_go,
  output logic [2:0]      act,
  input  logic            det_valid,
  input  logic [NUM_OFFS-1:0] det_found,
  input  logic [ID_W-1:0] det_pid [NUM_OFFS],
  input  logic [ID_W-1:0] det_qfid,
  // mapping info buffer
  output logic            pair_push,
  output pair_t           pair,
  input  logic            pair_full,
  // statistics
  output logic [31:0]     cnt_reads,
  output logic [31:0]     cnt_outputs,
  output logic [31:0]     cnt_pairs,
  output logic [31:0]     cnt_multipass,
  output logic [31:0]     cnt_backup,
  output logic [31:0]     cnt_backup_ovf
);
  localparam int BW = (SPACE_X + GRID_X - 1) / GRID_X;
  localparam int BH = (SPACE_Y + GRID_Y - 1) / GRID_Y;
  localparam int NSEG = 14;

  typedef enum logic [4:0] {
    S_IDLE, S_T0, S_T1, S_T2, S_QREQ, S_QRSP, S_RELI, S_RELII, S_LREQ, S_LRSP,
    S_BSEG, S_BT1, S_BREQ, S_BRSP, S_SORT, S_WAIT, S_PUSH, S_EPASS, S_NEXTD
  } state_t;

  typedef struct packed {
    logic            ok;
    logic [TBL_AW-1:0] tbase;   // table entry of the segment's depth
    logic            fwd;
    logic [Y_W-1:0]  ylo, yhi;
    logic [X_W-1:0]  xlo, xhi;
  } seg_t;

  state_t state;

  logic [$clog2(NB+1)-1:0]      b;
  logic [$clog2(SPACE_Z+1)-1:0] z0;
  logic [ID_W-1:0] e_i, e_ii;      // end of depth z0 / z0+1
  logic [ID_W-1:0] ld [2];         // load pointers of buffer I and II
  logic [ID_W-1:0] lo [2];         // start of Q's window in buffer I and II
  logic [ID_W-1:0] q_ptr;
  logic [1:0]      more, mp;
  logic            first_pass, center_pend, sub;
  logic [NUM_OFFS-1:0] pend;
  logic [ID_W-1:0] pid_q [NUM_OFFS];
  logic [ID_W-1:0] qf;             // output identity returned through concat
  logic            need_more;      // the buffer being loaded is full inside its window
  logic            ls;             // stream being loaded
  logic            use_pk;
  logic [1:0]      pk_v;
  logic [ID_W-1:0] pk_a [2];
  voxel_t          pk_d [2];
  logic [$clog2(NSEG+1)-1:0] seg;
  seg_t            cs;             // current backup segment
  logic [ID_W-1:0] bstart, bend, ba;

  // -------- block geometry of the current block and output voxel --------
  int bi, bj;
  assign bi = int'(b) / GRID_Y;
  assign bj = int'(b) % GRID_Y;

  function automatic int imax(int a, int c); return (a > c) ? a : c; endfunction
  function automatic int imin(int a, int c); return (a < c) ? a : c; endfunction

  function automatic logic [TBL_AW-1:0] tidx(int blk, int z);
    return TBL_AW'(blk * (SPACE_Z + 1) + z);
  endfunction

  // Decode backup segment s for output q in block (i, j).
  function automatic seg_t seg_decode(int s, coord_t q, int i, int j);
    seg_t r;
    int x0, y0, zz0, di, dz, nbi, nbj, yw, xl, xh;
    logic up;
    x0 = int'(q.x); y0 = int'(q.y); zz0 = int'(q.z);
    r = '0;
    if (s < 12) begin
      up  = (s >= 6);
      di  = ((s % 6) / 2) - 1;
      dz  = s % 2;
      nbi = i + di;
      nbj = up ? j + 1 : j - 1;
      yw  = up ? y0 + 1 : y0 - 1;
      xl  = imax(x0 - 1, nbi * BW);
      xh  = imin(x0 + 1, (nbi + 1) * BW - 1);
      r.ok = (up ? (y0 == imin((j + 1) * BH, SPACE_Y) - 1) : (y0 == j * BH)) &&
             (nbj >= 0) && (nbj < GRID_Y) && (nbi >= 0) && (nbi < GRID_X) &&
             (zz0 + dz < SPACE_Z) && (xl <= xh);
      r.tbase = tidx(nbi * GRID_Y + nbj, zz0 + dz);
      r.fwd   = up;
      r.ylo   = Y_W'(yw);
      r.yhi   = Y_W'(yw);
      r.xlo   = X_W'(xl);
      r.xhi   = X_W'(xh);
    end else begin
      dz   = s - 12;
      r.ok = (x0 == i * BW) && (i > 0) && (zz0 + dz < SPACE_Z);
      r.tbase = tidx((i - 1) * GRID_Y + j, zz0 + dz);
      r.fwd   = 1'b1;
      r.ylo   = (dz == 0) ? Y_W'(y0) : Y_W'(imax(y0 - 1, 0));
      r.yhi   = Y_W'(y0 + 1);
      r.xlo   = X_W'(x0 - 1);
      r.xhi   = X_W'(x0 - 1);
    end
    return r;
  endfunction

  // Row window of buffer I (s = 0) and buffer II (s = 1) for the current Q.
  function automatic logic below_win(logic s, logic [Y_W-1:0] y, logic [Y_W-1:0] y0);
    return s ? (int'(y) + 1 < int'(y0)) : (y < y0);
  endfunction
  function automatic logic above_win(logic [Y_W-1:0] y, logic [Y_W-1:0] y0);
    return int'(y) > int'(y0) + 1;
  endfunction

  function automatic int lowest(logic [NUM_OFFS-1:0] m);
    for (int k = 0; k < NUM_OFFS; k++) if (m[k]) return k;
    return 0;
  endfunction

  // -------- combinational outputs --------
  voxel_t     ld_word;      // word returned to S_QRSP / S_LRSP
  logic       q_in_fifo;
  int         q_idx;
  seg_t       seg_c;
  voxel_t     qv;
  logic [ID_W-1:0] e_ls;

  assign ld_word = use_pk ? pk_d[ls] : mem_rdata;
  assign q_idx   = int'(q_ptr - fifo_head[0].addr);
  assign q_in_fifo = !fifo_empty[0] && (q_ptr < ld[0]) && (q_ptr >= fifo_head[0].addr);
  assign qv      = fifo_i_all[q_idx % FIFO_DEPTH].v;
  assign seg_c   = seg_decode(int'(seg), q_coord, bi, bj);
  assign e_ls    = ls ? e_ii : e_i;
  assign busy    = (state != S_IDLE);
  // A full buffer needs another pass only if the next word is still inside
  // its window (known when the look-ahead register holds that word).
  assign need_more = act[ls] && ld[ls] < e_ls && fifo_full[ls] &&
                     !(pk_v[ls] && pk_a[ls] == ld[ls] && above_win(pk_d[ls].c.y, q_coord.y));

  always_comb begin
    tbl_addr      = '0;
    mem_req       = 1'b0;
    mem_addr      = '0;
    fifo_push     = '0;
    fifo_pop      = '0;
    fifo_flush    = '0;
    fifo_push_ent = '0;
    sort_go       = 1'b0;
    pair_push     = 1'b0;
    pair          = '0;
    unique case (state)
      S_T0:   tbl_addr = tidx(int'(b), int'(z0));
      S_T1:   tbl_addr = tidx(int'(b), int'(z0) + 1);
      S_T2:   tbl_addr = tidx(int'(b), int'(z0) + 2);
      S_QREQ: if (q_ptr < e_i && !q_in_fifo && !(pk_v[0] && pk_a[0] == q_ptr)) begin
                mem_req  = 1'b1;
                mem_addr = q_ptr;
              end
      S_RELI:  fifo_pop[0] = !fifo_empty[0] && below_win(1'b0, fifo_head[0].v.c.y, q_coord.y);
      S_RELII: fifo_pop[1] = !fifo_empty[1] && below_win(1'b1, fifo_head[1].v.c.y, q_coord.y);
      S_LREQ: if (act[ls] && ld[ls] < e_ls && !fifo_full[ls] &&
                  !(pk_v[ls] && pk_a[ls] == ld[ls])) begin
                mem_req  = 1'b1;
                mem_addr = ld[ls];
              end
      S_LRSP: if (!below_win(ls, ld_word.c.y, q_coord.y) && !above_win(ld_word.c.y, q_coord.y)) begin
                fifo_push[ls] = 1'b1;
                fifo_push_ent = '{addr: ld[ls], v: ld_word};
              end
      S_BSEG: tbl_addr = seg_c.tbase;
      S_BT1:  tbl_addr = TBL_AW'(cs.tbase + 1'b1);
      S_BREQ: begin
                mem_req  = 1'b1;
                mem_addr = ba;
              end
      S_BRSP: if (!mem_rdata.halo && mem_rdata.c.y >= cs.ylo && mem_rdata.c.y <= cs.yhi &&
                  mem_rdata.c.x >= cs.xlo && mem_rdata.c.x <= cs.xhi && !fifo_full[2]) begin
                fifo_push[2]  = 1'b1;
                fifo_push_ent = '{addr: ba, v: mem_rdata};
              end
      S_SORT: sort_go = 1'b1;
      S_PUSH: if (!pair_full) begin
                if (center_pend) begin
                  pair_push = 1'b1;
                  pair      = '{in_id: qf, out_id: qf, widx: WIDX_W'(CENTER_W)};
                end else if (pend != '0) begin
                  pair_push = 1'b1;
                  if (!sub) pair = '{in_id: pid_q[lowest(pend)], out_id: qf,
                                     widx: off_widx(lowest(pend))};
                  else      pair = '{in_id: qf, out_id: pid_q[lowest(pend)],
                                     widx: WIDX_W'(NUM_W3 - 1) - off_widx(lowest(pend))};
                end
              end
      S_EPASS: begin
                 if (more != 2'b00) fifo_flush[1:0] = more;
                 else               fifo_flush[1:0] = mp;
               end
      S_NEXTD: fifo_flush = 3'b111;
      default: ;
    endcase
    if (q_load) fifo_flush[2] = 1'b1;   // backup FIFO is per output voxel
  end

  // -------- state machine --------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      b <= '0; z0 <= '0; e_i <= '0; e_ii <= '0; q_ptr <= '0;
      ld[0] <= '0; ld[1] <= '0; lo[0] <= '0; lo[1] <= '0;
      more <= '0; mp <= '0; act <= '0; first_pass <= 1'b0;
      center_pend <= 1'b0; sub <= 1'b0; pend <= '0; ls <= 1'b0; use_pk <= 1'b0;
      pk_v <= '0; pk_a[0] <= '0; pk_a[1] <= '0; pk_d[0] <= '0; pk_d[1] <= '0;
      seg <= '0; cs <= '0; bstart <= '0; bend <= '0; ba <= '0;
      q_coord <= '0; q_fid <= '0; qf <= '0; q_load <= 1'b0; done <= 1'b0;
      for (int k = 0; k < NUM_OFFS; k++) pid_q[k] <= '0;
      cnt_reads <= '0; cnt_outputs <= '0; cnt_pairs <= '0; cnt_multipass <= '0;
      cnt_backup <= '0; cnt_backup_ovf <= '0;
    end else begin
      q_load <= 1'b0;
      done   <= 1'b0;
      if (mem_req)      cnt_reads <= cnt_reads + 1;
      if (pair_push)    cnt_pairs <= cnt_pairs + 1;
      if (fifo_push[2]) cnt_backup <= cnt_backup + 1;
      unique case (state)
        S_IDLE: if (start) begin
          b <= '0; z0 <= '0;
          cnt_reads <= '0; cnt_outputs <= '0; cnt_pairs <= '0; cnt_multipass <= '0;
          cnt_backup <= '0; cnt_backup_ovf <= '0;
          state <= S_NEXTD;    // flushes, then the table is read from z0 = 0
          z0 <= '1;            // S_NEXTD increments to 0
        end
        S_T0: begin
          ld[0] <= tbl_data; q_ptr <= tbl_data;
          pk_v  <= '0;
          state <= S_T1;
        end
        S_T1: begin
          e_i <= tbl_data; ld[1] <= tbl_data; e_ii <= tbl_data;
          state <= (int'(z0) + 1 < SPACE_Z) ? S_T2 : S_QREQ;
        end
        S_T2: begin
          e_ii  <= tbl_data;
          state <= S_QREQ;
        end
        S_QREQ: begin
          if (q_ptr >= e_i) state <= S_NEXTD;
          else if (q_in_fifo) begin
            q_ptr <= q_ptr + 1'b1;
            if (!qv.halo) begin
              q_coord <= qv.c; q_fid <= qv.fid; q_load <= 1'b1;
              state   <= S_RELI;
            end
          end else begin
            use_pk <= pk_v[0] && pk_a[0] == q_ptr;
            ls     <= 1'b0;
            state  <= S_QRSP;
          end
        end
        S_QRSP: begin
          q_ptr <= q_ptr + 1'b1;
          if (!use_pk) begin
            pk_v[0] <= 1'b1; pk_a[0] <= q_ptr; pk_d[0] <= mem_rdata;
          end
          if (ld_word.halo) state <= S_QREQ;
          else begin
            q_coord <= ld_word.c; q_fid <= ld_word.fid; q_load <= 1'b1;
            state   <= S_RELI;
          end
        end
        S_RELI: begin
          act <= 3'b111;
          more <= '0; mp <= '0; first_pass <= 1'b1; center_pend <= 1'b1;
          if (!fifo_pop[0]) begin
            lo[0] <= fifo_empty[0] ? ld[0] : fifo_head[0].addr;
            state <= S_RELII;
          end
        end
        S_RELII: if (!fifo_pop[1]) begin
          lo[1] <= fifo_empty[1] ? ld[1] : fifo_head[1].addr;
          ls    <= 1'b0;
          state <= S_LREQ;
        end
        S_LREQ: begin
          if (!act[ls] || ld[ls] >= e_ls || fifo_full[ls]) begin
            if (need_more) more[ls] <= 1'b1;
            if (!ls) ls <= 1'b1;
            else begin
              seg   <= '0;
              state <= (first_pass) ? S_BSEG : S_SORT;
            end
          end else begin
            use_pk <= pk_v[ls] && pk_a[ls] == ld[ls];
            state  <= S_LRSP;
          end
        end
        S_LRSP: begin
          if (!use_pk) begin
            pk_v[ls] <= 1'b1; pk_a[ls] <= ld[ls]; pk_d[ls] <= mem_rdata;
          end
          if (above_win(ld_word.c.y, q_coord.y)) begin
            if (!ls) begin
              ls    <= 1'b1;
              state <= S_LREQ;
            end else begin
              seg   <= '0;
              state <= (first_pass) ? S_BSEG : S_SORT;
            end
          end else begin
            ld[ls] <= ld[ls] + 1'b1;     // pushed, or skipped when below the window
            state  <= S_LREQ;
          end
        end
        S_BSEG: begin
          if (int'(seg) >= NSEG) state <= S_SORT;
          else if (!seg_c.ok) seg <= seg + 1'b1;
          else begin
            cs     <= seg_c;
            bstart <= tbl_data;
            state  <= S_BT1;
          end
        end
        S_BT1: begin
          bend <= tbl_data;
          ba   <= cs.fwd ? bstart : tbl_data - 1'b1;
          if (bstart >= tbl_data) begin
            seg   <= seg + 1'b1;
            state <= S_BSEG;
          end else state <= S_BREQ;
        end
        S_BREQ: state <= S_BRSP;
        S_BRSP: begin
          if (!mem_rdata.halo && mem_rdata.c.y >= cs.ylo && mem_rdata.c.y <= cs.yhi &&
              mem_rdata.c.x >= cs.xlo && mem_rdata.c.x <= cs.xhi && fifo_full[2])
            cnt_backup_ovf <= cnt_backup_ovf + 1;
          if (cs.fwd ? (mem_rdata.c.y > cs.yhi || ba + 1'b1 >= bend)
                     : (mem_rdata.c.y < cs.ylo || ba == bstart)) begin
            seg   <= seg + 1'b1;
            state <= S_BSEG;
          end else begin
            ba    <= cs.fwd ? ba + 1'b1 : ba - 1'b1;
            state <= S_BREQ;
          end
        end
        S_SORT: state <= S_WAIT;
        S_WAIT: if (det_valid) begin
          pend  <= det_found;
          pid_q <= det_pid;
          qf    <= det_qfid;
          sub   <= 1'b0;
          state <= S_PUSH;
        end
        S_PUSH: if (!pair_full) begin
          if (center_pend) center_pend <= 1'b0;
          else if (pend != '0) begin
            sub <= !sub;
            if (sub) pend[lowest(pend)] <= 1'b0;
          end else state <= S_EPASS;
        end
        S_EPASS: begin
          first_pass <= 1'b0;
          if (more != 2'b00) begin
            act           <= {1'b0, more};
            mp            <= mp | more;
            more          <= '0;
            cnt_multipass <= cnt_multipass + 1;
            ls            <= 1'b0;
            state         <= S_LREQ;
          end else begin
            if (mp[0]) ld[0] <= lo[0];
            if (mp[1]) ld[1] <= lo[1];
            cnt_outputs <= cnt_outputs + 1;
            state       <= S_QREQ;
          end
        end
        S_NEXTD: begin
          if (int'(z0) + 1 >= SPACE_Z || z0 == '1) begin
            if (z0 == '1) begin
              z0    <= '0;
              state <= S_T0;
            end else if (int'(b) + 1 >= NB) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              b     <= b + 1'b1;
              z0    <= '0;
              state <= S_T0;
            end
          end else begin
            z0    <= z0 + 1'b1;
            state <= S_T0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
