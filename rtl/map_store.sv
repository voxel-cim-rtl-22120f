// map_store: keeps the IN-OUT map of a subm3 layer for the layer after it.
//
// Two consecutive subm3 layers keep the voxel positions, so they share one
// IN-OUT map and the second layer needs no map search. While a layer is
// searched, every in-out pair the gather unit accepts is also written here
// (rec_en, rec_pair; rec_clear empties the store at the start of the layer).
// A later layer with map reuse pulses play_start and the stored pairs are
// replayed in order through a valid/ready port, one per cycle, with
// play_done pulsing after the last pair has been taken. Pairs beyond DEPTH
// are dropped and flagged in ovf. Memory with an asynchronous read port.
//
// Reusing the map follows the paper; the storage, its depth and the replay
// order are this design's choices.
module map_store
  import vcim_pkg::*;
#(
  parameter int DEPTH = 8192,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  rec_clear,
  input  logic  rec_en,
  input  pair_t rec_pair,
  input  logic  play_start,
  output logic  play_valid,
  input  logic  play_ready,
  output pair_t play_pair,
  output logic  play_done,
  output logic [AW:0] count,
  output logic  ovf
);
  pair_t mem [DEPTH];
  logic [AW:0] rd_ptr;
  logic        playing;

  always_ff @(posedge clk) begin
    if (rec_en && count < (AW + 1)'(DEPTH)) mem[count[AW-1:0]] <= rec_pair;
  end

  assign play_valid = playing && rd_ptr < count;
  assign play_pair  = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      ovf       <= 1'b0;
      rd_ptr    <= '0;
      playing   <= 1'b0;
      play_done <= 1'b0;
    end else begin
      play_done <= 1'b0;
      if (rec_clear) begin
        count <= '0;
        ovf   <= 1'b0;
      end else if (rec_en) begin
        if (count < (AW + 1)'(DEPTH)) count <= count + 1'b1;
        else                          ovf   <= 1'b1;
      end
      if (play_start) begin
        playing <= 1'b1;
        rd_ptr  <= '0;
      end else if (playing) begin
        if (play_valid && play_ready) rd_ptr <= rd_ptr + 1'b1;
        if (rd_ptr >= count || (play_valid && play_ready && rd_ptr + 1'b1 == count)) begin
          playing   <= 1'b0;
          play_done <= 1'b1;
        end
      end
    end
  end

  a_no_rec_while_play: assert property (@(posedge clk) disable iff (!rst_n) !(playing && rec_en));
endmodule
