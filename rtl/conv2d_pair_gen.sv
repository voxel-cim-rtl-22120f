// conv2d_pair_gen: in-out pair source for dense 3x3 Conv2D layers.
//
// The RPN's Conv2D layers run on the same gather / CIM / scatter path as
// Spconv3D, with a 3x3 kernel mapped to 9 sub-matrices. Their IN-OUT maps are
// regular, so this unit generates them: for every input pixel p = (px, py) of a
// width x height feature map (row-major, feature index py*width+px) and for
// every kernel position k = ky*3+kx it emits (in = p, out = p - (kx-1, ky-1),
// w = k) when the output lies inside the map (stride 1, zero padding 1, output
// size = input size). Input-pixel-major order lets one input vector meet its 9
// sub-matrices in consecutive cycles, the feature reuse the paper describes.
// Positions whose output falls outside are skipped at one per cycle.
//
// Interface: start (pulse) with width/height stable; pairs leave through
// pair_valid/pair_ready; done pulses after the last pair. Stride 2 layers and
// the upsampling layers are not covered.
module conv2d_pair_gen
  import vcim_pkg::*;
#(
  parameter int DIM_W = 11
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DIM_W-1:0] width,
  input  logic [DIM_W-1:0] height,
  output logic             busy,
  output logic             done,
  output logic             pair_valid,
  input  logic             pair_ready,
  output pair_t            pair
);
  logic [DIM_W-1:0] px, py;
  logic [1:0]       kx, ky;
  logic             run;
  int               ox, oy;
  logic             in_map, last;

  assign ox     = int'(px) - int'(kx) + 1;
  assign oy     = int'(py) - int'(ky) + 1;
  assign in_map = run && ox >= 0 && ox < int'(width) && oy >= 0 && oy < int'(height);
  assign last   = (kx == 2) && (ky == 2) && (int'(px) == int'(width) - 1) && (int'(py) == int'(height) - 1);
  assign busy   = run;

  assign pair_valid  = in_map;
  assign pair.in_id  = ID_W'(int'(py) * int'(width) + int'(px));
  assign pair.out_id = ID_W'(oy * int'(width) + ox);
  assign pair.widx   = WIDX_W'(int'(ky) * 3 + int'(kx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0;
      px <= '0; py <= '0; kx <= '0; ky <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run <= (width != 0) && (height != 0);
        done <= (width == 0) || (height == 0);
        px <= '0; py <= '0; kx <= '0; ky <= '0;
      end else if (run && (!in_map || pair_ready)) begin
        if (last) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else if (kx != 2) kx <= kx + 1'b1;
        else begin
          kx <= '0;
          if (ky != 2) ky <= ky + 1'b1;
          else begin
            ky <= '0;
            if (int'(px) != int'(width) - 1) px <= px + 1'b1;
            else begin
              px <= '0;
              py <= py + 1'b1;
            end
          end
        end
      end
    end
  end
endmodule
