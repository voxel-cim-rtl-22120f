// gather_unit: feeds in-out pairs to the PEs holding their weights.
//
// Each in-out pair names an input feature, an output feature and a kernel
// position w. Under W2B the weights of position w are copied into COPIES[w]
// PEs, PEs base(w) .. base(w)+COPIES[w]-1 with base(w) the sum of the copy
// factors of the positions before w. The unit reads the input feature vector
// (asynchronous read of the feature buffer, same cycle), picks the lowest
// free PE among the copies of w and starts it with the vector (channels C1 and
// above padded with zeros up to the PE's ROWS word lines) and the output index
// as tag. If all copies are busy the pair waits (pair_ready low) and a stall
// cycle is counted. One pair is issued per cycle at most.
//
// mode selects the Spconv3D table (COPIES3, 27 positions) or the Conv2D table
// (COPIES2, 9 positions). With w2b_en low only the first copy of each
// position is used, which is the evenly mapped baseline the paper compares W2B
// with. Gathering by the IN-OUT maps and W2B copies follow the paper; in-order
// single issue (no selection of a batch that overlaps the previous one) is this
// design's simplification.
module gather_unit
  import vcim_pkg::*;
#(
  parameter int NUM_PE  = 64,
  parameter int ROWS    = 128,
  parameter int IBITS   = 8,
  parameter int C1      = 16,
  parameter int FEAT_AW = 13,
  parameter int COPIES3 [NUM_W3] = W2B_COPIES_SECOND,
  parameter int COPIES2 [NUM_W2] = '{7, 7, 7, 7, 7, 7, 7, 7, 7}
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               mode,        // 0: Spconv3D, 1: Conv2D
  input  logic               w2b_en,
  input  logic               pair_valid,
  output logic               pair_ready,
  input  pair_t              pair,
  output logic [FEAT_AW-1:0] feat_addr,
  input  logic [7:0]         feat_vec [C1],
  input  logic [NUM_PE-1:0]  pe_busy,
  output logic [NUM_PE-1:0]  pe_start,
  output logic [IBITS-1:0]   in_vec [ROWS],
  output logic [ID_W-1:0]    tag,
  output logic [31:0]        cnt_issue,
  output logic [31:0]        cnt_stall
);
  logic [NUM_PE-1:0] cmask, freem;

  // PEs holding copies of the pair's kernel position
  always_comb begin
    int base;
    base  = 0;
    cmask = '0;
    if (!mode) begin
      for (int w = 0; w < NUM_W3; w++) begin
        for (int c = 0; c < COPIES3[w]; c++)
          if (int'(pair.widx) == w && (w2b_en || c == 0) && base + c < NUM_PE) cmask[base + c] = 1'b1;
        base += COPIES3[w];
      end
    end else begin
      for (int w = 0; w < NUM_W2; w++) begin
        for (int c = 0; c < COPIES2[w]; c++)
          if (int'(pair.widx) == w && (w2b_en || c == 0) && base + c < NUM_PE) cmask[base + c] = 1'b1;
        base += COPIES2[w];
      end
    end
  end

  assign freem      = cmask & ~pe_busy;
  assign pair_ready = pair_valid && (freem != '0);
  assign feat_addr  = FEAT_AW'(pair.in_id);
  assign tag        = pair.out_id;

  always_comb begin
    pe_start = '0;
    for (int p = NUM_PE - 1; p >= 0; p--) begin
      if (freem[p]) pe_start = NUM_PE'(1) << p;
    end
    if (!pair_valid) pe_start = '0;
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) in_vec[r] = (r < C1) ? IBITS'(feat_vec[r % C1]) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_issue <= '0;
      cnt_stall <= '0;
    end else begin
      if (pair_ready) cnt_issue <= cnt_issue + 1;
      if (pair_valid && !pair_ready) cnt_stall <= cnt_stall + 1;
    end
  end

  initial begin
    int s3, s2;
    s3 = 0; s2 = 0;
    for (int w = 0; w < NUM_W3; w++) s3 += COPIES3[w];
    for (int w = 0; w < NUM_W2; w++) s2 += COPIES2[w];
    if (s3 > NUM_PE || s2 > NUM_PE) $error("gather_unit: copy factors need more PEs than NUM_PE");
  end
endmodule
