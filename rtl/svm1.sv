// svm1: SVM-I workspace, the linear SVM score of every 8x8 window of the
// gradient map, s = G8x8 . W_SVM with the 64 weights taken row by row.
//
// Gradient batches arrive bank by bank (four rows per batch). A line buffer
// keeps the last seven gradient rows of every column, so each arriving batch
// completes an 11-row column; an 8-column memory window of such columns holds
// every window whose bottom row lies in the current bank. With four
// pipelines, four windows are scored per batch: lane k is the window whose
// top row is 4*bank-7+k and whose left column is col-7.
//
// The score is computed in two pipeline stages, as the paper's SVM-I
// pipeline diagram shows (calc G1x8, then calc G8x8/s): stage 1 forms the
// 1x8 row products of every window row with its weight row, stage 2 adds the
// eight row products. Output appears two enabled cycles after the input.
// Lanes whose top row is above the image and batches with col < 7 carry no
// window (lane_ok low / no output). All state advances only when `en` is high.
// The weight width (8-bit signed) is this design's choice.
module svm1
  import bing_pkg::*;
#(
  parameter int unsigned MAX_W = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic signed [WIN*WIN-1:0][WGT_W-1:0] weights,   // index dy*8+dx
  input  logic         in_valid,
  input  grad_batch_t  in_batch,
  output logic         out_valid,
  output score_batch_t out_batch
);

  localparam int unsigned LBW  = $clog2(MAX_W);
  localparam int unsigned NROW = WIN + NPIPE - 1;   // 11 rows in a window column
  localparam int unsigned PW   = 8 + WGT_W + 3;     // width of a 1x8 product sum

  typedef logic [WIN-2:0][7:0]  lb_t;     // rows 4b-7 .. 4b-1
  typedef logic [NROW-1:0][7:0] colv_t;   // rows 4b-7 .. 4b+3

  lb_t   lbuf [MAX_W];
  lb_t   lb_rd;
  colv_t colv;
  colv_t win [WIN-1];                     // the 7 previous columns
  logic [LBW-1:0] ci;

  assign ci    = in_batch.col[LBW-1:0];
  assign lb_rd = lbuf[ci];
  assign colv  = {in_batch.g, lb_rd};     // index 0 = oldest row

  always_ff @(posedge clk) begin
    if (en && in_valid) lbuf[ci] <= colv[NROW-1:NPIPE];
  end

  // stage 1: row products ----------------------------------------------------
  logic signed [NPIPE-1:0][WIN-1:0][PW-1:0] rowp;
  always_comb begin
    colv_t cols [WIN];
    logic signed [PW-1:0] acc, gx, wx;
    for (int dx = 0; dx < WIN - 1; dx++) cols[dx] = win[dx];
    cols[WIN-1] = colv;
    for (int k = 0; k < NPIPE; k++) begin
      for (int dy = 0; dy < WIN; dy++) begin
        acc = '0;
        for (int dx = 0; dx < WIN; dx++) begin
          gx  = signed'(PW'(cols[dx][k+dy]));
          wx  = PW'(signed'(weights[dy*WIN+dx]));
          acc = acc + gx * wx;
        end
        rowp[k][dy] = acc;
      end
    end
  end

  logic                                       s1_valid;
  logic signed [NPIPE-1:0][WIN-1:0][PW-1:0]   s1_rowp;
  logic [NPIPE-1:0]                           s1_ok;
  logic [BANK_W-1:0]                          s1_bank;
  logic [COORD_W-1:0]                         s1_col;
  logic                                       s1_last;

  // stage 2 adder: sum of the eight row products of each lane
  logic [NPIPE-1:0][SCORE_W-1:0] wsum;
  always_comb begin
    logic signed [SCORE_W-1:0] sum;
    for (int k = 0; k < NPIPE; k++) begin
      sum = '0;
      for (int dy = 0; dy < WIN; dy++) sum = sum + SCORE_W'(signed'(s1_rowp[k][dy]));
      wsum[k] = sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int dx = 0; dx < WIN - 1; dx++) win[dx] <= '0;
      s1_valid  <= 1'b0;
      s1_rowp   <= '0;
      s1_ok     <= '0;
      s1_bank   <= '0;
      s1_col    <= '0;
      s1_last   <= 1'b0;
      out_valid <= 1'b0;
      out_batch <= '0;
    end else if (en) begin
      s1_valid <= 1'b0;
      if (in_valid) begin
        for (int dx = 0; dx < WIN - 2; dx++) win[dx] <= win[dx+1];
        win[WIN-2] <= colv;
        if (in_batch.col >= COORD_W'(WIN - 1)) begin
          s1_valid <= 1'b1;
          s1_rowp  <= rowp;
          for (int k = 0; k < NPIPE; k++)
            s1_ok[k] <= (32'(in_batch.bank) * NPIPE + k) >= (WIN - 1);
          s1_bank  <= in_batch.bank;
          s1_col   <= in_batch.col - COORD_W'(WIN - 1);
          s1_last  <= in_batch.last;
        end
      end
      // stage 2: window sums
      out_valid <= s1_valid;
      if (s1_valid) begin
        out_batch.s       <= wsum;
        out_batch.lane_ok <= s1_ok;
        out_batch.bank    <= s1_bank;
        out_batch.col     <= s1_col;
        out_batch.last    <= s1_last;
      end
    end
  end

endmodule
