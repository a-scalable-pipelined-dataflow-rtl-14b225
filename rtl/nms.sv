// nms: NMS workspace, keeps the best window of every 5x5 block of the score
// map.
//
// The score map S (one score per 8x8 window) arrives as score batches of four
// vertically neighbouring scores. As in the paper, the maximum of each 5x5
// block is found in two steps: per lane, a running maximum over five
// consecutive columns gives max1x5 (the memory window of S); per block column,
// a line buffer holds the running maximum of the max1x5 values of the current
// block row (the tiered cache of max1x5). When the bottom row of a block is
// reached, the window holding the block maximum is emitted as a candidate.
// Four consecutive rows hold at most one block bottom row, so at most one
// candidate leaves per cycle; most cycles emit none, which is why a FIFO
// follows this stage.
//
// This design's choices: blocks are non-overlapping and aligned to the
// top-left window; blocks cut by the right or bottom edge are dropped; on a
// tie the earlier window wins. Output is registered (one enabled cycle of
// latency); `done` pulses when the last batch of the image has been
// processed. State advances only when `en` is high.
module nms
  import bing_pkg::*;
#(
  parameter int unsigned MAX_W = 256
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic [COORD_W-1:0] width,    // resized image width
  input  logic [COORD_W-1:0] height,   // resized image height
  input  logic          in_valid,
  input  score_batch_t  in_batch,
  output logic          out_valid,
  output cand_t         out_cand,
  output logic          done
);

  localparam int unsigned NTC_MAX = MAX_W / NMS_BLK + 1;
  localparam int unsigned TCW     = $clog2(NTC_MAX);

  logic [COORD_W-1:0] sw, sh, ntc, ntr5, rem, tc;
  assign sw   = width - COORD_W'(WIN - 1);
  assign sh   = height - COORD_W'(WIN - 1);
  assign ntc  = sw / COORD_W'(NMS_BLK);
  assign ntr5 = (sh / COORD_W'(NMS_BLK)) * COORD_W'(NMS_BLK);
  assign rem  = in_batch.col % COORD_W'(NMS_BLK);
  assign tc   = in_batch.col / COORD_W'(NMS_BLK);

  cand_t hmax [NPIPE];          // running max over the current 1x5 segment
  cand_t vbuf [NTC_MAX];        // running max of the current block row

  cand_t hnew [NPIPE];
  cand_t vnew;
  logic  emit;
  cand_t emit_c;

  always_comb begin
    cand_t here;
    logic [COORD_W+1:0] row;
    vnew   = vbuf[tc[TCW-1:0]];
    emit   = 1'b0;
    emit_c = '0;
    for (int k = 0; k < NPIPE; k++) begin
      row        = (COORD_W+2)'(in_batch.bank) * NPIPE + k - (WIN - 1);
      here.score = signed'(in_batch.s[k]);
      here.row   = row[COORD_W-1:0];
      here.col   = in_batch.col;
      if (rem == '0 || here.score > hmax[k].score) hnew[k] = here;
      else                                          hnew[k] = hmax[k];
      if (in_batch.lane_ok[k] && rem == COORD_W'(NMS_BLK - 1) && tc < ntc &&
          row < (COORD_W+2)'(ntr5)) begin
        if (row % NMS_BLK == 0 || hnew[k].score > vnew.score) vnew = hnew[k];
        if (row % NMS_BLK == NMS_BLK - 1) begin
          emit   = 1'b1;
          emit_c = vnew;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (en && in_valid) begin
      for (int k = 0; k < NPIPE; k++) hmax[k] <= hnew[k];
      if (rem == COORD_W'(NMS_BLK - 1) && tc < ntc) vbuf[tc[TCW-1:0]] <= vnew;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_cand  <= '0;
      done      <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid && emit;
      out_cand  <= emit_c;
      done      <= in_valid && in_batch.last;
    end else begin
      done      <= 1'b0;
    end
  end

endmodule
