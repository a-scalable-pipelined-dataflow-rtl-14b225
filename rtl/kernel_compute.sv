// kernel_compute: the kernel computing module, CalcGrad -> SVM-I -> NMS.
//
// The three workspaces are chained serially and each works on the batch
// stream as it passes (the paper's "batch pass"): a batch of four pixels of
// one column enters, four gradients, then four window scores move on, and
// NMS turns the score stream into a sparse stream of candidate windows. The
// four lanes of a batch are the four parallel pipelines; the stages are
// pipelined so consecutive batches overlap (paper's Fig. 2(b)).
//
// Interface: valid/ready pixel batches in; candidates out as a valid strobe
// that is meant to be written into a FIFO; `done` pulses after the last batch
// of the image has left NMS. `en` is the global stall: when it is low no
// stage moves and the output holds, so it is driven by the FIFO's in_ready.
// Latency from an accepted pixel batch to the score of a window is about one
// bank plus four cycles (the window's bottom row must arrive and pass
// CalcGrad, the two SVM-I stages and NMS).
module kernel_compute
  import bing_pkg::*;
#(
  parameter int unsigned MAX_W = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [COORD_W-1:0] width,
  input  logic [COORD_W-1:0] height,
  input  logic signed [WIN*WIN-1:0][WGT_W-1:0] weights,
  input  logic        in_valid,
  output logic        in_ready,
  input  pix_batch_t  in_batch,
  output logic        out_valid,
  output cand_t       out_cand,
  output logic        done
);

  logic         g_valid, s_valid;
  grad_batch_t  g_batch;
  score_batch_t s_batch;

  calc_grad #(.MAX_W(MAX_W)) u_grad (
    .clk, .rst_n, .en, .width,
    .in_valid, .in_ready, .in_batch,
    .out_valid(g_valid), .out_batch(g_batch)
  );

  svm1 #(.MAX_W(MAX_W)) u_svm1 (
    .clk, .rst_n, .en, .weights,
    .in_valid(g_valid), .in_batch(g_batch),
    .out_valid(s_valid), .out_batch(s_batch)
  );

  nms #(.MAX_W(MAX_W)) u_nms (
    .clk, .rst_n, .en, .width, .height,
    .in_valid(s_valid), .in_batch(s_batch),
    .out_valid, .out_cand, .done
  );

endmodule
