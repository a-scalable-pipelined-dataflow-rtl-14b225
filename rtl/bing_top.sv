// bing_top: the region-proposal accelerator, from stored image to the top-K
// proposals over all scales.
//
// Dataflow (paper's Fig. 1): resize module -> kernel computing module
// (CalcGrad, SVM-I, NMS) -> FIFO -> heap sort-I (top-N windows of one
// resized image) -> SVM-II (per-scale calibration) -> heap sort-II (top-K of
// all scales) -> proposals out. The host first writes the original image,
// the 64 SVM-I weights and the scale table, then pulses `start`. A small
// sequencer runs the scales one after another: for each scale it starts the
// resize module, waits until NMS has seen the last batch and the FIFO and
// heap sort-I have taken every candidate, then drains heap sort-I through
// SVM-II into heap sort-II. After the last scale heap sort-II is drained on
// `prop_*` (ascending score order) and `done` pulses. Running scales strictly
// one after another, and the register-file style configuration ports, are
// this design's choices; the paper does not describe the control.
//
// Stalls: the kernel stops as a whole when the FIFO is full (heap sort-I
// not ready; with a two-cycle heap and at most one NMS candidate every five
// cycles this does not happen in normal runs, but the path is kept so that a
// slower sorter or a wider kernel stays correct), and the resize module waits when the kernel is not
// ready (CalcGrad end-of-line and flush cycles).
//
// Post-processing (mapping a window of a resized image back to a box of the
// original image) is left to the host, as in the paper.
module bing_top
  import bing_pkg::*;
#(
  parameter int unsigned MAX_W      = 256,   // widest resized image
  parameter int unsigned NUM_SCALES = 36,    // scale table entries
  parameter int unsigned TOP_N      = 130,   // heap sort-I capacity
  parameter int unsigned TOP_K      = 1000,  // heap sort-II capacity (paper)
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // original image, one pixel per cycle
  input  logic               img_we,
  input  logic [COORD_W-1:0] img_x,
  input  logic [COORD_W-1:0] img_y,
  input  rgb_t               img_pix,
  // SVM-I weights, index dy*8+dx
  input  logic               w_we,
  input  logic [5:0]         w_addr,
  input  logic signed [WGT_W-1:0] w_data,
  // scale table
  input  logic               cfg_we,
  input  logic [SCALE_W-1:0] cfg_addr,
  input  scale_cfg_t         cfg_data,
  // control
  input  logic               start,
  input  logic [SCALE_W-1:0] num_scales,
  output logic               busy,
  output logic               done,
  // proposals
  output logic               prop_valid,
  input  logic               prop_ready,
  output prop_t              prop_data
);

  // ---------------- configuration storage ----------------
  logic signed [WIN*WIN-1:0][WGT_W-1:0] weights;
  scale_cfg_t scale_tab [NUM_SCALES];

  always_ff @(posedge clk) begin
    if (w_we)   weights[w_addr] <= w_data;
    if (cfg_we) scale_tab[cfg_addr] <= cfg_data;
  end

  // ---------------- sequencer ----------------
  typedef enum logic [2:0] {Q_IDLE, Q_START, Q_RUN, Q_WAIT, Q_DRAIN1, Q_SETTLE, Q_DRAIN2} seq_t;
  seq_t               seq;
  logic [SCALE_W-1:0] scale, nsc;
  scale_cfg_t         cur;

  logic rs_start, h1_drain, h2_drain;
  logic k_done, h1_done, h2_done, h1_busy, h2_busy;
  logic fifo_out_valid, s2_valid, s2_in_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq      <= Q_IDLE;
      scale    <= '0;
      nsc      <= '0;
      cur      <= '0;
      rs_start <= 1'b0;
      h1_drain <= 1'b0;
      h2_drain <= 1'b0;
      done     <= 1'b0;
    end else begin
      rs_start <= 1'b0;
      h1_drain <= 1'b0;
      h2_drain <= 1'b0;
      done     <= 1'b0;
      case (seq)
        Q_IDLE: if (start) begin
          scale <= '0;
          nsc   <= num_scales;
          seq   <= Q_START;
        end
        Q_START: begin
          cur      <= scale_tab[scale];
          rs_start <= 1'b1;
          seq      <= Q_RUN;
        end
        Q_RUN:    if (k_done) seq <= Q_WAIT;
        Q_WAIT:   if (!fifo_out_valid && !h1_busy) begin
          h1_drain <= 1'b1;
          seq      <= Q_DRAIN1;
        end
        Q_DRAIN1: if (h1_done) seq <= Q_SETTLE;
        Q_SETTLE: if (!s2_valid && !s2_in_valid && !h2_busy) begin
          if (scale == nsc - 1'b1) begin
            h2_drain <= 1'b1;
            seq      <= Q_DRAIN2;
          end else begin
            scale <= scale + 1'b1;
            seq   <= Q_START;
          end
        end
        Q_DRAIN2: if (h2_done) begin
          done <= 1'b1;
          seq  <= Q_IDLE;
        end
        default: seq <= Q_IDLE;
      endcase
    end
  end

  assign busy = (seq != Q_IDLE);

  // ---------------- image store and resize ----------------
  logic [NBLK-1:0]             rd_en;
  logic [NBLK-1:0][IMG_AW-1:0] rd_addr;
  rgb_t [NBLK-1:0]             rd_data;

  image_bank u_img (
    .clk, .wr_en(img_we), .wr_x(img_x), .wr_y(img_y), .wr_pix(img_pix),
    .rd_en, .rd_addr, .rd_data
  );

  logic       p_valid, p_ready, rs_busy, rs_done, rs_conflict;
  pix_batch_t p_batch;

  resize_module u_resize (
    .clk, .rst_n, .start(rs_start), .cfg(cur),
    .busy(rs_busy), .done(rs_done), .conflict(rs_conflict),
    .rd_en, .rd_addr, .rd_data,
    .out_valid(p_valid), .out_ready(p_ready), .out_batch(p_batch)
  );

  // ---------------- kernel and streaming FIFO ----------------
  logic  k_en, k_valid;
  cand_t k_cand;

  kernel_compute #(.MAX_W(MAX_W)) u_kernel (
    .clk, .rst_n, .en(k_en), .width(cur.out_w), .height(cur.out_h), .weights,
    .in_valid(p_valid), .in_ready(p_ready), .in_batch(p_batch),
    .out_valid(k_valid), .out_cand(k_cand), .done(k_done)
  );

  logic                         h1_in_ready;
  logic [$bits(cand_t)-1:0]     fifo_out;
  logic [$clog2(FIFO_DEPTH):0]  fifo_count;

  stream_fifo #(.WIDTH($bits(cand_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(k_valid), .in_ready(k_en), .in_data(k_cand),
    .out_valid(fifo_out_valid), .out_ready(h1_in_ready), .out_data(fifo_out),
    .count(fifo_count)
  );

  // ---------------- heap sort-I, SVM-II, heap sort-II ----------------
  logic                     h1_out_valid, s2_in_ready, h1_pushed, h2_pushed;
  logic [$bits(cand_t)-1:0] h1_out;
  logic                     h2_in_ready;
  prop_t                    s2_prop;

  heap_sort #(.K(TOP_N), .DW($bits(cand_t)), .KW(SCORE_W)) u_heap1 (
    .clk, .rst_n,
    .in_valid(fifo_out_valid), .in_ready(h1_in_ready), .in_data(fifo_out),
    .drain(h1_drain),
    .out_valid(h1_out_valid), .out_ready(s2_in_ready), .out_data(h1_out),
    .drain_done(h1_done), .busy(h1_busy), .pushed(h1_pushed)
  );

  assign s2_in_valid = h1_out_valid;

  svm2 u_svm2 (
    .clk, .rst_n, .scale, .v(cur.v), .t(cur.t),
    .in_valid(h1_out_valid), .in_ready(s2_in_ready), .in_cand(cand_t'(h1_out)),
    .out_valid(s2_valid), .out_ready(h2_in_ready), .out_prop(s2_prop)
  );

  logic [$bits(prop_t)-1:0] h2_out;

  heap_sort #(.K(TOP_K), .DW($bits(prop_t)), .KW(S2_W)) u_heap2 (
    .clk, .rst_n,
    .in_valid(s2_valid), .in_ready(h2_in_ready), .in_data(s2_prop),
    .drain(h2_drain),
    .out_valid(prop_valid), .out_ready(prop_ready), .out_data(h2_out),
    .drain_done(h2_done), .busy(h2_busy), .pushed(h2_pushed)
  );

  assign prop_data = prop_t'(h2_out);

endmodule
