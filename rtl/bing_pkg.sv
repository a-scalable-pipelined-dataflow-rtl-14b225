// bing_pkg: types and constants shared by the BING region-proposal accelerator.
//
// The accelerator moves the image through its stages as "batches": four
// vertically neighbouring pixels of one column of a four-row band ("bank").
// The four batch lanes are the four parallel pipelines of the kernel. The
// number of pipelines (four), the 8x8 SVM window, the 5x5 NMS block and the
// 8-bit saturated gradient follow the paper. Bit widths of coordinates, scores
// and weights are this design's choices (the paper only says a quantisation
// strategy was used).
package bing_pkg;

  localparam int unsigned NPIPE    = 4;    // pipelines = pixels per batch (paper)
  localparam int unsigned WIN      = 8;    // SVM-I window side (paper)
  localparam int unsigned NMS_BLK  = 5;    // NMS block side (paper)
  localparam int unsigned COORD_W  = 10;   // resized-image coordinates, up to 1023
  localparam int unsigned BANK_W   = 8;    // bank index (4 rows each)
  localparam int unsigned WGT_W    = 8;    // signed SVM-I weight
  localparam int unsigned SCORE_W  = 24;   // signed SVM-I score
  localparam int unsigned SCALE_W  = 6;    // scale (resized image) index
  localparam int unsigned S2_W     = 32;   // signed SVM-II score

  // Original-image store: four single-port blocks. Column x lives in block
  // (x/2) mod 4, pairs of columns interleaved as in the paper's Fig. 3
  // example (block0 = columns 1,2; block1 = columns 3,4; ...).
  localparam int unsigned NBLK       = 4;
  localparam int unsigned IMG_MAX_W  = 512;  // not given by the paper
  localparam int unsigned IMG_MAX_H  = 512;  // not given by the paper
  localparam int unsigned IMG_PITCH  = IMG_MAX_W / NBLK;    // words per row per block
  localparam int unsigned IMG_DEPTH  = IMG_PITCH * IMG_MAX_H;
  localparam int unsigned IMG_AW     = $clog2(IMG_DEPTH);

  typedef struct packed {
    logic [7:0] r;
    logic [7:0] g;
    logic [7:0] b;
  } rgb_t;

  // One batch of resized pixels leaving the resize module.
  typedef struct packed {
    rgb_t [NPIPE-1:0]   pix;   // pix[j] is row 4*bank+j
    logic [BANK_W-1:0]  bank;
    logic [COORD_W-1:0] col;
    logic               last;  // last batch of the resized image
  } pix_batch_t;

  // One batch of normed gradients.
  typedef struct packed {
    logic [NPIPE-1:0][7:0] g;
    logic [BANK_W-1:0]     bank;
    logic [COORD_W-1:0]    col;
    logic                  last;
  } grad_batch_t;

  // One batch of SVM-I window scores. Lane k is the window whose top row is
  // 4*bank-7+k and whose left column is col.
  typedef struct packed {
    logic [NPIPE-1:0]                     lane_ok;
    logic [NPIPE-1:0][SCORE_W-1:0]        s;
    logic [BANK_W-1:0]                    bank;
    logic [COORD_W-1:0]                   col;
    logic                                 last;
  } score_batch_t;

  // A candidate window after NMS: position is the top-left corner of the 8x8
  // window in the resized image.
  typedef struct packed {
    logic signed [SCORE_W-1:0] score;
    logic [COORD_W-1:0]        row;
    logic [COORD_W-1:0]        col;
  } cand_t;

  // A proposal: candidate tagged with its scale and its SVM-II score.
  typedef struct packed {
    logic signed [S2_W-1:0]    score;
    logic [SCALE_W-1:0]        scale;
    logic [COORD_W-1:0]        row;
    logic [COORD_W-1:0]        col;
  } prop_t;

  // One entry of the scale table: resized size and the nearest-neighbour
  // step in the original image (unsigned Q8.16), plus the SVM-II
  // coefficients of this scale (score2 = (v*score >>> 8) + t).
  typedef struct packed {
    logic [COORD_W-1:0]  out_w;   // resized width, multiple of 4, >= 8
    logic [COORD_W-1:0]  out_h;   // resized height, multiple of 4, >= 8
    logic [23:0]         step_x;  // original columns per resized column, Q8.16
    logic [23:0]         step_y;  // original rows per resized row, Q8.16
    logic signed [15:0]  v;       // SVM-II gain, Q8.8
    logic signed [15:0]  t;       // SVM-II offset
  } scale_cfg_t;

  function automatic logic [1:0] img_block(logic [COORD_W-1:0] x);
    return x[2:1];
  endfunction

  function automatic logic [IMG_AW-1:0] img_addr(logic [COORD_W-1:0] x, logic [COORD_W-1:0] y);
    logic [IMG_AW-1:0] a;
    a = IMG_AW'(y) * IMG_AW'(IMG_PITCH) + IMG_AW'({x[COORD_W-1:3], x[0]});
    return a;
  endfunction

  // Saturating 8-bit normed gradient of the paper:
  // G = min(D(up,down) + D(left,right), 255), D = max channel |a-b|.
  function automatic logic [7:0] rgb_dist(rgb_t a, rgb_t b);
    logic [7:0] dr, dg, db, m;
    dr = (a.r > b.r) ? a.r - b.r : b.r - a.r;
    dg = (a.g > b.g) ? a.g - b.g : b.g - a.g;
    db = (a.b > b.b) ? a.b - b.b : b.b - a.b;
    m  = (dr > dg) ? dr : dg;
    return (m > db) ? m : db;
  endfunction

  function automatic logic [7:0] norm_grad(rgb_t up, rgb_t dn, rgb_t lf, rgb_t rt);
    logic [8:0] sum;
    sum = {1'b0, rgb_dist(up, dn)} + {1'b0, rgb_dist(lf, rt)};
    return (sum > 9'd255) ? 8'd255 : sum[7:0];
  endfunction

endpackage
